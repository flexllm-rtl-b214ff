`timescale 1ns/1ps
// tb_flexllm_top_full: the accelerator core at its published size (no
// parameter overrides: BP=16, WP_INT4=1024, WP_MHA=256, TP=8, WP=24,
// HMT N=64, D=2048).  Runs a d_model x d_model INT4 projection (2048 x 2048,
// two weight tiles of 1024 channels) and checks a sample of outputs against
// the real-number result within the quantization bound, and the cycle count
// against in_dim cycles per tile (one input channel per cycle for all 1024
// PEs) plus load, scale and drain overhead.  Then a residual add of 2048,
// greedy sampling over the full 128256-entry vocabulary, and one HMT
// segment (stage 1, memory attention with an empty queue, stage 2, push).
module tb_flexllm_top_full;
  import flexllm_pkg::*;
  localparam int BP = 16, WP4 = 1024, WP8 = 256, TPP = 8, WPP = 24, HL = 4, HD = 2048;
  localparam int DIN = 2048, DOUT = 2048;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid, cmd_ready, op_done;
  op_e  cmd_op;
  logic [15:0] cmd_in_dim;
  logic [17:0] cmd_out_dim;
  logic [16:0] cmd_pos;
  logic [3:0]  cmd_log2n;
  fx_t         cmd_static_scale;
  logic x_valid, x_ready, aux_valid, aux_ready, y_valid, tok_valid;
  fx_t [BP-1:0] x_data, aux_data, y_data;
  logic [16:0] tok;
  logic w4_valid, w4_ready, w8_valid, w8_ready;
  logic [WP4-1:0][3:0] w4_data;
  logic [WP8-1:0][7:0] w8_data;
  logic dq_we, dq_sel;
  logic [12:0] dq_idx;
  fx_t dq_scale;
  logic signed [31:0] dq_colsum;
  logic pf_start, pf_busy, pf_done, pf_in_valid, pf_in_ready, pf_w_valid, pf_w_ready, pf_out_valid;
  logic [15:0] pf_in_dim, pf_out_dim, pf_out_tile;
  logic [16:0] pf_seq_len;
  logic [TPP-1:0][3:0] pf_in_data;
  logic [WPP-1:0][3:0] pf_w_data;
  logic [TPP-1:0][WPP-1:0][31:0] pf_out_data;
  logic hmt_start, hmt_busy, hmt_done, hmt_d_valid, hmt_d_ready, hmt_d_stage, hmt_d_last;
  logic [17:0] hmt_prompt_len, hmt_d_idx, hmt_seg;
  logic [1:0] hmt_d_src;
  logic hmt_s_valid, hmt_s_ready, hmt_p_valid, hmt_p_last, hmt_mem_valid, hmt_mem_last;
  fx_t [HL-1:0] hmt_s_data, hmt_p_data, hmt_mem_data;
  logic [6:0] hmt_mem_count;

  flexllm_top dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int wgt(int k, int j);
    return ((k * 7 + j * 13 + (k * j) % 5) % 15) - 7;
  endfunction

  real X [DIN], Y [DOUT];
  int  ny, wptr;

  always @(posedge clk) if (y_valid) begin
    for (int l = 0; l < BP; l++) Y[(ny * BP + l) % DOUT] = real'(y_data[l]) / 65536.0;
    ny++;
  end
  always @(posedge clk) if (w4_valid && w4_ready) wptr++;
  initial begin
    w4_valid = 0; w4_data = '0;
    forever begin
      @(negedge clk);
      if (wptr < 2 * DIN) begin
        for (int p = 0; p < WP4; p++) w4_data[p] = 4'(wgt(wptr % DIN, (wptr / DIN) * WP4 + p));
        w4_valid = 1;
      end else w4_valid = 0;
    end
  end

  task automatic stream_x(input int nb, input bit use_aux);
    for (int b = 0; b < nb; b++) begin
      x_valid = 1; aux_valid = use_aux;
      for (int l = 0; l < BP; l++) begin
        x_data[l] = fx_t'(longint'($floor(X[(b*BP + l) % DIN] * 65536.0)));
        aux_data[l] = fx_t'(32'sd65536);
      end
      @(posedge clk); while (!x_ready) @(posedge clk);
      @(negedge clk);
    end
    x_valid = 0; aux_valid = 0;
  endtask

  task automatic command(input op_e op, input int in_dim, input int out_dim);
    ny = 0;
    @(negedge clk); cmd_valid = 1; cmd_op = op; cmd_in_dim = 16'(in_dim); cmd_out_dim = 18'(out_dim);
    @(negedge clk); cmd_valid = 0;
  endtask

  initial begin
    int c0, cyc, expc;
    real s, mn, mx;
    cmd_valid = 0; cmd_op = OP_NORM; cmd_in_dim = '0; cmd_out_dim = '0; cmd_pos = '0; cmd_log2n = '0;
    cmd_static_scale = '0; x_valid = 0; x_data = '0; aux_valid = 0; aux_data = '0;
    w8_valid = 0; w8_data = '0; dq_we = 0; dq_sel = 0; dq_idx = '0; dq_scale = '0; dq_colsum = '0;
    pf_start = 0; pf_in_dim = '0; pf_out_dim = '0; pf_seq_len = '0; pf_in_valid = 0; pf_in_data = '0;
    pf_w_valid = 0; pf_w_data = '0;
    hmt_start = 0; hmt_prompt_len = '0; hmt_d_ready = 0; hmt_s_valid = 0; hmt_s_data = '0;
    hmt_mem_valid = 0; hmt_mem_last = 0; hmt_mem_data = '0;
    wptr = 2 * DIN;
    repeat (3) @(posedge clk); rst_n = 1;

    // per-channel scale 1/64 and column sums
    for (int j = 0; j < DOUT; j++) begin
      int cs;
      cs = 0;
      for (int k = 0; k < DIN; k++) cs += wgt(k, j);
      @(negedge clk); dq_we = 1; dq_sel = 0; dq_idx = 13'(j); dq_scale = fx_t'(32'sd1024); dq_colsum = cs;
    end
    @(negedge clk); dq_we = 0;
    mn = 1e9; mx = -1e9;
    for (int k = 0; k < DIN; k++) begin
      X[k] = real'(int'($urandom_range(40000)) - 20000) / 10000.0;
      X[k] = real'(longint'($floor(X[k] * 65536.0))) / 65536.0;
      if (X[k] < mn) mn = X[k];
      if (X[k] > mx) mx = X[k];
    end
    s = (mx - mn) / 15.0;

    // ---- INT4 projection 2048 -> 2048
    wptr = 0;
    command(OP_QLINEAR4, DIN, DOUT);
    c0 = int'($time / 10);
    stream_x(DIN / BP, 0);
    while (!op_done) @(posedge clk);
    cyc = int'($time / 10) - c0;
    // quantizer load + divider + emit overlaps the linear load, then two tiles
    // of DIN weight beats with a WP/BP-deep drain each, then the output beats
    expc = DIN / BP + 70 + 2 * DIN + DOUT / BP;
    $display("INT4 2048x2048 projection: %0d cycles (estimate %0d, weight beats %0d)", cyc, expc, 2 * DIN);
    chk(cyc >= 2 * DIN && cyc <= expc + 2 * (WP4 / BP + 8) + 64, "projection cycle count");
    chk(ny == DOUT / BP, $sformatf("projection beats %0d", ny));
    for (int j = 0; j < DOUT; j += 97) begin
      real e, sa;
      e = 0.0; sa = 0.0;
      for (int k = 0; k < DIN; k++) begin e += X[k] * wgt(k, j); sa += (wgt(k, j) < 0 ? -wgt(k, j) : wgt(k, j)); end
      e = e / 64.0;
      chk(Y[j] - e <= (s / 2.0) * sa / 64.0 + 0.05 && e - Y[j] <= (s / 2.0) * sa / 64.0 + 0.05,
          $sformatf("y[%0d] got %f exp %f", j, Y[j], e));
    end

    // ---- residual add over d_model
    command(OP_RESIDUAL, DIN, 0);
    stream_x(DIN / BP, 1);
    while (!op_done) @(posedge clk);
    for (int j = 0; j < DIN; j += 61) chk(Y[j] - (X[j] + 1.0) < 1e-4 && (X[j] + 1.0) - Y[j] < 1e-4, "residual");

    // ---- sampling over the full vocabulary
    @(negedge clk); cmd_valid = 1; cmd_op = OP_SAMPLE; cmd_in_dim = '0; cmd_out_dim = 18'(VOCAB);
    @(negedge clk); cmd_valid = 0;
    for (int b = 0; b < VOCAB / BP; b++) begin
      x_valid = 1;
      for (int l = 0; l < BP; l++)
        x_data[l] = (b * BP + l == 100000) ? fx_t'(32'sd3000000) : fx_t'(int'($urandom_range(200000)) - 100000);
      @(posedge clk); while (!x_ready) @(posedge clk);
      @(negedge clk);
    end
    x_valid = 0;
    while (!op_done) @(posedge clk);
    chk(int'(tok) == 100000, $sformatf("sampled token %0d", tok));

    // ---- one HMT segment, empty memory queue
    @(negedge clk); hmt_start = 1; hmt_prompt_len = 18'd100; hmt_d_ready = 1;
    @(negedge clk); hmt_start = 0;
    while (!(hmt_d_valid && hmt_d_last)) @(posedge clk);
    @(negedge clk); hmt_d_ready = 0;
    for (int b = 0; b < HD / HL; b++) begin
      hmt_s_valid = 1; hmt_s_data = {HL{fx_t'(32'sd65536)}};
      @(posedge clk); while (!hmt_s_ready) @(posedge clk);
      @(negedge clk);
    end
    hmt_s_valid = 0;
    begin
      int pbeats, nz;
      pbeats = 0; nz = 0;
      while (pbeats < HD / HL) begin
        @(posedge clk);
        if (hmt_p_valid) begin pbeats++; if (hmt_p_data != '0) nz++; end
      end
      chk(nz == 0, "P is zero with an empty memory queue");
    end
    @(negedge clk); hmt_d_ready = 1;
    while (!(hmt_d_valid && hmt_d_last && hmt_d_stage)) @(posedge clk);
    @(negedge clk); hmt_d_ready = 0;
    for (int b = 0; b < HD / HL; b++) begin
      hmt_mem_valid = 1; hmt_mem_last = (b == HD / HL - 1); hmt_mem_data = {HL{fx_t'(b)}};
      @(negedge clk);
    end
    hmt_mem_valid = 0; hmt_mem_last = 0;
    repeat (3) @(negedge clk);
    chk(int'(hmt_mem_count) == 1, "one memory queued");
    chk(!hmt_busy, "HMT prompt of one segment finished");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
