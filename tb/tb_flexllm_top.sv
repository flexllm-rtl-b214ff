`timescale 1ns/1ps
// tb_flexllm_top: end-to-end test of the accelerator core at reduced size.
//
// Decode engine: one command of every operation is issued with random
// bubbles on the operand streams and on the off-chip weight stream; results
// are compared with real-number models (linear layers within the bound set
// by the quantization step).  Prefill: one layer on the TP x WP array,
// compared exactly with integer arithmetic.  HMT: a five-segment prompt is
// processed with the testbench acting as the backbone; P_n is compared with
// the memory-attention formula over the newest entries of the queue.
// Every mechanism below is counted and a failure is recorded for any that
// never happens: weight-stream stall, operand back-pressure, dynamic INT4
// and static INT8 quantization, prefill/decode mode switch, empty-queue
// bypass (P = 0), memory-queue wrap, both HMT stages, each op completing.
module tb_flexllm_top;
  import flexllm_pkg::*;
  localparam int BP = 4, WP4 = 16, WP8 = 8, TPP = 2, WPP = 4, MAXD = 64;
  localparam int HN = 3, HD = 8, HL = 2, SEG = 8, VOC = 64;

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
  logic [5:0] tok;
  logic w4_valid, w4_ready, w8_valid, w8_ready;
  logic [WP4-1:0][3:0] w4_data;
  logic [WP8-1:0][7:0] w8_data;
  logic dq_we, dq_sel;
  logic [5:0] dq_idx;
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
  logic [1:0] hmt_mem_count;

  flexllm_top #(.BP(BP), .WP_INT4(WP4), .WP_MHA(WP8), .TP(TPP), .WP_PREFILL(WPP), .MAX_DIM(MAXD),
                .MAX_SEQ(MAXD), .NORM_DIM(MAXD), .VOCAB_N(VOC), .HMT_N(HN), .HMT_D(HD),
                .HMT_LANES(HL), .SEG_LEN(SEG)) dut (.*);

  // mechanism counters
  int n_wstall, n_xstall, n_int4, n_int8, n_switch, n_bypass, n_wrap, n_stage1, n_stage2, n_segs;
  int n_done [10];

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic fx_t to_fx(real r);
    return fx_t'(longint'($floor(r * 65536.0 + 0.5)));
  endfunction
  function automatic real to_r(fx_t v);
    return real'(v) / 65536.0;
  endfunction
  function automatic real absr(real r);
    return r < 0 ? -r : r;
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------------- decode
  real X [MAXD], A [MAXD], Y [MAXD];
  int  W [MAXD][MAXD];          // integer weights [in][out]
  real SW [MAXD];               // per-channel weight scales
  int  ny, wptr, wtiles, wk_dim, wwidth;
  bit  w_is8;
  logic wstall_en;

  // collect result beats (values before the edge)
  always @(posedge clk) if (y_valid) begin
    for (int l = 0; l < BP; l++) Y[ny * BP + l] = to_r(y_data[l]);
    ny++;
  end
  // count back-pressure and weight stalls
  always @(posedge clk) begin
    if (x_valid && !x_ready && !cmd_ready) n_xstall++;
    if ((w4_ready && !w4_valid && w_is8 == 0 && wstall_en) || (w8_ready && !w8_valid && w_is8 && wstall_en)) n_wstall++;
    if ((w4_valid && w4_ready) || (w8_valid && w8_ready)) wptr++;
  end
  // weight stream: beat wptr = tile (wptr / wk_dim), input channel (wptr % wk_dim)
  initial begin
    w4_valid = 0; w8_valid = 0; w4_data = '0; w8_data = '0;
    forever begin
      @(negedge clk);
      if (wptr < wtiles * wk_dim && !(wstall_en && $urandom_range(3) == 0)) begin
        int t, k;
        t = wptr / wk_dim; k = wptr % wk_dim;
        for (int p = 0; p < WP4; p++) w4_data[p] = 4'(W[k][(t * WP4 + p) % MAXD]);
        for (int p = 0; p < WP8; p++) w8_data[p] = 8'(W[k][(t * WP8 + p) % MAXD]);
        w4_valid = !w_is8; w8_valid = w_is8;
      end else begin
        w4_valid = 0; w8_valid = 0;
      end
    end
  end

  task automatic issue(input op_e op, input int in_dim, input int out_dim, input int pos,
                       input int log2n, input real sscale, input bit use_aux);
    int nb;
    nb = (op == OP_FHT) ? (1 << log2n) / BP : (in_dim + BP - 1) / BP;
    ny = 0;
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_in_dim = 16'(in_dim); cmd_out_dim = 18'(out_dim);
    cmd_pos = 17'(pos); cmd_log2n = 4'(log2n); cmd_static_scale = to_fx(sscale);
    while (!cmd_ready) @(negedge clk);
    @(negedge clk); cmd_valid = 0;
    fork
      begin
        for (int b = 0; b < nb; b++) begin
          while ($urandom_range(3) == 0) begin x_valid = 0; @(negedge clk); end
          x_valid = 1;
          for (int l = 0; l < BP; l++) x_data[l] = to_fx(X[b*BP + l]);
          @(posedge clk);
          while (!x_ready) @(posedge clk);
          @(negedge clk);
        end
        x_valid = 0;
      end
      begin
        if (use_aux) begin
          for (int b = 0; b < nb; b++) begin
            aux_valid = 1;
            for (int l = 0; l < BP; l++) aux_data[l] = to_fx(A[b*BP + l]);
            @(posedge clk);
            while (!aux_ready) @(posedge clk);
            @(negedge clk);
          end
          aux_valid = 0;
        end
      end
    join
    while (!op_done) @(posedge clk);
    n_done[int'(op)]++;
    @(negedge clk);
  endtask

  task automatic qlinear(input bit is8, input int in_dim, input int out_dim);
    real s, mn, mx;
    int  wmax;
    wmax = is8 ? 100 : 7;
    for (int k = 0; k < in_dim; k++) begin
      X[k] = real'(int'($urandom_range(40000)) - 20000) / 10000.0;
      for (int j = 0; j < out_dim; j++) W[k][j] = int'($urandom_range(2 * wmax)) - wmax;
    end
    for (int j = 0; j < out_dim; j++) begin
      int cs;
      SW[j] = to_r(fx_t'($urandom_range(3000, 500)));
      cs = 0;
      for (int k = 0; k < in_dim; k++) cs += W[k][j];
      @(negedge clk); dq_we = 1; dq_sel = is8; dq_idx = 6'(j); dq_scale = to_fx(SW[j]); dq_colsum = cs;
    end
    @(negedge clk); dq_we = 0;
    mn = 1e9; mx = -1e9;
    for (int k = 0; k < in_dim; k++) begin if (X[k] < mn) mn = X[k]; if (X[k] > mx) mx = X[k]; end
    s = is8 ? 0.02 : (mx - mn) / 15.0;
    w_is8 = is8; wptr = 0; wk_dim = in_dim; wtiles = (out_dim + (is8 ? WP8 : WP4) - 1) / (is8 ? WP8 : WP4);
    wstall_en = 1;
    issue(is8 ? OP_QLINEAR8 : OP_QLINEAR4, in_dim, out_dim, 0, 0, 0.02, 0);
    wstall_en = 0; wtiles = 0;
    chk(ny == out_dim / BP, $sformatf("qlinear%0d result beats %0d", is8 ? 8 : 4, ny));
    for (int j = 0; j < out_dim; j++) begin
      real e, tol, sa;
      e = 0.0; sa = 0.0;
      for (int k = 0; k < in_dim; k++) begin e += X[k] * W[k][j]; sa += (W[k][j] < 0 ? -W[k][j] : W[k][j]); end
      e = e * SW[j];
      tol = (s / 2.0 + 1.0 / 65536.0) * sa * SW[j] + 0.01;
      chk(absr(Y[j] - e) <= tol, $sformatf("qlinear%0d y[%0d] got %f exp %f tol %f", is8 ? 8 : 4, j, Y[j], e, tol));
    end
    if (is8) n_int8++; else n_int4++;
  endtask

  task automatic rand_vec(input int n, input real amp);
    for (int i = 0; i < n; i++) begin
      X[i] = to_r(to_fx(amp * (real'($urandom_range(20000)) / 10000.0 - 1.0)));
      A[i] = to_r(to_fx(amp * (real'($urandom_range(20000)) / 10000.0 - 1.0)));
    end
  endtask

  task automatic decode_ops();
    real ms, mx, sum;
    // RMS norm
    rand_vec(32, 2.0);
    issue(OP_NORM, 32, 0, 0, 0, 0.0, 1);
    ms = 0.0;
    for (int i = 0; i < 32; i++) ms += X[i] * X[i];
    ms = $sqrt(ms / 32 + 1.0 / 65536.0);
    for (int i = 0; i < 32; i++) chk(absr(Y[i] - X[i] / ms * A[i]) <= 0.01 * absr(X[i] / ms * A[i]) + 1e-3, "norm");
    // INT4 and INT8 linear chains
    qlinear(0, 32, 48);
    qlinear(1, 16, 16);
    // RoPE on two heads of 64
    rand_vec(128, 3.0);
    issue(OP_ROPE, 128, 0, 37, 0, 0.0, 0);
    for (int i = 0; i < 128; i += 2) begin
      real th;
      th = 37.0 * $pow(500000.0, -2.0 * ((i % 64) / 2) / 64.0);
      chk(absr(Y[i] - (X[i] * $cos(th) - X[i+1] * $sin(th))) < 0.02 &&
          absr(Y[i+1] - (X[i] * $sin(th) + X[i+1] * $cos(th))) < 0.02, $sformatf("rope pair %0d", i));
    end
    // softmax over 22 scores
    rand_vec(24, 4.0);
    issue(OP_SOFTMAX, 22, 0, 0, 0, 0.0, 0);
    mx = -1e9; sum = 0.0;
    for (int i = 0; i < 22; i++) if (X[i] > mx) mx = X[i];
    for (int i = 0; i < 22; i++) sum += $exp(X[i] - mx);
    for (int i = 0; i < 22; i++) chk(absr(Y[i] - $exp(X[i] - mx) / sum) < 0.01 * $exp(X[i] - mx) / sum + 1e-3, "softmax");
    chk(Y[22] == 0.0 && Y[23] == 0.0, "softmax padding lanes");
    // Swish, gate, residual
    rand_vec(16, 6.0);
    issue(OP_SWISH, 16, 0, 0, 0, 0.0, 0);
    for (int i = 0; i < 16; i++) chk(absr(Y[i] - X[i] / (1.0 + $exp(-X[i]))) < 0.02 * absr(X[i]) + 1e-3, "swish");
    issue(OP_GATE, 16, 0, 0, 0, 0.0, 1);
    for (int i = 0; i < 16; i++) chk(absr(Y[i] - X[i] * A[i]) < 1e-4, "gate");
    issue(OP_RESIDUAL, 16, 0, 0, 0, 0.0, 1);
    for (int i = 0; i < 16; i++) chk(absr(Y[i] - (X[i] + A[i])) < 1e-4, "residual");
    // Hadamard transform, n = 32
    rand_vec(32, 2.0);
    issue(OP_FHT, 32, 0, 0, 5, 0.0, 0);
    for (int i = 0; i < 32; i++) begin
      real e;
      e = 0.0;
      for (int k = 0; k < 32; k++) begin
        int pc;
        pc = $countones(i & k);
        e += (pc % 2) ? -X[k] : X[k];
      end
      chk(absr(Y[i] - e / $sqrt(32.0)) < 0.01, "fht");
    end
    // sampling over the vocabulary
    rand_vec(VOC, 8.0);
    X[41] = 20.0;
    issue(OP_SAMPLE, VOC, VOC, 0, 0, 0.0, 0);
    chk(int'(tok) == 41, $sformatf("sample token %0d", tok));
  endtask

  // --------------------------------------------------------------- prefill
  task automatic prefill();
    int in_dim, out_dim, seq, xs [4][8], wv [8][8], outs;
    in_dim = 6; out_dim = 8; seq = 4; outs = 0;
    for (int t = 0; t < seq; t++) for (int k = 0; k < in_dim; k++) xs[t][k] = int'($urandom_range(15)) - 8;
    for (int k = 0; k < in_dim; k++) for (int j = 0; j < out_dim; j++) wv[k][j] = int'($urandom_range(15)) - 8;
    @(negedge clk); pf_start = 1; pf_in_dim = 16'(in_dim); pf_out_dim = 16'(out_dim); pf_seq_len = 17'(seq);
    @(negedge clk); pf_start = 0;
    fork
      for (int g = 0; g < seq / TPP; g++) begin
        for (int k = 0; k < in_dim; k++) begin
          pf_in_valid = 1;
          for (int t = 0; t < TPP; t++) pf_in_data[t] = 4'(xs[g * TPP + t][k]);
          @(posedge clk); while (!pf_in_ready) @(posedge clk);
          @(negedge clk);
        end
        pf_in_valid = 0;
        for (int tl = 0; tl < out_dim / WPP; tl++)
          for (int k = 0; k < in_dim; k++) begin
            pf_w_valid = 1;
            for (int p = 0; p < WPP; p++) pf_w_data[p] = 4'(wv[k][tl * WPP + p]);
            @(posedge clk); while (!pf_w_ready) @(posedge clk);
            @(negedge clk);
            pf_w_valid = 0;
          end
      end
      begin
        int g;
        g = 0;
        while (!pf_done) begin
          @(posedge clk); #1;
          if (pf_out_valid) begin
            for (int t = 0; t < TPP; t++)
              for (int p = 0; p < WPP; p++) begin
                int e;
                e = 0;
                for (int k = 0; k < in_dim; k++) e += xs[g * TPP + t][k] * wv[k][int'(pf_out_tile) * WPP + p];
                chk($signed(pf_out_data[t][p]) == e, "prefill tile");
              end
            outs++;
            if (int'(pf_out_tile) == out_dim / WPP - 1) g++;
          end
        end
      end
    join
    chk(outs == (seq / TPP) * (out_dim / WPP), $sformatf("prefill tiles %0d", outs));
  endtask

  // ------------------------------------------------------------------- HMT
  real memv [8][HD];            // every pushed memory, in order
  real sv [HD], pv [HD];
  int  npushed;

  task automatic hmt_run(input int plen);
    int nseg;
    nseg = (plen + SEG - 1) / SEG;
    npushed = 0;
    @(negedge clk); hmt_start = 1; hmt_prompt_len = 18'(plen);
    @(negedge clk); hmt_start = 0;
    for (int sgi = 0; sgi < nseg; sgi++) begin
      int pi, n, oldest, cnt_before;
      bit allzero;
      // stage 1 descriptors
      hmt_d_ready = 1;
      do begin @(posedge clk); if (hmt_d_valid && hmt_d_stage == 0) n_stage1++; end
      while (!(hmt_d_valid && hmt_d_last));
      @(negedge clk); hmt_d_ready = 0;
      chk(int'(hmt_seg) == sgi, "segment number");
      // summary S_n -> memory attention
      for (int d = 0; d < HD; d++) sv[d] = real'(int'($urandom_range(40000)) - 20000) / 20000.0;
      cnt_before = int'(hmt_mem_count);
      n = (npushed < HN) ? npushed : HN;
      oldest = npushed - n;
      for (int d = 0; d < HD; d++) pv[d] = 0.0;
      if (n > 0) begin
        real sc [HN], mx, sum;
        mx = -1e9; sum = 0.0;
        for (int i = 0; i < n; i++) begin
          sc[i] = 0.0;
          for (int d = 0; d < HD; d++) sc[i] += sv[d] * memv[oldest + i][d];
          sc[i] /= $sqrt(real'(HD));
          if (sc[i] > mx) mx = sc[i];
        end
        for (int i = 0; i < n; i++) sum += $exp(sc[i] - mx);
        for (int i = 0; i < n; i++) for (int d = 0; d < HD; d++) pv[d] += $exp(sc[i] - mx) / sum * memv[oldest + i][d];
      end
      chk(cnt_before == n, $sformatf("queue count %0d exp %0d", cnt_before, n));
      pi = 0; allzero = 1;
      fork
        for (int b = 0; b < HD / HL; b++) begin
          hmt_s_valid = 1;
          for (int l = 0; l < HL; l++) hmt_s_data[l] = to_fx(sv[b * HL + l]);
          @(posedge clk); while (!hmt_s_ready) @(posedge clk);
          @(negedge clk);
          hmt_s_valid = 0;
        end
        while (pi < HD) begin
          @(posedge clk); #1;
          if (hmt_p_valid) begin
            for (int l = 0; l < HL; l++) begin
              chk(absr(to_r(hmt_p_data[l]) - pv[pi + l]) < 0.03, $sformatf("P[%0d] seg %0d", pi + l, sgi));
              if (hmt_p_data[l] != 0) allzero = 0;
            end
            pi += HL;
          end
        end
      join
      if (n == 0 && allzero) n_bypass++;
      // stage 2 descriptors
      @(negedge clk); hmt_d_ready = 1;
      do begin @(posedge clk); if (hmt_d_valid && hmt_d_stage == 1) n_stage2++; end
      while (!(hmt_d_valid && hmt_d_last));
      @(negedge clk); hmt_d_ready = 0;
      // backbone output Mem_n -> memory queue
      for (int d = 0; d < HD; d++) memv[npushed][d] = real'(int'($urandom_range(40000)) - 20000) / 20000.0;
      for (int b = 0; b < HD / HL; b++) begin
        hmt_mem_valid = 1; hmt_mem_last = (b == HD / HL - 1);
        for (int l = 0; l < HL; l++) hmt_mem_data[l] = to_fx(memv[npushed][b * HL + l]);
        @(negedge clk);
      end
      hmt_mem_valid = 0; hmt_mem_last = 0;
      npushed++;
      @(negedge clk);
      if (npushed > HN && int'(hmt_mem_count) == HN) n_wrap++;
      n_segs++;
    end
    while (!hmt_done && hmt_busy) @(posedge clk);
    repeat (2) @(negedge clk);
    chk(!hmt_busy, "HMT finished");
  endtask

  initial begin
    cmd_valid = 0; cmd_op = OP_NORM; cmd_in_dim = '0; cmd_out_dim = '0; cmd_pos = '0; cmd_log2n = '0;
    cmd_static_scale = '0; x_valid = 0; x_data = '0; aux_valid = 0; aux_data = '0;
    dq_we = 0; dq_sel = 0; dq_idx = '0; dq_scale = '0; dq_colsum = '0;
    pf_start = 0; pf_in_dim = '0; pf_out_dim = '0; pf_seq_len = '0; pf_in_valid = 0; pf_in_data = '0;
    pf_w_valid = 0; pf_w_data = '0;
    hmt_start = 0; hmt_prompt_len = '0; hmt_d_ready = 0; hmt_s_valid = 0; hmt_s_data = '0;
    hmt_mem_valid = 0; hmt_mem_last = 0; hmt_mem_data = '0;
    wptr = 0; wtiles = 0; wk_dim = 1; w_is8 = 0; wstall_en = 0;
    {n_wstall, n_xstall, n_int4, n_int8, n_switch, n_bypass, n_wrap, n_stage1, n_stage2, n_segs} = '0;
    foreach (n_done[i]) n_done[i] = 0;
    repeat (3) @(posedge clk); rst_n = 1;

    prefill();                       // prefill configuration
    decode_ops();                    // then decode
    if (n_done[int'(OP_NORM)] > 0) n_switch++;
    prefill();                       // and back
    n_switch++;
    hmt_run(5 * SEG - 3);            // long prompt through the HMT plug-in

    chk(n_wstall > 0,  "mechanism: weight-stream stall");
    chk(n_xstall > 0,  "mechanism: operand back-pressure");
    chk(n_int4 > 0,    "mechanism: dynamic asymmetric INT4 path");
    chk(n_int8 > 0,    "mechanism: static symmetric INT8 path");
    chk(n_switch == 2, "mechanism: prefill/decode mode switch");
    chk(n_bypass == 1, "mechanism: empty memory queue bypass");
    chk(n_wrap > 0,    "mechanism: memory queue wrap");
    chk(n_stage1 > 0,  "mechanism: HMT stage 1");
    chk(n_stage2 > 0,  "mechanism: HMT stage 2");
    chk(n_segs == 5,   "mechanism: five HMT segments");
    foreach (n_done[i]) chk(n_done[i] > 0, $sformatf("mechanism: op %0d completed", i));
    $display("mechanisms: wstall=%0d xstall=%0d int4=%0d int8=%0d switch=%0d bypass=%0d wrap=%0d stage1=%0d stage2=%0d segs=%0d",
             n_wstall, n_xstall, n_int4, n_int8, n_switch, n_bypass, n_wrap, n_stage1, n_stage2, n_segs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
