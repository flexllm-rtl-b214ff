`timescale 1ns/1ps
// tb_quantizer: drives tokens through the quantizer in both modes and checks
// the codes against a real-number model: dynamic asymmetric INT4 per token
// (s = (max-min)/15, b = min, emitted codes shifted by -8, b_x raised by 8s)
// and static symmetric INT8 with a preloaded scale.  Codes may differ from
// the model by one step only where the real value lies on a rounding edge;
// the reconstructed value s*q + b must be within s/2 (+1 LSB) of the input.
// Also checks the cycle count of a token: dim/LANES load + divider + emit.
module tb_quantizer;
  import flexllm_pkg::*;
  localparam int LANES = 4, MAX_DIM = 64, DIM = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, in_valid, in_ready, sb_valid, out_valid, out_last, asym_dyn;
  fx_t static_scale, s_x, b_x;
  fx_t [LANES-1:0] in_data;
  logic [LANES-1:0][3:0] out_q4;
  logic [LANES-1:0][7:0] out_q8;
  logic busy8, done8, in_ready8, sb_valid8, out_valid8, out_last8;
  fx_t s_x8, b_x8;

  quantizer #(.LANES(LANES), .BITS(4), .MAX_DIM(MAX_DIM)) dut4 (.clk, .rst_n, .start(start && asym_dyn),
    .io_dim(16'(DIM)), .asym_dyn(1'b1), .static_scale('0), .busy, .done, .in_valid(in_valid && asym_dyn), .in_ready,
    .in_data, .sb_valid, .s_x, .b_x, .out_valid, .out_last, .out_q(out_q4));
  quantizer #(.LANES(LANES), .BITS(8), .MAX_DIM(MAX_DIM)) dut8 (.clk, .rst_n, .start(start && !asym_dyn),
    .io_dim(16'(DIM)), .asym_dyn(1'b0), .static_scale, .busy(busy8), .done(done8), .in_valid(in_valid && !asym_dyn),
    .in_ready(in_ready8), .in_data, .sb_valid(sb_valid8), .s_x(s_x8), .b_x(b_x8), .out_valid(out_valid8),
    .out_last(out_last8), .out_q(out_q8));

  real xr [DIM];
  fx_t xf [DIM];
  int oi;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check_code(int i, int q, real s, real b, int qmodel);
    real rec;
    checks++;
    rec = s * q + b;
    if ((q - qmodel > 1 || qmodel - q > 1) || (rec - xr[i] > s / 2 + 0.001) || (xr[i] - rec > s / 2 + 0.001)) begin
      failures++;
      $display("elem %0d x=%f q=%0d model=%0d rec=%f", i, xr[i], q, qmodel, rec);
    end
  endfunction

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      real s, b, mn, mx;
      mn = 1e9; mx = -1e9;
      for (int i = 0; i < DIM; i++) begin if (xr[i] < mn) mn = xr[i]; if (xr[i] > mx) mx = xr[i]; end
      s = (mx - mn) / 15.0;
      b = mn + 8.0 * s;
      for (int l = 0; l < LANES; l++) begin
        int qm;
        qm = int'($floor((xr[oi + l] - mn) / s + 0.5)) - 8;
        check_code(oi + l, $signed(out_q4[l]), real'(s_x) / 65536.0, real'(b_x) / 65536.0, qm);
      end
      oi += LANES;
    end
    if (rst_n && out_valid8) begin
      real s;
      s = real'(static_scale) / 65536.0;
      for (int l = 0; l < LANES; l++) begin
        int qm;
        qm = int'($floor(xr[oi + l] / s + 0.5));
        if (qm > 127) qm = 127;
        if (qm < -127) qm = -127;
        if (xr[oi + l] / s < 127.0 && xr[oi + l] / s > -127.0)
          check_code(oi + l, $signed(out_q8[l]), s, 0.0, qm);
        else begin
          checks++;
          if (qm != $signed(out_q8[l])) begin failures++; $display("sat elem %0d q=%0d", oi + l, $signed(out_q8[l])); end
        end
      end
      oi += LANES;
    end
  end

  task automatic token(input logic asym, input real amp, input real off, output int cycles);
    int c0;
    for (int i = 0; i < DIM; i++) begin
      xr[i] = off + amp * (real'($urandom_range(20000)) / 10000.0 - 1.0);
      xf[i] = fx_t'(longint'($floor(xr[i] * 65536.0 + 0.5)));
      xr[i] = real'(xf[i]) / 65536.0;
    end
    oi = 0;
    @(negedge clk); asym_dyn = asym; start = 1; c0 = int'($time / 10);
    @(negedge clk); start = 0;
    for (int b = 0; b < DIM / LANES; b++) begin
      in_valid = 1;
      for (int l = 0; l < LANES; l++) in_data[l] = xf[b*LANES + l];
      while (!(asym ? in_ready : in_ready8)) @(negedge clk);
      @(posedge clk); @(negedge clk);
    end
    in_valid = 0;
    while (!(asym ? done : done8)) @(posedge clk);
    cycles = int'($time / 10) - c0;
    repeat (2) @(posedge clk);
  endtask

  initial begin
    int cyc;
    start = 0; in_valid = 0; in_data = '0; asym_dyn = 1; static_scale = fx_t'(32'd655); // 0.01
    repeat (3) @(posedge clk);
    rst_n = 1;
    token(1, 3.0, 0.5, cyc);
    checks++;
    // load DIM/LANES beats, 1 cycle to start the divider, 64 divider cycles, emit DIM/LANES
    if (cyc < 2 * DIM / LANES + 64 || cyc > 2 * DIM / LANES + 70) begin
      failures++; $display("cycles %0d", cyc);
    end
    token(1, 0.2, -1.0, cyc);
    token(0, 1.0, 0.0, cyc);
    token(0, 2.0, 0.3, cyc);   // some values saturate at +-127
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
