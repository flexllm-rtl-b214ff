`timescale 1ns/1ps
// tb_rmsnorm: normalizes random vectors of different scales and compares
// every output with x/sqrt(mean(x^2)+2^-16)*g computed in real numbers
// (0.5 % relative + 4 LSB absolute tolerance).  The weight stream has random
// bubbles.  Checks the cycle count of one vector against
// start + dim/LANES load + ~200 calculation cycles + dim/LANES emit.
module tb_rmsnorm;
  import flexllm_pkg::*;
  localparam int LANES = 4, MAX_DIM = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, busy, done, in_valid, in_ready, g_valid, g_ready, out_valid;
  logic [15:0] dim;
  fx_t [LANES-1:0] in_data, g_data, out_data;
  rmsnorm #(.LANES(LANES), .MAX_DIM(MAX_DIM)) dut (.*);

  real xr [MAX_DIM], gr [MAX_DIM];
  int  oi, nd;

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    #1;
    if (out_valid) begin
      real ms, e, g, tol;
      ms = 0.0;
      for (int i = 0; i < nd; i++) ms += xr[i] * xr[i];
      ms = ms / nd + 1.0 / 65536.0;
      for (int l = 0; l < LANES; l++) begin
        e = xr[oi + l] / $sqrt(ms) * gr[oi + l];
        g = real'(out_data[l]) / 65536.0;
        tol = 0.005 * (e < 0 ? -e : e) + 4.0 / 65536.0;
        checks++;
        if (g - e > tol || e - g > tol) begin failures++; $display("elem %0d got %f exp %f", oi + l, g, e); end
      end
      oi += LANES;
    end
  end

  task automatic run(input int n, input real amp, output int cycles);
    int c0;
    nd = n; oi = 0;
    for (int i = 0; i < n; i++) begin
      xr[i] = real'(int'($floor(amp * (real'($urandom_range(20000)) / 10000.0 - 1.0) * 65536.0))) / 65536.0;
      gr[i] = real'(int'($urandom_range(131072))) / 65536.0;
    end
    @(negedge clk); dim = 16'(n); start = 1; c0 = int'($time / 10);
    @(negedge clk); start = 0;
    for (int b = 0; b < n / LANES; b++) begin
      in_valid = 1;
      for (int l = 0; l < LANES; l++) in_data[l] = fx_t'(int'(xr[b*LANES + l] * 65536.0));
      while (!in_ready) @(negedge clk);
      @(negedge clk);
    end
    in_valid = 0;
    for (int b = 0; b < n / LANES; b++) begin
      while ($urandom_range(3) == 0 && cycles >= 0) @(negedge clk);
      g_valid = 1;
      for (int l = 0; l < LANES; l++) g_data[l] = fx_t'(int'(gr[b*LANES + l] * 65536.0));
      while (!g_ready) @(negedge clk);
      @(negedge clk);
      g_valid = 0;
    end
    while (!done && oi < n) @(posedge clk);
    cycles = int'($time / 10) - c0;
    repeat (3) @(posedge clk);
    checks++;
    if (oi != n) begin failures++; $display("outputs %0d of %0d", oi, n); end
  endtask

  initial begin
    int cyc;
    start = 0; in_valid = 0; g_valid = 0; in_data = '0; g_data = '0; dim = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    cyc = -1;                         // no weight bubbles in the timed run
    run(32, 2.0, cyc);
    checks++;
    if (cyc < 2 * 32 / LANES + 150 || cyc > 2 * 32 / LANES + 260) begin failures++; $display("cycles %0d", cyc); end
    $display("rmsnorm vector of 32: %0d cycles", cyc);
    run(64, 0.05, cyc);
    run(16, 100.0, cyc);
    run(64, 1.0, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
