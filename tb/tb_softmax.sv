`timescale 1ns/1ps
// tb_softmax: runs softmax over random score vectors (lengths that are and are
// not multiples of LANES) and compares each probability with the exact value
// (1 % relative + 2^-12 absolute tolerance).  Lanes past the vector length
// must be zero, out_last must mark the final beat, and the probabilities must
// sum to one within 1 %.  Checks the cycle count: load, exp pass and emit of
// ceil(len/LANES) beats each plus the ~65 cycle divider.
module tb_softmax;
  import flexllm_pkg::*;
  localparam int LANES = 4, MAX_LEN = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, busy, done, in_valid, in_ready, out_valid, out_last;
  logic [15:0] len;
  fx_t [LANES-1:0] in_data, out_data;
  softmax #(.LANES(LANES), .MAX_LEN(MAX_LEN)) dut (.*);

  real xr [MAX_LEN];
  int  oi, n_cur, lasts;
  real psum;

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    #1;
    if (out_valid) begin
      real mx, s, e, g, tol;
      mx = -1e9; s = 0.0;
      for (int i = 0; i < n_cur; i++) if (xr[i] > mx) mx = xr[i];
      for (int i = 0; i < n_cur; i++) s += $exp(xr[i] - mx);
      for (int l = 0; l < LANES; l++) begin
        g = real'(out_data[l]) / 65536.0;
        e = (oi + l < n_cur) ? $exp(xr[oi + l] - mx) / s : 0.0;
        tol = 0.01 * e + 1.0 / 4096.0;
        checks++;
        if (g - e > tol || e - g > tol) begin failures++; $display("p[%0d] got %f exp %f", oi + l, g, e); end
        psum += g;
      end
      oi += LANES;
      checks++;
      if (out_last != (oi >= n_cur)) begin failures++; $display("out_last wrong at %0d", oi); end
      if (out_last) lasts++;
    end
  end

  task automatic run(input int n, input real amp, output int cycles);
    int c0, nb;
    nb = (n + LANES - 1) / LANES;
    n_cur = n; oi = 0; psum = 0.0;
    for (int i = 0; i < nb * LANES; i++)
      xr[i] = real'(int'($floor(amp * (real'($urandom_range(20000)) / 10000.0 - 1.0) * 65536.0))) / 65536.0;
    @(negedge clk); len = 16'(n); start = 1; c0 = int'($time / 10);
    @(negedge clk); start = 0;
    for (int b = 0; b < nb; b++) begin
      in_valid = 1;
      for (int l = 0; l < LANES; l++) in_data[l] = fx_t'(int'(xr[b*LANES + l] * 65536.0));
      while (!in_ready) @(negedge clk);
      @(negedge clk);
    end
    in_valid = 0;
    while (!done) @(posedge clk);
    cycles = int'($time / 10) - c0;
    repeat (3) @(posedge clk);
    checks++;
    if (psum < 0.99 || psum > 1.01) begin failures++; $display("sum %f", psum); end
  endtask

  initial begin
    int cyc;
    start = 0; in_valid = 0; in_data = '0; len = '0; lasts = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(32, 4.0, cyc);
    checks++;
    if (cyc < 3 * 8 + 60 || cyc > 3 * 8 + 75) begin failures++; end
    $display("softmax of 32: %0d cycles", cyc);
    run(13, 8.0, cyc);
    run(64, 1.0, cyc);
    run(1, 3.0, cyc);
    checks++;
    if (lasts != 4) begin failures++; $display("out_last count %0d", lasts); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
