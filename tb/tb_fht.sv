`timescale 1ns/1ps
// tb_fht: transforms random vectors of length 2^2 .. 2^6 (odd and even
// log2n) and compares each output with H_n x / sqrt(n) computed in real
// numbers (tolerance 0.2 % of the vector's peak + 8 LSB for the intermediate
// halvings).  Checks out_last on the final beat and the cycle count
// n/LANES (load) + log2n*n/LANES (butterflies) + n/LANES (emit) + 2.
module tb_fht;
  import flexllm_pkg::*;
  localparam int LANES = 4, MAX_N = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, busy, done, in_valid, in_ready, out_valid, out_last;
  logic [3:0] log2n;
  fx_t [LANES-1:0] in_data, out_data;
  fht #(.LANES(LANES), .MAX_N(MAX_N)) dut (.*);

  real xr [MAX_N];
  int  oi, ncur;
  real peak;

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int popc(int v);
    int c = 0;
    for (int i = 0; i < 16; i++) c += (v >> i) & 1;
    return c;
  endfunction

  always @(posedge clk) begin
    #1;
    if (out_valid) begin
      for (int l = 0; l < LANES; l++) begin
        real e, g, tol;
        e = 0.0;
        for (int k = 0; k < ncur; k++) e += ((popc((oi + l) & k) % 2) ? -xr[k] : xr[k]);
        e = e / $sqrt(real'(ncur));
        g = real'(out_data[l]) / 65536.0;
        tol = 0.002 * peak + 8.0 / 65536.0;
        checks++;
        if (g - e > tol || e - g > tol) begin failures++; $display("n=%0d y[%0d] got %f exp %f", ncur, oi + l, g, e); end
      end
      oi += LANES;
      checks++;
      if (out_last != (oi == ncur)) begin failures++; $display("out_last at %0d", oi); end
    end
  end

  task automatic run(input int ln, output int cycles);
    int c0;
    ncur = 1 << ln; oi = 0; peak = 0.0;
    for (int i = 0; i < ncur; i++) begin
      xr[i] = real'(int'($urandom_range(600000)) - 300000) / 65536.0;
      if ((xr[i] < 0 ? -xr[i] : xr[i]) > peak) peak = (xr[i] < 0 ? -xr[i] : xr[i]);
    end
    @(negedge clk); log2n = 4'(ln); start = 1; c0 = int'($time / 10);
    @(negedge clk); start = 0;
    for (int b = 0; b < ncur / LANES; b++) begin
      in_valid = 1;
      for (int l = 0; l < LANES; l++) in_data[l] = fx_t'(int'(xr[b*LANES + l] * 65536.0));
      while (!in_ready) @(negedge clk);
      @(negedge clk);
    end
    in_valid = 0;
    while (!done) @(posedge clk);
    cycles = int'($time / 10) - c0;
    repeat (2) @(posedge clk);
    checks++;
    if (oi != ncur) begin failures++; $display("outputs %0d", oi); end
    checks++;
    if (cycles < (ln + 2) * ncur / LANES || cycles > (ln + 2) * ncur / LANES + 3) begin
      failures++; $display("n=%0d cycles %0d", ncur, cycles);
    end
  endtask

  initial begin
    int cyc;
    start = 0; in_valid = 0; in_data = '0; log2n = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int ln = 2; ln <= 6; ln++) run(ln, cyc);
    run(5, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
