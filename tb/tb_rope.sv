`timescale 1ns/1ps
// tb_rope: rotates two heads of random values at several token positions and
// compares each output pair with the exact rotation by pos*THETA^(-2i/HEAD_DIM)
// (tolerance 0.3 % of the pair magnitude + 4 LSB, the resolution of the
// quarter-wave sine table).  Output must follow input by one cycle.
module tb_rope;
  import flexllm_pkg::*;
  localparam int LANES = 4, HEAD_DIM = 16, THETA = 500000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, in_valid, out_valid;
  logic [16:0] pos;
  fx_t [LANES-1:0] in_data, out_data;
  rope #(.LANES(LANES), .HEAD_DIM(HEAD_DIM), .THETA(THETA)) dut (.*);

  int ei, pcur;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    #1;
    checks++;
    if (out_valid != (in_valid && !start)) begin failures++; $display("latency t=%0t", $time); end
    if (out_valid) begin
      for (int l = 0; l < LANES; l += 2) begin
        real x0, x1, th, e0, e1, g0, g1, tol;
        int  i;
        i  = ((ei + l) % HEAD_DIM) / 2;
        x0 = real'(in_data[l]) / 65536.0;
        x1 = real'(in_data[l+1]) / 65536.0;
        th = pcur * $pow(real'(THETA), -2.0 * i / HEAD_DIM);
        e0 = x0 * $cos(th) - x1 * $sin(th);
        e1 = x0 * $sin(th) + x1 * $cos(th);
        g0 = real'(out_data[l]) / 65536.0;
        g1 = real'(out_data[l+1]) / 65536.0;
        tol = 0.003 * ((x0 < 0 ? -x0 : x0) + (x1 < 0 ? -x1 : x1)) + 4.0 / 65536.0;
        checks++;
        if (g0 - e0 > tol || e0 - g0 > tol || g1 - e1 > tol || e1 - g1 > tol) begin
          failures++; $display("pos %0d pair %0d got %f,%f exp %f,%f", pcur, i, g0, g1, e0, e1);
        end
      end
      ei += LANES;
    end
  end

  initial begin
    start = 0; in_valid = 0; in_data = '0; pos = '0; ei = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 6; k++) begin
      int p;
      p = (k == 0) ? 0 : (k == 1) ? 1 : (k == 2) ? 77 : (k == 3) ? 1023 : (k == 4) ? 4095 : 131071;
      @(negedge clk); start = 1; pos = 17'(p);
      @(negedge clk); start = 0; pcur = p; ei = 0;
      // hold the inputs one cycle past the beat so the monitor sees them
      for (int b = 0; b < 2 * HEAD_DIM / LANES; b++) begin
        in_valid = 1;
        for (int l = 0; l < LANES; l++) in_data[l] = fx_t'(int'($urandom_range(400000)) - 200000);
        @(negedge clk);
        if ($urandom_range(2) == 0) begin in_valid = 0; @(negedge clk); end
      end
      in_valid = 0;
      repeat (2) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
