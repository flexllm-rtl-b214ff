`timescale 1ns/1ps
// tb_swish: checks the swish / SiLU unit y = x*sigmoid(x) against the exact function; the tolerance is the error bound of the piecewise-linear sigmoid (0.02*|x|).
// Random beats with random bubbles are fed; every output lane is compared
// with a real-number model and out_valid must follow in_valid by exactly one
// cycle (checked 1 ns after each rising edge, when outputs have settled and
// the inputs taken at that edge are still applied).
module tb_swish;
  import flexllm_pkg::*;
  localparam int LANES = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, beats = 0;
  logic in_valid, out_valid;
  fx_t [LANES-1:0] a_data, b_data, out_data;
  swish #(.LANES(LANES)) dut (.clk, .rst_n, .in_valid, .in_data(a_data), .out_valid, .out_data);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real model(real a, real b);
    return a / (1.0 + $exp(-a));
  endfunction

  always @(posedge clk) begin
    #1;
    checks++;
    if (out_valid != in_valid) begin failures++; $display("latency t=%0t", $time); end
    if (out_valid) begin
      beats++;
      for (int l = 0; l < LANES; l++) begin
        real a, b, e, g;
        a = real'(a_data[l]) / 65536.0;
        b = real'(b_data[l]) / 65536.0;
        e = model(a, b);
        if (e > 32767.0) e = 32767.99998;
        if (e < -32768.0) e = -32768.0;
        g = real'(out_data[l]) / 65536.0;
        checks++;
        if (g - e > 0.02 * (a < 0 ? -a : a) + 2.0/65536.0 || e - g > 0.02 * (a < 0 ? -a : a) + 2.0/65536.0) begin
          failures++; $display("a=%f b=%f got %f exp %f", a, b, g, e);
        end
      end
    end
  end

  initial begin
    in_valid = 0; a_data = '0; b_data = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      for (int l = 0; l < LANES; l++) begin
        a_data[l] = fx_t'(int'($urandom_range(2 * 600000)) - 600000);
        b_data[l] = fx_t'(int'($urandom_range(2 * 600000)) - 600000);
      end
      // a few extreme values to exercise saturation
      if (i == 7) begin a_data[0] = FX_MAX; b_data[0] = FX_MAX; end
      if (i == 9) begin a_data[1] = FX_MIN; b_data[1] = FX_MIN; in_valid = 1; end
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (beats < 100) begin failures++; $display("too few beats %0d", beats); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
