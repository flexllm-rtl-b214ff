`timescale 1ns/1ps
// tb_dequantizer: loads per-channel weight scales and column sums, then feeds
// integer accumulator beats and compares each output with the real-number
// value s_x*s_w*yq + b_x*s_w*colsum.  Output must follow the input by one
// cycle.  Two vectors are run to check the channel index restarts on start.
module tb_dequantizer;
  import flexllm_pkg::*;
  localparam int LANES = 4, MAX_OUT = 64, OUT = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic aux_we, start, in_valid, out_valid;
  logic [5:0] aux_idx;
  fx_t aux_scale, s_x, b_x;
  logic signed [31:0] aux_colsum;
  logic [LANES-1:0][31:0] in_yq;
  fx_t [LANES-1:0] out_y;

  dequantizer #(.LANES(LANES), .ACC_W(32), .MAX_OUT(MAX_OUT)) dut (.*);

  fx_t sw [OUT];
  int  cs [OUT];
  int  yq [OUT];
  int  oj;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // sample 1 ns after the edge: outputs have settled and the inputs taken at
  // this edge are still applied (they change at the falling edge), so a one
  // cycle latency means out_valid equals in_valid here.
  always @(posedge clk) begin
    #1;
    checks++;
    if (out_valid != in_valid) begin failures++; $display("latency t=%0t", $time); end
  end
  always @(posedge clk) begin
    #1;
    if (out_valid) begin
    for (int l = 0; l < LANES; l++) begin
      real e, g;
      e = (real'(s_x) / 65536.0) * (real'(sw[oj + l]) / 65536.0) * yq[oj + l]
        + (real'(b_x) / 65536.0) * (real'(sw[oj + l]) / 65536.0) * cs[oj + l];
      g = real'(out_y[l]) / 65536.0;
      checks++;
      if (g - e > 2.0 / 65536.0 || e - g > 2.0 / 65536.0) begin
        failures++; $display("ch %0d got %f exp %f t=%0t", oj + l, g, e, $time);
      end
    end
    oj += LANES;
    end
  end

  task automatic run_vec();
    for (int i = 0; i < OUT; i++) yq[i] = $urandom_range(4000) - 2000;
    s_x = fx_t'($urandom_range(65536, 1000));
    b_x = fx_t'($urandom_range(131072) - 65536);
    oj = 0;
    @(negedge clk); start = 1;
    for (int b = 0; b < OUT / LANES; b++) begin
      in_valid = 1;
      for (int l = 0; l < LANES; l++) in_yq[l] = 32'(yq[b*LANES + l]);
      @(negedge clk); start = 0;
      if (b == 1) begin in_valid = 0; @(negedge clk); end   // one bubble
    end
    in_valid = 0;
    repeat (3) @(posedge clk);
  endtask

  initial begin
    aux_we = 0; start = 0; in_valid = 0; in_yq = '0; aux_idx = '0; aux_scale = '0; aux_colsum = '0;
    s_x = '0; b_x = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < OUT; i++) begin
      sw[i] = fx_t'($urandom_range(6553, 100));
      cs[i] = $urandom_range(200) - 100;
      @(negedge clk); aux_we = 1; aux_idx = 6'(i); aux_scale = sw[i]; aux_colsum = cs[i];
    end
    @(negedge clk); aux_we = 0;
    run_vec();
    run_vec();
    checks++;
    if (oj != OUT) begin failures++; $display("beats %0d", oj); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
