`timescale 1ns/1ps
// tb_argmax_sampler: streams logit vectors (LANES per beat, with bubbles) and
// checks the returned token is the index of the largest logit, the lowest
// index on ties, and that tok_valid comes one cycle after the last beat.
module tb_argmax_sampler;
  import flexllm_pkg::*;
  localparam int LANES = 4, VOCAB = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, in_valid, in_last, tok_valid;
  fx_t [LANES-1:0] in_data;
  logic [5:0] tok;
  argmax_sampler #(.LANES(LANES), .VOCAB(VOCAB)) dut (.*);

  fx_t lg [VOCAB];

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(input int mode);
    int best;
    for (int i = 0; i < VOCAB; i++) lg[i] = fx_t'(int'($urandom_range(2000000)) - 1000000);
    if (mode == 1) begin lg[5] = 32'sd5000000; lg[40] = 32'sd5000000; end          // tie
    if (mode == 2) for (int i = 0; i < VOCAB; i++) lg[i] = -32'sd7000000 - i;       // all negative
    if (mode == 3) lg[VOCAB-1] = FX_MAX;                                             // last lane
    best = 0;
    for (int i = 1; i < VOCAB; i++) if (lg[i] > lg[best]) best = i;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    for (int b = 0; b < VOCAB / LANES; b++) begin
      while ($urandom_range(2) == 0) @(negedge clk);
      in_valid = 1; in_last = (b == VOCAB / LANES - 1);
      for (int l = 0; l < LANES; l++) in_data[l] = lg[b*LANES + l];
      @(negedge clk); in_valid = 0; in_last = 0;
    end
    // tok_valid after the edge that took the last beat
    checks++;
    if (!tok_valid) begin failures++; $display("tok_valid late"); end
    checks++;
    if (int'(tok) != best) begin failures++; $display("mode %0d tok %0d exp %0d", mode, tok, best); end
    @(negedge clk);
    checks++;
    if (tok_valid) begin failures++; $display("tok_valid not a pulse"); end
  endtask

  initial begin
    start = 0; in_valid = 0; in_last = 0; in_data = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 12; r++) run(r % 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
