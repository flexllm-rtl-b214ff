// tb_prefill_linear: checks the TP x WP systolic prefill linear layer against a
// software matrix product, with two token groups, two weight tiles (the second
// one partial), random 4-bit operands and random bubbles on the weight stream.
// A second run without bubbles checks the cycle count
// 1 + G*(in_dim + T*(in_dim + TP + WP + 1)).
`timescale 1ns/1ps
module tb_prefill_linear;
  localparam int TP = 3, WP = 4, AW = 4, WW = 4, ACC_W = 32, MAX_IN = 64;
  localparam int IN_DIM = 10, OUT_DIM = 7, SEQ = 5;
  localparam int G = (SEQ + TP - 1) / TP, T = (OUT_DIM + WP - 1) / WP;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, in_valid, in_ready, w_valid, w_ready, out_valid;
  logic [15:0] out_tile;
  logic [TP-1:0][AW-1:0] in_data;
  logic [WP-1:0][WW-1:0] w_data;
  logic [TP-1:0][WP-1:0][ACC_W-1:0] out_data;

  prefill_linear #(.TP(TP), .WP(WP), .AW(AW), .WW(WW), .ACC_W(ACC_W), .MAX_IN(MAX_IN)) dut (.*,
    .in_dim(16'(IN_DIM)), .out_dim(16'(OUT_DIM)), .seq_len(17'(SEQ)));

  int x [G*TP][IN_DIM];
  int w [IN_DIM][T*WP];
  int tiles_seen = 0;
  int grp = 0;
  logic bubbles = 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor: compare each output tile
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      for (int t = 0; t < TP; t++)
        for (int j = 0; j < WP; j++) begin
          int tok, col, expv;
          tok = grp * TP + t; col = int'(out_tile) * WP + j;
          if (tok < SEQ && col < OUT_DIM) begin
            expv = 0;
            for (int k = 0; k < IN_DIM; k++) expv += x[tok][k] * w[k][col];
            checks++;
            if ($signed(out_data[t][j]) != expv) begin
              failures++;
              $display("mismatch tok %0d col %0d: %0d vs %0d", tok, col, $signed(out_data[t][j]), expv);
            end
          end
        end
      tiles_seen++;
      if (int'(out_tile) == T - 1) grp = (grp + 1) % G;
    end
  end

  task automatic run(output int cycles);
    int c0;
    @(negedge clk); start = 1; c0 = int'($time / 10);
    @(negedge clk); start = 0;
    for (int g = 0; g < G; g++) begin
      for (int k = 0; k < IN_DIM; k++) begin
        @(negedge clk);
        in_valid = 1;
        for (int t = 0; t < TP; t++) in_data[t] = AW'(x[g*TP + t][k]);
        while (!in_ready) @(negedge clk);
        @(posedge clk);
      end
      for (int tl = 0; tl < T; tl++) begin
        for (int k = 0; k < IN_DIM; k++) begin
          @(negedge clk);
          if (bubbles) while ($urandom_range(3) == 0) begin w_valid = 0; @(negedge clk); end
          w_valid = 1;
          for (int j = 0; j < WP; j++) w_data[j] = WW'(w[k][tl*WP + j]);
          while (!w_ready) @(negedge clk);
          @(posedge clk);
        end
      end
    end
    @(negedge clk); in_valid = 0; w_valid = 0;
    while (!done) @(posedge clk);
    repeat (2) @(posedge clk);
    cycles = int'($time / 10) - c0 - 2;
  endtask

  initial begin
    int cyc, expct;
    start = 0; in_valid = 0; w_valid = 0; in_data = '0; w_data = '0;
    for (int t = 0; t < G*TP; t++)
      for (int k = 0; k < IN_DIM; k++) x[t][k] = (t < SEQ) ? $urandom_range(15) - 8 : 0;
    for (int k = 0; k < IN_DIM; k++)
      for (int j = 0; j < T*WP; j++) w[k][j] = $urandom_range(15) - 8;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(cyc);
    checks++;
    if (tiles_seen != G * T) begin failures++; $display("tiles %0d", tiles_seen); end
    bubbles = 0;
    run(cyc);
    expct = 1 + G * (IN_DIM + T * (IN_DIM + TP + WP + 1));
    checks++;
    if (cyc < expct - 1 || cyc > expct + 1) begin
      failures++; $display("cycles %0d expected %0d", cyc, expct);
    end
    repeat (5) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
