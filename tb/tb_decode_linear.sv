`timescale 1ns/1ps
// tb_decode_linear: checks the decode linear layer (BP sets of 1D systolic
// arrays) against a software matrix-vector product: two tiles, the second
// partial, random signed 4-bit operands, random bubbles on the weight stream,
// then a bubble-free run whose cycle count is compared with
// 1 + in_dim/LANES + T*(in_dim + WP/BP + 3) + (last tile drain) within a small margin.
module tb_decode_linear;
  localparam int BP = 4, WP = 16, AW = 4, WW = 4, LANES = 4, ACC_W = 32, MAX_IN = 64;
  localparam int IN_DIM = 12, OUT_DIM = 24;
  localparam int T = (OUT_DIM + WP - 1) / WP;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, in_valid, in_ready, w_valid, w_ready, out_valid, out_last;
  logic [LANES-1:0][AW-1:0] in_data;
  logic [WP-1:0][WW-1:0] w_data;
  logic [LANES-1:0][ACC_W-1:0] out_data;

  decode_linear #(.BP(BP), .WP(WP), .AW(AW), .WW(WW), .LANES(LANES), .ACC_W(ACC_W), .MAX_IN(MAX_IN)) dut (.*,
    .in_dim(16'(IN_DIM)), .out_dim(18'(OUT_DIM)));

  int x [IN_DIM];
  int w [IN_DIM][T*WP];
  int col = 0;
  logic bubbles = 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      for (int l = 0; l < LANES; l++) begin
        int e;
        e = 0;
        for (int k = 0; k < IN_DIM; k++) e += x[k] * w[k][col + l];
        checks++;
        if ($signed(out_data[l]) != e) begin
          failures++; $display("col %0d: %0d vs %0d", col + l, $signed(out_data[l]), e);
        end
      end
      col = out_last ? 0 : col + LANES;
    end
  end

  task automatic run(output int cycles);
    int c0;
    @(negedge clk); start = 1; c0 = int'($time / 10);
    @(negedge clk); start = 0;
    for (int b = 0; b < IN_DIM / LANES; b++) begin
      in_valid = 1;
      for (int l = 0; l < LANES; l++) in_data[l] = AW'(x[b*LANES + l]);
      while (!in_ready) @(negedge clk);
      @(posedge clk); @(negedge clk);
    end
    in_valid = 0;
    for (int tl = 0; tl < T; tl++) begin
      for (int k = 0; k < IN_DIM; k++) begin
        if (bubbles) while ($urandom_range(3) == 0) begin w_valid = 0; @(negedge clk); end
        w_valid = 1;
        for (int j = 0; j < WP; j++) w_data[j] = WW'(w[k][tl*WP + j]);
        while (!w_ready) @(negedge clk);
        @(posedge clk); @(negedge clk);
      end
    end
    w_valid = 0;
    while (!done) @(posedge clk);
    cycles = int'($time / 10) - c0;
    repeat (2) @(posedge clk);
  endtask

  initial begin
    int cyc, expct;
    start = 0; in_valid = 0; w_valid = 0; in_data = '0; w_data = '0;
    for (int k = 0; k < IN_DIM; k++) x[k] = $urandom_range(15) - 8;
    for (int k = 0; k < IN_DIM; k++)
      for (int j = 0; j < T*WP; j++) w[k][j] = $urandom_range(15) - 8;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(cyc);
    bubbles = 0;
    run(cyc);
    expct = 1 + IN_DIM / LANES + T * (IN_DIM + WP / BP + 3) + (OUT_DIM - (T - 1) * WP) / LANES + 1;
    checks++;
    if (cyc < expct - 2 || cyc > expct + 2) begin
      failures++; $display("cycles %0d expected %0d", cyc, expct);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
