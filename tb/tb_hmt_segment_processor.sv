`timescale 1ns/1ps
// tb_hmt_segment_processor: cuts prompts of several lengths into segments and
// compares the descriptor stream with a model of the two HMT stages:
//   stage 1 [T : first half of Seg_n : T], then wait for pn_done,
//   stage 2 [P : last SHORT_LEN tokens of Seg_{n-1} : Seg_n : P], then wait
//   for mem_done.
// d_ready has random bubbles; pn_done/mem_done come a random time after the
// last descriptor of each stage.  The descriptor rate with d_ready held high
// must be one per cycle.
module tb_hmt_segment_processor;
  localparam int SEG_LEN = 8, SHORT_LEN = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, busy, done, d_valid, d_ready, d_stage, d_last, pn_done, mem_done;
  logic [1:0] d_src;
  logic [17:0] prompt_len, d_idx, seg;
  hmt_segment_processor #(.SEG_LEN(SEG_LEN), .SHORT_LEN(SHORT_LEN)) dut (.*);

  int exp_stage [$], exp_src [$], exp_idx [$], exp_last [$];
  int got, stalls_seen;
  logic bubbles;

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic void add(int st, int src, int idx, int last);
    exp_stage.push_back(st); exp_src.push_back(src); exp_idx.push_back(idx); exp_last.push_back(last);
  endfunction

  task automatic build(input int plen);
    int base, sl;
    base = 0;
    while (base < plen) begin
      sl = (plen - base > SEG_LEN) ? SEG_LEN : plen - base;
      add(0, 1, 0, 0);
      for (int i = 0; i < sl / 2; i++) add(0, 0, base + i, 0);
      add(0, 1, 0, 1);
      add(1, 2, 0, 0);
      if (base >= SHORT_LEN) for (int i = 0; i < SHORT_LEN; i++) add(1, 0, base - SHORT_LEN + i, 0);
      for (int i = 0; i < sl; i++) add(1, 0, base + i, 0);
      add(1, 2, 0, 1);
      base += sl;
    end
  endtask

  // consumer: compare each accepted descriptor (sampled at the edge that
  // transfers it, i.e. the values before the edge), answer the stage ends
  always @(posedge clk) begin
    if (rst_n && d_valid && d_ready) begin
      int st, src, idx, last;
      checks++;
      if (exp_stage.size() == 0) begin failures++; $display("extra descriptor t=%0t st%0d src%0d idx%0d", $time, d_stage, d_src, d_idx); end
      else begin
        st = exp_stage.pop_front(); src = exp_src.pop_front(); idx = exp_idx.pop_front(); last = exp_last.pop_front();
        if (int'(d_stage) != st || int'(d_src) != src || (src == 0 && int'(d_idx) != idx) || int'(d_last) != last) begin
          failures++;
          $display("desc %0d got st%0d src%0d idx%0d last%0d exp st%0d src%0d idx%0d last%0d",
                   got, d_stage, d_src, d_idx, d_last, st, src, idx, last);
        end
      end
      got++;
    end
  end

  initial begin
    forever begin
      @(negedge clk);
      d_ready = bubbles ? ($urandom_range(3) != 0) : 1'b1;
    end
  end

  initial begin
    forever begin
      @(posedge clk);
      if (d_valid && d_ready && d_last) begin
        logic st;
        st = d_stage;
        repeat ($urandom_range(5, 1)) @(negedge clk);
        if (st == 0) begin pn_done = 1; @(negedge clk); pn_done = 0; end
        else begin mem_done = 1; @(negedge clk); mem_done = 0; end
      end
    end
  end

  task automatic run(input int plen, input logic bub, output int cycles);
    int c0;
    bubbles = bub; got = 0;
    build(plen);
    @(negedge clk); prompt_len = 18'(plen); start = 1; c0 = int'($time / 10);
    @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    cycles = int'($time / 10) - c0;
    checks++;
    if (exp_stage.size() != 0) begin failures++; $display("missing %0d descriptors", exp_stage.size()); end
    exp_stage.delete(); exp_src.delete(); exp_idx.delete(); exp_last.delete();
    repeat (3) @(posedge clk);
  endtask

  initial begin
    int cyc;
    start = 0; prompt_len = '0; d_ready = 1; pn_done = 0; mem_done = 0; bubbles = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(20, 1, cyc);
    run(8, 1, cyc);
    run(3, 1, cyc);
    run(17, 1, cyc);
    // one segment, no bubbles: 2+4 + 2+8 descriptors, each one cycle, plus the
    // two handshake waits of 1..5 cycles (+1 each)
    run(8, 0, cyc);
    checks++;
    if (cyc < 16 + 4 || cyc > 16 + 14) begin failures++; $display("cycles %0d", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
