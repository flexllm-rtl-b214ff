`timescale 1ns/1ps
// tb_hmt_memory_queue: pushes memory embeddings and replays the queue after
// each push.  Checks count, that the replay returns the stored entries
// oldest first (only the newest N once the queue has wrapped), the
// entry-last and replay-last marks, and that a replay of k entries takes
// exactly k*D/LANES consecutive cycles.
module tb_hmt_memory_queue;
  import flexllm_pkg::*;
  localparam int N = 4, D = 8, LANES = 2, BEATS = D / LANES;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic push_valid, rd_start, rd_busy, rd_valid, rd_entry_last, rd_last;
  fx_t [LANES-1:0] push_data, rd_data;
  logic [2:0] count;
  hmt_memory_queue #(.N(N), .D(D), .LANES(LANES)) dut (.*);

  int pushed, rb, first_t, last_t, lasts;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // element e of entry k holds k*1000 + e
  always @(posedge clk) begin
    #1;
    if (rd_valid) begin
      int n, oldest, k, e;
      n = (pushed < N) ? pushed : N;
      oldest = pushed - n;
      k = oldest + rb / BEATS;
      if (rb == 0) first_t = int'($time / 10);
      last_t = int'($time / 10);
      for (int l = 0; l < LANES; l++) begin
        e = (rb % BEATS) * LANES + l;
        checks++;
        if (rd_data[l] != fx_t'(k * 1000 + e)) begin
          failures++; $display("replay beat %0d lane %0d got %0d exp %0d", rb, l, rd_data[l], k * 1000 + e);
        end
      end
      checks++;
      if (rd_entry_last != ((rb % BEATS) == BEATS - 1) || rd_last != (rb == n * BEATS - 1)) begin
        failures++; $display("last flags wrong at beat %0d", rb);
      end
      if (rd_last) lasts++;
      rb++;
    end
  end

  task automatic push(input int k);
    for (int b = 0; b < BEATS; b++) begin
      @(negedge clk); push_valid = 1;
      for (int l = 0; l < LANES; l++) push_data[l] = fx_t'(k * 1000 + b * LANES + l);
    end
    @(negedge clk); push_valid = 0;
    pushed++;
  endtask

  task automatic replay();
    int n;
    n = (pushed < N) ? pushed : N;
    rb = 0;
    @(negedge clk); rd_start = 1;
    @(negedge clk); rd_start = 0;
    repeat (n * BEATS + 4) @(negedge clk);
    checks++;
    if (rb != n * BEATS) begin failures++; $display("replay gave %0d beats, exp %0d", rb, n * BEATS); end
    if (n > 0) begin
      checks++;
      if (last_t - first_t != n * BEATS - 1) begin failures++; $display("replay not back to back"); end
    end
    checks++;
    if (rd_busy) begin failures++; $display("still busy"); end
  endtask

  initial begin
    push_valid = 0; push_data = '0; rd_start = 0; pushed = 0; lasts = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    replay();                               // empty queue: nothing comes out
    for (int k = 0; k < 7; k++) begin
      push(k);
      checks++;
      if (int'(count) != ((pushed < N) ? pushed : N)) begin failures++; $display("count %0d", count); end
      replay();
    end
    checks++;
    if (lasts != 7) begin failures++; $display("rd_last seen %0d times", lasts); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
