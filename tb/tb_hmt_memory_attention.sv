`timescale 1ns/1ps
// tb_hmt_memory_attention: the testbench plays the memory queue: on every
// mem_req it replays cnt stored memories (with random bubbles).  P_n is
// compared with sum_i softmax_i(S.Mem_i/sqrt(D)) * Mem_i computed in real
// numbers (tolerance 2 % of the largest memory element + 2^-10).  Runs with
// cnt = 0 (P must be all zero, the empty-queue bypass), 1, 3 and N.
module tb_hmt_memory_attention;
  import flexllm_pkg::*;
  localparam int N = 4, D = 8, LANES = 2, BEATS = D / LANES;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, busy, done, s_valid, s_ready, mem_req, mem_valid, mem_entry_last, p_valid, p_last;
  logic [2:0] cnt;
  fx_t [LANES-1:0] s_data, mem_data, p_data;
  hmt_memory_attention #(.N(N), .D(D), .LANES(LANES)) dut (.*);

  real sr [D], mr [N][D], pexp [D];
  int  ncur, pi, reqs;
  real mpeak;

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // memory-queue model
  initial begin
    mem_valid = 0; mem_entry_last = 0; mem_data = '0;
    forever begin
      @(posedge clk); #1;
      if (mem_req) begin
        reqs++;
        for (int b = 0; b < ncur * BEATS; b++) begin
          @(negedge clk);
          while ($urandom_range(3) == 0) begin mem_valid = 0; @(negedge clk); end
          mem_valid = 1; mem_entry_last = ((b % BEATS) == BEATS - 1);
          for (int l = 0; l < LANES; l++)
            mem_data[l] = fx_t'(int'(mr[b / BEATS][(b % BEATS) * LANES + l] * 65536.0));
        end
        @(negedge clk); mem_valid = 0; mem_entry_last = 0;
      end
    end
  end

  always @(posedge clk) begin
    #1;
    if (p_valid) begin
      for (int l = 0; l < LANES; l++) begin
        real g, tol;
        g = real'(p_data[l]) / 65536.0;
        tol = 0.02 * mpeak + 1.0 / 1024.0;
        checks++;
        if (g - pexp[pi + l] > tol || pexp[pi + l] - g > tol) begin
          failures++; $display("cnt %0d P[%0d] got %f exp %f", ncur, pi + l, g, pexp[pi + l]);
        end
      end
      pi += LANES;
      checks++;
      if (p_last != (pi == D)) begin failures++; $display("p_last wrong"); end
    end
  end

  task automatic run(input int n);
    real sc [N], mx, sum;
    ncur = n; pi = 0; mpeak = 0.0;
    for (int d = 0; d < D; d++) sr[d] = real'(int'($urandom_range(200000)) - 100000) / 65536.0;
    for (int i = 0; i < N; i++)
      for (int d = 0; d < D; d++) begin
        mr[i][d] = real'(int'($urandom_range(200000)) - 100000) / 65536.0;
        if ((mr[i][d] < 0 ? -mr[i][d] : mr[i][d]) > mpeak) mpeak = (mr[i][d] < 0 ? -mr[i][d] : mr[i][d]);
      end
    mx = -1e9; sum = 0.0;
    for (int i = 0; i < n; i++) begin
      sc[i] = 0.0;
      for (int d = 0; d < D; d++) sc[i] += sr[d] * mr[i][d];
      sc[i] = sc[i] / $sqrt(real'(D));
      if (sc[i] > mx) mx = sc[i];
    end
    for (int i = 0; i < n; i++) sum += $exp(sc[i] - mx);
    for (int d = 0; d < D; d++) begin
      pexp[d] = 0.0;
      for (int i = 0; i < n; i++) pexp[d] += $exp(sc[i] - mx) / sum * mr[i][d];
    end
    @(negedge clk); cnt = 3'(n); start = 1;
    @(negedge clk); start = 0;
    for (int b = 0; b < BEATS; b++) begin
      s_valid = 1;
      for (int l = 0; l < LANES; l++) s_data[l] = fx_t'(int'(sr[b*LANES + l] * 65536.0));
      while (!s_ready) @(negedge clk);
      @(negedge clk);
    end
    s_valid = 0;
    while (!done) @(posedge clk);
    repeat (3) @(posedge clk);
    checks++;
    if (pi != D) begin failures++; $display("P beats %0d", pi / LANES); end
  endtask

  initial begin
    start = 0; s_valid = 0; s_data = '0; cnt = '0; reqs = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(0);
    checks++;
    if (reqs != 0) begin failures++; $display("empty queue still asked for a replay"); end
    run(1);
    run(3);
    run(N);
    run(2);
    checks++;
    if (reqs != 8) begin failures++; $display("replay requests %0d", reqs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
