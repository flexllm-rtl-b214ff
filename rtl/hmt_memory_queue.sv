// hmt_memory_queue: the memory queue of the Hierarchical Memory Transformer
// plug-in.
//
// Holds the N most recent memory embeddings Mem_n (D elements each) in a
// circular on-chip buffer.  A push writes one embedding, LANES elements per
// beat; after its last beat the entry becomes visible and, once the queue is
// full, replaces the oldest entry.  rd_start replays all stored entries,
// oldest first, LANES elements per cycle (rd_valid), marking the last beat of
// each entry (rd_entry_last) and of the replay (rd_last); count tells how many
// entries there are.  Pushing during a replay is not supported.  Keeping the
// queue on chip and the replay order are choices of this implementation.
module hmt_memory_queue
  import flexllm_pkg::*;
#(
  parameter int N     = 64,
  parameter int D     = 2048,
  parameter int LANES = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   push_valid,
  input  fx_t [LANES-1:0]        push_data,
  input  logic                   rd_start,
  output logic                   rd_busy,
  output logic                   rd_valid,
  output logic                   rd_entry_last,
  output logic                   rd_last,
  output fx_t [LANES-1:0]        rd_data,
  output logic [$clog2(N+1)-1:0] count
);
  localparam int NB = D / LANES;
  localparam int EW = $clog2(N);
  localparam int BW = $clog2(NB);

  fx_t [LANES-1:0] mem [N * NB];
  logic [EW-1:0] wr_ptr, rd_ent;
  logic [BW-1:0] wr_beat, rd_beat;
  logic [$clog2(N+1)-1:0] rd_left;

  always_ff @(posedge clk) begin
    if (push_valid) mem[int'(wr_ptr) * NB + int'(wr_beat)] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0; wr_beat <= '0; count <= '0;
      rd_busy <= 1'b0; rd_ent <= '0; rd_beat <= '0; rd_left <= '0;
      rd_valid <= 1'b0; rd_entry_last <= 1'b0; rd_last <= 1'b0; rd_data <= '0;
    end else begin
      rd_valid <= 1'b0; rd_entry_last <= 1'b0; rd_last <= 1'b0;
      if (push_valid) begin
        if (wr_beat == BW'(NB - 1)) begin
          wr_beat <= '0;
          wr_ptr  <= (int'(wr_ptr) == N - 1) ? '0 : wr_ptr + 1'b1;
          if (int'(count) < N) count <= count + 1'b1;
        end else wr_beat <= wr_beat + 1'b1;
      end
      if (rd_start && !rd_busy && count != '0) begin
        rd_busy <= 1'b1;
        rd_ent  <= EW'((int'(wr_ptr) + N - int'(count)) % N);
        rd_beat <= '0;
        rd_left <= count;
      end else if (rd_busy) begin
        rd_valid <= 1'b1;
        rd_data  <= mem[int'(rd_ent) * NB + int'(rd_beat)];
        if (rd_beat == BW'(NB - 1)) begin
          rd_beat <= '0;
          rd_entry_last <= 1'b1;
          rd_ent  <= (int'(rd_ent) == N - 1) ? '0 : rd_ent + 1'b1;
          rd_left <= rd_left - 1'b1;
          if (rd_left == 1) begin
            rd_last <= 1'b1; rd_busy <= 1'b0;
          end
        end else rd_beat <= rd_beat + 1'b1;
      end
    end
  end
endmodule
