// hmt_segment_processor: builds the two backbone inputs of every segment of a
// long prompt for the HMT plug-in.
//
// The prompt (prompt_len tokens) is cut into segments of SEG_LEN tokens (the
// last one may be shorter).  For segment n the module emits, as a stream of
// token descriptors {stage, source, token index}:
//   stage 1:  [T_n : Seg_n^T : T_n]              -> backbone gives S_n
//   (waits for pn_done: memory attention has produced P_n)
//   stage 2:  [P_n : Seg_{n-1}^P : Seg_n : P_n]   -> backbone gives Mem_n
//   (waits for mem_done: Mem_n has been pushed into the memory queue)
// where Seg_n^T is the first half of segment n, Seg_{n-1}^P the last SHORT_LEN
// tokens of the previous segment (absent for n = 0), T_n the topic token
// embedding and P_n the retrieved prompt embedding.  The embeddings themselves
// stay in memory; a consumer fetches them by descriptor.  The sequence layout
// follows the plug-in's published dataflow; SHORT_LEN and the descriptor
// format are choices of this implementation.
// Interface: start (pulse, prompt_len), d_valid/d_ready/d_stage/d_src/d_idx/
// d_last (last descriptor of a sequence), pn_done, mem_done (pulses), seg
// (current segment), done.
module hmt_segment_processor #(
  parameter int SEG_LEN   = 1024,
  parameter int SHORT_LEN = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [17:0] prompt_len,
  output logic        busy,
  output logic        done,
  output logic        d_valid,
  input  logic        d_ready,
  output logic        d_stage,      // 0: HMT stage 1, 1: HMT stage 2
  output logic [1:0]  d_src,        // 0: prompt token, 1: T_n, 2: P_n
  output logic [17:0] d_idx,        // token index in the prompt
  output logic        d_last,
  input  logic        pn_done,
  input  logic        mem_done,
  output logic [17:0] seg
);
  localparam logic [1:0] SRC_TOK = 2'd0, SRC_T = 2'd1, SRC_P = 2'd2;

  typedef enum logic [3:0] {S_IDLE, S1_T0, S1_SEG, S1_T1, S_WAITP,
                            S2_P0, S2_SHORT, S2_SEG, S2_P1, S_WAITM} state_e;
  state_e state;

  logic [17:0] base, slen, i;

  // length of segment starting at base
  always_comb slen = (prompt_len - base > 18'(SEG_LEN)) ? 18'(SEG_LEN) : prompt_len - base;

  assign busy = (state != S_IDLE);

  always_comb begin
    d_valid = 1'b0; d_stage = 1'b0; d_src = SRC_TOK; d_idx = '0; d_last = 1'b0;
    unique case (state)
      S1_T0:    begin d_valid = 1'b1; d_src = SRC_T; end
      S1_SEG:   begin d_valid = 1'b1; d_idx = base + i; end
      S1_T1:    begin d_valid = 1'b1; d_src = SRC_T; d_last = 1'b1; end
      S2_P0:    begin d_valid = 1'b1; d_stage = 1'b1; d_src = SRC_P; end
      S2_SHORT: begin d_valid = 1'b1; d_stage = 1'b1; d_idx = base - 18'(SHORT_LEN) + i; end
      S2_SEG:   begin d_valid = 1'b1; d_stage = 1'b1; d_idx = base + i; end
      S2_P1:    begin d_valid = 1'b1; d_stage = 1'b1; d_src = SRC_P; d_last = 1'b1; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; base <= '0; i <= '0; seg <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start && prompt_len != '0) begin
          base <= '0; seg <= '0; i <= '0; state <= S1_T0;
        end
        S1_T0: if (d_ready) begin
          i <= '0;
          state <= (slen >= 18'd2) ? S1_SEG : S1_T1;
        end
        S1_SEG: if (d_ready) begin
          if (i == (slen >> 1) - 1'b1) begin i <= '0; state <= S1_T1; end
          else i <= i + 1'b1;
        end
        S1_T1:   if (d_ready) state <= S_WAITP;
        S_WAITP: if (pn_done) state <= S2_P0;
        S2_P0: if (d_ready) begin
          i <= '0;
          state <= (base >= 18'(SHORT_LEN)) ? S2_SHORT : S2_SEG;
        end
        S2_SHORT: if (d_ready) begin
          if (i == 18'(SHORT_LEN - 1)) begin i <= '0; state <= S2_SEG; end
          else i <= i + 1'b1;
        end
        S2_SEG: if (d_ready) begin
          if (i == slen - 1'b1) begin i <= '0; state <= S2_P1; end
          else i <= i + 1'b1;
        end
        S2_P1:   if (d_ready) state <= S_WAITM;
        S_WAITM: if (mem_done) begin
          if (base + slen >= prompt_len) begin
            done <= 1'b1; state <= S_IDLE;
          end else begin
            base <= base + slen; seg <= seg + 1'b1; state <= S1_T0;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
