// hmt_memory_attention: memory-attention stage of the HMT plug-in.
//
// Given the topic summary S_n and the queued memories Mem_i (i = 1..cnt), it
// computes the retrieved prompt embedding
//   P_n = sum_i softmax_i(S_n . Mem_i / sqrt(D)) * Mem_i.
// Steps: load S_n (LANES per beat); ask the memory queue for a replay and form
// one dot product per memory, LANES multiply-accumulates per cycle; pass the
// cnt scores through a softmax instance; ask for a second replay and
// accumulate the probability-weighted memories into a D-element buffer;
// stream P_n out.  With an empty queue P_n is zero.
// The attention has no learned projections here (the plug-in is described
// only as cross-attention between S_n and the memories); that, the two-replay
// schedule and the 1/sqrt(D) scaling are choices of this implementation.
// Interface: start with cnt (from the queue), s_valid/s_ready/s_data,
// mem_req (one-cycle pulse), mem_valid/mem_data/mem_entry_last,
// p_valid/p_last/p_data, done.
module hmt_memory_attention
  import flexllm_pkg::*;
#(
  parameter int N     = 64,
  parameter int D     = 2048,
  parameter int LANES = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [$clog2(N+1)-1:0] cnt,
  output logic                   busy,
  output logic                   done,
  input  logic                   s_valid,
  output logic                   s_ready,
  input  fx_t [LANES-1:0]        s_data,
  output logic                   mem_req,
  input  logic                   mem_valid,
  input  logic                   mem_entry_last,
  input  fx_t [LANES-1:0]        mem_data,
  output logic                   p_valid,
  output logic                   p_last,
  output fx_t [LANES-1:0]        p_data
);
  localparam int NB = D / LANES;
  localparam int BW = $clog2(NB + 1);
  localparam int EW = $clog2(N + 1);
  localparam fx_t RSQRT_D = fx_t'(longint'(65536.0 / $sqrt(real'(D)) + 0.5));

  typedef enum logic [3:0] {S_IDLE, S_LOADS, S_REQ1, S_SCORE, S_SMX_IN, S_SMX_OUT,
                            S_REQ2, S_ACC, S_EMIT} state_e;
  state_e state;

  fx_t [LANES-1:0] sbuf [NB];
  fx_t [LANES-1:0] pacc [NB];
  fx_t             score [N];
  fx_t             prob  [N];
  logic [BW-1:0]   beat;
  logic [EW-1:0]   ent, n;
  logic signed [79:0] dot;

  // softmax over the scores, reused from the non-linear library
  logic            sm_start, sm_in_valid, sm_in_ready, sm_out_valid, sm_out_last, sm_busy, sm_done;
  fx_t [LANES-1:0] sm_in, sm_out;
  softmax #(.LANES(LANES), .MAX_LEN(N)) u_softmax (
    .clk, .rst_n, .start(sm_start), .len(16'(n)), .busy(sm_busy), .done(sm_done),
    .in_valid(sm_in_valid), .in_ready(sm_in_ready), .in_data(sm_in),
    .out_valid(sm_out_valid), .out_last(sm_out_last), .out_data(sm_out));

  assign busy    = (state != S_IDLE);
  assign s_ready = (state == S_LOADS);

  always_comb begin
    sm_in_valid = (state == S_SMX_IN) && sm_in_ready;
    for (int l = 0; l < LANES; l++) begin
      int e;
      e = int'(ent) + l;
      sm_in[l] = (e < N) ? score[e] : '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; beat <= '0; ent <= '0; n <= '0; dot <= '0;
      mem_req <= 1'b0; sm_start <= 1'b0; p_valid <= 1'b0; p_last <= 1'b0; p_data <= '0; done <= 1'b0;
    end else begin
      mem_req <= 1'b0; sm_start <= 1'b0; p_valid <= 1'b0; p_last <= 1'b0; done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          n <= cnt; beat <= '0; state <= S_LOADS;
        end
        S_LOADS: if (s_valid) begin
          sbuf[beat] <= s_data;
          pacc[beat] <= '0;
          if (beat == BW'(NB - 1)) begin
            beat <= '0; ent <= '0; dot <= '0;
            if (n == '0) state <= S_EMIT;
            else begin mem_req <= 1'b1; state <= S_SCORE; end
          end else beat <= beat + 1'b1;
        end
        S_SCORE: if (mem_valid) begin
          logic signed [79:0] d;
          d = dot;
          for (int l = 0; l < LANES; l++)
            d = d + 80'($signed(sbuf[beat][l]) * $signed(mem_data[l]));
          if (mem_entry_last) begin
            score[ent] <= fx_mul(fx_sat(64'(d >>> FX_FRAC)), RSQRT_D);
            dot  <= '0;
            beat <= '0;
            if (ent == n - 1'b1) begin
              ent <= '0; sm_start <= 1'b1; state <= S_SMX_IN;
            end else ent <= ent + 1'b1;
          end else begin
            dot <= d; beat <= beat + 1'b1;
          end
        end
        S_SMX_IN: if (sm_in_valid) begin
          if (32'(ent) + LANES >= 32'(n)) begin
            ent <= '0; state <= S_SMX_OUT;
          end else ent <= ent + EW'(LANES);
        end
        S_SMX_OUT: if (sm_out_valid) begin
          for (int l = 0; l < LANES; l++)
            if (int'(ent) + l < N) prob[int'(ent) + l] <= sm_out[l];
          ent <= ent + EW'(LANES);
          if (sm_out_last) begin
            ent <= '0; beat <= '0; mem_req <= 1'b1; state <= S_ACC;
          end
        end
        S_ACC: if (mem_valid) begin
          for (int l = 0; l < LANES; l++)
            pacc[beat][l] <= fx_sat(64'(pacc[beat][l]) + 64'(fx_mul(prob[ent], mem_data[l])));
          if (mem_entry_last) begin
            beat <= '0;
            if (ent == n - 1'b1) state <= S_EMIT;
            else ent <= ent + 1'b1;
          end else beat <= beat + 1'b1;
        end
        S_EMIT: begin
          p_valid <= 1'b1;
          p_data  <= pacc[beat];
          if (beat == BW'(NB - 1)) begin
            p_last <= 1'b1; done <= 1'b1; beat <= '0; state <= S_IDLE;
          end else beat <= beat + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
