// softmax: p[i] = exp(x[i] - max x) / sum_j exp(x[j] - max x) over a vector of
// len scores.
//
// Three passes over an on-chip buffer: LOAD stores the scores and tracks the
// maximum; EXP replaces each score by exp(x - max) and accumulates the sum
// (one beat of LANES elements per cycle); after one bit-serial division for
// 1/sum (about 64 cycles) EMIT multiplies each stored value by it.  Lanes
// beyond len in the last beat are treated as minus infinity and come out 0.
// exp uses a power-of-two decomposition with a second-order polynomial for
// the fraction (flexllm_pkg::fx_exp_neg); that approximation and the pass
// structure are choices of this implementation.
// Timing: ceil(len/LANES) beats per pass, about 3*ceil(len/LANES) + 70 cycles.
module softmax
  import flexllm_pkg::*;
#(
  parameter int LANES   = 16,
  parameter int MAX_LEN = 4096
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [15:0]     len,
  output logic            busy,
  output logic            done,
  input  logic            in_valid,
  output logic            in_ready,
  input  fx_t [LANES-1:0] in_data,
  output logic            out_valid,
  output logic            out_last,
  output fx_t [LANES-1:0] out_data
);
  localparam int NB = (MAX_LEN + LANES - 1) / LANES;
  localparam int BW = $clog2(NB + 1);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_EXP, S_DIV, S_EMIT} state_e;
  state_e state;

  fx_t [LANES-1:0] vb [NB];
  logic [BW-1:0]   beat, nbeat;
  fx_t             vmax;
  logic [47:0]     sum;
  logic [63:0]     inv;

  logic        d_start, d_busy, d_done;
  logic [63:0] d_q;

  seq_div #(.NW(64), .DW(48)) u_div (.clk, .rst_n, .start(d_start), .num(64'd1 << 32),
      .den(sum == '0 ? 48'd1 : sum), .busy(d_busy), .done(d_done), .quot(d_q));

  assign busy     = (state != S_IDLE);
  assign in_ready = (state == S_LOAD);

  function automatic logic lane_ok(input logic [BW-1:0] b, input int l, input logic [15:0] n);
    return (32'(b) * LANES + l) < 32'(n);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; beat <= '0; nbeat <= '0; vmax <= FX_MIN; sum <= '0; inv <= '0;
      d_start <= 1'b0; out_valid <= 1'b0; out_last <= 1'b0; out_data <= '0; done <= 1'b0;
    end else begin
      d_start <= 1'b0; out_valid <= 1'b0; out_last <= 1'b0; done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          beat <= '0; nbeat <= BW'((32'(len) + LANES - 1) / LANES);
          vmax <= FX_MIN; sum <= '0; state <= S_LOAD;
        end
        S_LOAD: if (in_valid) begin
          fx_t m;
          m = vmax;
          vb[beat] <= in_data;
          for (int l = 0; l < LANES; l++)
            if (lane_ok(beat, l, len) && in_data[l] > m) m = in_data[l];
          vmax <= m;
          if (beat == nbeat - 1'b1) begin
            beat <= '0; state <= S_EXP;
          end else beat <= beat + 1'b1;
        end
        S_EXP: begin
          logic [47:0] s;
          s = sum;
          for (int l = 0; l < LANES; l++) begin
            fx_t e;
            e = lane_ok(beat, l, len) ? fx_exp_neg(fx_sat(64'(vb[beat][l]) - 64'(vmax))) : '0;
            vb[beat][l] <= e;
            s = s + 48'(e);
          end
          sum <= s;
          if (beat == nbeat - 1'b1) begin
            beat <= '0; d_start <= 1'b1; state <= S_DIV;
          end else beat <= beat + 1'b1;
        end
        S_DIV: if (d_done) begin
          inv <= d_q; state <= S_EMIT;
        end
        S_EMIT: begin
          out_valid <= 1'b1;
          for (int l = 0; l < LANES; l++)
            out_data[l] <= fx_sat(64'((64'(vb[beat][l]) * inv + 64'd32768) >> 16));
          if (beat == nbeat - 1'b1) begin
            out_last <= 1'b1; done <= 1'b1; state <= S_IDLE;
          end else beat <= beat + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
