// rmsnorm: normalization of a hidden vector by its root mean square,
//   y[i] = x[i] / sqrt(mean(x^2) + eps) * g[i].
//
// The vector is buffered while the sum of squares is accumulated (LOAD), the
// mean is formed by a bit-serial divider, its square root by a bit-serial
// square root and the reciprocal by a second division (CALC, about 200 cycles
// per vector), then every element is multiplied by the reciprocal and by the
// per-channel weight g, which must be supplied on g_data in step with the
// output beats (EMIT: g_ready high, one output beat per g_valid beat).
// The layers are labelled LN/LayerNorm in the accelerator description; this
// block implements the RMS form that Llama models use.  eps = 2^-16.
// dim must be a multiple of LANES.
module rmsnorm
  import flexllm_pkg::*;
#(
  parameter int LANES   = 16,
  parameter int MAX_DIM = 2048
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [15:0]     dim,
  output logic            busy,
  output logic            done,
  input  logic            in_valid,
  output logic            in_ready,
  input  fx_t [LANES-1:0] in_data,
  input  logic            g_valid,
  output logic            g_ready,
  input  fx_t [LANES-1:0] g_data,
  output logic            out_valid,
  output fx_t [LANES-1:0] out_data
);
  localparam int NB = MAX_DIM / LANES;
  localparam int BW = $clog2(NB + 1);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_MEAN, S_SQRT, S_RECIP, S_EMIT} state_e;
  state_e state;

  fx_t [LANES-1:0] xb [NB];
  logic [BW-1:0]   beat, nbeat;
  logic [79:0]     sumsq;          // 32 fraction bits
  logic [63:0]     inv;            // 16 fraction bits

  logic        d_start, d_busy, d_done;
  logic [79:0] d_num, d_q;
  logic [31:0] d_den;
  logic        r_start, r_busy, r_done;
  logic [63:0] r_a;
  logic [31:0] r_root;

  seq_div  #(.NW(80), .DW(32)) u_div  (.clk, .rst_n, .start(d_start), .num(d_num), .den(d_den),
                                       .busy(d_busy), .done(d_done), .quot(d_q));
  seq_sqrt #(.W(64))           u_sqrt (.clk, .rst_n, .start(r_start), .a(r_a),
                                       .busy(r_busy), .done(r_done), .root(r_root));

  assign busy     = (state != S_IDLE);
  assign in_ready = (state == S_LOAD);
  assign g_ready  = (state == S_EMIT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; beat <= '0; nbeat <= '0; sumsq <= '0; inv <= '0;
      d_start <= 1'b0; d_num <= '0; d_den <= '0; r_start <= 1'b0; r_a <= '0;
      out_valid <= 1'b0; out_data <= '0; done <= 1'b0;
    end else begin
      d_start <= 1'b0; r_start <= 1'b0; out_valid <= 1'b0; done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          beat <= '0; nbeat <= BW'(dim / 16'(LANES)); sumsq <= '0; state <= S_LOAD;
        end
        S_LOAD: if (in_valid) begin
          logic [79:0] s;
          s = sumsq;
          xb[beat] <= in_data;
          for (int l = 0; l < LANES; l++)
            s = s + 80'(64'($signed(in_data[l]) * $signed(in_data[l])));
          sumsq <= s;
          if (beat == nbeat - 1'b1) begin
            beat <= '0; state <= S_MEAN;
            d_start <= 1'b1; d_num <= s; d_den <= 32'(dim);
          end else beat <= beat + 1'b1;
        end
        S_MEAN: if (d_done) begin
          // mean + eps, 32 fraction bits, saturated to 64 bits
          r_a     <= (d_q[79:64] != '0) ? '1 : d_q[63:0] + 64'd65536;
          r_start <= 1'b1;
          state   <= S_SQRT;
        end
        S_SQRT: if (r_done) begin
          d_num   <= 80'd1 << 32;
          d_den   <= (r_root == '0) ? 32'd1 : r_root;
          d_start <= 1'b1;
          state   <= S_RECIP;
        end
        S_RECIP: if (d_done) begin
          inv   <= (d_q[79:63] != '0) ? 64'h7fff_ffff_ffff_ffff : d_q[63:0];
          state <= S_EMIT;
        end
        S_EMIT: if (g_valid) begin
          out_valid <= 1'b1;
          for (int l = 0; l < LANES; l++) begin
            logic signed [127:0] v;
            v = 128'($signed(xb[beat][l])) * $signed({1'b0, inv});
            out_data[l] <= fx_mul(fx_sat(64'((v + (128'sd1 <<< 15)) >>> 16)), g_data[l]);
          end
          if (beat == nbeat - 1'b1) begin
            done <= 1'b1; state <= S_IDLE;
          end else beat <= beat + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
