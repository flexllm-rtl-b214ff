// quantizer: converts one token of fixed-point activations to low-bit integers.
//
// Two modes, picked per token by asym_dyn:
//   dynamic asymmetric per-token (asym_dyn=1):  s = (max-min)/(2^BITS-1),
//     b = min, measured on the token itself;
//   static symmetric per-tensor (asym_dyn=0):    s = static_scale (preloaded),
//     b = 0.
// The code is q = round((x-b)/s), clamped to the code range.  The token is
// buffered while min/max are tracked (LOAD), 1/s is computed once by a
// bit-serial divider (CALC, about 65 cycles), then the codes are emitted
// LANES per beat (EMIT), each as x*(1/s) so no per-element division is
// needed.  Asymmetric codes 0..2^BITS-1 are sent shifted down by 2^(BITS-1)
// so that every PE multiplies signed numbers; the zero offset is raised by
// 2^(BITS-1)*s to match, so X ~= s*q + b holds for the emitted q and b.  This
// shift is a choice of this implementation.
//
// Interface: start (pulse with io_dim, asym_dyn, static_scale), in_valid/
// in_ready/in_data (LANES fx_t per beat), sb_valid pulses with s_x and b_x
// (held until the next token), out_valid/out_q/out_last, done.  io_dim must
// be a multiple of LANES.
module quantizer
  import flexllm_pkg::*;
#(
  parameter int LANES   = 16,
  parameter int BITS    = 4,
  parameter int MAX_DIM = 8192
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [15:0]                 io_dim,
  input  logic                        asym_dyn,
  input  fx_t                         static_scale,
  output logic                        busy,
  output logic                        done,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  fx_t [LANES-1:0]             in_data,
  output logic                        sb_valid,
  output fx_t                         s_x,
  output fx_t                         b_x,
  output logic                        out_valid,
  output logic                        out_last,
  output logic [LANES-1:0][BITS-1:0]  out_q
);
  localparam int NB  = MAX_DIM / LANES;
  localparam int BW  = $clog2(NB + 1);
  localparam longint QMAX_U = (64'd1 << BITS) - 1;          // asym top code
  localparam longint QMAX_S = (64'd1 << (BITS - 1)) - 1;    // sym top code
  localparam longint HALF   = 64'd1 << (BITS - 1);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_CALC, S_EMIT} state_e;
  state_e state;

  fx_t [LANES-1:0] buf_q [NB];
  logic [BW-1:0]   beat, nbeat;
  fx_t             vmin, vmax;
  logic            mode;
  fx_t             b_raw;
  logic [63:0]     inv_s;

  logic        div_start, div_busy, div_done;
  logic [63:0] div_num, div_q;
  logic [31:0] div_den;

  seq_div #(.NW(64), .DW(32)) u_div (
    .clk, .rst_n, .start(div_start), .num(div_num), .den(div_den),
    .busy(div_busy), .done(div_done), .quot(div_q));

  // range of the token, at least one LSB
  logic [32:0] range;
  always_comb begin
    range = 33'($signed({vmax[31], vmax}) - $signed({vmin[31], vmin}));
    if (range == '0) range = 33'd1;
  end

  assign in_ready = (state == S_LOAD);
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; beat <= '0; nbeat <= '0; vmin <= '0; vmax <= '0; mode <= 1'b0;
      b_raw <= '0; inv_s <= '0; s_x <= '0; b_x <= '0; sb_valid <= 1'b0;
      out_valid <= 1'b0; out_last <= 1'b0; out_q <= '0; done <= 1'b0;
      div_start <= 1'b0; div_num <= '0; div_den <= '0;
    end else begin
      sb_valid <= 1'b0; out_valid <= 1'b0; out_last <= 1'b0; done <= 1'b0;
      div_start <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          beat  <= '0;
          nbeat <= BW'(io_dim / 16'(LANES));
          mode  <= asym_dyn;
          vmin  <= FX_MAX; vmax <= FX_MIN;
          if (!asym_dyn) s_x <= static_scale;
          state <= S_LOAD;
        end
        S_LOAD: if (in_valid) begin
          fx_t mn, mx;
          mn = vmin; mx = vmax;
          buf_q[beat] <= in_data;
          for (int l = 0; l < LANES; l++) begin
            fx_t a;
            a = in_data[l];
            if (!mode) a = (a < 0) ? -a : a;   // symmetric: track |x| only
            if (a < mn) mn = a;
            if (a > mx) mx = a;
          end
          vmin <= mn; vmax <= mx;
          if (beat == nbeat - 1'b1) begin
            beat  <= '0;
            state <= S_CALC;
            div_start <= 1'b1;
            if (mode) begin
              // 1/s = (2^BITS-1) / range, with 16 fraction bits
              div_num <= QMAX_U << 32;
              div_den <= 32'(33'($signed({mx[31], mx}) - $signed({mn[31], mn})) == 0 ? 33'd1
                         : 33'($signed({mx[31], mx}) - $signed({mn[31], mn})));
            end else begin
              div_num <= 64'd1 << 32;
              div_den <= (s_x == 0) ? 32'd1 : 32'(s_x);
            end
          end else beat <= beat + 1'b1;
        end
        S_CALC: if (div_done) begin
          inv_s <= (div_q > 64'h0000_0fff_ffff_ffff) ? 64'h0000_0fff_ffff_ffff : div_q;
          if (mode) begin
            s_x   <= fx_t'(64'(range) / QMAX_U);
            b_raw <= vmin;
            b_x   <= fx_sat(64'(vmin) + 64'((64'(range) * HALF) / QMAX_U));
          end else begin
            b_raw <= '0;
            b_x   <= '0;
          end
          sb_valid <= 1'b1;
          state    <= S_EMIT;
        end
        S_EMIT: begin
          out_valid <= 1'b1;
          for (int l = 0; l < LANES; l++) begin
            logic signed [95:0] v;
            logic signed [63:0] q;
            v = 96'($signed({buf_q[beat][l][31], buf_q[beat][l]}) - $signed({b_raw[31], b_raw}))
                * $signed({1'b0, inv_s});
            q = 64'((v + (96'sd1 <<< 31)) >>> 32);
            if (mode) begin
              if (q < 0) q = 0;
              if (q > QMAX_U) q = QMAX_U;
              q = q - HALF;
            end else begin
              if (q > QMAX_S) q = QMAX_S;
              if (q < -QMAX_S) q = -QMAX_S;
            end
            out_q[l] <= BITS'(q);
          end
          if (beat == nbeat - 1'b1) begin
            out_last <= 1'b1; done <= 1'b1; state <= S_IDLE;
          end else beat <= beat + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
