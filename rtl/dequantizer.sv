// dequantizer: turns the integer outputs of a quantized linear layer back into
// fixed-point values.
//
// With X ~= s_X*q_X + b_X (per token) and W[:,j] ~= s_W[j]*q_W[:,j] (symmetric,
// per output channel), the layer output is
//   Y[j] = s_X*s_W[j]*Yq[j] + b_X*s_W[j]*col_sum_W[j],   col_sum_W[j] = sum_k q_W[k][j].
// The per-channel weight scales and column sums are held in on-chip buffers
// loaded through the aux port before the layer runs; s_X and b_X come from the
// quantizer (dynamic) or are preloaded (static).  The products are formed at
// full width and rounded once, so small scales do not lose precision.
//
// Interface: aux_we/aux_idx/aux_scale/aux_colsum (one channel per cycle),
// start (pulse: next input beat is channel 0), in_valid/in_yq (LANES results
// of consecutive channels), out_valid/out_y one cycle later.  The formula is
// the standard one for this quantization; buffer organization and rounding
// are choices of this implementation.
module dequantizer
  import flexllm_pkg::*;
#(
  parameter int LANES   = 16,
  parameter int ACC_W   = 32,
  parameter int MAX_OUT = 8192
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        aux_we,
  input  logic [$clog2(MAX_OUT)-1:0]  aux_idx,
  input  fx_t                         aux_scale,
  input  logic signed [31:0]          aux_colsum,
  input  logic                        start,
  input  fx_t                         s_x,
  input  fx_t                         b_x,
  input  logic                        in_valid,
  input  logic [LANES-1:0][ACC_W-1:0] in_yq,
  output logic                        out_valid,
  output fx_t [LANES-1:0]             out_y
);
  localparam int IW = $clog2(MAX_OUT);
  fx_t                sw_buf [MAX_OUT];
  logic signed [31:0] cs_buf [MAX_OUT];
  logic [IW:0]        j;

  always_ff @(posedge clk) begin
    if (aux_we) begin
      sw_buf[aux_idx] <= aux_scale;
      cs_buf[aux_idx] <= aux_colsum;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      j <= '0; out_valid <= 1'b0; out_y <= '0;
    end else begin
      out_valid <= in_valid;
      if (start) j <= '0;
      if (in_valid) begin
        for (int l = 0; l < LANES; l++) begin
          logic [IW-1:0] c;
          logic signed [127:0] t1, t2;
          c  = IW'((start ? 0 : int'(j)) + l);
          t1 = 128'($signed(s_x) * $signed(sw_buf[c])) * 128'($signed(in_yq[l]));
          t2 = 128'($signed(b_x) * $signed(sw_buf[c])) * 128'($signed(cs_buf[c]));
          out_y[l] <= fx_sat(64'((t1 + t2 + (128'sd1 <<< 15)) >>> 16));
        end
        j <= (start ? '0 : j) + (IW+1)'(LANES);
      end
    end
  end
endmodule
