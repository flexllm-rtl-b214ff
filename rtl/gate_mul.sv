// gate_mul: the gating product of the gated FFN, y = a * b element-wise
// (a = Swish(FFN_gate x), b = FFN_up x), LANES elements per beat, rounded and
// saturated fixed-point product.  One register stage: out_valid follows
// in_valid by one cycle.
module gate_mul
  import flexllm_pkg::*;
#(
  parameter int LANES = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  fx_t [LANES-1:0] a_data,
  input  fx_t [LANES-1:0] b_data,
  output logic            out_valid,
  output fx_t [LANES-1:0] out_data
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      out_valid <= in_valid;
      for (int l = 0; l < LANES; l++) out_data[l] <= fx_mul(a_data[l], b_data[l]);
    end
  end
endmodule
