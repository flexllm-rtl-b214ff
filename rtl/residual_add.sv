// residual_add: element-wise residual connection, y = a + b, LANES elements
// per beat, saturated to the fixed-point range.  One register stage:
// out_valid follows in_valid by one cycle.  Saturation is a choice of this
// implementation.
module residual_add
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
      for (int l = 0; l < LANES; l++)
        out_data[l] <= fx_sat(64'(a_data[l]) + 64'(b_data[l]));
    end
  end
endmodule
