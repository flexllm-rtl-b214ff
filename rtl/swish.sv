// swish: SiLU activation y = x * sigmoid(x), LANES elements per beat.
//
// sigmoid is approximated piecewise linearly (the PLAN approximation, which
// needs only shifts and adds):
//   |x| >= 5          : 1
//   2.375 <= |x| < 5  : |x|/32 + 0.84375
//   1 <= |x| < 2.375  : |x|/8  + 0.625
//   |x| < 1           : |x|/4  + 0.5
// and sigmoid(-x) = 1 - sigmoid(x).  Maximum error of sigmoid about 0.019.
// The approximation is a choice of this implementation.  One register stage.
module swish
  import flexllm_pkg::*;
#(
  parameter int LANES = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  fx_t [LANES-1:0] in_data,
  output logic            out_valid,
  output fx_t [LANES-1:0] out_data
);
  function automatic fx_t plan_sigmoid(input fx_t x);
    fx_t a, s;
    a = (x == FX_MIN) ? FX_MAX : (x < 0) ? -x : x;   // -FX_MIN does not fit
    if (a >= 32'sd327680)      s = FX_ONE;                          // 5
    else if (a >= 32'sd155648) s = (a >>> 5) + 32'sd55296;          // 2.375, 0.84375
    else if (a >= 32'sd65536)  s = (a >>> 3) + 32'sd40960;          // 1, 0.625
    else                       s = (a >>> 2) + 32'sd32768;          // 0.5
    return (x < 0) ? FX_ONE - s : s;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      out_valid <= in_valid;
      for (int l = 0; l < LANES; l++) out_data[l] <= fx_mul(in_data[l], plan_sigmoid(in_data[l]));
    end
  end
endmodule
