`timescale 1ns/1ps
// tb_flexllm_pkg: checks the shared fixed-point helpers against real
// arithmetic: fx_mul (rounded product, saturating), fx_sat at both limits and
// fx_exp_neg (exp for x <= 0, within 0.5 % relative or 2^-14 absolute; inputs
// above zero clamp to exp(0) = 1).  No clock is needed; the watchdog is a
// plain delay.
module tb_flexllm_pkg;
  import flexllm_pkg::*;
  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      fx_t a, b, p;
      real e;
      a = fx_t'(int'($urandom_range(8000000)) - 4000000);
      b = fx_t'(int'($urandom_range(8000000)) - 4000000);
      p = fx_mul(a, b);
      e = (real'(a) / 65536.0) * (real'(b) / 65536.0);
      checks++;
      if (e < 32767.0 && e > -32767.0 && (real'(p) / 65536.0 - e > 0.6 / 65536.0 || e - real'(p) / 65536.0 > 0.6 / 65536.0)) begin
        failures++; $display("fx_mul %f", e);
      end
    end
    checks++;
    if (fx_mul(FX_MAX, FX_MAX) != FX_MAX || fx_mul(FX_MAX, FX_MIN) != FX_MIN) begin failures++; $display("fx_mul saturation"); end
    checks++;
    if (fx_sat(64'sd5000000000) != FX_MAX || fx_sat(-64'sd5000000000) != FX_MIN || fx_sat(64'sd123) != 32'sd123) begin
      failures++; $display("fx_sat");
    end
    for (int i = 0; i < 2000; i++) begin
      fx_t x, y;
      real e, g;
      x = -fx_t'($urandom_range(20 * 65536));
      y = fx_exp_neg(x);
      e = $exp(real'(x) / 65536.0);
      g = real'(y) / 65536.0;
      checks++;
      if ((g - e > 0.005 * e && g - e > 1.0 / 16384.0) || (e - g > 0.005 * e && e - g > 1.0 / 16384.0)) begin
        failures++; $display("exp(%f) got %f exp %f", real'(x) / 65536.0, g, e);
      end
    end
    checks++;
    if (fx_exp_neg(fx_t'(32'sd300000)) != FX_ONE || fx_exp_neg(FX_MIN) != 0) begin failures++; $display("exp clamp"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
