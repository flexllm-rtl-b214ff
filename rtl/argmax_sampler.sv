// argmax_sampler: greedy sampling of the next token from the lm_head logits.
//
// Logits arrive LANES per beat in vocabulary order after a start pulse; the
// largest one is tracked (the lowest index wins a tie) and its index is
// presented on tok with tok_valid one cycle after the beat marked in_last.
// Greedy selection is a choice of this implementation; the accelerator's
// sampling policy is not specified beyond its name.
module argmax_sampler
  import flexllm_pkg::*;
#(
  parameter int LANES = 16,
  parameter int VOCAB = 128256
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic                       in_valid,
  input  logic                       in_last,
  input  fx_t [LANES-1:0]            in_data,
  output logic                       tok_valid,
  output logic [$clog2(VOCAB)-1:0]   tok
);
  localparam int TW = $clog2(VOCAB);
  fx_t         best;
  logic [TW-1:0] best_i, base;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best <= FX_MIN; best_i <= '0; base <= '0; tok_valid <= 1'b0; tok <= '0;
    end else begin
      tok_valid <= 1'b0;
      if (start) begin
        best <= FX_MIN; best_i <= '0; base <= '0;
      end else if (in_valid) begin
        fx_t b;
        logic [TW-1:0] bi;
        b = best; bi = best_i;
        for (int l = 0; l < LANES; l++)
          if (in_data[l] > b || (base == '0 && l == 0)) begin
            b = in_data[l]; bi = base + TW'(l);
          end
        best <= b; best_i <= bi;
        base <= base + TW'(LANES);
        if (in_last) begin
          tok_valid <= 1'b1; tok <= bi;
          best <= FX_MIN; best_i <= '0; base <= '0;
        end
      end
    end
  end
endmodule
