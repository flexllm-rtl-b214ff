// seq_div: bit-serial unsigned divider (restoring, one quotient bit per cycle).
//
// Used wherever a block needs a reciprocal once per vector (quantizer scale,
// normalization, softmax sum).  Pulse start with num/den; busy stays high for
// NW cycles and done pulses for one cycle with quot = num / den (truncated).
// A zero divisor returns all ones.  Helper of this implementation.
module seq_div #(
  parameter int NW = 64,
  parameter int DW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] num,
  input  logic [DW-1:0] den,
  output logic          busy,
  output logic          done,
  output logic [NW-1:0] quot
);
  logic [NW-1:0] q;
  logic [DW:0]   rem;
  logic [DW-1:0] d;
  logic [$clog2(NW+1)-1:0] cnt;
  logic [DW:0]   trial;

  always_comb trial = {rem[DW-1:0], q[NW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; q <= '0; rem <= '0; d <= '0; cnt <= '0; quot <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; q <= num; rem <= '0; d <= den; cnt <= '0;
      end else if (busy) begin
        if (trial >= {1'b0, d}) begin
          rem <= trial - {1'b0, d};
          q   <= {q[NW-2:0], 1'b1};
        end else begin
          rem <= trial;
          q   <= {q[NW-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (cnt == ($clog2(NW+1))'(NW - 1)) begin
          busy <= 1'b0; done <= 1'b1;
          quot <= (d == '0) ? '1 : {q[NW-2:0], (trial >= {1'b0, d})};
        end
      end
    end
  end
endmodule
