// seq_sqrt: bit-serial integer square root (digit-by-digit, two radicand bits
// per cycle).  Pulse start with a; done pulses W/2 cycles later with
// root = floor(sqrt(a)).  Helper of this implementation (RMS normalization).
module seq_sqrt #(
  parameter int W = 64
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   a,
  output logic           busy,
  output logic           done,
  output logic [W/2-1:0] root
);
  logic [W-1:0]   x;
  logic [W/2+1:0] rem;
  logic [W/2-1:0] r;
  logic [$clog2(W)-1:0] cnt;
  logic [W/2+1:0] t, cand;

  always_comb begin
    t    = {rem[W/2-1:0], x[W-1:W-2]};
    cand = {r, 2'b01};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; x <= '0; rem <= '0; r <= '0; cnt <= '0; root <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; x <= a; rem <= '0; r <= '0; cnt <= '0;
      end else if (busy) begin
        x <= x << 2;
        if (t >= cand) begin
          rem <= t - cand; r <= {r[W/2-2:0], 1'b1};
        end else begin
          rem <= t;        r <= {r[W/2-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (cnt == ($clog2(W))'(W/2 - 1)) begin
          busy <= 1'b0; done <= 1'b1;
          root <= {r[W/2-2:0], (t >= cand)};
        end
      end
    end
  end
endmodule
