// rope: rotary position embedding for query and key heads.
//
// Elements arrive LANES per beat in head order; a counter gives each element
// its index inside the head (HEAD_DIM long, heads back to back).  Adjacent
// elements (2i, 2i+1) form a pair that is rotated by the angle
// pos * THETA^(-2i/HEAD_DIM):
//   y[2i]   = x[2i]*cos - x[2i+1]*sin
//   y[2i+1] = x[2i]*sin + x[2i+1]*cos.
// The angle is kept as a 32-bit fraction of a full turn, so the wrap-around is
// free; its top 12 bits address a 1025-entry quarter-wave sine table that is
// computed at elaboration.  The per-pair frequencies are also constants.
// Interface: start (pulse, with pos: the token position; resets the element
// counter; data beats start the cycle after it), in_valid/in_data,
// out_valid/out_data one cycle later.  The pairing
// convention, THETA and the table method are choices of this implementation.
module rope
  import flexllm_pkg::*;
#(
  parameter int LANES    = 16,
  parameter int HEAD_DIM = 64,
  parameter int THETA    = 500000
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [16:0]     pos,
  input  logic            in_valid,
  input  fx_t [LANES-1:0] in_data,
  output logic            out_valid,
  output fx_t [LANES-1:0] out_data
);
  localparam int NPAIR = HEAD_DIM / 2;
  typedef logic [31:0] freq_t [NPAIR];
  typedef logic [16:0] sin_t [1025];

  function automatic freq_t make_freq();
    freq_t f;
    for (int i = 0; i < NPAIR; i++) begin
      real r;
      r = $pow(real'(THETA), -2.0 * i / HEAD_DIM) / (2.0 * 3.14159265358979) * 4294967296.0;
      f[i] = 32'(longint'(r));
    end
    return f;
  endfunction

  function automatic sin_t make_sin();
    sin_t t;
    for (int i = 0; i <= 1024; i++)
      t[i] = 17'(longint'($sin(3.14159265358979 / 2.0 * i / 1024.0) * 65536.0 + 0.5));
    return t;
  endfunction

  localparam freq_t FREQ = make_freq();
  localparam sin_t  SINQ = make_sin();

  logic [16:0] p;
  logic [$clog2(HEAD_DIM)-1:0] idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p <= '0; idx <= '0; out_valid <= 1'b0; out_data <= '0;
    end else begin
      out_valid <= in_valid && !start;
      if (start) begin
        p <= pos; idx <= '0;
      end else if (in_valid) begin
        for (int l = 0; l < LANES; l += 2) begin
          int pi;
          logic [31:0] ph;
          logic [9:0]  a;
          fx_t s, c, s0, s1;
          pi = (int'(idx) + l) / 2;
          ph = 32'(p) * FREQ[pi % NPAIR];
          a  = ph[29:20];
          s0 = fx_t'({15'd0, SINQ[a]});
          s1 = fx_t'({15'd0, SINQ[11'd1024 - 11'(a)]});
          unique case (ph[31:30])
            2'd0: begin s =  s0; c =  s1; end
            2'd1: begin s =  s1; c = -s0; end
            2'd2: begin s = -s0; c = -s1; end
            default: begin s = -s1; c =  s0; end
          endcase
          out_data[l]   <= fx_sat(64'(fx_mul(in_data[l], c)) - 64'(fx_mul(in_data[l+1], s)));
          out_data[l+1] <= fx_sat(64'(fx_mul(in_data[l], s)) + 64'(fx_mul(in_data[l+1], c)));
        end
        idx <= idx + ($clog2(HEAD_DIM))'(LANES);
      end
    end
  end
endmodule
