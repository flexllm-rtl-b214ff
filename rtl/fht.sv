// fht: fast Walsh-Hadamard transform used for the online rotation in front of
// the FFN down projection.
//
// y = H_n x / sqrt(n) for n = 2^log2n (up to MAX_N).  The vector is loaded
// into a register buffer (LOAD, LANES per beat), transformed in place by
// log2n radix-2 stages of n/2 butterflies (a, b) -> (a+b, a-b), LANES/2
// butterflies per cycle (XFORM), and streamed out (EMIT).  To keep values in
// range the butterfly outputs are halved after every second stage; with
// floor(log2n/2) halvings the remaining factor 1/sqrt(2) for odd log2n is
// applied on output, so the total scale is exactly 1/sqrt(n).
// Timing: n/LANES + log2n*n/LANES + n/LANES cycles plus a few.
// The butterfly schedule, scaling and buffering are choices of this
// implementation.
module fht
  import flexllm_pkg::*;
#(
  parameter int LANES = 16,
  parameter int MAX_N = 8192
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [3:0]      log2n,
  output logic            busy,
  output logic            done,
  input  logic            in_valid,
  output logic            in_ready,
  input  fx_t [LANES-1:0] in_data,
  output logic            out_valid,
  output logic            out_last,
  output fx_t [LANES-1:0] out_data
);
  localparam int AW = $clog2(MAX_N);
  localparam int HB = LANES / 2;
  localparam fx_t RSQRT2 = 32'sd46341;

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_XFORM, S_EMIT} state_e;
  state_e state;

  fx_t         v [MAX_N];
  logic [AW:0] cnt;          // beat or butterfly-group counter
  logic [3:0]  stage, ln;

  assign busy     = (state != S_IDLE);
  assign in_ready = (state == S_LOAD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cnt <= '0; stage <= '0; ln <= '0;
      out_valid <= 1'b0; out_last <= 1'b0; out_data <= '0; done <= 1'b0;
    end else begin
      out_valid <= 1'b0; out_last <= 1'b0; done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          cnt <= '0; stage <= '0; ln <= log2n; state <= S_LOAD;
        end
        S_LOAD: if (in_valid) begin
          for (int l = 0; l < LANES; l++) v[int'(cnt) * LANES + l] <= in_data[l];
          if (int'(cnt) == ((1 << ln) / LANES) - 1) begin
            cnt <= '0; state <= S_XFORM;
          end else cnt <= cnt + 1'b1;
        end
        S_XFORM: begin
          for (int u = 0; u < HB; u++) begin
            int m, i, j;
            fx_t a, b, s, d;
            m = int'(cnt) * HB + u;
            i = ((m >> stage) << (stage + 1)) | (m & ((1 << stage) - 1));
            j = i + (1 << stage);
            a = v[i]; b = v[j];
            s = fx_sat(64'(a) + 64'(b));
            d = fx_sat(64'(a) - 64'(b));
            if (stage[0]) begin
              s = fx_t'((64'(a) + 64'(b)) >>> 1);
              d = fx_t'((64'(a) - 64'(b)) >>> 1);
            end
            v[i] <= s; v[j] <= d;
          end
          if (int'(cnt) == ((1 << ln) / LANES) - 1) begin
            cnt <= '0;
            if (stage == ln - 1'b1) state <= S_EMIT;
            else stage <= stage + 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        S_EMIT: begin
          out_valid <= 1'b1;
          for (int l = 0; l < LANES; l++)
            out_data[l] <= ln[0] ? fx_mul(v[int'(cnt) * LANES + l], RSQRT2)
                                 : v[int'(cnt) * LANES + l];
          if (int'(cnt) == ((1 << ln) / LANES) - 1) begin
            out_last <= 1'b1; done <= 1'b1; state <= S_IDLE;
          end else cnt <= cnt + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
