// decode_linear: integer linear layer for the decode stage.
//
// Decode works on one token at a time, so parallelism is found inside the
// token: the input vector is broadcast to BP sets of one-dimensional systolic
// arrays with WP/BP PEs each, WP PEs in all.  Every PE owns one output channel
// of the current tile of WP channels (output stationary); the input element
// enters PE 0 of each set and moves one PE per cycle, and the weight for PE p
// is delayed by p cycles so both meet.  Set b produces the outputs
// b*WP/BP .. (b+1)*WP/BP-1 of the tile; the BP blocks are merged into one
// output vector by copying the finished tile into an output buffer that is
// drained LANES elements per beat while the next tile is computed.
//
// Sequence: start (pulse, with in_dim, out_dim) -> LOAD the token, LANES
// elements per in beat -> for each of ceil(out_dim/WP) tiles, FEED in_dim
// weight beats of WP weights (bubbles allowed) and DRAIN WP/BP+2 cycles ->
// the tile is copied to the output buffer (waiting if the previous tile is
// still being drained).  done pulses one cycle after the last output beat
// (out_last).
// Cycle count with a weight every cycle: about
// in_dim/LANES + ceil(out_dim/WP)*(in_dim + WP/BP + 3) + WP/LANES,
// i.e. d_in*d_out/WP for large layers.  in_dim and out_dim must be multiples
// of LANES.  The broadcast/merge structure follows the published decode
// module; buffer sizes, skew registers and the double-buffered drain are
// choices of this implementation.
module decode_linear #(
  parameter int BP     = 16,
  parameter int WP     = 1024,
  parameter int AW     = 4,
  parameter int WW     = 4,
  parameter int LANES  = 16,
  parameter int ACC_W  = 32,
  parameter int MAX_IN = 8192
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [15:0]                   in_dim,
  input  logic [17:0]                   out_dim,
  output logic                          busy,
  output logic                          done,
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic [LANES-1:0][AW-1:0]      in_data,
  input  logic                          w_valid,
  output logic                          w_ready,
  input  logic [WP-1:0][WW-1:0]         w_data,
  output logic                          out_valid,
  output logic                          out_last,
  output logic [LANES-1:0][ACC_W-1:0]   out_data
);
  localparam int PB = WP / BP;
  localparam int KW = $clog2(MAX_IN + 1);
  localparam int NBEAT = WP / LANES;

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_FEED, S_DRAIN, S_CAPT, S_FLUSH} state_e;
  state_e state;

  logic [AW-1:0] xbuf [MAX_IN];
  logic [KW-1:0] k;
  logic [15:0]   dcnt;
  logic [17:0]   tile_base;      // first output channel of the tile being computed

  logic          f_v, f_first;
  logic [AW-1:0] f_x;
  logic [WP-1:0][WW-1:0] f_w;

  logic [AW-1:0] sx  [BP][PB];   // x travelling through set b
  logic          sv  [BP][PB];
  logic          sf  [BP][PB];
  logic [ACC_W-1:0] acc [WP];

  // output buffer and drain
  logic [ACC_W-1:0] obuf [WP];
  logic          emitting;
  logic [15:0]   ebeat;
  logic [17:0]   eleft;          // output channels still to emit in total

  assign in_ready = (state == S_LOAD);
  assign w_ready  = (state == S_FEED);
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; k <= '0; dcnt <= '0; tile_base <= '0;
      f_v <= 1'b0; f_first <= 1'b0; f_x <= '0; f_w <= '0;
      out_valid <= 1'b0; out_last <= 1'b0; done <= 1'b0;
      emitting <= 1'b0; ebeat <= '0; eleft <= '0; out_data <= '0;
    end else begin
      f_v <= 1'b0; f_first <= 1'b0;
      out_valid <= 1'b0; out_last <= 1'b0; done <= 1'b0;

      // drain of the output buffer
      if (emitting) begin
        out_valid <= 1'b1;
        for (int l = 0; l < LANES; l++) out_data[l] <= obuf[int'(ebeat) * LANES + l];
        ebeat <= ebeat + 1'b1;
        eleft <= eleft - 18'(LANES);
        if (eleft == 18'(LANES)) begin
          emitting <= 1'b0; out_last <= 1'b1;
        end else if (ebeat == 16'(NBEAT - 1)) emitting <= 1'b0;
      end

      unique case (state)
        S_IDLE: if (start) begin
          k <= '0; tile_base <= '0; eleft <= out_dim;
          state <= S_LOAD;
        end
        S_LOAD: if (in_valid) begin
          for (int l = 0; l < LANES; l++) xbuf[int'(k) + l] <= in_data[l];
          if (k + KW'(LANES) >= KW'(in_dim)) begin
            k <= '0; state <= S_FEED;
          end else k <= k + KW'(LANES);
        end
        S_FEED: if (w_valid) begin
          f_x <= xbuf[k]; f_w <= w_data; f_v <= 1'b1; f_first <= (k == '0);
          if (k == KW'(in_dim - 1)) begin
            k <= '0; dcnt <= '0; state <= S_DRAIN;
          end else k <= k + 1'b1;
        end
        S_DRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (dcnt == 16'(PB + 1)) state <= S_CAPT;
        end
        S_CAPT: if (!emitting) begin
          for (int i = 0; i < WP; i++) obuf[i] <= acc[i];
          emitting <= 1'b1; ebeat <= '0;
          if (tile_base + 18'(WP) >= out_dim) state <= S_FLUSH;
          else begin
            tile_base <= tile_base + 18'(WP); state <= S_FEED;
          end
        end
        S_FLUSH: if (out_last) begin
          done <= 1'b1; state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // BP sets of 1D systolic arrays.  Not reset: stale flags leave the chains
  // within WP/BP cycles, and accumulators are cleared by the 'first' flag.
  // PE p of a set receives its weight through a p-stage skew register so that
  // it meets the input value that has travelled p PEs.
  for (genvar b = 0; b < BP; b++) begin : g_set
    for (genvar p = 0; p < PB; p++) begin : g_pe
      logic [WW-1:0] wi;
      if (p == 0) begin : g_w0
        assign wi = f_w[b*PB];
      end else begin : g_wsk
        logic [WW-1:0] sk [p];
        always_ff @(posedge clk) begin
          sk[0] <= f_w[b*PB + p];
          for (int i = 1; i < p; i++) sk[i] <= sk[i-1];
        end
        assign wi = sk[p-1];
      end
      always_ff @(posedge clk) begin
        logic [AW-1:0] xi;
        logic          vi, fi;
        xi = (p == 0) ? f_x     : sx[b][(p == 0) ? 0 : p-1];
        vi = (p == 0) ? f_v     : sv[b][(p == 0) ? 0 : p-1];
        fi = (p == 0) ? f_first : sf[b][(p == 0) ? 0 : p-1];
        sx[b][p] <= xi;
        sv[b][p] <= vi;
        sf[b][p] <= fi;
        if (vi)
          acc[b*PB + p] <= (fi ? '0 : acc[b*PB + p]) +
                           ACC_W'($signed(xi)) * ACC_W'($signed(wi));
      end
    end
  end
endmodule
