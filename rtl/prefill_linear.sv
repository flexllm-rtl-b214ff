// prefill_linear: integer linear layer for the prefill stage.
//
// A TP x WP two-dimensional systolic array of multiply-accumulate PEs.  TP
// tokens are processed together (token parallelism) and WP output channels
// are computed together (weight parallelism), so one streamed weight is used
// by TP tokens.  Per group of TP tokens the module first buffers the TP input
// vectors (LOAD, one input channel of all TP tokens per beat), then for each
// tile of WP output channels streams in_dim weight beats (FEED), waits for the
// array to drain (DRAIN) and presents the TP x WP tile on out_data for one
// cycle (OUT).  Weights are streamed again for the next token group.
//
// Dataflow inside the array follows the usual drawing of a 2D systolic array:
// input values enter at the left and move one PE to the right per cycle,
// weights enter at the top and move one PE down per cycle; row t and column j
// are skewed by t and j cycles so that x[t][k] and w[k][j] meet in PE(t,j).
// Each PE is output stationary.  The stationarity, the skew registers and the
// tile/drain sequencing are choices of this implementation.
//
// Interface: start (pulse, with in_dim, out_dim, seq_len), in_valid/in_ready/
// in_data, w_valid/w_ready/w_data (bubbles allowed), out_valid/out_data with
// out_tile, done (pulse).  Timing: per tile in_dim + TP + WP + 2 cycles when
// weights arrive every cycle, so a layer takes about
// ceil(seq_len/TP) * (in_dim + ceil(out_dim/WP) * (in_dim + TP + WP + 2))
// cycles, matching l_p*d_in*d_out/(TP*WP) when in_dim dominates.
module prefill_linear #(
  parameter int TP     = 8,
  parameter int WP     = 24,
  parameter int AW     = 4,
  parameter int WW     = 4,
  parameter int ACC_W  = 32,
  parameter int MAX_IN = 8192
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               start,
  input  logic [15:0]                        in_dim,
  input  logic [15:0]                        out_dim,
  input  logic [16:0]                        seq_len,
  output logic                               busy,
  output logic                               done,
  input  logic                               in_valid,
  output logic                               in_ready,
  input  logic [TP-1:0][AW-1:0]              in_data,
  input  logic                               w_valid,
  output logic                               w_ready,
  input  logic [WP-1:0][WW-1:0]              w_data,
  output logic                               out_valid,
  output logic [15:0]                        out_tile,
  output logic [TP-1:0][WP-1:0][ACC_W-1:0]   out_data
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_FEED, S_DRAIN, S_OUT} state_e;
  state_e state;

  localparam int KW = $clog2(MAX_IN + 1);

  logic [TP-1:0][AW-1:0] xbuf [MAX_IN];
  logic [KW-1:0]  k;
  logic [15:0]    tile, ntiles;
  logic [16:0]    group, ngroups;
  logic [15:0]    dcnt;

  // feed registers
  logic [TP-1:0][AW-1:0] f_x;
  logic [WP-1:0][WW-1:0] f_w;
  logic                  f_v, f_first;

  // skew chains
  logic [AW-1:0] xsk [TP][TP];
  logic          vsk [TP][TP];
  logic          fsk [TP][TP];
  logic [WW-1:0] wsk [WP][WP];

  // PE registers
  logic [AW-1:0]    px  [TP][WP];
  logic             pv  [TP][WP];
  logic             pf  [TP][WP];
  logic [WW-1:0]    pw  [TP][WP];
  logic [ACC_W-1:0] acc [TP][WP];

  assign in_ready = (state == S_LOAD);
  assign w_ready  = (state == S_FEED);
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; k <= '0; tile <= '0; ntiles <= '0; group <= '0; ngroups <= '0;
      dcnt <= '0; done <= 1'b0; out_valid <= 1'b0; out_tile <= '0;
      f_v <= 1'b0; f_first <= 1'b0; f_x <= '0; f_w <= '0;
    end else begin
      done      <= 1'b0;
      out_valid <= 1'b0;
      f_v       <= 1'b0;
      f_first   <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          ntiles  <= 16'((32'(out_dim) + WP - 1) / WP);
          ngroups <= 17'((32'(seq_len) + TP - 1) / TP);
          group   <= '0;
          k       <= '0;
          state   <= S_LOAD;
        end
        S_LOAD: if (in_valid) begin
          xbuf[k] <= in_data;
          if (k == KW'(in_dim - 1)) begin
            k <= '0; tile <= '0; state <= S_FEED;
          end else k <= k + 1'b1;
        end
        S_FEED: if (w_valid) begin
          f_x     <= xbuf[k];
          f_w     <= w_data;
          f_v     <= 1'b1;
          f_first <= (k == '0);
          if (k == KW'(in_dim - 1)) begin
            k <= '0; dcnt <= '0; state <= S_DRAIN;
          end else k <= k + 1'b1;
        end
        S_DRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (dcnt == 16'(TP + WP - 1)) state <= S_OUT;
        end
        S_OUT: begin
          out_valid <= 1'b1;
          out_tile  <= tile;
          for (int t = 0; t < TP; t++)
            for (int j = 0; j < WP; j++)
              out_data[t][j] <= acc[t][j];
          if (tile == ntiles - 1) begin
            if (group == ngroups - 1) begin
              done <= 1'b1; state <= S_IDLE;
            end else begin
              group <= group + 1'b1; state <= S_LOAD;
            end
          end else begin
            tile <= tile + 1'b1; state <= S_FEED;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // skew registers and the PE array.  Nothing here is reset: whatever the
  // flags hold at power-up leaves the array within TP+WP cycles, long before
  // the first tile is fed, and each accumulator is cleared by the 'first'
  // flag travelling with input channel 0 of a tile.
  always_ff @(posedge clk) begin
    for (int t = 0; t < TP; t++) begin
      xsk[t][0] <= f_x[t];
      vsk[t][0] <= f_v;
      fsk[t][0] <= f_first;
      for (int i = 1; i < TP; i++) begin
        xsk[t][i] <= xsk[t][i-1];
        vsk[t][i] <= vsk[t][i-1];
        fsk[t][i] <= fsk[t][i-1];
      end
    end
    for (int j = 0; j < WP; j++) begin
      wsk[j][0] <= f_w[j];
      for (int i = 1; i < WP; i++) wsk[j][i] <= wsk[j][i-1];
    end
    for (int t = 0; t < TP; t++) begin
      for (int j = 0; j < WP; j++) begin
        logic [AW-1:0] xi;
        logic [WW-1:0] wi;
        logic          vi, fi;
        xi = (j == 0) ? xsk[t][t] : px[t][j-1];
        vi = (j == 0) ? vsk[t][t] : pv[t][j-1];
        fi = (j == 0) ? fsk[t][t] : pf[t][j-1];
        wi = (t == 0) ? wsk[j][j] : pw[t-1][j];
        px[t][j] <= xi;
        pv[t][j] <= vi;
        pf[t][j] <= fi;
        pw[t][j] <= wi;
        if (vi)
          acc[t][j] <= (fi ? '0 : acc[t][j]) +
                       ACC_W'($signed(xi)) * ACC_W'($signed(wi));
      end
    end
  end

endmodule
