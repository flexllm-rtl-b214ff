// flexllm_top: stage-customized LLM accelerator core (decode engine, prefill
// linear array and HMT plug-in).
//
// Decode engine.  Decode has no parallelism across tokens, so one instance of
// each module is reused over time for every layer: a host-side scheduler
// issues one operation per command (cmd_op, see flexllm_pkg::op_e) and the
// engine routes the operand streams to that unit and its result back to
// y_data.  The INT4 path is the quantization chain of every projection, FFN
// and lm_head layer: dynamic asymmetric per-token quantizer -> decode linear
// array (BP sets, WP_INT4 PEs) -> dequantizer, streaming from one to the next.
// A second chain with a static symmetric INT8 quantizer and a WP_MHA-wide
// linear array serves the attention products QK^T and AV, whose "weights" are
// the key/value cache rows streamed from off-chip memory (w8 port).  The
// non-linear units (RMS norm, RoPE, softmax, Swish, gate product, residual
// add, Hadamard transform, sampling) each process BP elements per beat.
// Weights and the KV cache live in off-chip HBM, which is outside this core:
// their read streams are ports.
//
// Prefill linear array.  The prefill stage runs as a separate configuration of
// the device; its TP x WP systolic linear module is instantiated here with
// its own ports.
//
// HMT plug-in.  The segment processor emits token descriptors for the two
// backbone passes of each segment; the memory attention reads the memory
// queue (replayed twice) to turn the summary S_n into P_n; Mem_n produced by
// the backbone is pushed into the queue.  pn_done and mem_done of the segment
// processor are driven by the attention's done and the last beat of a push.
//
// Command timing: cmd_ready is high when idle; a command is accepted on
// cmd_valid & cmd_ready; op_done pulses once the last result beat has been
// sent.  x/aux use valid/ready, y is valid-only.  in_dim must be a multiple
// of BP.  OP_SAMPLE takes the vocabulary size from cmd_out_dim (it does not
// fit the 16-bit in_dim).  The command interface and routing are this implementation's way of
// expressing the temporal reuse of the published decode architecture.
module flexllm_top
  import flexllm_pkg::*;
#(
  parameter int BP         = 16,
  parameter int WP_INT4    = 1024,
  parameter int WP_MHA     = 256,
  parameter int TP         = 8,
  parameter int WP_PREFILL = 24,
  parameter int MAX_DIM    = 8192,
  parameter int MAX_SEQ    = 4096,
  parameter int NORM_DIM   = 2048,
  parameter int VOCAB_N    = 128256,
  parameter int HMT_N      = 64,
  parameter int HMT_D      = 2048,
  parameter int HMT_LANES  = 4,
  parameter int SEG_LEN    = 1024
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // ---- decode engine commands
  input  logic                              cmd_valid,
  output logic                              cmd_ready,
  input  op_e                               cmd_op,
  input  logic [15:0]                       cmd_in_dim,
  input  logic [17:0]                       cmd_out_dim,
  input  logic [16:0]                       cmd_pos,
  input  logic [3:0]                        cmd_log2n,
  input  fx_t                               cmd_static_scale,
  output logic                              op_done,
  // ---- operand and result streams
  input  logic                              x_valid,
  output logic                              x_ready,
  input  fx_t [BP-1:0]                      x_data,
  input  logic                              aux_valid,
  output logic                              aux_ready,
  input  fx_t [BP-1:0]                      aux_data,
  output logic                              y_valid,
  output fx_t [BP-1:0]                      y_data,
  output logic                              tok_valid,
  output logic [$clog2(VOCAB_N)-1:0]        tok,
  // ---- off-chip reads: INT4 weights and INT8 KV cache rows
  input  logic                              w4_valid,
  output logic                              w4_ready,
  input  logic [WP_INT4-1:0][3:0]           w4_data,
  input  logic                              w8_valid,
  output logic                              w8_ready,
  input  logic [WP_MHA-1:0][7:0]            w8_data,
  // ---- dequantizer per-channel buffers (sel 0: INT4 path, 1: INT8 path)
  input  logic                              dq_we,
  input  logic                              dq_sel,
  input  logic [$clog2(MAX_DIM)-1:0]        dq_idx,
  input  fx_t                               dq_scale,
  input  logic signed [31:0]                dq_colsum,
  // ---- prefill linear array
  input  logic                              pf_start,
  input  logic [15:0]                       pf_in_dim,
  input  logic [15:0]                       pf_out_dim,
  input  logic [16:0]                       pf_seq_len,
  output logic                              pf_busy,
  output logic                              pf_done,
  input  logic                              pf_in_valid,
  output logic                              pf_in_ready,
  input  logic [TP-1:0][3:0]                pf_in_data,
  input  logic                              pf_w_valid,
  output logic                              pf_w_ready,
  input  logic [WP_PREFILL-1:0][3:0]        pf_w_data,
  output logic                              pf_out_valid,
  output logic [15:0]                       pf_out_tile,
  output logic [TP-1:0][WP_PREFILL-1:0][31:0] pf_out_data,
  // ---- HMT plug-in
  input  logic                              hmt_start,
  input  logic [17:0]                       hmt_prompt_len,
  output logic                              hmt_busy,
  output logic                              hmt_done,
  output logic                              hmt_d_valid,
  input  logic                              hmt_d_ready,
  output logic                              hmt_d_stage,
  output logic [1:0]                        hmt_d_src,
  output logic [17:0]                       hmt_d_idx,
  output logic                              hmt_d_last,
  output logic [17:0]                       hmt_seg,
  input  logic                              hmt_s_valid,
  output logic                              hmt_s_ready,
  input  fx_t [HMT_LANES-1:0]               hmt_s_data,
  output logic                              hmt_p_valid,
  output logic                              hmt_p_last,
  output fx_t [HMT_LANES-1:0]               hmt_p_data,
  input  logic                              hmt_mem_valid,
  input  logic                              hmt_mem_last,
  input  fx_t [HMT_LANES-1:0]               hmt_mem_data,
  output logic [$clog2(HMT_N+1)-1:0]        hmt_mem_count
);
  localparam int NBW = 16;

  typedef enum logic [1:0] {E_IDLE, E_RUN, E_FINISH} estate_e;
  estate_e est;
  op_e     op;
  logic [15:0]    in_dim;
  logic [NBW-1:0] in_beats, out_beats, nbeats;
  logic           go;          // one-cycle start pulse for the selected unit

  assign cmd_ready = (est == E_IDLE);

  // operands latched with the command
  logic [17:0] cmd_out_dim_q;
  logic [16:0] pos_q;
  logic [3:0]  log2n_q;
  fx_t         static_scale_q;

  // ------------------------------------------------------------------ units
  // RMS norm
  logic rn_busy, rn_done, rn_in_ready, rn_g_ready, rn_out_valid;
  fx_t [BP-1:0] rn_out;
  rmsnorm #(.LANES(BP), .MAX_DIM(NORM_DIM)) u_norm (
    .clk, .rst_n, .start(go && op == OP_NORM), .dim(in_dim), .busy(rn_busy), .done(rn_done),
    .in_valid(x_valid && op == OP_NORM), .in_ready(rn_in_ready), .in_data(x_data),
    .g_valid(aux_valid && op == OP_NORM), .g_ready(rn_g_ready), .g_data(aux_data),
    .out_valid(rn_out_valid), .out_data(rn_out));

  // INT4 chain: quantizer -> decode linear -> dequantizer
  logic q4_busy, q4_done, q4_in_ready, q4_sb_valid, q4_out_valid, q4_out_last;
  fx_t  q4_s, q4_b;
  logic [BP-1:0][3:0] q4_q;
  quantizer #(.LANES(BP), .BITS(4), .MAX_DIM(MAX_DIM)) u_quant4 (
    .clk, .rst_n, .start(go && op == OP_QLINEAR4), .io_dim(in_dim), .asym_dyn(1'b1),
    .static_scale('0), .busy(q4_busy), .done(q4_done),
    .in_valid(x_valid && op == OP_QLINEAR4), .in_ready(q4_in_ready), .in_data(x_data),
    .sb_valid(q4_sb_valid), .s_x(q4_s), .b_x(q4_b),
    .out_valid(q4_out_valid), .out_last(q4_out_last), .out_q(q4_q));

  logic l4_busy, l4_done, l4_in_ready, l4_out_valid, l4_out_last;
  logic [BP-1:0][31:0] l4_out;
  decode_linear #(.BP(BP), .WP(WP_INT4), .AW(4), .WW(4), .LANES(BP), .ACC_W(32), .MAX_IN(MAX_DIM)) u_lin4 (
    .clk, .rst_n, .start(go && op == OP_QLINEAR4), .in_dim(in_dim), .out_dim(cmd_out_dim_q),
    .busy(l4_busy), .done(l4_done), .in_valid(q4_out_valid), .in_ready(l4_in_ready), .in_data(q4_q),
    .w_valid(w4_valid), .w_ready(w4_ready), .w_data(w4_data),
    .out_valid(l4_out_valid), .out_last(l4_out_last), .out_data(l4_out));

  logic dq4_valid;
  fx_t [BP-1:0] dq4_out;
  dequantizer #(.LANES(BP), .ACC_W(32), .MAX_OUT(MAX_DIM)) u_dequant4 (
    .clk, .rst_n, .aux_we(dq_we && !dq_sel), .aux_idx(dq_idx), .aux_scale(dq_scale),
    .aux_colsum(dq_colsum), .start(go && op == OP_QLINEAR4), .s_x(q4_s), .b_x(q4_b),
    .in_valid(l4_out_valid), .in_yq(l4_out), .out_valid(dq4_valid), .out_y(dq4_out));

  // INT8 attention chain: static symmetric quantizer -> linear over KV rows -> dequantizer
  logic q8_busy, q8_done, q8_in_ready, q8_sb_valid, q8_out_valid, q8_out_last;
  fx_t  q8_s, q8_b;
  logic [BP-1:0][7:0] q8_q;
  quantizer #(.LANES(BP), .BITS(8), .MAX_DIM(MAX_DIM)) u_quant8 (
    .clk, .rst_n, .start(go && op == OP_QLINEAR8), .io_dim(in_dim), .asym_dyn(1'b0),
    .static_scale(static_scale_q), .busy(q8_busy), .done(q8_done),
    .in_valid(x_valid && op == OP_QLINEAR8), .in_ready(q8_in_ready), .in_data(x_data),
    .sb_valid(q8_sb_valid), .s_x(q8_s), .b_x(q8_b),
    .out_valid(q8_out_valid), .out_last(q8_out_last), .out_q(q8_q));

  logic l8_busy, l8_done, l8_in_ready, l8_out_valid, l8_out_last;
  logic [BP-1:0][31:0] l8_out;
  decode_linear #(.BP(BP), .WP(WP_MHA), .AW(8), .WW(8), .LANES(BP), .ACC_W(32), .MAX_IN(MAX_DIM)) u_lin8 (
    .clk, .rst_n, .start(go && op == OP_QLINEAR8), .in_dim(in_dim), .out_dim(cmd_out_dim_q),
    .busy(l8_busy), .done(l8_done), .in_valid(q8_out_valid), .in_ready(l8_in_ready), .in_data(q8_q),
    .w_valid(w8_valid), .w_ready(w8_ready), .w_data(w8_data),
    .out_valid(l8_out_valid), .out_last(l8_out_last), .out_data(l8_out));

  logic dq8_valid;
  fx_t [BP-1:0] dq8_out;
  dequantizer #(.LANES(BP), .ACC_W(32), .MAX_OUT(MAX_DIM)) u_dequant8 (
    .clk, .rst_n, .aux_we(dq_we && dq_sel), .aux_idx(dq_idx), .aux_scale(dq_scale),
    .aux_colsum(dq_colsum), .start(go && op == OP_QLINEAR8), .s_x(q8_s), .b_x(q8_b),
    .in_valid(l8_out_valid), .in_yq(l8_out), .out_valid(dq8_valid), .out_y(dq8_out));

  // RoPE
  logic rp_valid;
  fx_t [BP-1:0] rp_out;
  rope #(.LANES(BP), .HEAD_DIM(HEAD_DIM), .THETA(ROPE_THETA)) u_rope (
    .clk, .rst_n, .start(go && op == OP_ROPE), .pos(pos_q),
    .in_valid(x_valid && x_ready && op == OP_ROPE), .in_data(x_data),
    .out_valid(rp_valid), .out_data(rp_out));

  // softmax
  logic sm_busy, sm_done, sm_in_ready, sm_valid, sm_last;
  fx_t [BP-1:0] sm_out;
  softmax #(.LANES(BP), .MAX_LEN(MAX_SEQ)) u_softmax (
    .clk, .rst_n, .start(go && op == OP_SOFTMAX), .len(in_dim), .busy(sm_busy), .done(sm_done),
    .in_valid(x_valid && op == OP_SOFTMAX), .in_ready(sm_in_ready), .in_data(x_data),
    .out_valid(sm_valid), .out_last(sm_last), .out_data(sm_out));

  // Swish, gate, residual
  logic sw_valid, gt_valid, rs_valid;
  fx_t [BP-1:0] sw_out, gt_out, rs_out;
  swish #(.LANES(BP)) u_swish (.clk, .rst_n, .in_valid(x_valid && x_ready && op == OP_SWISH),
    .in_data(x_data), .out_valid(sw_valid), .out_data(sw_out));
  gate_mul #(.LANES(BP)) u_gate (.clk, .rst_n, .in_valid(x_valid && x_ready && op == OP_GATE),
    .a_data(x_data), .b_data(aux_data), .out_valid(gt_valid), .out_data(gt_out));
  residual_add #(.LANES(BP)) u_res (.clk, .rst_n, .in_valid(x_valid && x_ready && op == OP_RESIDUAL),
    .a_data(x_data), .b_data(aux_data), .out_valid(rs_valid), .out_data(rs_out));

  // Hadamard transform
  logic fh_busy, fh_done, fh_in_ready, fh_valid, fh_last;
  fx_t [BP-1:0] fh_out;
  fht #(.LANES(BP), .MAX_N(MAX_DIM)) u_fht (
    .clk, .rst_n, .start(go && op == OP_FHT), .log2n(log2n_q), .busy(fh_busy), .done(fh_done),
    .in_valid(x_valid && op == OP_FHT), .in_ready(fh_in_ready), .in_data(x_data),
    .out_valid(fh_valid), .out_last(fh_last), .out_data(fh_out));

  // sampling
  argmax_sampler #(.LANES(BP), .VOCAB(VOCAB_N)) u_sample (
    .clk, .rst_n, .start(go && op == OP_SAMPLE), .in_valid(x_valid && x_ready && op == OP_SAMPLE),
    .in_last(in_beats == nbeats - 1'b1), .in_data(x_data), .tok_valid(tok_valid), .tok(tok));

  // ------------------------------------------------------- command sequencer

  // operand acceptance per operation
  always_comb begin
    x_ready   = 1'b0;
    aux_ready = 1'b0;
    if (est == E_RUN && !go) begin
      unique case (op)
        OP_NORM:     begin x_ready = rn_in_ready; aux_ready = rn_g_ready; end
        OP_QLINEAR4: x_ready = q4_in_ready;
        OP_QLINEAR8: x_ready = q8_in_ready;
        OP_SOFTMAX:  x_ready = sm_in_ready;
        OP_FHT:      x_ready = fh_in_ready;
        OP_ROPE, OP_SWISH, OP_SAMPLE: x_ready = (in_beats != nbeats);
        OP_GATE, OP_RESIDUAL: begin
          x_ready   = (in_beats != nbeats) && aux_valid;
          aux_ready = (in_beats != nbeats) && x_valid;
        end
        default: ;
      endcase
    end
  end

  // result multiplexer
  always_comb begin
    y_valid = 1'b0;
    y_data  = '0;
    unique case (op)
      OP_NORM:     begin y_valid = rn_out_valid; y_data = rn_out;  end
      OP_QLINEAR4: begin y_valid = dq4_valid;    y_data = dq4_out; end
      OP_QLINEAR8: begin y_valid = dq8_valid;    y_data = dq8_out; end
      OP_ROPE:     begin y_valid = rp_valid;     y_data = rp_out;  end
      OP_SOFTMAX:  begin y_valid = sm_valid;     y_data = sm_out;  end
      OP_SWISH:    begin y_valid = sw_valid;     y_data = sw_out;  end
      OP_GATE:     begin y_valid = gt_valid;     y_data = gt_out;  end
      OP_RESIDUAL: begin y_valid = rs_valid;     y_data = rs_out;  end
      OP_FHT:      begin y_valid = fh_valid;     y_data = fh_out;  end
      default: ;
    endcase
    if (est != E_RUN && est != E_FINISH) y_valid = 1'b0;
  end

  // expected number of result beats of the current operation
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      est <= E_IDLE; op <= OP_NORM; in_dim <= '0; in_beats <= '0; out_beats <= '0; nbeats <= '0;
      go <= 1'b0; op_done <= 1'b0; cmd_out_dim_q <= '0; pos_q <= '0; log2n_q <= '0; static_scale_q <= '0;
    end else begin
      go      <= 1'b0;
      op_done <= 1'b0;
      unique case (est)
        E_IDLE: if (cmd_valid) begin
          op             <= cmd_op;
          in_dim         <= cmd_in_dim;
          cmd_out_dim_q  <= cmd_out_dim;
          pos_q          <= cmd_pos;
          log2n_q        <= cmd_log2n;
          static_scale_q <= cmd_static_scale;
          nbeats         <= (cmd_op == OP_SAMPLE) ? NBW'(cmd_out_dim / 18'(BP))
                                                 : NBW'(cmd_in_dim / 16'(BP));
          in_beats       <= '0;
          out_beats      <= '0;
          go             <= 1'b1;
          est            <= E_RUN;
        end
        E_RUN: begin
          if (x_valid && x_ready) in_beats <= in_beats + 1'b1;
          if (y_valid) out_beats <= out_beats + 1'b1;
          unique case (op)
            OP_QLINEAR4, OP_QLINEAR8:
              if (y_valid && 32'(out_beats) + 1 == (32'(cmd_out_dim_q) + BP - 1) / BP) est <= E_FINISH;
            OP_SAMPLE:
              if (tok_valid) est <= E_FINISH;
            default:
              if (y_valid && out_beats + 1'b1 ==
                  ((op == OP_FHT) ? NBW'((1 << log2n_q) / BP)
                                  : (op == OP_SOFTMAX) ? NBW'((32'(in_dim) + BP - 1) / BP) : nbeats))
                est <= E_FINISH;
          endcase
        end
        E_FINISH: begin
          op_done <= 1'b1;
          est     <= E_IDLE;
        end
        default: est <= E_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ prefill array
  prefill_linear #(.TP(TP), .WP(WP_PREFILL), .AW(4), .WW(4), .ACC_W(32), .MAX_IN(MAX_DIM)) u_prefill (
    .clk, .rst_n, .start(pf_start), .in_dim(pf_in_dim), .out_dim(pf_out_dim), .seq_len(pf_seq_len),
    .busy(pf_busy), .done(pf_done), .in_valid(pf_in_valid), .in_ready(pf_in_ready), .in_data(pf_in_data),
    .w_valid(pf_w_valid), .w_ready(pf_w_ready), .w_data(pf_w_data),
    .out_valid(pf_out_valid), .out_tile(pf_out_tile), .out_data(pf_out_data));

  // ------------------------------------------------------------- HMT plug-in
  logic ma_busy, ma_done, ma_req, mq_busy, mq_valid, mq_entry_last, mq_last;
  fx_t [HMT_LANES-1:0] mq_data;
  logic mem_done_q;

  hmt_segment_processor #(.SEG_LEN(SEG_LEN), .SHORT_LEN(32)) u_segproc (
    .clk, .rst_n, .start(hmt_start), .prompt_len(hmt_prompt_len), .busy(hmt_busy), .done(hmt_done),
    .d_valid(hmt_d_valid), .d_ready(hmt_d_ready), .d_stage(hmt_d_stage), .d_src(hmt_d_src),
    .d_idx(hmt_d_idx), .d_last(hmt_d_last), .pn_done(ma_done), .mem_done(mem_done_q), .seg(hmt_seg));

  hmt_memory_queue #(.N(HMT_N), .D(HMT_D), .LANES(HMT_LANES)) u_memq (
    .clk, .rst_n, .push_valid(hmt_mem_valid), .push_data(hmt_mem_data),
    .rd_start(ma_req), .rd_busy(mq_busy), .rd_valid(mq_valid), .rd_entry_last(mq_entry_last),
    .rd_last(mq_last), .rd_data(mq_data), .count(hmt_mem_count));

  hmt_memory_attention #(.N(HMT_N), .D(HMT_D), .LANES(HMT_LANES)) u_memattn (
    .clk, .rst_n, .start(hmt_s_valid && !ma_busy), .cnt(hmt_mem_count), .busy(ma_busy), .done(ma_done),
    .s_valid(hmt_s_valid && ma_busy), .s_ready(hmt_s_ready), .s_data(hmt_s_data),
    .mem_req(ma_req), .mem_valid(mq_valid), .mem_entry_last(mq_entry_last), .mem_data(mq_data),
    .p_valid(hmt_p_valid), .p_last(hmt_p_last), .p_data(hmt_p_data));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mem_done_q <= 1'b0;
    else        mem_done_q <= hmt_mem_valid && hmt_mem_last;
  end

endmodule
