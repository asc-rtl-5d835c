// asc_encoder: ASC-CBR encoder (constant-bitrate adaptive scale compression).
//
// A block of 2^cfg_blk_log2 values (the paper's block_size) enters as beats of
// LANES values, one beat per cycle at most. The encoder works in three
// overlapped stages, so that one block can be searched while the previous one
// is interpolated and the one before it is emitted:
//
//   A  endpoint search: the running max/min of the block are found while every
//      beat is also written into the input queue.
//   B  interpolation: once the endpoints are known the block is read back from
//      the input queue; the encoder interpolation gives each value's index and
//      shifted value on both scales, the loss accumulator sums the L1 losses of
//      both scales, and the two indices go into the linear and log-linear
//      index queues.
//   C  output: the scale with the lower loss is chosen (a tie picks the linear
//      scale, this design's choice); its indices are read out of their queue
//      (the other queue is read and dropped) and the endpoints are emitted in
//      an order that tells the decoder the scale.
//
// This is the organisation of the paper's encoder block diagram. The
// per-block bookkeeping between the stages is this design's own: beat
// counters, and small descriptor queues that carry each block's mode, size,
// endpoints and chosen scale from stage to stage. A stage takes the next
// block as soon as it has finished the previous one, so blocks of different
// sizes may follow each other in any order; a large block followed by small
// ones only delays the small ones.
//
// Compressed block format (paper): endpoint1, endpoint2, then one 3-bit index
// per value in input order. Two-endpoint mode: linear scale -> (min, max),
// log-linear scale -> (max, min); so endpoint1 <= endpoint2 means linear. In
// one-endpoint mode min is 0 and only endpoint1 is meaningful; this design
// sends -max for the linear scale and +max for the log-linear one (the paper
// does not say how the scale is signalled with one endpoint).
//
// Interface: in_valid/in_data carry input beats; the encoder counts beats and
// samples cfg_one_ep and cfg_blk_log2 on the first beat of each block. There is
// no back-pressure: the output stream must always be accepted. Each output
// beat carries LANES indices; out_ep1/out_ep2 are valid on every beat of the
// block, out_first/out_last mark its ends. cfg_blk_log2 must lie between
// log2(LANES) and MAX_BLK_LOG2.
//
// Timing: throughput is one beat (LANES values) per cycle. When no earlier
// block is still waiting, the first output beat of a block appears N + 6
// cycles after the block's last input beat (N = beats per block), or N + 8
// cycles with LANES > 1 because of the pipeline registers of the two trees.
// Blocks of equal size sent back to back come out back to back.
//
// Lint notes: the occupancy counts of the queues are left unused (only their
// full/empty flags matter, and the assertions below check those); rst_n also
// disables the assertions, which lint reports as a reset used both
// synchronously and asynchronously, while the logic uses it only
// asynchronously.
module asc_encoder
  import asc_pkg::*;
#(
  parameter int unsigned W            = 8,
  parameter int unsigned LANES        = 1,
  parameter int unsigned MAX_BLK_LOG2 = 5,
  localparam int unsigned CFGW        = $clog2(MAX_BLK_LOG2 + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cfg_one_ep,
  input  logic [CFGW-1:0]     cfg_blk_log2,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_data [LANES],
  output logic                out_valid,
  output logic                out_first,
  output logic                out_last,
  output logic signed [W-1:0] out_ep1,
  output logic signed [W-1:0] out_ep2,
  output logic [IDX_W-1:0]    out_idx [LANES],
  output logic                out_scale_log   // chosen scale, for observation
);

  localparam int unsigned LLOG  = $clog2(LANES);
  localparam int unsigned MAXN  = (1 << MAX_BLK_LOG2) / LANES;  // beats per largest block
  localparam int unsigned NW    = $clog2(MAXN) + 1;             // beat-count width
  // Queue depth: a queue never holds more than MAXN + 4 beats (the largest
  // block plus the few cycles of pipeline between the stages), so two blocks,
  // or 8 beats when blocks are only one or two beats long, suffice.
  localparam int unsigned QD    = (2 * MAXN < 8) ? 8 : 2 * MAXN; // queue depth (entries)
  localparam int unsigned LW    = W + 2 + MAX_BLK_LOG2;         // loss width
  localparam int unsigned DQD   = 4;                            // descriptor queue depth

  // ------------------------------------------------------------------
  // Stage A: beat counting, endpoint search, input queue
  // ------------------------------------------------------------------
  logic [NW-1:0] a_cnt, a_nb, nb_in;
  logic          a_one_ep, a_first, a_last, a_one_ep_eff;

  assign nb_in   = NW'(1) << (cfg_blk_log2 - CFGW'(LLOG));
  assign a_first = (a_cnt == '0);
  assign a_one_ep_eff = a_first ? cfg_one_ep : a_one_ep;
  assign a_last  = a_first ? (nb_in == NW'(1)) : (a_cnt == a_nb - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_cnt    <= '0;
      a_nb     <= NW'(1);
      a_one_ep <= 1'b0;
    end else if (in_valid) begin
      if (a_first) begin
        a_nb     <= nb_in;
        a_one_ep <= cfg_one_ep;
      end
      a_cnt <= a_last ? '0 : a_cnt + 1'b1;
    end
  end

  // Mode and size of a block whose beats have all entered, waiting for its
  // endpoints.
  typedef struct packed {
    logic          one_ep;
    logic [NW-1:0] nb;
  } cfg_t;

  // A block ready for a stage: mode, size and endpoints.
  typedef struct packed {
    logic                one_ep;
    logic [NW-1:0]       nb;
    logic signed [W-1:0] max_v;
    logic signed [W-1:0] min_v;
  } desc_t;

  // A block ready for output: size, chosen scale and ordered endpoints.
  typedef struct packed {
    logic [NW-1:0]       nb;
    scale_e              scale;
    logic signed [W-1:0] ep1;
    logic signed [W-1:0] ep2;
  } desc_c_t;

  cfg_t    cfg_w, cfg_r;
  logic    cfg_empty, cfg_full, es_done;
  logic [$clog2(DQD):0] cfg_cnt;

  assign cfg_w.one_ep = a_one_ep_eff;
  assign cfg_w.nb     = a_first ? nb_in : a_nb;

  asc_queue #(.DW($bits(cfg_t)), .DEPTH(DQD)) u_cfg_q (
    .clk, .rst_n,
    .push (in_valid && a_last),
    .wdata(cfg_w),
    .pop  (es_done),
    .rdata(cfg_r),
    .empty(cfg_empty),
    .full (cfg_full),
    .count(cfg_cnt)
  );

  logic signed [W-1:0] es_max, es_min;

  asc_endpoint_search #(.W(W), .LANES(LANES)) u_es (
    .clk, .rst_n,
    .in_valid(in_valid),
    .in_first(a_first),
    .in_last (a_last),
    .in_data (in_data),
    .one_ep  (cfg_r.one_ep),
    .done    (es_done),
    .max_o   (es_max),
    .min_o   (es_min)
  );

  logic [LANES*W-1:0] iq_wdata, iq_rdata;
  logic               iq_empty, iq_full, b_beat;
  logic [$clog2(QD):0] iq_cnt;

  always_comb begin
    for (int l = 0; l < LANES; l++) iq_wdata[l*W +: W] = in_data[l];
  end

  asc_queue #(.DW(LANES*W), .DEPTH(QD)) u_input_queue (
    .clk, .rst_n,
    .push (in_valid),
    .wdata(iq_wdata),
    .pop  (b_beat),
    .rdata(iq_rdata),
    .empty(iq_empty),
    .full (iq_full),
    .count(iq_cnt)
  );

  // Blocks whose endpoints are known, waiting for stage B.
  desc_t   dab_w, dab_r;
  logic    dab_empty, dab_full, b_start;
  logic [$clog2(QD):0] dab_cnt;

  assign dab_w = '{one_ep: cfg_r.one_ep, nb: cfg_r.nb, max_v: es_max, min_v: es_min};

  asc_queue #(.DW($bits(desc_t)), .DEPTH(QD)) u_desc_ab (
    .clk, .rst_n,
    .push (es_done),
    .wdata(dab_w),
    .pop  (b_start),
    .rdata(dab_r),
    .empty(dab_empty),
    .full (dab_full),
    .count(dab_cnt)
  );

  // ------------------------------------------------------------------
  // Stage B: interpolation, loss accumulation, index queues
  // ------------------------------------------------------------------
  logic                b_active, b_one_ep, b_first, b_last;
  logic [NW-1:0]       b_cnt, b_nb;
  logic signed [W-1:0] b_max, b_min;

  // A new block may start in the cycle after the previous block's last beat.
  assign b_start = !dab_empty && (!b_active || b_last);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_active <= 1'b0;
      b_cnt    <= '0;
      b_nb     <= NW'(1);
      b_one_ep <= 1'b0;
      b_max    <= '0;
      b_min    <= '0;
    end else if (b_start) begin
      b_active <= 1'b1;
      b_cnt    <= '0;
      b_nb     <= dab_r.nb;
      b_one_ep <= dab_r.one_ep;
      b_max    <= dab_r.max_v;
      b_min    <= dab_r.min_v;
    end else if (b_active) begin
      b_cnt <= b_cnt + 1'b1;
      if (b_last) b_active <= 1'b0;
    end
  end

  assign b_beat  = b_active;
  assign b_first = (b_cnt == '0);
  assign b_last  = b_active && (b_cnt == b_nb - 1'b1);

  logic signed [W-1:0] b_x [LANES];
  logic [IDX_W-1:0]    lin_idx [LANES], log_idx [LANES];
  logic [W:0]          lin_val [LANES], log_val [LANES];
  logic signed [W+1:0] x_sh [LANES];

  always_comb begin
    for (int l = 0; l < LANES; l++) b_x[l] = iq_rdata[l*W +: W];
  end

  asc_enc_interp #(.W(W), .LANES(LANES)) u_interp (
    .max_i  (b_max),
    .min_i  (b_min),
    .x      (b_x),
    .lin_idx(lin_idx),
    .log_idx(log_idx),
    .lin_val(lin_val),
    .log_val(log_val),
    .x_sh   (x_sh)
  );

  logic          loss_done;
  logic [LW-1:0] lin_loss, log_loss;

  asc_loss_acc #(.W(W), .LANES(LANES), .LW(LW)) u_loss (
    .clk, .rst_n,
    .in_valid(b_beat),
    .in_first(b_first),
    .in_last (b_last),
    .x_sh    (x_sh),
    .lin_val (lin_val),
    .log_val (log_val),
    .done    (loss_done),
    .lin_loss(lin_loss),
    .log_loss(log_loss)
  );

  logic [LANES*IDX_W-1:0] liq_wdata, giq_wdata, liq_rdata, giq_rdata;
  logic                   liq_empty, liq_full, giq_empty, giq_full, c_beat;
  logic [$clog2(QD):0]    liq_cnt, giq_cnt;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      liq_wdata[l*IDX_W +: IDX_W] = lin_idx[l];
      giq_wdata[l*IDX_W +: IDX_W] = log_idx[l];
    end
  end

  asc_queue #(.DW(LANES*IDX_W), .DEPTH(QD)) u_lin_index_queue (
    .clk, .rst_n,
    .push (b_beat), .wdata(liq_wdata),
    .pop  (c_beat), .rdata(liq_rdata),
    .empty(liq_empty), .full(liq_full), .count(liq_cnt)
  );

  asc_queue #(.DW(LANES*IDX_W), .DEPTH(QD)) u_log_index_queue (
    .clk, .rst_n,
    .push (b_beat), .wdata(giq_wdata),
    .pop  (c_beat), .rdata(giq_rdata),
    .empty(giq_empty), .full(giq_full), .count(giq_cnt)
  );

  // Blocks interpolated, waiting for their losses.
  desc_t   dbl_w, dbl_r;
  logic    dbl_empty, dbl_full;
  logic [$clog2(QD):0] dbl_cnt;

  assign dbl_w = '{one_ep: b_one_ep, nb: b_nb, max_v: b_max, min_v: b_min};

  asc_queue #(.DW($bits(desc_t)), .DEPTH(QD)) u_desc_bl (
    .clk, .rst_n,
    .push (b_beat && b_last),
    .wdata(dbl_w),
    .pop  (loss_done),
    .rdata(dbl_r),
    .empty(dbl_empty),
    .full (dbl_full),
    .count(dbl_cnt)
  );

  // Loss comparator and endpoint order muxes.
  scale_e              sel;
  logic signed [W-1:0] ep1_n, ep2_n;

  always_comb begin
    sel = (log_loss < lin_loss) ? SCALE_LOGLIN : SCALE_LINEAR;
    if (dbl_r.one_ep) begin
      ep1_n = (sel == SCALE_LOGLIN) ? dbl_r.max_v : -dbl_r.max_v;
      ep2_n = '0;
    end else begin
      ep1_n = (sel == SCALE_LOGLIN) ? dbl_r.max_v : dbl_r.min_v;
      ep2_n = (sel == SCALE_LOGLIN) ? dbl_r.min_v : dbl_r.max_v;
    end
  end

  // Blocks whose scale is chosen, waiting for stage C.
  desc_c_t dc_w, dc_r;
  logic    dc_empty, dc_full, c_start;
  logic [$clog2(QD):0] dc_cnt;

  assign dc_w = '{nb: dbl_r.nb, scale: sel, ep1: ep1_n, ep2: ep2_n};

  asc_queue #(.DW($bits(desc_c_t)), .DEPTH(QD)) u_desc_c (
    .clk, .rst_n,
    .push (loss_done),
    .wdata(dc_w),
    .pop  (c_start),
    .rdata(dc_r),
    .empty(dc_empty),
    .full (dc_full),
    .count(dc_cnt)
  );

  // ------------------------------------------------------------------
  // Stage C: output of the chosen indices
  // ------------------------------------------------------------------
  logic                c_active, c_first, c_last;
  scale_e              c_scale;
  logic [NW-1:0]       c_cnt, c_nb;
  logic signed [W-1:0] c_ep1, c_ep2;

  assign c_start = !dc_empty && (!c_active || c_last);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_active <= 1'b0;
      c_cnt    <= '0;
      c_nb     <= NW'(1);
      c_scale  <= SCALE_LINEAR;
      c_ep1    <= '0;
      c_ep2    <= '0;
    end else if (c_start) begin
      c_active <= 1'b1;
      c_cnt    <= '0;
      c_nb     <= dc_r.nb;
      c_scale  <= dc_r.scale;
      c_ep1    <= dc_r.ep1;
      c_ep2    <= dc_r.ep2;
    end else if (c_active) begin
      c_cnt <= c_cnt + 1'b1;
      if (c_last) c_active <= 1'b0;
    end
  end

  assign c_beat  = c_active;
  assign c_first = (c_cnt == '0);
  assign c_last  = c_active && (c_cnt == c_nb - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid     <= 1'b0;
      out_first     <= 1'b0;
      out_last      <= 1'b0;
      out_ep1       <= '0;
      out_ep2       <= '0;
      out_scale_log <= 1'b0;
      for (int l = 0; l < LANES; l++) out_idx[l] <= '0;
    end else begin
      out_valid <= c_beat;
      out_first <= c_beat && c_first;
      out_last  <= c_beat && c_last;
      if (c_beat) begin
        out_ep1       <= c_ep1;
        out_ep2       <= c_ep2;
        out_scale_log <= (c_scale == SCALE_LOGLIN);
        for (int l = 0; l < LANES; l++)
          out_idx[l] <= (c_scale == SCALE_LOGLIN) ? giq_rdata[l*IDX_W +: IDX_W]
                                                  : liq_rdata[l*IDX_W +: IDX_W];
      end
    end
  end

  // Configuration rule and stage hand-off rules.
  a_blk_size: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && a_first |-> (cfg_blk_log2 >= CFGW'(LLOG)) && (cfg_blk_log2 <= CFGW'(MAX_BLK_LOG2)));
  a_cfg_q:    assert property (@(posedge clk) disable iff (!rst_n) es_done |-> !cfg_empty);
  a_desc_bl:  assert property (@(posedge clk) disable iff (!rst_n) loss_done |-> !dbl_empty);
  a_iq_ready: assert property (@(posedge clk) disable iff (!rst_n) b_beat |-> !iq_empty);
  a_ix_ready: assert property (@(posedge clk) disable iff (!rst_n) c_beat |-> !liq_empty && !giq_empty);
  a_no_full:  assert property (@(posedge clk) disable iff (!rst_n)
    !(cfg_full || iq_full || dab_full || liq_full || giq_full || dbl_full || dc_full));

endmodule
