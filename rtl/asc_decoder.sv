// asc_decoder: ASC-CBR decoder.
//
// A compressed block arrives as beats of LANES 3-bit indices; endpoint1 and
// endpoint2 come with the first beat. As in the paper, a comparator on the
// two endpoints recovers the scale (endpoint1 <= endpoint2: revised linear
// scale, else log-linear) and two muxes recover max and min. The decoder
// interpolation then gives the eight shifted points of that scale, min is
// added back to them once per block (eight shared adders, this design's place
// for the un-shifting, which the paper's diagrams leave implicit), and one
// 8:1 mux per lane replaces each index by its value. Only that last mux is
// replicated when the decoder is scaled, as the paper describes.
//
// One-endpoint mode (one_ep = 1): endpoint2 is absent and min is 0. The paper
// does not say how the scale is signalled with a single endpoint; this design
// keeps its rule "linear if endpoint1 <= endpoint2" with an implicit
// endpoint2 of 0, so the encoder sends -max for the linear scale and +max for
// the log-linear one, and the decoder takes max = |endpoint1|.
//
// Timing: fully pipelined, one beat per cycle, no stalls; out_* appear one
// cycle after the matching in_* beat. Endpoints on in_first beats are kept
// for the rest of the block.
module asc_decoder
  import asc_pkg::*;
#(
  parameter int unsigned W     = 8,
  parameter int unsigned LANES = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                one_ep,
  input  logic                in_valid,
  input  logic                in_first,
  input  logic                in_last,
  input  logic signed [W-1:0] in_ep1,
  input  logic signed [W-1:0] in_ep2,
  input  logic [IDX_W-1:0]    in_idx [LANES],
  output logic                out_valid,
  output logic                out_first,
  output logic                out_last,
  output logic signed [W-1:0] out_data [LANES]
);

  logic signed [W-1:0] ep1_q, ep2_q, ep1, ep2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ep1_q <= '0;
      ep2_q <= '0;
    end else if (in_valid && in_first) begin
      ep1_q <= in_ep1;
      ep2_q <= in_ep2;
    end
  end

  assign ep1 = in_first ? in_ep1 : ep1_q;
  assign ep2 = in_first ? in_ep2 : ep2_q;

  // Endpoint comparison and max/min muxes.
  logic signed [W-1:0] ep2_eff, max_v, min_v;
  scale_e              scale;

  always_comb begin
    ep2_eff = one_ep ? '0 : ep2;
    scale   = (ep1 > ep2_eff) ? SCALE_LOGLIN : SCALE_LINEAR;
    if (scale == SCALE_LOGLIN) begin
      max_v = ep1;
      min_v = ep2_eff;
    end else begin
      max_v = one_ep ? -ep1 : ep2;
      min_v = one_ep ? '0 : ep1;
    end
  end

  logic [W:0] vs [NPTS];

  asc_dec_interp #(.W(W)) u_interp (
    .max_i    (max_v),
    .min_i    (min_v),
    .scale_sel(scale),
    .v        (vs)
  );

  // Un-shift the eight points (shared by all lanes).
  logic signed [W-1:0] pts [NPTS];
  always_comb begin
    for (int k = 0; k < NPTS; k++) pts[k] = W'($signed({1'b0, vs[k]}) + (W+1)'(min_v));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_last  <= 1'b0;
      for (int l = 0; l < LANES; l++) out_data[l] <= '0;
    end else begin
      out_valid <= in_valid;
      out_first <= in_valid && in_first;
      out_last  <= in_valid && in_last;
      if (in_valid) begin
        for (int l = 0; l < LANES; l++) out_data[l] <= pts[in_idx[l]];
      end
    end
  end

endmodule
