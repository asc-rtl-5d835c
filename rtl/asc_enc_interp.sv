// asc_enc_interp: encoder interpolation for both scales (shifted-scale form).
//
// The block's range R = max - min is multiplied by 3, 5, 7, 9 and 11 (shift-add
// constants). Every threshold and interpolation point of both scales is one of
// these six values shifted right, as printed in the paper's encoder
// interpolation diagram:
//
//   threshold  th1    th2     th3     th4     th5     th6      th7
//   linear     R>>4   3R>>4   5R>>4   7R>>4   9R>>4   11R>>4   7R>>3
//   log-lin    R>>6   3R>>6   5R>>6   7R>>6   3R>>4   3R>>3    3R>>2
//
//   point      v0  v1    v2    v3     v4    v5     v6     v7
//   linear     0   R>>3  R>>2  3R>>3  R>>1  5R>>3  3R>>2  R
//   log-lin    0   R>>5  R>>4  3R>>5  R>>3  R>>2   R>>1   R
//
// Each lane subtracts min from its input (scale shifting), compares the result
// with the seven thresholds of each scale and a priority encoder returns the
// highest i whose threshold the input exceeds (0 if none). A mux then outputs
// the shifted interpolation point v_i. Thresholds and points are shared by all
// lanes; only the subtractor, comparators, priority encoders and muxes are
// replicated LANES times, as in the paper's scaling scheme.
//
// All shifts truncate (floor), which is this design's choice: the paper gives
// the shift amounts but not the rounding. The block is combinational.
// Interface: x_sh is the shifted input (x - min), which the loss accumulator
// compares against the shifted interpolated values.
module asc_enc_interp
  import asc_pkg::*;
#(
  parameter int unsigned W     = 8,
  parameter int unsigned LANES = 1
) (
  input  logic signed [W-1:0] max_i,
  input  logic signed [W-1:0] min_i,
  input  logic signed [W-1:0] x     [LANES],
  output logic [IDX_W-1:0]    lin_idx [LANES],
  output logic [IDX_W-1:0]    log_idx [LANES],
  output logic [W:0]          lin_val [LANES],  // shifted value, 0..R
  output logic [W:0]          log_val [LANES],
  output logic signed [W+1:0] x_sh    [LANES]
);

  localparam int unsigned RW = W + 1;   // range width (max - min of W-bit signed)
  localparam int unsigned MW = RW + 4;  // width of range * 11

  logic [RW-1:0] range_r;
  logic [MW-1:0] r1, r3, r5, r7, r9, r11;

  // Range and its five multiples.
  always_comb begin
    range_r = RW'(max_i - min_i);
    r1  = MW'(range_r);
    r3  = (r1 << 1) + r1;
    r5  = (r1 << 2) + r1;
    r7  = (r1 << 3) - r1;
    r9  = (r1 << 3) + r1;
    r11 = (r1 << 3) + (r1 << 1) + r1;
  end

  logic [RW-1:0] th_lin [1:7];
  logic [RW-1:0] th_log [1:7];
  logic [RW-1:0] pt_lin [NPTS];
  logic [RW-1:0] pt_log [NPTS];

  always_comb begin
    th_lin[1] = RW'(r1  >> 4);
    th_lin[2] = RW'(r3  >> 4);
    th_lin[3] = RW'(r5  >> 4);
    th_lin[4] = RW'(r7  >> 4);
    th_lin[5] = RW'(r9  >> 4);
    th_lin[6] = RW'(r11 >> 4);
    th_lin[7] = RW'(r7  >> 3);

    th_log[1] = RW'(r1 >> 6);
    th_log[2] = RW'(r3 >> 6);
    th_log[3] = RW'(r5 >> 6);
    th_log[4] = RW'(r7 >> 6);
    th_log[5] = RW'(r3 >> 4);
    th_log[6] = RW'(r3 >> 3);
    th_log[7] = RW'(r3 >> 2);

    pt_lin[0] = '0;
    pt_lin[1] = RW'(r1 >> 3);
    pt_lin[2] = RW'(r1 >> 2);
    pt_lin[3] = RW'(r3 >> 3);
    pt_lin[4] = RW'(r1 >> 1);
    pt_lin[5] = RW'(r5 >> 3);
    pt_lin[6] = RW'(r3 >> 2);
    pt_lin[7] = range_r;

    pt_log[0] = '0;
    pt_log[1] = RW'(r1 >> 5);
    pt_log[2] = RW'(r1 >> 4);
    pt_log[3] = RW'(r3 >> 5);
    pt_log[4] = RW'(r1 >> 3);
    pt_log[5] = RW'(r1 >> 2);
    pt_log[6] = RW'(r1 >> 1);
    pt_log[7] = range_r;
  end

  // Per-lane comparators, priority encoders and muxes.
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic signed [W+1:0] xs;
    logic [7:1]          gt_lin, gt_log;

    always_comb begin
      xs = (W+2)'(x[l]) - (W+2)'(min_i);
      for (int i = 1; i <= 7; i++) begin
        gt_lin[i] = xs > $signed({1'b0, th_lin[i]});
        gt_log[i] = xs > $signed({1'b0, th_log[i]});
      end
    end

    asc_prio_enc u_pe_lin (.req(gt_lin), .idx(lin_idx[l]));
    asc_prio_enc u_pe_log (.req(gt_log), .idx(log_idx[l]));

    assign lin_val[l] = pt_lin[lin_idx[l]];
    assign log_val[l] = pt_log[log_idx[l]];
    assign x_sh[l]    = xs;
  end

endmodule
