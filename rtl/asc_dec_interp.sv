// asc_dec_interp: decoder interpolation (shifted scale).
//
// From max and min it forms the range R = max - min and its multiples 3R and
// 5R, and outputs the eight shifted interpolation points of the scale chosen
// by scale_sel, exactly as in the paper's decoder interpolation diagram: v0 is
// 0, v7 is R and v1..v6 each come from a 2:1 mux between the two scales:
//
//   point      v1     v2     v3      v4     v5      v6
//   linear     R>>3   R>>2   3R>>3   R>>1   5R>>3   3R>>2
//   log-lin    R>>5   R>>4   3R>>5   R>>3   R>>2    R>>1
//
// Because the points are constant for a block, this block is not replicated
// when the decoder is scaled to several lanes. Shifts truncate, matching the
// encoder. Combinational. v[0] is the constant 0 (the bottom point of both
// scales); it stays a port so that v[index] can be selected directly.
module asc_dec_interp
  import asc_pkg::*;
#(
  parameter int unsigned W = 8
) (
  input  logic signed [W-1:0] max_i,
  input  logic signed [W-1:0] min_i,
  input  scale_e              scale_sel,
  output logic [W:0]          v [NPTS]
);

  localparam int unsigned RW = W + 1;
  localparam int unsigned MW = RW + 3;  // width of range * 5

  logic [RW-1:0] range_r;
  logic [MW-1:0] r1, r3, r5;
  logic          lg;

  always_comb begin
    range_r = RW'(max_i - min_i);
    r1 = MW'(range_r);
    r3 = (r1 << 1) + r1;
    r5 = (r1 << 2) + r1;
    lg = (scale_sel == SCALE_LOGLIN);

    v[0] = '0;
    v[1] = lg ? RW'(r1 >> 5) : RW'(r1 >> 3);
    v[2] = lg ? RW'(r1 >> 4) : RW'(r1 >> 2);
    v[3] = lg ? RW'(r3 >> 5) : RW'(r3 >> 3);
    v[4] = lg ? RW'(r1 >> 3) : RW'(r1 >> 1);
    v[5] = lg ? RW'(r1 >> 2) : RW'(r5 >> 3);
    v[6] = lg ? RW'(r1 >> 1) : RW'(r3 >> 2);
    v[7] = range_r;
  end

endmodule
