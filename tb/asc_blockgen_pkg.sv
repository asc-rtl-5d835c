// asc_blockgen_pkg: stimulus generator for the ASC testbenches.
//
// Produces blocks of signed W-bit values of several kinds, chosen to make
// each mechanism of the codec happen: uniform values and smooth narrow
// blocks (linear scale wins), blocks of small values with a few outliers
// (log-linear scale wins), constant blocks (equal losses, range 0),
// ReLU-like sparse blocks and all-negative blocks (clamping in one-endpoint
// mode).
package asc_blockgen_pkg;

  localparam int MAXV = 1024;

  typedef enum int {
    K_UNIFORM  = 0,
    K_SMOOTH   = 1,
    K_OUTLIER  = 2,
    K_CONST    = 3,
    K_RELU     = 4,
    K_NEGATIVE = 5
  } kind_e;

  localparam int NKINDS = 6;

  function automatic int rnd_range(int lo, int hi);
    return lo + int'($urandom_range(hi - lo));
  endfunction

  function automatic void gen_block(input int kind, input int n, input int w,
                                    output int vals [MAXV]);
    int vmax, vmin, base, spread;
    vmax = (1 << (w - 1)) - 1;
    vmin = -(1 << (w - 1));
    for (int i = 0; i < MAXV; i++) vals[i] = 0;
    case (kind)
      K_UNIFORM: for (int i = 0; i < n; i++) vals[i] = rnd_range(vmin, vmax);
      K_SMOOTH: begin
        spread = 1 + (vmax >> 2);
        base   = rnd_range(vmin, vmax - spread);
        for (int i = 0; i < n; i++) vals[i] = base + rnd_range(0, spread);
      end
      K_OUTLIER: begin
        base = rnd_range(vmin, vmin + (vmax >> 1));
        for (int i = 0; i < n; i++) vals[i] = base + rnd_range(0, 2 + (vmax >> 5));
        vals[rnd_range(0, n - 1)] = vmax - rnd_range(0, vmax >> 3);
      end
      K_CONST: begin
        base = rnd_range(vmin, vmax);
        for (int i = 0; i < n; i++) vals[i] = base;
      end
      K_RELU: for (int i = 0; i < n; i++) vals[i] = ($urandom_range(1) == 0) ? 0 : rnd_range(1, vmax);
      default: for (int i = 0; i < n; i++) vals[i] = rnd_range(vmin, -1);
    endcase
  endfunction

endpackage
