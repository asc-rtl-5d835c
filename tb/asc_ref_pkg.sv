// asc_ref_pkg: reference model of ASC-CBR used by the testbenches.
//
// Written from the formulas of the shifted scales (interpolation points and
// thresholds as fractions of the range R = max - min), evaluated with integer
// division (floor) rather than with the shifts of the RTL, and from the
// bitstream rule "endpoint1 <= endpoint2 means the revised linear scale". A
// value is given index i when (x - min) exceeds threshold i and no higher
// threshold; the scale with the lower total L1 loss wins, ties go to linear.
// In one-endpoint mode min is 0, max is clamped at 0 from below, and
// endpoint1 carries -max (linear) or +max (log-linear).
package asc_ref_pkg;

  localparam int MAXV = 1024;

  // Shifted interpolation point k of a scale (log = 1: log-linear).
  function automatic int ref_point(int r, bit log, int k);
    int num [8], den [8];
    if (!log) begin
      num = '{0, 1, 2, 3, 4, 5, 6, 8};
      den = '{1, 8, 8, 8, 8, 8, 8, 8};
    end else begin
      num = '{0, 1, 1, 3, 1, 1, 1, 1};
      den = '{1, 32, 16, 32, 8, 4, 2, 1};
    end
    return (num[k] * r) / den[k];
  endfunction

  // Shifted threshold t (1..7).
  function automatic int ref_threshold(int r, bit log, int t);
    int num [8], den [8];
    if (!log) begin
      num = '{0, 1, 3, 5, 7, 9, 11, 7};
      den = '{1, 16, 16, 16, 16, 16, 16, 8};
    end else begin
      num = '{0, 1, 3, 5, 7, 3, 3, 3};
      den = '{1, 64, 64, 64, 64, 16, 8, 4};
    end
    return (num[t] * r) / den[t];
  endfunction

  function automatic int ref_index(int xs, int r, bit log);
    int idx = 0;
    for (int t = 1; t <= 7; t++) if (xs > ref_threshold(r, log, t)) idx = t;
    return idx;
  endfunction

  function automatic int iabs(int a);
    return (a < 0) ? -a : a;
  endfunction

  // Encode n values. Returns endpoints, indices and the chosen scale.
  function automatic void ref_encode(input int vals [MAXV], input int n, input bit one_ep,
                                     output int ep1, output int ep2, output int idx [MAXV],
                                     output bit log_sel, output int mx, output int mn);
    int r, lin_loss, log_loss, xs;
    int li [MAXV], gi [MAXV];
    mx = vals[0];
    mn = vals[0];
    for (int i = 1; i < n; i++) begin
      if (vals[i] > mx) mx = vals[i];
      if (vals[i] < mn) mn = vals[i];
    end
    if (one_ep) begin
      mn = 0;
      if (mx < 0) mx = 0;
    end
    r = mx - mn;
    lin_loss = 0;
    log_loss = 0;
    for (int i = 0; i < n; i++) begin
      xs = vals[i] - mn;
      li[i] = ref_index(xs, r, 1'b0);
      gi[i] = ref_index(xs, r, 1'b1);
      lin_loss += iabs(xs - ref_point(r, 1'b0, li[i]));
      log_loss += iabs(xs - ref_point(r, 1'b1, gi[i]));
    end
    log_sel = (log_loss < lin_loss);
    for (int i = 0; i < n; i++) idx[i] = log_sel ? gi[i] : li[i];
    if (one_ep) begin
      ep1 = log_sel ? mx : -mx;
      ep2 = 0;
    end else begin
      ep1 = log_sel ? mx : mn;
      ep2 = log_sel ? mn : mx;
    end
  endfunction

  // Decode one index given the endpoints.
  function automatic int ref_decode(int ep1, int ep2, bit one_ep, int idx);
    int mx, mn;
    bit log;
    if (one_ep) begin
      log = (ep1 > 0);
      mx  = log ? ep1 : -ep1;
      mn  = 0;
    end else begin
      log = (ep1 > ep2);
      mx  = log ? ep1 : ep2;
      mn  = log ? ep2 : ep1;
    end
    return mn + ref_point(mx - mn, log, idx);
  endfunction

endpackage
