// tb_asc_enc_interp: self-checking testbench of the encoder interpolation.
//
// Random endpoints (including range 0 and the full signed range) and random
// inputs, both inside [min, max] and below min (as happens in one-endpoint
// mode), are applied to a 4-lane instance with W = 8 and a 1-lane instance
// with W = 16. Indices and shifted values of both scales and the shifted
// input are compared with the reference model, which uses the paper's
// threshold and point fractions with integer division. Every index value of
// both scales must be seen at least once.
module tb_asc_enc_interp
  import asc_pkg::*;
  import asc_ref_pkg::*;
;

  localparam int L = 4;

  logic signed [7:0]  mx8, mn8;
  logic signed [7:0]  x8 [L];
  logic [IDX_W-1:0]   li8 [L], gi8 [L];
  logic [8:0]         lv8 [L], gv8 [L];
  logic signed [9:0]  xs8 [L];

  logic signed [15:0] mx16, mn16;
  logic signed [15:0] x16 [1];
  logic [IDX_W-1:0]   li16 [1], gi16 [1];
  logic [16:0]        lv16 [1], gv16 [1];
  logic signed [17:0] xs16 [1];

  asc_enc_interp #(.W(8), .LANES(L)) u8 (.max_i(mx8), .min_i(mn8), .x(x8), .lin_idx(li8),
    .log_idx(gi8), .lin_val(lv8), .log_val(gv8), .x_sh(xs8));
  asc_enc_interp #(.W(16), .LANES(1)) u16 (.max_i(mx16), .min_i(mn16), .x(x16), .lin_idx(li16),
    .log_idx(gi16), .lin_val(lv16), .log_val(gv16), .x_sh(xs16));

  int checks = 0, failures = 0;
  int seen_lin [8], seen_log [8];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic check_lane(int w, int mx, int mn, int x, int li, int gi, int lv, int gv, int xs);
    int r = mx - mn;
    int eli = ref_index(x - mn, r, 1'b0);
    int egi = ref_index(x - mn, r, 1'b1);
    check(li == eli, $sformatf("W%0d lin idx x=%0d [%0d,%0d]: %0d exp %0d", w, x, mn, mx, li, eli));
    check(gi == egi, $sformatf("W%0d log idx x=%0d [%0d,%0d]: %0d exp %0d", w, x, mn, mx, gi, egi));
    check(lv == ref_point(r, 1'b0, eli), "lin value");
    check(gv == ref_point(r, 1'b1, egi), "log value");
    check(xs == x - mn, "shifted input");
    seen_lin[eli]++;
    seen_log[egi]++;
  endtask

  initial begin
    for (int t = 0; t < 20000; t++) begin
      int a, b, mx, mn;
      a = int'($urandom_range(255)) - 128;
      b = int'($urandom_range(255)) - 128;
      if (t % 50 == 0) b = a;
      if (t % 97 == 1) begin a = 127; b = -128; end
      mx = (a > b) ? a : b;
      mn = (a > b) ? b : a;
      mx8 = 8'(mx); mn8 = 8'(mn);
      for (int l = 0; l < L; l++)
        x8[l] = 8'((t % 10 == 0) ? int'($urandom_range(255)) - 128 : mn + int'($urandom_range(mx - mn)));
      a = int'($urandom_range(65535)) - 32768;
      b = int'($urandom_range(65535)) - 32768;
      mx = (a > b) ? a : b;
      mn = (a > b) ? b : a;
      mx16 = 16'(mx); mn16 = 16'(mn);
      x16[0] = 16'(mn + int'($urandom_range(mx - mn)));
      #1;
      for (int l = 0; l < L; l++)
        if (x8[l] >= mn8)
          check_lane(8, mx8, mn8, x8[l], li8[l], gi8[l], lv8[l], gv8[l], xs8[l]);
        else begin
          // Below min (one-endpoint mode with negative inputs): index 0.
          check(li8[l] == 0 && gi8[l] == 0 && lv8[l] == 0 && gv8[l] == 0, "below-min input");
          check(int'(xs8[l]) == int'(x8[l]) - int'(mn8), "shifted negative input");
        end
      check_lane(16, mx16, mn16, x16[0], li16[0], gi16[0], lv16[0], gv16[0], xs16[0]);
      #1;
    end
    for (int k = 0; k < 8; k++) begin
      checks++;
      if (seen_lin[k] == 0 || seen_log[k] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
