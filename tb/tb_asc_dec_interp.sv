// tb_asc_dec_interp: self-checking testbench of the decoder interpolation.
//
// Random max/min pairs (W = 8 exhaustively over all ordered pairs, W = 16 at
// random) and both scale selections; the eight shifted points are compared
// with the reference model's point fractions (integer division).
module tb_asc_dec_interp
  import asc_pkg::*;
  import asc_ref_pkg::*;
;

  logic signed [7:0]  mx8, mn8;
  logic signed [15:0] mx16, mn16;
  scale_e             sel;
  logic [8:0]         v8 [NPTS];
  logic [16:0]        v16 [NPTS];

  asc_dec_interp #(.W(8))  u8  (.max_i(mx8), .min_i(mn8), .scale_sel(sel), .v(v8));
  asc_dec_interp #(.W(16)) u16 (.max_i(mx16), .min_i(mn16), .scale_sel(sel), .v(v16));

  int checks = 0, failures = 0;

  initial begin
    for (int a = -128; a < 128; a++) begin
      for (int b = -128; b <= a; b++) begin
        for (int s = 0; s < 2; s++) begin
          int a16, b16;
          mx8 = 8'(a); mn8 = 8'(b);
          sel = scale_e'(s);
          a16 = int'($urandom_range(65535)) - 32768;
          b16 = int'($urandom_range(65535)) - 32768;
          mx16 = 16'((a16 > b16) ? a16 : b16);
          mn16 = 16'((a16 > b16) ? b16 : a16);
          #1;
          for (int k = 0; k < NPTS; k++) begin
            checks += 2;
            if (int'(v8[k]) != ref_point(a - b, s[0], k)) begin
              failures++;
              if (failures < 10) $display("FAIL W8 [%0d,%0d] s=%0d v%0d=%0d", b, a, s, k, v8[k]);
            end
            if (int'(v16[k]) != ref_point(int'(mx16) - int'(mn16), s[0], k)) begin
              failures++;
              if (failures < 10) $display("FAIL W16 v%0d", k);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
