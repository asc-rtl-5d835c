// asc_prio_enc: 7-input priority encoder of the encoder interpolation.
//
// req[i] is the result of "shifted input > threshold i". The output is the
// highest i with req[i] set, or 0 when none is set, which is the paper's rule
// for picking the interpolation point from the threshold comparisons.
// Combinational.
module asc_prio_enc
  import asc_pkg::*;
(
  input  logic [7:1]       req,
  output logic [IDX_W-1:0] idx
);

  always_comb begin
    idx = '0;
    for (int i = 1; i <= 7; i++) begin
      if (req[i]) idx = IDX_W'(i);
    end
  end

endmodule
