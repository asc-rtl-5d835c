// asc_endpoint_search: finds the maximum and minimum endpoints of one block.
//
// Each beat carries LANES signed values of one block. A comparator/mux tree
// reduces the beat to its own max and min (log2(LANES) levels, then one
// pipeline register, as the paper pipelines this tree when the hardware is
// scaled; with LANES=1 there is no tree and no extra register). Two running
// registers then keep the block maximum and minimum: a comparator checks the
// beat value against the register and a mux loads the larger (smaller) one,
// as in the paper's endpoint search diagram. The first beat of a block loads
// the registers directly.
//
// Switchable endpoint mode (paper): in one-endpoint mode the minimum is taken
// to be zero. This design also clamps the maximum at zero in that mode so the
// range max-min is never negative (the paper is silent on blocks whose values
// are all negative).
//
// Timing: done pulses for one cycle when max_o/min_o hold the final endpoints
// of a block: one cycle after the block's last beat (two with LANES>1). The
// outputs are only guaranteed during that cycle; the next block may overwrite
// them one cycle later. LANES must be a power of two.
module asc_endpoint_search #(
  parameter int unsigned W     = 8,
  parameter int unsigned LANES = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic                in_first,   // first beat of a block
  input  logic                in_last,    // last beat of a block
  input  logic signed [W-1:0] in_data [LANES],
  input  logic                one_ep,     // 1: one-endpoint mode (min = 0)
  output logic                done,
  output logic signed [W-1:0] max_o,
  output logic signed [W-1:0] min_o
);

  // ---- beat reduction tree (log2(LANES) levels) ----
  logic signed [W-1:0] tmax [2*LANES];
  logic signed [W-1:0] tmin [2*LANES];
  logic signed [W-1:0] red_max, red_min;

  // Heap-ordered tree: leaves at [LANES .. 2*LANES-1], root at [1].
  always_comb begin
    for (int i = 0; i < 2*LANES; i++) begin
      tmax[i] = '0;
      tmin[i] = '0;
    end
    for (int i = 0; i < LANES; i++) begin
      tmax[LANES+i] = in_data[i];
      tmin[LANES+i] = in_data[i];
    end
    for (int i = LANES-1; i >= 1; i--) begin
      tmax[i] = (tmax[2*i] > tmax[2*i+1]) ? tmax[2*i] : tmax[2*i+1];
      tmin[i] = (tmin[2*i] < tmin[2*i+1]) ? tmin[2*i] : tmin[2*i+1];
    end
    red_max = (LANES == 1) ? tmax[LANES] : tmax[1];
    red_min = (LANES == 1) ? tmin[LANES] : tmin[1];
  end

  // ---- optional tree pipeline register ----
  logic                b_valid, b_first, b_last;
  logic signed [W-1:0] b_max, b_min;

  generate
    if (LANES > 1) begin : g_pipe
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          b_valid <= 1'b0;
          b_first <= 1'b0;
          b_last  <= 1'b0;
          b_max   <= '0;
          b_min   <= '0;
        end else begin
          b_valid <= in_valid;
          b_first <= in_first;
          b_last  <= in_last;
          b_max   <= red_max;
          b_min   <= red_min;
        end
      end
    end else begin : g_nopipe
      assign b_valid = in_valid;
      assign b_first = in_first;
      assign b_last  = in_last;
      assign b_max   = red_max;
      assign b_min   = red_min;
    end
  endgenerate

  // ---- running max / min registers ----
  logic signed [W-1:0] run_max, run_min;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_max <= '0;
      run_min <= '0;
      done    <= 1'b0;
    end else begin
      done <= b_valid && b_last;
      if (b_valid) begin
        run_max <= (b_first || (b_max > run_max)) ? b_max : run_max;
        run_min <= (b_first || (b_min < run_min)) ? b_min : run_min;
      end
    end
  end

  assign max_o = (one_ep && run_max < 0) ? '0 : run_max;
  assign min_o = one_ep ? '0 : run_min;

endmodule
