// asc_loss_acc: L1 loss accumulator for the two interpolation scales.
//
// For every value of a block it takes |input - interpolated value| for the
// linear and the log-linear scale and adds it to a loss register per scale,
// as in the paper's loss accumulator diagram (subtract, add, register with
// feedback). Both inputs come in shifted form (input - min, value - min),
// which leaves the distance unchanged. With LANES > 1 the absolute
// differences of a beat are summed by an adder tree that is followed by one
// pipeline register (the paper pipelines this tree); with LANES = 1 there is
// neither.
//
// Timing: the first beat of a block restarts both sums. done pulses for one
// cycle when lin_loss/log_loss hold the full block's losses: one cycle after
// the last beat (two with LANES > 1). LW must hold BLOCK_MAX * 2^(W+1).
// LANES must be a power of two.
module asc_loss_acc #(
  parameter int unsigned W     = 8,
  parameter int unsigned LANES = 1,
  parameter int unsigned LW    = W + 2 + 6
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic                in_first,
  input  logic                in_last,
  input  logic signed [W+1:0] x_sh    [LANES],
  input  logic [W:0]          lin_val [LANES],
  input  logic [W:0]          log_val [LANES],
  output logic                done,
  output logic [LW-1:0]       lin_loss,
  output logic [LW-1:0]       log_loss
);

  localparam int unsigned DW = W + 2;  // |x_sh - v| fits in W+2 bits

  function automatic logic [DW-1:0] absdiff(logic signed [W+1:0] a, logic [W:0] b);
    logic signed [W+2:0] d;
    d = (W+3)'(a) - $signed({2'b00, b});
    return DW'((d < 0) ? -d : d);
  endfunction

  // Heap-ordered adder trees, leaves at [LANES .. 2*LANES-1].
  logic [LW-1:0] tl [2*LANES];
  logic [LW-1:0] tg [2*LANES];
  logic [LW-1:0] sum_lin, sum_log;

  always_comb begin
    for (int i = 0; i < 2*LANES; i++) begin
      tl[i] = '0;
      tg[i] = '0;
    end
    for (int i = 0; i < LANES; i++) begin
      tl[LANES+i] = LW'(absdiff(x_sh[i], lin_val[i]));
      tg[LANES+i] = LW'(absdiff(x_sh[i], log_val[i]));
    end
    for (int i = LANES-1; i >= 1; i--) begin
      tl[i] = tl[2*i] + tl[2*i+1];
      tg[i] = tg[2*i] + tg[2*i+1];
    end
    sum_lin = (LANES == 1) ? tl[LANES] : tl[1];
    sum_log = (LANES == 1) ? tg[LANES] : tg[1];
  end

  logic          b_valid, b_first, b_last;
  logic [LW-1:0] b_lin, b_log;

  generate
    if (LANES > 1) begin : g_pipe
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          b_valid <= 1'b0;
          b_first <= 1'b0;
          b_last  <= 1'b0;
          b_lin   <= '0;
          b_log   <= '0;
        end else begin
          b_valid <= in_valid;
          b_first <= in_first;
          b_last  <= in_last;
          b_lin   <= sum_lin;
          b_log   <= sum_log;
        end
      end
    end else begin : g_nopipe
      assign b_valid = in_valid;
      assign b_first = in_first;
      assign b_last  = in_last;
      assign b_lin   = sum_lin;
      assign b_log   = sum_log;
    end
  endgenerate

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lin_loss <= '0;
      log_loss <= '0;
      done     <= 1'b0;
    end else begin
      done <= b_valid && b_last;
      if (b_valid) begin
        lin_loss <= (b_first ? '0 : lin_loss) + b_lin;
        log_loss <= (b_first ? '0 : log_loss) + b_log;
      end
    end
  end

endmodule
