// asc_enc_harness: drives one asc_encoder with random blocks and checks it.
//
// For NBLK blocks it picks a block kind, a block size between LANES and
// 2^MAX_BLK_LOG2 values and an endpoint mode, sends the block (with random
// bubbles between beats when GAPS is set), and compares every output block
// with the reference model: endpoints, every index, the chosen scale, the
// first/last markers, the latency from the block's last input beat to its
// first output beat (N + 6 cycles, N + 8 with LANES > 1) whenever no earlier
// block is still waiting, and, when no bubbles are inserted, that output
// blocks of equal size follow each other without gaps. A block smaller than
// its predecessor is sometimes sent at once (it then waits in the encoder)
// and sometimes after a pause that lets the encoder drain.
module asc_enc_harness
  import asc_pkg::*;
  import asc_ref_pkg::*;
  import asc_blockgen_pkg::*;
#(
  parameter int unsigned W            = 8,
  parameter int unsigned LANES        = 1,
  parameter int unsigned MAX_BLK_LOG2 = 5,
  parameter int          NBLK         = 300,
  parameter bit          GAPS         = 1'b1
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output int   n_log,
  output int   n_lin,
  output int   n_backlog,
  output int   n_drain,
  output bit   finished
);

  localparam int CFGW = $clog2(MAX_BLK_LOG2 + 1);
  localparam int LLOG = $clog2(LANES);
  localparam int LAT  = (LANES > 1) ? 8 : 6;

  logic                cfg_one_ep;
  logic [CFGW-1:0]     cfg_blk_log2;
  logic                in_valid;
  logic signed [W-1:0] in_data [LANES];
  logic                out_valid, out_first, out_last, out_scale_log;
  logic signed [W-1:0] out_ep1, out_ep2;
  logic [IDX_W-1:0]    out_idx [LANES];

  asc_encoder #(.W(W), .LANES(LANES), .MAX_BLK_LOG2(MAX_BLK_LOG2)) dut (
    .clk, .rst_n, .cfg_one_ep, .cfg_blk_log2, .in_valid, .in_data,
    .out_valid, .out_first, .out_last, .out_ep1, .out_ep2, .out_idx, .out_scale_log
  );

  // Expected blocks, in order.
  typedef struct {
    int vals_n;
    bit one_ep;
    int ep1, ep2;
    bit log_sel;
    int idx [MAXV];
    int last_in_cycle;
    bit steady;
    bit timed;
  } exp_t;

  exp_t exp_q [$];
  int   cycle;

  always_ff @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("[enc L=%0d] FAIL %s at cycle %0d", LANES, what, cycle);
    end
  endtask

  // ---------------- driver ----------------
  initial begin
    int vals [MAXV];
    int n, blog, kind;
    bit one_ep;
    exp_t e;
    int mx, mn;
    int prev_n = 0;
    bit backlog = 1'b0;
    checks = 0; failures = 0; n_log = 0; n_lin = 0; n_backlog = 0; n_drain = 0; cycle = 0;
    in_valid = 1'b0; cfg_one_ep = 1'b0; cfg_blk_log2 = CFGW'(LLOG);
    for (int l = 0; l < LANES; l++) in_data[l] = '0;
    @(posedge rst_n);
    repeat (2) @(negedge clk);
    for (int b = 0; b < NBLK; b++) begin
      blog   = rnd_range(LLOG < 1 ? 1 : LLOG, MAX_BLK_LOG2);
      n      = 1 << blog;
      kind   = b % NKINDS;
      one_ep = $urandom_range(1);
      gen_block(kind, n, W, vals);
      // A block smaller than the one before it may wait behind it; such a
      // backlog only drains when the input pauses. Sometimes pause long
      // enough, sometimes not (then exact timing is not checked).
      if (n < prev_n) begin
        if ($urandom_range(1) == 1) begin
          in_valid = 1'b0;
          repeat (3 * (1 << MAX_BLK_LOG2) / LANES + 12) @(negedge clk);
          backlog = 1'b0;
          n_drain++;
        end else begin
          backlog = 1'b1;
          n_backlog++;
        end
      end
      e.timed  = !backlog;
      e.steady = !backlog && (b > 0) && (n == prev_n);
      e.vals_n = n;
      e.one_ep = one_ep;
      ref_encode(vals, n, one_ep, e.ep1, e.ep2, e.idx, e.log_sel, mx, mn);
      for (int beat = 0; beat < n / LANES; beat++) begin
        if (GAPS && $urandom_range(3) == 0) begin
          in_valid = 1'b0;
          @(negedge clk);
        end
        in_valid     = 1'b1;
        cfg_one_ep   = one_ep;
        cfg_blk_log2 = CFGW'(blog);
        for (int l = 0; l < LANES; l++) in_data[l] = W'(vals[beat*LANES + l]);
        if (beat == n / LANES - 1) begin
          e.last_in_cycle = cycle;
          exp_q.push_back(e);
        end
        @(negedge clk);
      end
      prev_n = n;
      if (GAPS) in_valid = 1'b0;
      // Scramble configuration between blocks: it is only sampled on first beats.
      cfg_one_ep   = $urandom_range(1);
      cfg_blk_log2 = CFGW'(LLOG);
    end
    in_valid = 1'b0;
    wait (exp_q.size() == 0);
    repeat (5) @(negedge clk);
    finished = 1'b1;
  end

  // ---------------- monitor ----------------
  exp_t cur;
  int   beat_i;
  int   last_out_cycle;

  initial finished = 1'b0;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      if (out_first) begin
        if (exp_q.size() == 0) begin
          check(1'b0, "unexpected output block");
        end else begin
          cur = exp_q.pop_front();
          beat_i = 0;
          if (cur.timed)
            check(cycle == cur.last_in_cycle + cur.vals_n / LANES + LAT,
                  $sformatf("latency %0d n=%0d", cycle - cur.last_in_cycle, cur.vals_n));
          if (!GAPS && cur.steady)
            check(cycle == last_out_cycle + 1, "back-to-back output blocks");
          check(out_scale_log == cur.log_sel, "scale choice");
          check(int'(out_ep1) == cur.ep1, $sformatf("ep1 %0d exp %0d", out_ep1, cur.ep1));
          if (!cur.one_ep) check(int'(out_ep2) == cur.ep2, "ep2");
          if (cur.log_sel) n_log++; else n_lin++;
        end
      end
      for (int l = 0; l < LANES; l++)
        check(int'(out_idx[l]) == cur.idx[beat_i*LANES + l],
              $sformatf("index %0d: %0d exp %0d", beat_i*LANES + l, out_idx[l], cur.idx[beat_i*LANES + l]));
      check(out_last == (beat_i == cur.vals_n / LANES - 1), "last marker");
      if (out_last) last_out_cycle = cycle;
      beat_i++;
    end
  end

endmodule
