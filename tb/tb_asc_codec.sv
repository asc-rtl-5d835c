// tb_asc_codec: end-to-end testbench of the ASC-CBR codec at its default
// parameters (8-bit data, one value per cycle, blocks of up to 32 values).
//
// The encoder's compressed stream is looped straight into the decoder. The
// run is a sequence of phases, as a model would be run layer after layer:
// each phase fixes the endpoint mode (the decoder's mode input follows it)
// and either a constant block size sent back to back, or random sizes with
// random bubbles. Between phases the input pauses until the codec is empty.
//
// Checked against the reference model, for every block: endpoints, indices
// and chosen scale of the compressed stream; its size, which must match the
// paper's compression-rate formula (block_size * W) / (W * endpoints +
// 3 * block_size); and every decompressed value. Also checked: the encoder
// latency (N + 6 cycles from the last input beat to the first output beat
// when nothing is queued ahead), one value per cycle in back-to-back phases,
// and the decoder's one-cycle latency. Every mechanism must have happened at
// least once: both scales, both endpoint modes, every block size from 2 to 32,
// a tie between the losses, a block clamped to zero in one-endpoint mode, a
// small block queued behind a larger one, and input bubbles.
module tb_asc_codec
  import asc_pkg::*;
  import asc_ref_pkg::*;
  import asc_blockgen_pkg::*;
;

  localparam int W    = 8;
  localparam int MAXB = 5;
  localparam int LAT  = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                enc_cfg_one_ep;
  logic [2:0]          enc_cfg_blk_log2;
  logic                enc_in_valid;
  logic signed [W-1:0] enc_in_data [1];
  logic                enc_out_valid, enc_out_first, enc_out_last, enc_out_scale_log;
  logic signed [W-1:0] enc_out_ep1, enc_out_ep2;
  logic [IDX_W-1:0]    enc_out_idx [1];
  logic                dec_one_ep;
  logic                dec_out_valid, dec_out_first, dec_out_last;
  logic signed [W-1:0] dec_out_data [1];

  asc_codec dut (
    .clk, .rst_n,
    .enc_cfg_one_ep, .enc_cfg_blk_log2, .enc_in_valid, .enc_in_data,
    .enc_out_valid, .enc_out_first, .enc_out_last, .enc_out_ep1, .enc_out_ep2,
    .enc_out_idx, .enc_out_scale_log,
    .dec_one_ep,
    .dec_in_valid(enc_out_valid), .dec_in_first(enc_out_first), .dec_in_last(enc_out_last),
    .dec_in_ep1(enc_out_ep1), .dec_in_ep2(enc_out_ep2), .dec_in_idx(enc_out_idx),
    .dec_out_valid, .dec_out_first, .dec_out_last, .dec_out_data
  );

  typedef struct {
    int  n;
    bit  one_ep;
    int  ep1, ep2;
    bit  log_sel;
    int  idx [MAXV];
    int  dec [MAXV];
    int  last_in_cycle;
    bit  timed;
  } blk_t;

  blk_t enc_q [$];  // expected compressed blocks
  blk_t dec_q [$];  // expected decompressed blocks

  int checks = 0, failures = 0, cycle = 0;
  // mechanism counters
  int n_log = 0, n_lin = 0, n_one = 0, n_two = 0, n_tie = 0, n_clamp = 0;
  int n_backlog = 0, n_bubble = 0, n_b2b_blocks = 0;
  int n_size [MAXB + 1];
  // throughput measurement of back-to-back phases
  int tp_first_cycle, tp_beats;
  bit tp_on;

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s (cycle %0d)", what, cycle);
    end
  endtask

  task automatic report_and_finish(int extra);
    failures += extra;
    $display("scales: log %0d lin %0d | modes: one %0d two %0d | ties %0d clamps %0d",
             n_log, n_lin, n_one, n_two, n_tie, n_clamp);
    $display("queued behind larger block %0d, bubbles %0d, back-to-back blocks %0d",
             n_backlog, n_bubble, n_b2b_blocks);
    for (int s = 1; s <= MAXB; s++) $display("block size %0d: %0d blocks", 1 << s, n_size[s]);
    checks += 9 + MAXB;
    if (n_log == 0) failures++;
    if (n_lin == 0) failures++;
    if (n_one == 0) failures++;
    if (n_two == 0) failures++;
    if (n_tie == 0) failures++;
    if (n_clamp == 0) failures++;
    if (n_backlog == 0) failures++;
    if (n_bubble == 0) failures++;
    if (n_b2b_blocks == 0) failures++;
    for (int s = 1; s <= MAXB; s++) if (n_size[s] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  // ---------------- stimulus ----------------
  task automatic send_block(input int vals [MAXV], input int blog, input bit mode,
                            input bit gaps, input bit timed);
    blk_t b;
    int mx, mn;
    b.n = 1 << blog;
    b.one_ep = mode;
    b.timed = timed;
    ref_encode(vals, b.n, mode, b.ep1, b.ep2, b.idx, b.log_sel, mx, mn);
    for (int i = 0; i < b.n; i++) b.dec[i] = ref_decode(b.ep1, b.ep2, mode, b.idx[i]);
    for (int i = 0; i < b.n; i++) begin
      if (gaps && $urandom_range(3) == 0) begin
        enc_in_valid = 1'b0;
        n_bubble++;
        @(negedge clk);
      end
      enc_in_valid     = 1'b1;
      enc_cfg_one_ep   = mode;
      enc_cfg_blk_log2 = 3'(blog);
      enc_in_data[0]   = W'(vals[i]);
      if (i == b.n - 1) begin
        b.last_in_cycle = cycle;
        enc_q.push_back(b);
        dec_q.push_back(b);
      end
      @(negedge clk);
    end
  endtask

  task automatic drain();
    enc_in_valid = 1'b0;
    wait (enc_q.size() == 0 && dec_q.size() == 0);
    // the queues pop on first beats: let the last block stream out
    repeat ((1 << MAXB) + 4) @(negedge clk);
  endtask

  initial begin
    int vals [MAXV];
    int blog, prev_n;
    bit backlog;
    for (int s = 0; s <= MAXB; s++) n_size[s] = 0;
    enc_in_valid = 1'b0; enc_cfg_one_ep = 1'b0; enc_cfg_blk_log2 = 3'd3;
    enc_in_data[0] = '0; dec_one_ep = 1'b0; tp_on = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    for (int p = 0; p < 24; p++) begin
      bit mode;
      mode = p[0];
      dec_one_ep = mode;
      if (p % 4 < 2) begin
        // Constant block size, back to back: steady-state throughput.
        blog = 1 + (p / 4) % MAXB;
        tp_on = 1'b1;
        tp_beats = 0;
        for (int k = 0; k < 30; k++) begin
          gen_block(k % NKINDS, 1 << blog, W, vals);
          send_block(vals, blog, mode, 1'b0, 1'b1);
        end
        enc_in_valid = 1'b0;
        drain();
        tp_on = 1'b0;
        // one output value per cycle over the whole phase
        check(tp_beats == 30 * (1 << blog), "throughput: output beats");
        check(cycle_span == tp_beats, $sformatf("throughput: %0d beats in %0d cycles", tp_beats, cycle_span));
        n_b2b_blocks += 30;
      end else begin
        // Random sizes and bubbles; smaller blocks may queue behind larger.
        prev_n = 0;
        backlog = 1'b0;
        for (int k = 0; k < 40; k++) begin
          blog = int'($urandom_range(MAXB - 1)) + 1;
          if ((1 << blog) < prev_n) begin
            backlog = 1'b1;
            n_backlog++;
          end
          gen_block(int'($urandom_range(NKINDS - 1)), 1 << blog, W, vals);
          send_block(vals, blog, mode, 1'b1, !backlog);
          prev_n = 1 << blog;
        end
        drain();
      end
    end
    report_and_finish(0);
  end

  // ---------------- compressed stream monitor ----------------
  blk_t ce;
  int   ce_i;
  int   cycle_span, tp_start;

  always @(posedge clk) begin
    if (rst_n && enc_out_valid) begin
      if (enc_out_first) begin
        if (enc_q.size() == 0) check(1'b0, "unexpected compressed block");
        else begin
          ce = enc_q.pop_front();
          ce_i = 0;
          n_size[$clog2(ce.n)]++;
          if (ce.timed)
            check(cycle == ce.last_in_cycle + ce.n + LAT,
                  $sformatf("encoder latency %0d for N=%0d", cycle - ce.last_in_cycle, ce.n));
          check(enc_out_scale_log == ce.log_sel, "scale");
          check(int'(enc_out_ep1) == ce.ep1, $sformatf("endpoint1 %0d exp %0d", enc_out_ep1, ce.ep1));
          if (!ce.one_ep) check(int'(enc_out_ep2) == ce.ep2, "endpoint2");
          if (ce.log_sel) n_log++; else n_lin++;
          if (ce.one_ep) n_one++; else n_two++;
          if (ce.one_ep && ce.ep1 == 0) n_clamp++;
          if (!ce.one_ep && ce.ep1 == ce.ep2) n_tie++;
          if (tp_on && tp_beats == 0) tp_start = cycle;
        end
      end
      check(int'(enc_out_idx[0]) == ce.idx[ce_i], $sformatf("index %0d", ce_i));
      if (tp_on) begin
        tp_beats++;
        cycle_span = cycle - tp_start + 1;
      end
      ce_i++;
      if (enc_out_last) begin
        int bits, ratio_x1000, exp_x1000;
        check(ce_i == ce.n, "indices per block");
        // Compressed size against the paper's formula.
        bits = (ce.one_ep ? 1 : 2) * W + 3 * ce_i;
        ratio_x1000 = (ce.n * W * 1000) / bits;
        exp_x1000 = (ce.n * W * 1000) / ((ce.one_ep ? 1 : 2) * W + ce.n * 3);
        check(ratio_x1000 == exp_x1000, "compression rate");
        // The paper's worked examples: (2 endpoints, 16) and (1, 8) give 2.0 for INT8.
        if ((!ce.one_ep && ce.n == 16) || (ce.one_ep && ce.n == 8))
          check(ratio_x1000 == 2000, "compression rate 2.0 example");
      end
    end
  end

  // ---------------- decompressed stream monitor ----------------
  blk_t de;
  int   de_i;

  always @(posedge clk) begin
    if (rst_n && dec_out_valid) begin
      if (dec_out_first) begin
        if (dec_q.size() == 0) check(1'b0, "unexpected decompressed block");
        else begin
          de = dec_q.pop_front();
          de_i = 0;
        end
      end
      check(int'(dec_out_data[0]) == de.dec[de_i],
            $sformatf("decoded value %0d exp %0d", dec_out_data[0], de.dec[de_i]));
      de_i++;
      if (dec_out_last) check(de_i == de.n, "values per decoded block");
    end
    // decoder latency: one cycle behind the compressed stream
    if (rst_n) begin
      checks++;
      if (dec_out_valid != $past(enc_out_valid)) failures++;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    report_and_finish(1);
  end

endmodule
