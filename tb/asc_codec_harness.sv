// asc_codec_harness: runs one asc_codec configuration end to end.
//
// The codec is built with the given data width W and LANES, and is fed NBLK
// blocks of 2^BLK_LOG2 values in one fixed endpoint mode (ONE_EP), back to
// back, as a model layer would be streamed: the block size and the endpoint
// mode stay fixed, as for one model. The compressed stream is looped into the
// decoder. Checked against the reference model: endpoints, scale and every
// index of each block, every decompressed value, the compression rate
// (CR_X1000 = expected rate x 1000, from the formula
// block_size*W / (W*endpoints + 3*block_size)), the encoder latency (N + 6
// cycles, N + 8 with LANES > 1, N = beats per block), and the throughput:
// one beat of LANES values per cycle from the first output beat to the last.
// Also counts blocks that chose each scale.
module asc_codec_harness
  import asc_pkg::*;
  import asc_ref_pkg::*;
  import asc_blockgen_pkg::*;
#(
  parameter int unsigned W            = 8,
  parameter int unsigned LANES        = 1,
  parameter int unsigned MAX_BLK_LOG2 = 5,
  parameter int unsigned BLK_LOG2     = 3,
  parameter bit          ONE_EP       = 1'b1,
  parameter int          CR_X1000     = 2000,
  parameter int          NBLK         = 200
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output int   n_log,
  output int   n_lin,
  output bit   finished
);

  localparam int CFGW = $clog2(MAX_BLK_LOG2 + 1);
  localparam int LAT  = (LANES > 1) ? 8 : 6;
  localparam int N    = 1 << BLK_LOG2;
  localparam int NB   = N / LANES;

  logic                cfg_one_ep;
  logic [CFGW-1:0]     cfg_blk_log2;
  logic                in_valid;
  logic signed [W-1:0] in_data [LANES];
  logic                e_valid, e_first, e_last, e_scale_log;
  logic signed [W-1:0] e_ep1, e_ep2;
  logic [IDX_W-1:0]    e_idx [LANES];
  logic                d_valid, d_first, d_last;
  logic signed [W-1:0] d_data [LANES];

  asc_codec #(.W(W), .LANES(LANES), .MAX_BLK_LOG2(MAX_BLK_LOG2)) dut (
    .clk, .rst_n,
    .enc_cfg_one_ep(cfg_one_ep), .enc_cfg_blk_log2(cfg_blk_log2),
    .enc_in_valid(in_valid), .enc_in_data(in_data),
    .enc_out_valid(e_valid), .enc_out_first(e_first), .enc_out_last(e_last),
    .enc_out_ep1(e_ep1), .enc_out_ep2(e_ep2), .enc_out_idx(e_idx),
    .enc_out_scale_log(e_scale_log),
    .dec_one_ep(ONE_EP),
    .dec_in_valid(e_valid), .dec_in_first(e_first), .dec_in_last(e_last),
    .dec_in_ep1(e_ep1), .dec_in_ep2(e_ep2), .dec_in_idx(e_idx),
    .dec_out_valid(d_valid), .dec_out_first(d_first), .dec_out_last(d_last),
    .dec_out_data(d_data)
  );

  typedef struct {
    int ep1, ep2;
    bit log_sel;
    int idx [MAXV];
    int dec [MAXV];
    int last_in_cycle;
  } blk_t;

  blk_t enc_q [$];
  blk_t dec_q [$];
  int   cycle;

  always_ff @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10)
        $display("[codec W=%0d L=%0d (%0d,%0d)] FAIL %s at cycle %0d",
                 W, LANES, ONE_EP ? 1 : 2, N, what, cycle);
    end
  endtask

  // ---------------- driver ----------------
  initial begin
    int   vals [MAXV];
    int   mx, mn;
    blk_t b;
    checks = 0; failures = 0; n_log = 0; n_lin = 0; finished = 1'b0;
    in_valid = 1'b0; cfg_one_ep = ONE_EP; cfg_blk_log2 = CFGW'(BLK_LOG2);
    for (int l = 0; l < LANES; l++) in_data[l] = '0;
    @(posedge rst_n);
    repeat (2) @(negedge clk);
    for (int k = 0; k < NBLK; k++) begin
      // feature-map-like blocks: ReLU outputs dominate one-endpoint layers
      gen_block(ONE_EP && k[0] ? K_RELU : k % NKINDS, N, W, vals);
      if (k % 8 == 7) begin
        // small non-negative activations and one large one
        for (int i = 0; i < N; i++) vals[i] = rnd_range(0, 1 << (W - 5));
        vals[rnd_range(0, N - 1)] = (1 << (W - 1)) - 1 - rnd_range(0, 1 << (W - 4));
      end
      ref_encode(vals, N, ONE_EP, b.ep1, b.ep2, b.idx, b.log_sel, mx, mn);
      for (int i = 0; i < N; i++) b.dec[i] = ref_decode(b.ep1, b.ep2, ONE_EP, b.idx[i]);
      for (int beat = 0; beat < NB; beat++) begin
        in_valid = 1'b1;
        for (int l = 0; l < LANES; l++) in_data[l] = W'(vals[beat*LANES + l]);
        if (beat == NB - 1) begin
          b.last_in_cycle = cycle;
          enc_q.push_back(b);
          dec_q.push_back(b);
        end
        @(negedge clk);
      end
    end
    in_valid = 1'b0;
    wait (enc_q.size() == 0 && dec_q.size() == 0);
    repeat (NB + 4) @(negedge clk);
    check(n_out_beats == NBLK * NB, "number of compressed beats");
    check(last_out_cycle - first_out_cycle + 1 == NBLK * NB,
          $sformatf("throughput: %0d beats in %0d cycles", n_out_beats,
                    last_out_cycle - first_out_cycle + 1));
    finished = 1'b1;
  end

  // ---------------- compressed stream ----------------
  blk_t ce;
  int   ce_i, n_out_beats = 0, first_out_cycle = 0, last_out_cycle = 0;

  always @(posedge clk) begin
    if (rst_n && e_valid) begin
      if (n_out_beats == 0) first_out_cycle = cycle;
      last_out_cycle = cycle;
      n_out_beats++;
      if (e_first) begin
        ce = enc_q.pop_front();
        ce_i = 0;
        check(cycle == ce.last_in_cycle + NB + LAT,
              $sformatf("latency %0d", cycle - ce.last_in_cycle));
        check(e_scale_log == ce.log_sel, "scale");
        check(int'(e_ep1) == ce.ep1, "endpoint1");
        if (!ONE_EP) check(int'(e_ep2) == ce.ep2, "endpoint2");
        if (ce.log_sel) n_log++; else n_lin++;
      end
      for (int l = 0; l < LANES; l++)
        check(int'(e_idx[l]) == ce.idx[ce_i*LANES + l], "index");
      ce_i++;
      if (e_last) begin
        int bits;
        check(ce_i == NB, "beats per block");
        bits = (ONE_EP ? 1 : 2) * W + IDX_W * ce_i * LANES;
        check((N * W * 1000) / bits == CR_X1000,
              $sformatf("compression rate %0d/1000", (N * W * 1000) / bits));
      end
    end
  end

  // ---------------- decompressed stream ----------------
  blk_t de;
  int   de_i;

  always @(posedge clk) begin
    if (rst_n && d_valid) begin
      if (d_first) begin
        de = dec_q.pop_front();
        de_i = 0;
      end
      for (int l = 0; l < LANES; l++)
        check(int'(d_data[l]) == de.dec[de_i*LANES + l], "decoded value");
      de_i++;
    end
  end

endmodule
