// tb_asc_codec_workloads: the codec in the configurations the evaluated
// models use, each streamed end to end.
//
// Each configuration is a data width, a throughput scaling (LANES) and a
// fixed (endpoints, block size) pair, with the compression rate that pair
// gives by the formula block_size*W / (W*endpoints + 3*block_size):
//
//   INT8,  1x,  (1, 16)  2.285   and (1, 32) 2.461   image classification (ViT-small)
//   INT16, 1x,  (1, 8)   3.2     and (1, 16) 4.0     segmentation, 16-bit activations
//   INT16, 1x,  (2, 16)  3.2     and (2, 32) 4.0     super-resolution, 16-bit activations
//   INT8,  32x, (1, 32)  2.461                       32 values per cycle
//   INT16, 32x, (2, 32)  4.0                         32 values per cycle
//
// The (1, 8) and (2, 16) INT8 pairs (rate 2.0) at the default size are run by
// tb_asc_codec. Every instance checks the compressed stream, the decompressed
// values, the rate, the latency and one beat per cycle (see
// asc_codec_harness); this bench also fails if either scale never won in an
// instance.
module tb_asc_codec_workloads;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int NI = 8;
  int checks_i [NI], failures_i [NI], nlog_i [NI], nlin_i [NI];
  bit fin_i [NI];

  asc_codec_harness #(.W(8),  .LANES(1),  .BLK_LOG2(4), .ONE_EP(1'b1), .CR_X1000(2285), .NBLK(150)) u_vit16 (
    .clk, .rst_n, .checks(checks_i[0]), .failures(failures_i[0]), .n_log(nlog_i[0]), .n_lin(nlin_i[0]), .finished(fin_i[0]));
  asc_codec_harness #(.W(8),  .LANES(1),  .BLK_LOG2(5), .ONE_EP(1'b1), .CR_X1000(2461), .NBLK(150)) u_vit32 (
    .clk, .rst_n, .checks(checks_i[1]), .failures(failures_i[1]), .n_log(nlog_i[1]), .n_lin(nlin_i[1]), .finished(fin_i[1]));
  asc_codec_harness #(.W(16), .LANES(1),  .BLK_LOG2(3), .ONE_EP(1'b1), .CR_X1000(3200), .NBLK(150)) u_seg8 (
    .clk, .rst_n, .checks(checks_i[2]), .failures(failures_i[2]), .n_log(nlog_i[2]), .n_lin(nlin_i[2]), .finished(fin_i[2]));
  asc_codec_harness #(.W(16), .LANES(1),  .BLK_LOG2(4), .ONE_EP(1'b1), .CR_X1000(4000), .NBLK(150)) u_seg16 (
    .clk, .rst_n, .checks(checks_i[3]), .failures(failures_i[3]), .n_log(nlog_i[3]), .n_lin(nlin_i[3]), .finished(fin_i[3]));
  asc_codec_harness #(.W(16), .LANES(1),  .BLK_LOG2(4), .ONE_EP(1'b0), .CR_X1000(3200), .NBLK(150)) u_sr16 (
    .clk, .rst_n, .checks(checks_i[4]), .failures(failures_i[4]), .n_log(nlog_i[4]), .n_lin(nlin_i[4]), .finished(fin_i[4]));
  asc_codec_harness #(.W(16), .LANES(1),  .BLK_LOG2(5), .ONE_EP(1'b0), .CR_X1000(4000), .NBLK(150)) u_sr32 (
    .clk, .rst_n, .checks(checks_i[5]), .failures(failures_i[5]), .n_log(nlog_i[5]), .n_lin(nlin_i[5]), .finished(fin_i[5]));
  asc_codec_harness #(.W(8),  .LANES(32), .BLK_LOG2(5), .ONE_EP(1'b1), .CR_X1000(2461), .NBLK(300)) u_x32_int8 (
    .clk, .rst_n, .checks(checks_i[6]), .failures(failures_i[6]), .n_log(nlog_i[6]), .n_lin(nlin_i[6]), .finished(fin_i[6]));
  asc_codec_harness #(.W(16), .LANES(32), .BLK_LOG2(5), .ONE_EP(1'b0), .CR_X1000(4000), .NBLK(300)) u_x32_int16 (
    .clk, .rst_n, .checks(checks_i[7]), .failures(failures_i[7]), .n_log(nlog_i[7]), .n_lin(nlin_i[7]), .finished(fin_i[7]));

  task automatic finish(int extra);
    int checks = 0, failures = extra;
    for (int i = 0; i < NI; i++) begin
      $display("config %0d: checks %0d failures %0d, log-linear %0d linear %0d",
               i, checks_i[i], failures_i[i], nlog_i[i], nlin_i[i]);
      checks   += checks_i[i] + 2;
      failures += failures_i[i];
      if (nlog_i[i] == 0) failures++;
      if (nlin_i[i] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (fin_i[0] && fin_i[1] && fin_i[2] && fin_i[3] && fin_i[4] && fin_i[5] && fin_i[6] && fin_i[7]);
    finish(0);
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    finish(1);
  end

endmodule
