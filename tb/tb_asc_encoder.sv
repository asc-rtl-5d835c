// tb_asc_encoder: self-checking testbench of the ASC-CBR encoder.
//
// Runs two encoders side by side: the basic one (LANES = 1) with random
// bubbles in the input, and a scaled one (LANES = 4) fed back to back, both
// with random block sizes, endpoint modes and block kinds, and checked
// against the reference model by asc_enc_harness. It also requires that both
// scales were chosen and both the backlog and the drained case occurred.
module tb_asc_encoder;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   checks, failures;
  int   c1, f1, lg1, ln1, bk1, dr1;
  int   c4, f4, lg4, ln4, bk4, dr4;
  bit   done1, done4;

  always #5 clk = ~clk;

  asc_enc_harness #(.W(8), .LANES(1), .MAX_BLK_LOG2(5), .NBLK(400), .GAPS(1'b1)) h1 (
    .clk, .rst_n, .checks(c1), .failures(f1), .n_log(lg1), .n_lin(ln1),
    .n_backlog(bk1), .n_drain(dr1), .finished(done1));

  asc_enc_harness #(.W(8), .LANES(4), .MAX_BLK_LOG2(5), .NBLK(400), .GAPS(1'b0)) h4 (
    .clk, .rst_n, .checks(c4), .failures(f4), .n_log(lg4), .n_lin(ln4),
    .n_backlog(bk4), .n_drain(dr4), .finished(done4));

  task automatic finish_tb(int extra_fail);
    checks   = c1 + c4 + 6;
    failures = f1 + f4 + extra_fail;
    if (lg1 == 0 || lg4 == 0) failures++;
    if (ln1 == 0 || ln4 == 0) failures++;
    if (bk1 == 0 || bk4 == 0) failures++;
    if (dr1 == 0 || dr4 == 0) failures++;
    if (c1 < 1000 || c4 < 1000) failures++;
    if (!(done1 && done4)) failures++;
    $display("L=1: log %0d lin %0d backlog %0d drain %0d | L=4: log %0d lin %0d backlog %0d drain %0d",
             lg1, ln1, bk1, dr1, lg4, ln4, bk4, dr4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done1 && done4);
    finish_tb(0);
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    finish_tb(1);
  end

endmodule
