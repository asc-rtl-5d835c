// tb_asc_queue: self-checking testbench of the FIFO used for the encoder queues.
//
// Random pushes and pops (never a push into a full queue without a pop, never
// a pop from an empty one) are mirrored in a SystemVerilog queue; the head
// data, count, empty and full flags are compared every cycle. The run also
// fills the queue to DEPTH and pushes and pops at once while full.
module tb_asc_queue;

  localparam int DW = 12;
  localparam int DEPTH = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic push, pop, empty, full;
  logic [DW-1:0] wdata, rdata;
  logic [$clog2(DEPTH):0] count;
  int checks = 0, failures = 0, n_full = 0, n_full_pushpop = 0;
  logic [DW-1:0] model [$];

  always #5 clk = ~clk;

  asc_queue #(.DW(DW), .DEPTH(DEPTH)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic finish_tb(int extra);
    failures += extra;
    checks++;
    if (n_full == 0 || n_full_pushpop == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    push = 0; pop = 0; wdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      check(count == model.size(), "count");
      check(empty == (model.size() == 0), "empty");
      check(full == (model.size() == DEPTH), "full");
      if (model.size() > 0) check(rdata == model[0], "head data");
      if (full) n_full++;
      // Phases: fill-biased, then drain-biased.
      pop  = (model.size() > 0) && ($urandom_range(99) < (((i / 200) % 2) ? 70 : 30));
      push = ($urandom_range(99) < (((i / 200) % 2) ? 30 : 70)) && (model.size() < DEPTH || pop);
      if (full && push && pop) n_full_pushpop++;
      wdata = DW'($urandom);
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (push) model.push_back(wdata);
    end
    finish_tb(0);
  end

  initial begin
    repeat (10000) @(posedge clk);
    finish_tb(1);
  end

endmodule
