// tb_asc_loss_acc: self-checking testbench of the L1 loss accumulator.
//
// A 1-lane and a 4-lane instance get random blocks of shifted inputs and
// interpolated values for both scales. The expected losses (sum of absolute
// differences over the block) are computed here and compared with the
// outputs in the cycle done pulses, which must be 1 cycle (LANES = 1) or 2
// cycles (LANES = 4, pipelined adder tree) after the block's last beat.
module tb_asc_loss_acc;

  localparam int W = 8;
  localparam int LW = W + 2 + 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                v1, f1, l1, v4, f4, l4, d1, d4;
  logic signed [W+1:0] xs1 [1], xs4 [4];
  logic [W:0]          lv1 [1], gv1 [1], lv4 [4], gv4 [4];
  logic [LW-1:0]       ll1, gl1, ll4, gl4;

  asc_loss_acc #(.W(W), .LANES(1), .LW(LW)) u1 (.clk, .rst_n, .in_valid(v1), .in_first(f1),
    .in_last(l1), .x_sh(xs1), .lin_val(lv1), .log_val(gv1), .done(d1), .lin_loss(ll1), .log_loss(gl1));
  asc_loss_acc #(.W(W), .LANES(4), .LW(LW)) u4 (.clk, .rst_n, .in_valid(v4), .in_first(f4),
    .in_last(l4), .x_sh(xs4), .lin_val(lv4), .log_val(gv4), .done(d4), .lin_loss(ll4), .log_loss(gl4));

  int checks = 0, failures = 0, cycle = 0;
  int e_lin1, e_log1, e_lin4, e_log4, last1, last4;
  int n_done1 = 0, n_done4 = 0;

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s cycle %0d", what, cycle);
    end
  endtask

  function automatic int iabs(int a);
    return a < 0 ? -a : a;
  endfunction

  // Both instances run concurrently on independent random blocks.
  initial begin : drive1
    {v1, f1, l1} = '0;
    xs1[0] = '0; lv1[0] = '0; gv1[0] = '0;
    @(posedge rst_n);
    @(negedge clk);
    for (int b = 0; b < 300; b++) begin
      int n, sl, sg;
      n = 1 << $urandom_range(5);
      sl = 0; sg = 0;
      for (int i = 0; i < n; i++) begin
        int xs, lv, gv;
        if ($urandom_range(3) == 0) begin v1 = 0; @(negedge clk); end
        xs = int'($urandom_range(511)) - 100;
        lv = int'($urandom_range(511));
        gv = int'($urandom_range(511));
        v1 = 1; f1 = (i == 0); l1 = (i == n - 1);
        xs1[0] = (W+2)'(xs); lv1[0] = (W+1)'(lv); gv1[0] = (W+1)'(gv);
        sl += iabs(xs - lv); sg += iabs(xs - gv);
        if (i == n - 1) begin e_lin1 = sl; e_log1 = sg; last1 = cycle; end
        @(negedge clk);
      end
      v1 = 0; f1 = 0; l1 = 0;
      repeat (2) @(negedge clk);  // let the done of this block be checked
    end
    repeat (4) @(negedge clk);
    checks++;
    if (n_done1 != 300 || n_done4 != 300) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : drive4
    {v4, f4, l4} = '0;
    for (int l = 0; l < 4; l++) begin xs4[l] = '0; lv4[l] = '0; gv4[l] = '0; end
    @(posedge rst_n);
    @(negedge clk);
    for (int b = 0; b < 300; b++) begin
      int n, sl, sg;
      n = 1 << $urandom_range(3);
      sl = 0; sg = 0;
      for (int i = 0; i < n; i++) begin
        v4 = 1; f4 = (i == 0); l4 = (i == n - 1);
        for (int l = 0; l < 4; l++) begin
          int xs, lv, gv;
          xs = int'($urandom_range(511)) - 100;
          lv = int'($urandom_range(511));
          gv = int'($urandom_range(511));
          xs4[l] = (W+2)'(xs); lv4[l] = (W+1)'(lv); gv4[l] = (W+1)'(gv);
          sl += iabs(xs - lv); sg += iabs(xs - gv);
        end
        if (i == n - 1) begin e_lin4 = sl; e_log4 = sg; last4 = cycle; end
        @(negedge clk);
      end
      v4 = 0; f4 = 0; l4 = 0;
      repeat (2) @(negedge clk);
    end
  end

  always @(posedge clk) begin
    if (rst_n && d1) begin
      n_done1++;
      check(cycle == last1 + 1, "1-lane done timing");
      check(int'(ll1) == e_lin1 && int'(gl1) == e_log1,
            $sformatf("1-lane losses %0d/%0d exp %0d/%0d", ll1, gl1, e_lin1, e_log1));
    end
    if (rst_n && d4) begin
      n_done4++;
      check(cycle == last4 + 2, "4-lane done timing");
      check(int'(ll4) == e_lin4 && int'(gl4) == e_log4,
            $sformatf("4-lane losses %0d/%0d exp %0d/%0d", ll4, gl4, e_lin4, e_log4));
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
