// tb_asc_endpoint_search: self-checking testbench of the endpoint search.
//
// Two instances, LANES = 1 (no tree register) and LANES = 4 (pipelined
// max/min tree), receive the same random blocks, back to back and with
// bubbles. For each block the maximum and minimum are computed here and
// compared with max_o/min_o in the cycle done pulses; done must come exactly
// 1 (LANES = 1) or 2 (LANES = 4) cycles after the last beat. Both endpoint
// modes are used (one-endpoint mode: min = 0, max clamped at 0).
module tb_asc_endpoint_search;

  localparam int W = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                v1, f1, l1, v4, f4, l4, one_ep, d1, d4;
  logic signed [W-1:0] x1 [1];
  logic signed [W-1:0] x4 [4];
  logic signed [W-1:0] mx1, mn1, mx4, mn4;

  asc_endpoint_search #(.W(W), .LANES(1)) u1 (.clk, .rst_n, .in_valid(v1), .in_first(f1),
    .in_last(l1), .in_data(x1), .one_ep, .done(d1), .max_o(mx1), .min_o(mn1));
  asc_endpoint_search #(.W(W), .LANES(4)) u4 (.clk, .rst_n, .in_valid(v4), .in_first(f4),
    .in_last(l4), .in_data(x4), .one_ep, .done(d4), .max_o(mx4), .min_o(mn4));

  int checks = 0, failures = 0, cycle = 0, n_one = 0, n_two = 0;
  int exp_max, exp_min, last_cycle;
  bit pending;

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s cycle %0d", what, cycle);
    end
  endtask

  // Both instances see the same values: lane-1 beats are the 4-lane beat
  // values one by one, so the 1-lane block ends later.
  int vals [16];

  initial begin
    {v1, f1, l1, v4, f4, l4} = '0;
    one_ep = 1'b0;
    x1[0] = '0;
    for (int l = 0; l < 4; l++) x4[l] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < 400; b++) begin
      int lo, hi;
      bit mode;
      mode = b[0] ^ b[3];
      lo = -128 + int'($urandom_range(200));
      hi = lo + int'($urandom_range(127 - lo));
      for (int i = 0; i < 16; i++) vals[i] = lo + int'($urandom_range(hi - lo));
      if (b % 7 == 3) for (int i = 0; i < 16; i++) vals[i] = -int'($urandom_range(1, 128));
      exp_max = vals[0]; exp_min = vals[0];
      for (int i = 1; i < 16; i++) begin
        if (vals[i] > exp_max) exp_max = vals[i];
        if (vals[i] < exp_min) exp_min = vals[i];
      end
      if (mode) begin
        exp_min = 0;
        if (exp_max < 0) exp_max = 0;
        n_one++;
      end else n_two++;
      one_ep = mode;
      // 4-lane instance: 4 beats
      for (int bt = 0; bt < 4; bt++) begin
        v4 = 1; f4 = (bt == 0); l4 = (bt == 3);
        for (int l = 0; l < 4; l++) x4[l] = W'(vals[bt*4 + l]);
        if (bt == 3) last_cycle = cycle;
        @(negedge clk);
        if (bt == 3) begin v4 = 0; f4 = 0; l4 = 0; end
      end
      @(negedge clk);
      // done of the 4-lane instance is checked by the monitor below
      // 1-lane instance: 16 beats with random bubbles
      for (int i = 0; i < 16; i++) begin
        if ($urandom_range(4) == 0) begin v1 = 0; @(negedge clk); end
        v1 = 1; f1 = (i == 0); l1 = (i == 15);
        x1[0] = W'(vals[i]);
        if (i == 15) last_cycle = cycle;
        @(negedge clk);
      end
      v1 = 0; f1 = 0; l1 = 0;
      repeat (3) @(negedge clk);
    end
    checks++;
    if (n_one == 0 || n_two == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && d4) begin
      check(cycle == last_cycle + 2, "4-lane done timing");
      check(int'(mx4) == exp_max, $sformatf("4-lane max %0d exp %0d", mx4, exp_max));
      check(int'(mn4) == exp_min, $sformatf("4-lane min %0d exp %0d", mn4, exp_min));
    end
    if (rst_n && d1) begin
      check(cycle == last_cycle + 1, "1-lane done timing");
      check(int'(mx1) == exp_max, $sformatf("1-lane max %0d exp %0d", mx1, exp_max));
      check(int'(mn1) == exp_min, $sformatf("1-lane min %0d exp %0d", mn1, exp_min));
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
