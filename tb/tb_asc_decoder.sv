// tb_asc_decoder: self-checking testbench of the ASC decoder.
//
// A 2-lane decoder receives random compressed blocks: random endpoint pairs in
// both orders (two-endpoint mode) or a single signed endpoint (one-endpoint
// mode), random indices, random block lengths and bubbles. Each output value
// is compared with the reference decoder one cycle after its input beat, and
// the first/last markers are checked. Both scales and both modes must occur.
module tb_asc_decoder
  import asc_pkg::*;
  import asc_ref_pkg::*;
;

  localparam int W = 8;
  localparam int L = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                one_ep, iv, ifst, ilst, ov, ofst, olst;
  logic signed [W-1:0] ep1, ep2;
  logic [IDX_W-1:0]    idx [L];
  logic signed [W-1:0] od [L];

  asc_decoder #(.W(W), .LANES(L)) dut (.clk, .rst_n, .one_ep, .in_valid(iv), .in_first(ifst),
    .in_last(ilst), .in_ep1(ep1), .in_ep2(ep2), .in_idx(idx), .out_valid(ov), .out_first(ofst),
    .out_last(olst), .out_data(od));

  int checks = 0, failures = 0;
  int n_log = 0, n_lin = 0, n_one = 0, n_two = 0;

  typedef struct { int v [L]; bit first, last; } beat_t;
  beat_t exp_q [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    {iv, ifst, ilst, one_ep} = '0;
    ep1 = '0; ep2 = '0;
    for (int l = 0; l < L; l++) idx[l] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int b = 0; b < 2000; b++) begin
      int e1, e2, nb;
      bit mode;
      mode = $urandom_range(1);
      if (mode) begin
        e1 = int'($urandom_range(254)) - 127;   // -max (linear) .. +max (log-linear)
        e2 = int'($urandom_range(255)) - 128;   // ignored in one-endpoint mode
        n_one++;
        if (e1 > 0) n_log++; else n_lin++;
      end else begin
        e1 = int'($urandom_range(255)) - 128;
        e2 = int'($urandom_range(255)) - 128;
        n_two++;
        if (e1 > e2) n_log++; else n_lin++;
      end
      nb = 1 << $urandom_range(4);
      for (int t = 0; t < nb; t++) begin
        beat_t eb;
        if ($urandom_range(5) == 0) begin
          iv = 0; ifst = 0; ilst = 0;
          ep1 = 8'($urandom); ep2 = 8'($urandom);  // endpoints only matter on first beats
          @(negedge clk);
        end
        iv = 1; ifst = (t == 0); ilst = (t == nb - 1); one_ep = mode;
        ep1 = (t == 0) ? W'(e1) : W'($urandom);
        ep2 = (t == 0) ? W'(e2) : W'($urandom);
        for (int l = 0; l < L; l++) begin
          idx[l] = IDX_W'($urandom);
          eb.v[l] = ref_decode(e1, e2, mode, int'(idx[l]));
        end
        eb.first = (t == 0); eb.last = (t == nb - 1);
        exp_q.push_back(eb);
        @(negedge clk);
      end
      iv = 0; ifst = 0; ilst = 0;
    end
    repeat (3) @(negedge clk);
    checks++;
    if (n_log == 0 || n_lin == 0 || n_one == 0 || n_two == 0 || exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && ov) begin
      if (exp_q.size() == 0) check(1'b0, "unexpected output");
      else begin
        beat_t eb;
        eb = exp_q.pop_front();
        for (int l = 0; l < L; l++)
          check(int'(od[l]) == eb.v[l], $sformatf("value %0d exp %0d", od[l], eb.v[l]));
        check(ofst == eb.first && olst == eb.last, "markers");
      end
    end
  end

  // The output follows its input beat by exactly one cycle.
  always @(posedge clk) if (rst_n) begin
    checks++;
    if (ov != $past(iv)) failures++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
