// tb_vdc2n_gen: self-checking test of the VDC-2^n sequence source.
//
// Two instances: an 8-bit counter wired as VDC-2, VDC-16 and VDC-256, and a
// 10-bit counter wired as VDC-4, VDC-128, VDC-256 and VDC-512 (the bases used
// by the sin(x) unit).  Reference values are computed arithmetically: the
// counter is split into base-2^k digits by division and remainder, and the
// digits are re-assembled most-significant-first in reverse order.  Also
// checked: the explicit VDC-16 wiring {cnt[3:0], cnt[7:4]}, that every
// sequence is a permutation of one period, that `en` low holds the state and
// that `clr` restarts at 0.
module tb_vdc2n_gen;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  localparam int unsigned KA [3] = '{1, 4, 8};
  localparam int unsigned KB [4] = '{2, 7, 8, 9};

  logic en, clr;
  logic [7:0]       cnt_a;
  logic [2:0][7:0]  seq_a;
  logic [9:0]       cnt_b;
  logic [3:0][9:0]  seq_b;

  vdc2n_gen #(.W(8),  .NSEQ(3), .LOG2B(KA)) dut_a (.clk, .rst_n, .en, .clr, .count(cnt_a), .seq(seq_a));
  vdc2n_gen #(.W(10), .NSEQ(4), .LOG2B(KB)) dut_b (.clk, .rst_n, .en, .clr, .count(cnt_b), .seq(seq_b));

  // Reference: digits of c in base 2^k (least significant first), reversed.
  function automatic int unsigned vdc_ref(input int unsigned c, input int unsigned w,
                                          input int unsigned k);
    int unsigned v = 0, rest = c, left = w, dw;
    while (left > 0) begin
      dw   = (left < k) ? left : k;
      v    = v * (1 << dw) + (rest % (1 << dw));
      rest = rest / (1 << dw);
      left = left - dw;
    end
    return v;
  endfunction

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit seen_a [3][256];
  bit seen_b [4][1024];

  initial begin
    en = 1'b0; clr = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    check(cnt_a == 0 && cnt_b == 0, "reset value");
    en = 1'b1;
    for (int t = 0; t < 1024; t++) begin
      check(cnt_b == 10'(t), $sformatf("counter b at %0d", t));
      if (t < 256) begin
        check(cnt_a == 8'(t), $sformatf("counter a at %0d", t));
        for (int j = 0; j < 3; j++) begin
          check(seq_a[j] == 8'(vdc_ref(t, 8, KA[j])),
                $sformatf("a seq %0d at %0d: %0d", j, t, seq_a[j]));
          seen_a[j][seq_a[j]] = 1'b1;
        end
        check(seq_a[1] == {cnt_a[3:0], cnt_a[7:4]}, "VDC-16 wiring");
        check(seq_a[0] == {<<{cnt_a}}, "VDC-2 is bit reversal");
      end
      for (int j = 0; j < 4; j++) begin
        check(seq_b[j] == 10'(vdc_ref(t, 10, KB[j])),
              $sformatf("b seq %0d at %0d: %0d", j, t, seq_b[j]));
        seen_b[j][seq_b[j]] = 1'b1;
      end
      @(posedge clk); #1;
    end
    for (int j = 0; j < 3; j++) begin
      automatic int n = 0;
      foreach (seen_a[j][v]) n += int'(seen_a[j][v]);
      check(n == 256, $sformatf("a seq %0d permutation (%0d values)", j, n));
    end
    for (int j = 0; j < 4; j++) begin
      automatic int n = 0;
      foreach (seen_b[j][v]) n += int'(seen_b[j][v]);
      check(n == 1024, $sformatf("b seq %0d permutation (%0d values)", j, n));
    end
    // hold and clear
    repeat (5) @(posedge clk); #1;
    en = 1'b0;
    begin
      automatic logic [9:0] hold = cnt_b;
      repeat (3) @(posedge clk); #1;
      check(cnt_b == hold, "en low holds");
    end
    clr = 1'b1; en = 1'b1;
    @(posedge clk); #1;
    clr = 1'b0;
    check(cnt_a == 0 && cnt_b == 0 && seq_b[2] == 0, "clr restarts");
    @(posedge clk); #1;
    check(cnt_b == 1 && seq_b[0] == 10'd256, "first step after clr");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
