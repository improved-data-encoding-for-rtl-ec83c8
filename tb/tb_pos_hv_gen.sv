// tb_pos_hv_gen: self-checking test of the position-hypervector generator
// with D = 256 and 160 positions (so that seed 120 of the paper's example is
// present).  The test walks dimensions in the outer loop and positions in
// the inner loop, as the classifier does, feeding the bit-reversed dimension
// index as the VDC-2 value, and compares every bit with a software model
// (per-position parity of the comparator stream).  It also checks that the
// HV of seed 120 has exactly D/2 ones, that at least 70% of the seeds give
// exactly D/2 ones, and that clr restarts the flip-flops.
module tb_pos_hv_gen;
  localparam int unsigned D = 256, NP = 160;
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

  logic       clr, step, p_bit;
  logic [7:0] pos, vdc;

  pos_hv_gen #(.D(D), .N_POS(NP)) dut (.clk, .rst_n, .clr, .step, .pos, .vdc, .p_bit);

  initial begin : watchdog
    repeat (3 * D * NP) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit q [NP];
  int ones [NP];

  initial begin
    int balanced = 0;
    clr = 1'b0; step = 1'b0; pos = '0; vdc = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int pass = 0; pass < 2; pass++) begin
      @(negedge clk);
      clr = 1'b1;
      @(negedge clk);
      clr = 1'b0;
      foreach (q[i]) begin q[i] = 0; ones[i] = 0; end
      for (int t = 0; t < D; t++) begin
        for (int i = 0; i < NP; i++) begin
          bit c, exp_v;
          pos  = 8'(i);
          vdc  = {<<{8'(t)}};
          step = 1'b1;
          c      = (int'(vdc) >= i);
          exp_v = c ^ q[i];
          q[i]   = q[i] ^ c;
          ones[i] += int'(exp_v);
          #1;
          check(p_bit == exp_v, $sformatf("pass %0d t=%0d pos=%0d", pass, t, i));
          @(negedge clk);
        end
      end
      step = 1'b0;
    end
    check(ones[120] == D / 2, $sformatf("seed 120 gives %0d ones", ones[120]));
    foreach (ones[i]) balanced += int'(ones[i] == D / 2);
    $display("%0d of %0d position HVs have exactly D/2 ones", balanced, NP);
    check(balanced * 10 >= NP * 7, "balanced position HVs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
