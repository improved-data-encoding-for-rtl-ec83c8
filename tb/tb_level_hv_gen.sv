// tb_level_hv_gen: self-checking test of the unary level-hypervector
// generator at D = 1024 (C = 2 shifts).  For a set of pixel values (the
// paper's examples 75 and 76, the extremes and random ones) the whole HV is
// read while the counter advances; it must be p*4 leading ones followed by
// zeros.  Neighbouring values must differ in exactly 4 bits.  clr must
// return the counter to 0.
module tb_level_hv_gen;
  localparam int unsigned D = 1024;
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

  logic       clr, adv, l_bit;
  logic [7:0] pixel;
  logic [9:0] dim;

  level_hv_gen #(.D(D)) dut (.clk, .rst_n, .clr, .adv, .pixel, .dim, .l_bit);

  initial begin : watchdog
    repeat (40 * D) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [D-1:0] hv75, hv76;

  task automatic run(input int p, output logic [D-1:0] hv);
    @(negedge clk);
    clr = 1'b1; adv = 1'b0; pixel = 8'(p);
    @(negedge clk);
    clr = 1'b0; adv = 1'b1;
    for (int t = 0; t < D; t++) begin
      #1;
      check(dim == 10'(t), "counter value");
      hv[t] = l_bit;
      check(l_bit == (t < 4 * p), $sformatf("pixel %0d bit %0d", p, t));
      @(negedge clk);
    end
    adv = 1'b0;
  endtask

  initial begin
    logic [D-1:0] hv;
    int vals [6] = '{0, 255, 75, 76, 128, 1};
    clr = 1'b0; adv = 1'b0; pixel = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    foreach (vals[i]) begin
      run(vals[i], hv);
      if (vals[i] == 75) hv75 = hv;
      if (vals[i] == 76) hv76 = hv;
      check($countones(hv) == 4 * vals[i], $sformatf("ones for pixel %0d", vals[i]));
    end
    for (int r = 0; r < 10; r++) run(int'($urandom_range(255, 0)), hv);
    check($countones(hv75 ^ hv76) == 4, "neighbouring levels differ in 2^C bits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
