// tb_hdc_encoder: self-checking test of binding/bundling/sign at N_POS = 784.
// Random position and level bits are fed for 300 dimensions, with random
// idle clocks in between and with biased bit probabilities so that both
// signs and exact ties occur; the result is compared with a software sum of
// bipolar products (tie -> 0).  The result latency must be one clock.
module tb_hdc_encoder;
  localparam int unsigned NP = 784;
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

  logic valid, first, last, p_bit, l_bit, hv_valid, hv_bit;

  hdc_encoder #(.N_POS(NP)) dut (.clk, .rst_n, .valid, .first, .last, .p_bit, .l_bit, .hv_valid, .hv_bit);

  initial begin : watchdog
    repeat (400 * (NP + 40)) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pos = 0, neg = 0, ties = 0;
    valid = 0; first = 0; last = 0; p_bit = 0; l_bit = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      automatic int sum = 0;
      automatic int bias = int'($urandom_range(100, 0));
      for (int i = 0; i < NP; i++) begin
        @(negedge clk);
        if (t % 7 == 3 && i == 390) begin           // idle clocks mid-dimension
          valid = 0; @(negedge clk); @(negedge clk);
        end
        valid = 1; first = (i == 0); last = (i == NP - 1);
        if (t % 5 == 0) begin                         // force an exact tie
          p_bit = 1'b1; l_bit = (i % 2 == 0);
        end else begin
          p_bit = ($urandom_range(99, 0) < bias);
          l_bit = ($urandom_range(1, 0) == 1);
        end
        sum += (p_bit == l_bit) ? 1 : -1;
      end
      @(negedge clk);
      valid = 0; first = 0; last = 0;
      check(hv_valid == 1'b1, "hv_valid one clock after last");
      check(hv_bit == (sum > 0), $sformatf("dim %0d sum %0d gave %0b", t, sum, hv_bit));
      if (sum > 0) pos++; else if (sum < 0) neg++; else ties++;
      @(negedge clk);
      check(hv_valid == 1'b0, "hv_valid is a pulse");
    end
    $display("positive %0d, negative %0d, ties %0d", pos, neg, ties);
    check(pos > 0 && neg > 0 && ties > 0, "all sign cases exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
