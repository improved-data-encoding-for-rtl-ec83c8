// tb_sc_comparator: exhaustive test of a 5-bit stream comparator and a
// check that one full VDC-2 period yields exactly `value` ones.
module tb_sc_comparator;
  int checks = 0, failures = 0;
  logic [4:0] value, rnd;
  logic       b;

  sc_comparator #(.W(5)) dut (.value, .rnd, .bit_o(b));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 32; v++) begin
      automatic int ones = 0;
      for (int r = 0; r < 32; r++) begin
        value = 5'(v);
        rnd   = {<<{5'(r)}};           // bit-reversed counter: VDC-2
        #1;
        checks++;
        if (b !== (v > int'(rnd))) begin
          failures++;
          if (failures < 20) $display("FAIL: value %0d rnd %0d gave %0b", v, rnd, b);
        end
        ones += int'(b);
      end
      checks++;
      if (ones != v) begin
        failures++;
        $display("FAIL: value %0d gave %0d ones", v, ones);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
