// tb_sin_lengths: the sin(x) unit at the shorter stream lengths of its
// evaluation, 512 bits (bases VDC-4 / 128 / 256 / 512) and 256 bits (VDC-4
// for the input, VDC-128 for all three coefficients).  All inputs of each
// length are run; each result is compared with a bit-level model and the
// mean squared error against $sin must stay below 0.65e-4 (published values
// for these lengths: 0.582e-4 and 0.576e-4).  Latency is 2^N + 1 clocks.
module tb_sin_lengths;
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

  logic       start9, busy9, y9, v9, done9;
  logic [8:0] x9;
  logic [9:0] cnt9;
  logic       start8, busy8, y8, v8, done8;
  logic [7:0] x8;
  logic [8:0] cnt8;

  sc_sin #(.N_BITS(9), .K_X(2), .K_C42(7), .K_C20(8), .K_C6(9), .C42(12), .C20(26), .C6(85)) dut9 (
    .clk, .rst_n, .start(start9), .x(x9), .busy(busy9), .y_bit(y9), .y_valid(v9), .done(done9), .y_count(cnt9));
  sc_sin #(.N_BITS(8), .K_X(2), .K_C42(7), .K_C20(7), .K_C6(7), .C42(6), .C20(13), .C6(43)) dut8 (
    .clk, .rst_n, .start(start8), .x(x8), .busy(busy8), .y_bit(y8), .y_valid(v8), .done(done8), .y_count(cnt8));

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

  function automatic int model(input int unsigned xv, input int unsigned nb,
                               input int unsigned kc [3], input int unsigned cv [3]);
    int ones = 0;
    bit d1 = 0, d2 = 0;
    for (int unsigned t = 0; t < (1 << nb); t++) begin
      bit xs, x2, f1, f2, f3;
      xs = xv > vdc_ref(t, nb, 2);
      x2 = xs && d2;
      f1 = !(x2 && (cv[0] > vdc_ref(t, nb, kc[0])));
      f2 = !(x2 && (cv[1] > vdc_ref(t, nb, kc[1])) && f1);
      f3 = !(x2 && (cv[2] > vdc_ref(t, nb, kc[2])) && f2);
      ones += int'(d2 && f3);
      d2 = d1;
      d1 = xs;
    end
    return ones;
  endfunction

  initial begin : watchdog
    repeat (600 * 520 + 260 * 260 + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real mse9 = 0.0, mse8 = 0.0;
    start9 = 0; start8 = 0; x9 = '0; x8 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int xv = 0; xv < 512; xv++) begin
      automatic int cycles = 0, e;
      automatic real err;
      @(negedge clk);
      x9 = 9'(xv); start9 = 1'b1;
      @(negedge clk);
      start9 = 1'b0;
      cycles = 1;
      while (!done9) begin @(negedge clk); cycles++; end
      check(cycles == 513, $sformatf("512-bit latency %0d", cycles));
      e = model(xv, 9, '{7, 8, 9}, '{12, 26, 85});
      check(int'(cnt9) == e, $sformatf("N=512 x=%0d: %0d vs %0d", xv, cnt9, e));
      err = real'(cnt9) / 512.0 - $sin(real'(xv) / 512.0);
      mse9 += err * err;
    end
    for (int xv = 0; xv < 256; xv++) begin
      automatic int cycles = 0, e;
      automatic real err;
      @(negedge clk);
      x8 = 8'(xv); start8 = 1'b1;
      @(negedge clk);
      start8 = 1'b0;
      cycles = 1;
      while (!done8) begin @(negedge clk); cycles++; end
      check(cycles == 257, $sformatf("256-bit latency %0d", cycles));
      e = model(xv, 8, '{7, 7, 7}, '{6, 13, 43});
      check(int'(cnt8) == e, $sformatf("N=256 x=%0d: %0d vs %0d", xv, cnt8, e));
      err = real'(cnt8) / 256.0 - $sin(real'(xv) / 256.0);
      mse8 += err * err;
    end
    mse9 /= 512.0;
    mse8 /= 256.0;
    $display("sin(x): MSE N=512 %0.4f e-4, N=256 %0.4f e-4", mse9 * 1e4, mse8 * 1e4);
    check(mse9 < 0.65e-4, "MSE at N=512");
    check(mse8 < 0.65e-4, "MSE at N=256");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
