// tb_sc_sin: self-checking test of the stochastic sin(x) unit at its
// default 1024-bit stream length.
//
// For every input x = 0..1023 the test runs one conversion and compares
//  * y_count with a bit-level software model of the circuit (own VDC
//    arithmetic, own delay line, the Horner form of the Maclaurin series),
//  * y_count / 1024 with $sin(x / 1024): the mean squared error over the
//    sweep must stay below 0.6e-4 (the published figure for this design at
//    N = 1024 is 0.523e-4), and no single error may exceed 0.03,
//  * the latency: done exactly 1025 clocks after the start clock (1024 bits, then one clock), and
//    y_valid high for exactly 1024 clocks.
module tb_sc_sin;
  localparam int unsigned NB = 10;
  localparam int unsigned N  = 1 << NB;

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

  logic          start, busy, y_bit, y_valid, done;
  logic [NB-1:0] x;
  logic [NB:0]   y_count;

  sc_sin dut (.clk, .rst_n, .start, .x, .busy, .y_bit, .y_valid, .done, .y_count);

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

  function automatic int unsigned model(input int unsigned xv);
    int unsigned ones = 0;
    bit d1 = 0, d2 = 0;
    for (int unsigned t = 0; t < N; t++) begin
      bit xs, a, b, c, x2, f1, f2, f3;
      xs = xv > vdc_ref(t, NB, 2);
      a  = 24  > vdc_ref(t, NB, 7);
      b  = 51  > vdc_ref(t, NB, 8);
      c  = 171 > vdc_ref(t, NB, 9);
      x2 = xs && d2;
      f1 = !(x2 && a);
      f2 = !(x2 && b && f1);
      f3 = !(x2 && c && f2);
      ones += int'(d2 && f3);
      d2 = d1;
      d1 = xs;
    end
    return ones;
  endfunction

  initial begin : watchdog
    repeat (N * (N + 8) + 100) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real mse = 0.0, maxe = 0.0;
    start = 1'b0; x = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int xv = 0; xv < N; xv++) begin
      automatic int cycles = 0, valids = 0, exp_v;
      real err;
      x <= NB'(xv);
      start <= 1'b1;
      @(posedge clk);
      start <= 1'b0;
      while (!done) begin
        @(posedge clk);
        cycles++;
        valids += int'(y_valid);
      end
      check(cycles == N + 1, $sformatf("latency %0d for x=%0d", cycles, xv));
      check(valids == N, $sformatf("valid bits %0d for x=%0d", valids, xv));
      exp_v = int'(model(xv));
      check(int'(y_count) == exp_v,
            $sformatf("x=%0d: count %0d, model %0d", xv, y_count, exp_v));
      err  = real'(y_count) / N - $sin(real'(xv) / N);
      mse += err * err;
      if (err < 0) err = -err;
      if (err > maxe) maxe = err;
    end
    mse = mse / N;
    $display("sin(x): MSE = %0.4f e-4, max abs error = %0.4f", mse * 1e4, maxe);
    check(mse < 0.6e-4, "MSE over the sweep");
    check(maxe < 0.03, "max abs error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
