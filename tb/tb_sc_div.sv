// tb_sc_div: self-checking test of the stochastic divider (8-bit streams).
//
// For every divisor y = 1..255 and a set of dividends x <= y (0, y, y/2 and
// random values) one division is run.  q_count is compared with a bit-level
// software model of the circuit, and q_count / 256 with x / y: the mean
// absolute error must stay below 1%.  Latency: done 256 clocks after the
// start clock.  The test also counts how often the correlation controller's
// counter ran empty and how often the hold path (Y = 0) was taken.
module tb_sc_div;
  localparam int unsigned NB = 8;
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

  logic          start, busy, q_bit, q_valid, done;
  logic [NB-1:0] x, y;
  logic [NB:0]   q_count;

  sc_div dut (.clk, .rst_n, .start, .x, .y, .busy, .q_bit, .q_valid, .done, .q_count);

  function automatic int unsigned model(input int unsigned xv, input int unsigned yv);
    int unsigned c = xv, ones = 0;
    bit z = 0;
    for (int unsigned t = 0; t < N; t++) begin
      bit ys, xs;
      ys = yv > int'({<<{8'(t)}});
      xs = ys && (c != 0);
      if (ys && c == 0) empties++;
      if (!ys) holds++;
      if (xs) c--;
      if (ys) z = xs;
      ones += int'(z);
    end
    return ones;
  endfunction

  initial begin : watchdog
    repeat (300 * 255 * 6) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Mechanism counters, kept by the model for the same stimulus.
  int empties = 0, holds = 0;

  initial begin
    real mae = 0.0;
    int  runs = 0;
    start = 1'b0; x = '0; y = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int yv = 1; yv < 256; yv++) begin
      for (int r = 0; r < 5; r++) begin
        automatic int xv, exp_v, cycles = 0;
        real err;
        case (r)
          0: xv = 0;
          1: xv = yv;
          2: xv = yv / 2;
          default: xv = int'($urandom_range(yv, 0));
        endcase
        x <= NB'(xv);
        y <= NB'(yv);
        start <= 1'b1;
        @(posedge clk);
        start <= 1'b0;
        while (!done) begin
          @(posedge clk);
          cycles++;
        end
        check(cycles == N + 1, $sformatf("latency %0d", cycles));
        exp_v = model(xv, yv);
        check(int'(q_count) == exp_v,
              $sformatf("x=%0d y=%0d: count %0d, model %0d", xv, yv, q_count, exp_v));
        err = real'(q_count) / N - real'(xv) / real'(yv);
        mae += (err < 0) ? -err : err;
        runs++;
      end
    end
    mae = mae / runs;
    $display("x/y: mean abs error = %0.3f %% over %0d divisions; controller empty %0d times, hold %0d times",
             mae * 100.0, runs, empties, holds);
    check(mae < 0.01, "mean absolute error");
    check(empties > 0, "correlation controller ran empty");
    check(holds > 0, "hold path used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
