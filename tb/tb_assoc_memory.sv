// tb_assoc_memory: self-checking test of the associative memory with
// D = 64, 4 classes and 6-bit counters (small enough to reach saturation).
//
// The memory is cleared (busy must last D clocks), then trained with noisy
// copies of one random prototype per class (class 0 gets 40 identical copies
// so its counters saturate at +-31), then queried with noisy prototypes.
// A software model keeps its own counters with the same saturation and
// computes the expected class and score (agreements with the sign of the
// counters, ties to the lower class).  Checked: res_valid one clock after the
// last bit, class, score, and that saturation and a correct classification
// of every clean prototype happened.  A retraining epoch follows: heavily
// noisy copies are queried and every misclassified one is trained into its
// class and out of the class that was picked (unlearn); the model applies the
// same rule, and at least one such update must happen.  A second clear must
// empty the memory.
module tb_assoc_memory;
  localparam int unsigned D = 64, NC = 4, AW = 6;
  localparam int AMAX = (1 << (AW - 1)) - 1, AMIN = -(1 << (AW - 1));
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

  logic       clr, train, unlearn, hv_valid, hv_bit, hv_last, busy, res_valid;
  logic [1:0] label, wrong, res_class;
  logic [5:0] hv_dim;
  logic [6:0] res_score;

  assoc_memory #(.D(D), .N_CLASS(NC), .ACC_W(AW)) dut (
    .clk, .rst_n, .clr, .train, .label, .unlearn, .wrong, .hv_valid, .hv_dim, .hv_bit, .hv_last,
    .busy, .res_valid, .res_class, .res_score);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int acc [NC][D];
  logic [D-1:0] proto [NC];
  int saturations = 0;

  function automatic logic [D-1:0] noisy(input logic [D-1:0] v, input int flips);
    for (int f = 0; f < flips; f++) v[$urandom_range(D - 1, 0)] ^= 1'b1;
    return v;
  endfunction

  task automatic do_clear();
    int n = 0;
    @(negedge clk);
    clr = 1'b1;
    @(negedge clk);
    clr = 1'b0;
    while (busy) begin
      n++;
      @(negedge clk);
    end
    check(n == D, $sformatf("clear took %0d clocks", n));
    foreach (acc[k, d]) acc[k][d] = 0;
  endtask

  task automatic send(input logic [D-1:0] v, input bit tr, input int lab,
                      input bit unl = 1'b0, input int wr = 0);
    for (int d = 0; d < D; d++) begin
      @(negedge clk);
      hv_valid = 1'b1; hv_dim = 6'(d); hv_bit = v[d]; hv_last = (d == D - 1);
      train = tr; label = 2'(lab); unlearn = unl; wrong = 2'(wr);
      if (tr) begin
        if (v[d] && acc[lab][d] < AMAX) acc[lab][d]++;
        else if (!v[d] && acc[lab][d] > AMIN) acc[lab][d]--;
        else saturations++;
        if (unl && wr != lab) begin
          if (v[d] && acc[wr][d] > AMIN) acc[wr][d]--;
          else if (!v[d] && acc[wr][d] < AMAX) acc[wr][d]++;
        end
      end
    end
    @(negedge clk);
    hv_valid = 1'b0; hv_last = 1'b0;
  endtask

  task automatic query(input logic [D-1:0] v, output int got);
    int best = 0, best_s = -1;
    for (int k = 0; k < NC; k++) begin
      int s = 0;
      for (int d = 0; d < D; d++) s += int'(v[d] == (acc[k][d] > 0));
      if (s > best_s) begin best = k; best_s = s; end
    end
    send(v, 1'b0, 0);
    check(res_valid == 1'b1, "res_valid one clock after the last bit");
    check(int'(res_class) == best && int'(res_score) == best_s,
          $sformatf("class %0d score %0d, expected %0d / %0d", res_class, res_score, best, best_s));
    got = int'(res_class);
  endtask

  initial begin
    int got, correct, retrains;
    correct = 0; retrains = 0;
    clr = 0; train = 0; label = '0; unlearn = 0; wrong = '0; hv_valid = 0; hv_dim = '0; hv_bit = 0; hv_last = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    do_clear();
    foreach (proto[k]) proto[k] = {$urandom, $urandom};
    for (int r = 0; r < 40; r++) send(proto[0], 1'b1, 0);
    for (int k = 1; k < NC; k++)
      for (int r = 0; r < 6; r++) send(noisy(proto[k], 6), 1'b1, k);
    for (int k = 0; k < NC; k++) begin
      query(proto[k], got);
      correct += int'(got == k);
    end
    for (int r = 0; r < 20; r++) query(noisy(proto[r % NC], 12), got);
    check(correct == NC, $sformatf("%0d of %0d clean prototypes classified", correct, NC));
    check(saturations > 0, "counter saturation reached");
    // retraining epoch
    for (int r = 0; r < 40; r++) begin
      automatic logic [D-1:0] v = noisy(proto[1 + r % (NC - 1)], 32);
      query(v, got);
      if (got != 1 + r % (NC - 1)) begin
        send(v, 1'b1, 1 + r % (NC - 1), 1'b1, got);
        retrains++;
      end
    end
    // unlearn with wrong == label must act as plain training
    send(proto[3], 1'b1, 3, 1'b1, 3);
    for (int k = 0; k < NC; k++) query(proto[k], got);
    check(retrains > 0, "retraining update happened");
    do_clear();
    query(proto[2], got);   // all class HVs are zero after clear: class 0 wins
    $display("saturations %0d, retraining updates %0d", saturations, retrains);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
