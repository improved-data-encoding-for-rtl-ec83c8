// tb_uhd_classifier: self-checking test of the end-to-end unary HDC
// classifier at reduced size: D = 256 (no level shift), 16 positions,
// 3 classes.
//
// A software model recomputes every image hypervector from the definition:
//   P'_i(t) = running parity of (bitrev(t) >= i),  L'_i(t) = (t < pixel_i),
//   H(t)    = [ sum_i (P'_i(t) == L'_i(t) ? +1 : -1) > 0 ],
// keeps its own class counters and predicts the inference results.  Checked:
// every streamed HV bit and its dimension index, `done` after D*16+2 clocks,
// the class and score of every query, that clean prototypes are classified
// correctly, that a start pulse and pixel writes during a run are ignored,
// and that a start during the memory's clearing pass is ignored.  A
// retraining epoch then queries random images under assigned labels and, for
// each one classified otherwise, trains it into its label and out of the
// class that was picked; the model follows, the prototypes are queried again,
// and at least one retraining update must have happened.
module tb_uhd_classifier;
  localparam int unsigned D = 256, NP = 16, NC = 3;
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

  logic       pix_we, am_clr, am_busy, start, train, busy, hv_valid, hv_bit, done, res_valid;
  logic [3:0] pix_addr;
  logic [7:0] pix_data;
  logic       unlearn;
  logic [1:0] label, wrong, res_class;
  logic [7:0] hv_dim;
  logic [8:0] res_score;

  uhd_classifier #(.D(D), .N_POS(NP), .N_CLASS(NC)) dut (
    .clk, .rst_n, .pix_we, .pix_addr, .pix_data, .am_clr, .am_busy, .start, .train, .label,
    .unlearn, .wrong,    .busy, .hv_valid, .hv_bit, .hv_dim, .done, .res_valid, .res_class, .res_score);

  initial begin : watchdog
    repeat (60 * (D * NP + 400)) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  byte unsigned img [NP];
  byte unsigned proto [NC][NP];
  int acc [NC][D];

  function automatic logic [D-1:0] encode_ref();
    logic [D-1:0] h;
    bit q [NP];
    foreach (q[i]) q[i] = 0;
    for (int t = 0; t < D; t++) begin
      int sum = 0;
      for (int i = 0; i < NP; i++) begin
        bit c, p, l;
        c = int'({<<{8'(t)}}) >= i;
        p = c ^ q[i];
        q[i] ^= c;
        l = t < int'(img[i]);
        sum += (p == l) ? 1 : -1;
      end
      h[t] = sum > 0;
    end
    return h;
  endfunction

  task automatic load_image();
    for (int i = 0; i < NP; i++) begin
      @(negedge clk);
      pix_we = 1'b1; pix_addr = 4'(i); pix_data = img[i];
    end
    @(negedge clk);
    pix_we = 1'b0;
  endtask

  // Runs one image; checks the HV stream; returns the class in inference.
  task automatic run(input bit tr, input int lab, output int got,
                     input bit unl = 1'b0, input int wr = 0);
    logic [D-1:0] h;
    int cycles = 0, nbits = 0;
    h = encode_ref();
    @(negedge clk);
    start = 1'b1; train = tr; label = 2'(lab); unlearn = unl; wrong = 2'(wr);
    @(negedge clk);
    start = 1'b0; unlearn = 1'b0; wrong = '0;
    cycles = 1;
    while (!done) begin
      if (cycles == 100) begin       // disturbances during the run
        start = 1'b1; pix_we = 1'b1; pix_addr = 4'd3; pix_data = 8'hAA;
      end else begin
        start = 1'b0; pix_we = 1'b0;
      end
      if (hv_valid) begin
        check(hv_dim == 8'(nbits), "dimension order");
        check(hv_bit == h[hv_dim], $sformatf("HV bit %0d", hv_dim));
        nbits++;
      end
      @(negedge clk);
      cycles++;
    end
    start = 1'b0; pix_we = 1'b0;
    check(hv_bit == h[D - 1] && hv_dim == 8'(D - 1), "last HV bit");
    nbits++;
    check(nbits == D, $sformatf("%0d HV bits", nbits));
    check(cycles == D * NP + 2, $sformatf("image took %0d clocks", cycles));
    if (tr) begin
      for (int d = 0; d < D; d++) acc[lab][d] += h[d] ? 1 : -1;
      if (unl && wr != lab)
        for (int d = 0; d < D; d++) acc[wr][d] -= h[d] ? 1 : -1;
      got = lab;
    end else begin
      int best = 0, best_s = -1;
      for (int k = 0; k < NC; k++) begin
        int s = 0;
        for (int d = 0; d < D; d++) s += int'(h[d] == (acc[k][d] > 0));
        if (s > best_s) begin best = k; best_s = s; end
      end
      @(negedge clk);
      check(res_valid, "result one clock after done");
      check(int'(res_class) == best && int'(res_score) == best_s,
            $sformatf("class %0d/%0d score %0d/%0d", res_class, best, res_score, best_s));
      got = int'(res_class);
    end
  endtask

  initial begin
    int got, correct, retrains;
    correct = 0; retrains = 0;
    pix_we = 0; am_clr = 0; start = 0; train = 0; label = '0; unlearn = 0; wrong = '0; pix_addr = '0; pix_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    am_clr = 1'b1;
    @(negedge clk);
    am_clr = 1'b0;
    start  = 1'b1;                       // must be ignored: memory busy
    @(negedge clk);
    start  = 1'b0;
    check(!busy, "start ignored while the memory clears");
    while (am_busy) @(negedge clk);
    foreach (acc[k, d]) acc[k][d] = 0;
    for (int k = 0; k < NC; k++)
      for (int i = 0; i < NP; i++) proto[k][i] = 8'($urandom);
    // training: prototype and two variants per class
    for (int k = 0; k < NC; k++) begin
      for (int r = 0; r < 3; r++) begin
        foreach (img[i]) img[i] = (r == 0) ? proto[k][i]
                                 : 8'(int'(proto[k][i]) + int'($urandom_range(20, 0)) - 10);
        load_image();
        run(1'b1, k, got);
      end
    end
    // inference
    for (int k = 0; k < NC; k++) begin
      foreach (img[i]) img[i] = proto[k][i];
      load_image();
      run(1'b0, 0, got);
      correct += int'(got == k);
      foreach (img[i]) img[i] = 8'($urandom);
      load_image();
      run(1'b0, 0, got);
    end
    check(correct == NC, $sformatf("%0d of %0d prototypes classified", correct, NC));
    // retraining epoch
    for (int r = 0; r < 4; r++) begin
      foreach (img[i]) img[i] = 8'($urandom);
      load_image();
      run(1'b0, 0, got);
      if (got != r % NC) begin
        run(1'b1, r % NC, got, 1'b1, got);
        retrains++;
      end
    end
    for (int k = 0; k < NC; k++) begin
      foreach (img[i]) img[i] = proto[k][i];
      load_image();
      run(1'b0, 0, got);
    end
    check(retrains > 0, "retraining update happened");
    $display("retraining updates %0d", retrains);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
