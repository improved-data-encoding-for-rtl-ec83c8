// tb_vdc_encoding_top: end-to-end test of the whole design at its default
// sizes (1024-bit sin(x) streams, 256-bit division streams, D = 1024
// hypervectors of 784-pixel images, 10 classes).
//
// While the HDC classifier is being trained and queried, the sin(x) and
// division engines run conversions side by side.  Every result is compared
// with an independent software model:
//   * sin(x): a bit-level model of the Horner network, plus |Y - sin x| < 0.03;
//   * x/y:    a bit-level model of the correlation-controlled divider, plus
//             |Q - x/y| < 0.17 (the worst case over all 8-bit x <= y);
//   * HDC:    every image-HV bit recomputed from the definition of the
//             position HVs (parity of bitrev(t) >= i), level HVs (t < 4*pixel)
//             and bundling, and the winning class and score of every query
//             recomputed from the model's own class counters.
// The mechanisms of the design are counted and each must occur: sin and
// division conversions, the divider's controller running empty and its hold
// path, memory clearing, training, inference, a correct classification of
// every trained prototype, both saturated level HVs (pixel 0 and 255), and
// one retraining update: a random image is queried, then trained under
// another label with `unlearn` taking it out of the class that was picked,
// and queried again against the model's updated counters.
module tb_vdc_encoding_top;
  localparam int unsigned D = 1024, NP = 784, NC = 10;
  localparam int unsigned N_TRAIN = NC;       // one prototype per class
  localparam int unsigned N_QUERY = 4;         // noisy prototype queries

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

  logic        sin_start, sin_busy, sin_y_bit, sin_y_valid, sin_done;
  logic [9:0]  sin_x;
  logic [10:0] sin_y_count;
  logic        div_start, div_busy, div_q_bit, div_q_valid, div_done;
  logic [7:0]  div_x, div_y;
  logic [8:0]  div_q_count;
  logic        hd_pix_we, hd_am_clr, hd_am_busy, hd_start, hd_train, hd_busy;
  logic        hd_hv_valid, hd_hv_bit, hd_done, hd_res_valid;
  logic [9:0]  hd_pix_addr, hd_hv_dim;
  logic [7:0]  hd_pix_data;
  logic        hd_unlearn;
  logic [3:0]  hd_label, hd_wrong, hd_res_class;
  logic [10:0] hd_res_score;

  vdc_encoding_top dut (.*);

  initial begin : watchdog
    repeat ((N_TRAIN + N_QUERY + 4) * (D * NP + 2000)) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- models
  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

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

  function automatic int sin_model(input int unsigned xv);
    int ones = 0;
    bit d1 = 0, d2 = 0;
    for (int unsigned t = 0; t < 1024; t++) begin
      bit xs, x2, f1, f2, f3;
      xs = xv > vdc_ref(t, 10, 2);
      x2 = xs && d2;
      f1 = !(x2 && (24  > vdc_ref(t, 10, 7)));
      f2 = !(x2 && (51  > vdc_ref(t, 10, 8)) && f1);
      f3 = !(x2 && (171 > vdc_ref(t, 10, 9)) && f2);
      ones += int'(d2 && f3);
      d2 = d1;
      d1 = xs;
    end
    return ones;
  endfunction

  int div_empty = 0, div_hold = 0;
  function automatic int div_model(input int unsigned xv, input int unsigned yv);
    int unsigned c = xv;
    int ones = 0;
    bit z = 0;
    for (int unsigned t = 0; t < 256; t++) begin
      bit ys, xs;
      ys = yv > vdc_ref(t, 8, 1);
      xs = ys && (c != 0);
      if (ys && c == 0) div_empty++;
      if (!ys) div_hold++;
      if (xs) c--;
      if (ys) z = xs;
      ones += int'(z);
    end
    return ones;
  endfunction

  byte unsigned img [NP];
  byte unsigned proto [NC][NP];
  int acc [NC][D];

  function automatic logic [D-1:0] hdc_model();
    logic [D-1:0] h;
    bit q [NP];
    foreach (q[i]) q[i] = 0;
    for (int t = 0; t < D; t++) begin
      int sum = 0;
      int unsigned v = vdc_ref(t, 10, 1);
      for (int i = 0; i < NP; i++) begin
        bit c, p, l;
        c = v >= i;
        p = c ^ q[i];
        q[i] ^= c;
        l = t < 4 * int'(img[i]);
        sum += (p == l) ? 1 : -1;
      end
      h[t] = sum > 0;
    end
    return h;
  endfunction

  // ------------------------------------------------------ SC side traffic
  int sin_runs = 0, div_runs = 0;
  bit sc_stop = 0;

  initial begin : sc_traffic
    sin_start = 0; sin_x = '0; div_start = 0; div_x = '0; div_y = '0;
    @(posedge rst_n);
    while (!sc_stop) begin
      automatic int xv = int'($urandom_range(1023, 0));
      automatic int yv = int'($urandom_range(255, 1));
      automatic int dx = int'($urandom_range(yv, 0));
      automatic int es, ed;
      @(negedge clk);
      sin_x = 10'(xv); sin_start = 1'b1;
      div_x = 8'(dx); div_y = 8'(yv); div_start = 1'b1;
      @(negedge clk);
      sin_start = 1'b0; div_start = 1'b0;
      es = sin_model(xv);
      ed = div_model(dx, yv);
      fork
        begin
          while (!sin_done) @(negedge clk);
          check(int'(sin_y_count) == es, $sformatf("sin x=%0d: %0d vs %0d", xv, sin_y_count, es));
          check(fabs(real'(sin_y_count) / 1024.0 - $sin(real'(xv) / 1024.0)) < 0.03, "sin accuracy");
          sin_runs++;
        end
        begin
          while (!div_done) @(negedge clk);
          check(int'(div_q_count) == ed, $sformatf("div %0d/%0d: %0d vs %0d", dx, yv, div_q_count, ed));
          check(fabs(real'(div_q_count) / 256.0 - real'(dx) / real'(yv)) < 0.17, "div accuracy");
          div_runs++;
        end
      join
    end
  end

  // ------------------------------------------------------------- HDC side
  int n_train = 0, n_infer = 0, n_correct = 0, n_clear = 0, n_retrain = 0;
  bit seen_black = 0, seen_white = 0;

  task automatic load_image();
    for (int i = 0; i < NP; i++) begin
      @(negedge clk);
      hd_pix_we = 1'b1; hd_pix_addr = 10'(i); hd_pix_data = img[i];
      if (img[i] == 0)   seen_black = 1;
      if (img[i] == 255) seen_white = 1;
    end
    @(negedge clk);
    hd_pix_we = 1'b0;
  endtask

  task automatic run_image(input bit tr, input int lab, output int got,
                           input bit unl = 1'b0, input int wr = 0);
    logic [D-1:0] h;
    int nbits = 0, cycles = 1;
    h = hdc_model();
    @(negedge clk);
    hd_start = 1'b1; hd_train = tr; hd_label = 4'(lab); hd_unlearn = unl; hd_wrong = 4'(wr);
    @(negedge clk);
    hd_start = 1'b0; hd_unlearn = 1'b0; hd_wrong = '0;
    while (!hd_done) begin
      if (hd_hv_valid) begin
        check(hd_hv_dim == 10'(nbits) && hd_hv_bit == h[hd_hv_dim], $sformatf("HV bit %0d", nbits));
        nbits++;
      end
      @(negedge clk);
      cycles++;
    end
    check(hd_hv_bit == h[D - 1], "last HV bit");
    check(cycles == D * NP + 2, $sformatf("image took %0d clocks", cycles));
    if (tr) begin
      for (int d = 0; d < D; d++) acc[lab][d] += h[d] ? 1 : -1;
      if (unl && wr != lab) begin
        for (int d = 0; d < D; d++) acc[wr][d] -= h[d] ? 1 : -1;
        n_retrain++;
      end
      got = lab;
      n_train++;
    end else begin
      int best = 0, best_s = -1;
      for (int k = 0; k < NC; k++) begin
        int s = 0;
        for (int d = 0; d < D; d++) s += int'(h[d] == (acc[k][d] > 0));
        if (s > best_s) begin best = k; best_s = s; end
      end
      @(negedge clk);
      check(hd_res_valid && int'(hd_res_class) == best && int'(hd_res_score) == best_s,
            $sformatf("class %0d/%0d score %0d/%0d", hd_res_class, best, hd_res_score, best_s));
      got = int'(hd_res_class);
      n_infer++;
    end
  endtask

  initial begin : hdc_flow
    int got;
    hd_pix_we = 0; hd_am_clr = 0; hd_start = 0; hd_train = 0; hd_label = '0;
    hd_unlearn = 0; hd_wrong = '0;
    hd_pix_addr = '0; hd_pix_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    hd_am_clr = 1'b1;
    @(negedge clk);
    hd_am_clr = 1'b0;
    while (hd_am_busy) @(negedge clk);
    n_clear++;
    foreach (acc[k, d]) acc[k][d] = 0;
    // Class prototypes: a blank background with a class-specific bright bar
    // and some random grey pixels.
    for (int k = 0; k < NC; k++)
      for (int i = 0; i < NP; i++) begin
        automatic int r = i / 28, c = i % 28;
        if ((r + c * (k + 1)) % 11 < 3) proto[k][i] = 8'd255;
        else if ($urandom_range(9, 0) == 0) proto[k][i] = 8'($urandom);
        else proto[k][i] = 8'd0;
      end
    for (int k = 0; k < N_TRAIN; k++) begin
      foreach (img[i]) img[i] = proto[k % NC][i];
      load_image();
      run_image(1'b1, k % NC, got);
      $display("trained class %0d", k % NC);
    end
    for (int q = 0; q < N_QUERY; q++) begin
      automatic int k = int'($urandom_range(NC - 1, 0));
      foreach (img[i]) img[i] = ($urandom_range(19, 0) == 0) ? 8'($urandom) : proto[k][i];
      load_image();
      run_image(1'b0, 0, got);
      n_correct += int'(got == k);
      $display("query of class %0d classified as %0d", k, got);
    end
    // retraining update on a random image given a label it was not assigned
    foreach (img[i]) img[i] = 8'($urandom);
    load_image();
    run_image(1'b0, 0, got);
    run_image(1'b1, (got + 1) % NC, got, 1'b1, got);
    run_image(1'b0, 0, got);
    sc_stop = 1;
    while (sin_busy || div_busy) @(negedge clk);
    repeat (3) @(negedge clk);
    $display("mechanisms: sin %0d, div %0d (controller empty %0d, hold %0d), clear %0d, train %0d, infer %0d, correct %0d, retrain %0d",
             sin_runs, div_runs, div_empty, div_hold, n_clear, n_train, n_infer, n_correct, n_retrain);
    check(sin_runs > 0, "sin conversions happened");
    check(div_runs > 0, "division conversions happened");
    check(div_empty > 0, "divider controller ran empty");
    check(div_hold > 0, "divider hold path used");
    check(n_clear > 0, "class memory cleared");
    check(n_train == N_TRAIN + 1, "training images");
    check(n_infer == N_QUERY + 2, "inference queries");
    check(n_retrain == 1, "retraining update happened");
    check(n_correct == N_QUERY, "noisy prototypes classified correctly");
    check(seen_black && seen_white, "both saturated level HVs used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
