// assoc_memory: associative memory of class hypervectors.
//
// For every dimension d and class k it keeps a signed counter acc[d][k]; the
// class hypervector is the sign of those counters (bit 1 when acc > 0).
// Training adds an image hypervector to the counters of its class, +1 for a
// 1 bit and -1 for a 0 bit (bundling, with saturation at the counter range).
// For retraining epochs a training pass can also take the same hypervector
// away from a second class (`unlearn`, class `wrong`): the host runs an
// inference first and, if it picked the wrong class, trains the image into
// its true class and out of the class that was picked.
// Inference walks the query hypervector bit by bit and counts, for every
// class at once, the dimensions in which the query agrees with the class HV.
// After the last dimension the class with the most agreements wins (ties go
// to the lower index).  For bipolar vectors cosine similarity equals
// (2*agreements - D)/D, so this ranks the classes as cosine similarity would.
//
// From the paper: class HVs made by bundling and sign, held in an associative
// memory and compared with a query.  This design's own: agreement counting
// instead of a cosine computation, the counter width and saturation, the
// retraining rule (the paper only says that an epoch-based training option was
// used for its DermaMNIST results), the
// bit-serial organisation (one D-deep memory, one row of N_CLASS counters per
// dimension, one read-modify-write per clock) and the clearing pass.
//
// Timing: `clr` starts a pass of D clocks that zeroes the memory (busy high);
// bits presented meanwhile are ignored.  A bit is taken on each clock with
// hv_valid; the memory row hv_dim is read and written in that clock.  In
// inference, res_valid pulses the clock after the bit marked hv_last, with
// res_class and res_score (agreements of the winner) held until the next
// result.  train, label, unlearn and wrong must be steady during one image;
// unlearn is ignored unless train is set and wrong differs from label.
module assoc_memory #(
  parameter int unsigned D       = 1024,
  parameter int unsigned N_CLASS = 10,
  parameter int unsigned ACC_W   = 16,
  localparam int unsigned DW     = $clog2(D),
  localparam int unsigned CW     = (N_CLASS > 1) ? $clog2(N_CLASS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          train,
  input  logic [CW-1:0] label,
  input  logic          unlearn,
  input  logic [CW-1:0] wrong,
  input  logic          hv_valid,
  input  logic [DW-1:0] hv_dim,
  input  logic          hv_bit,
  input  logic          hv_last,
  output logic          busy,
  output logic          res_valid,
  output logic [CW-1:0] res_class,
  output logic [DW:0]   res_score
);

  typedef logic signed [ACC_W-1:0] acc_t;
  localparam acc_t ACC_MAX = acc_t'({1'b0, {(ACC_W-1){1'b1}}});
  localparam acc_t ACC_MIN = acc_t'({1'b1, {(ACC_W-1){1'b0}}});

  acc_t        mem [D][N_CLASS];
  logic [DW:0] agree [N_CLASS];

  // Clearing pass.
  logic [DW-1:0] clr_addr;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      clr_addr <= '0;
    end else if (clr && !busy) begin
      busy     <= 1'b1;
      clr_addr <= '0;
    end else if (busy) begin
      clr_addr <= clr_addr + 1'b1;
      if (clr_addr == DW'(D - 1)) busy <= 1'b0;
    end
  end

  // Next agreement counts (inference) and winner selection.
  logic [DW:0]   agree_nx [N_CLASS];
  logic [CW-1:0] best_k;
  logic [DW:0]   best_s;
  always_comb begin
    for (int k = 0; k < N_CLASS; k++) begin
      logic cbit;
      cbit        = (mem[hv_dim][k] > 0);
      agree_nx[k] = agree[k] + (DW+1)'(cbit == hv_bit);
    end
    best_k = '0;
    best_s = agree_nx[0];
    for (int k = 1; k < N_CLASS; k++) begin
      if (agree_nx[k] > best_s) begin
        best_k = CW'(k);
        best_s = agree_nx[k];
      end
    end
  end

  logic take;
  assign take = hv_valid && !busy;

  // Counter memory: clear pass or training update.
  always_ff @(posedge clk) begin
    if (busy) begin
      for (int k = 0; k < N_CLASS; k++) mem[clr_addr][k] <= '0;
    end else if (take && train) begin
      acc_t a, b;
      a = mem[hv_dim][label];
      if (hv_bit && a != ACC_MAX)       mem[hv_dim][label] <= a + acc_t'(1);
      else if (!hv_bit && a != ACC_MIN) mem[hv_dim][label] <= a - acc_t'(1);
      if (unlearn && wrong != label) begin
        b = mem[hv_dim][wrong];
        if (hv_bit && b != ACC_MIN)       mem[hv_dim][wrong] <= b - acc_t'(1);
        else if (!hv_bit && b != ACC_MAX) mem[hv_dim][wrong] <= b + acc_t'(1);
      end
    end
  end

  // Agreement counters and result.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < N_CLASS; k++) agree[k] <= '0;
      res_valid <= 1'b0;
      res_class <= '0;
      res_score <= '0;
    end else begin
      res_valid <= 1'b0;
      if (take && !train) begin
        for (int k = 0; k < N_CLASS; k++) agree[k] <= hv_last ? '0 : agree_nx[k];
        if (hv_last) begin
          res_valid <= 1'b1;
          res_class <= best_k;
          res_score <= best_s;
        end
      end
    end
  end

  initial assert ((1 << DW) == D) else $error("assoc_memory: D must be a power of 2");

endmodule
