// vdc2n_gen: VDC-2^n low-discrepancy sequence source.
//
// A Van der Corput value in base B = 2^k is the counter value with its base-B
// digits in reverse order: the least significant k-bit digit of the counter
// becomes the most significant digit of the value.  Every digit is a group of
// counter bits, so the reversal is wiring only.  One W-bit counter, drawn in
// the paper as a chain of T flip-flops (bit i toggles when all lower bits are
// 1, Tff0 toggles every clock), is hardwired into NSEQ sequences at once;
// sequence j uses k = LOG2B[j].  k = 1 is plain bit reversal (VDC-2), k = W is
// the counter itself (a ramp, i.e. unary order).  The bit order inside a digit
// is kept.  When W is not a multiple of k, the short top digit lands in the
// least significant bits, which keeps the wiring a permutation (every value
// once per period); that rule is this design's own.
//
// The default, W = 8 and k = 4, is the 8-flip-flop VDC-16 wiring the paper
// draws: Tff3..Tff0 feed V7..V4 and Tff7..Tff4 feed V3..V0.
//
// Interface: `en` advances the index by one per clock, `clr` returns it to 0
// (clr wins).  `count` and `seq` come straight from the counter flip-flops:
// they change on the clock edge after `en`.  Period 2^W.  Enable, clear and the
// synchronous active-low reset are this design's own.
module vdc2n_gen #(
  parameter int unsigned W    = 8,
  parameter int unsigned NSEQ = 1,
  parameter int unsigned LOG2B [NSEQ] = '{default: 4}
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  input  logic                   clr,
  output logic [W-1:0]           count,
  output logic [NSEQ-1:0][W-1:0] seq
);

  // Digit reversal in base 2^k of a W-bit value.
  function automatic logic [W-1:0] vdc_map(input logic [W-1:0] c, input int unsigned k);
    logic [W-1:0] v;
    int unsigned  pos, dw;
    v   = '0;
    pos = W;
    for (int unsigned s = 0; s < W; s += k) begin
      dw  = (W - s < k) ? (W - s) : k;
      pos = pos - dw;
      for (int unsigned b = 0; b < W; b++)
        if (b < dw) v[pos+b] = c[s+b];
    end
    return v;
  endfunction

  // T flip-flop counter: the toggle input of bit i is the AND of all lower bits.
  logic [W-1:0] t_in;
  always_comb begin
    for (int i = 0; i < W; i++) begin
      logic [W-1:0] lower;
      lower   = (W'(1) << i) - W'(1);
      t_in[i] = ((count & lower) == lower);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clr) count <= '0;
    else if (en)       count <= count ^ t_in;
  end

  always_comb begin
    for (int j = 0; j < NSEQ; j++) seq[j] = vdc_map(count, LOG2B[j]);
  end

  initial begin
    assert (W >= 1) else $error("vdc2n_gen: W must be at least 1");
    for (int j = 0; j < NSEQ; j++)
      assert (LOG2B[j] >= 1 && LOG2B[j] <= W) else $error("vdc2n_gen: bad LOG2B");
  end

endmodule
