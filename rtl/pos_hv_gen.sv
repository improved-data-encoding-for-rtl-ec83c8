// pos_hv_gen: single-source orthogonal position-hypervector generator.
//
// All positions share one VDC-2 sequence V(t), t being the dimension index.
// Position i owns a seed S_i (0 <= S_i < D) and one T flip-flop Q_i.  In
// dimension t its comparator output c = (V(t) >= S_i) drives the T input of
// Q_i and is XORed with Q_i to give the position bit
//   P'_i(t) = c XOR Q_i,   Q_i <= Q_i XOR c.
// P'_i(t) is therefore the running parity of the comparator stream, which
// flips about half of the bits and gives each position a near-balanced HV;
// different seeds give different, nearly orthogonal HVs from the one source.
//
// From the paper: shared VDC-2 source, the seed range, the comparator, the
// T flip-flop and the XOR.  This design's own: the comparator sense
// (V >= S), the seed S_i = i mod D, and the bank of N_POS T flip-flops that
// lets one comparator serve every position in turn (positions are visited
// one per clock within a dimension, dimensions in order).
//
// Timing: p_bit is combinational from pos, vdc and the flip-flop of `pos`;
// on a clock with `step` high that flip-flop takes its next state.  `clr`
// zeroes every flip-flop (start of an image).
module pos_hv_gen #(
  parameter int unsigned D     = 1024,
  parameter int unsigned N_POS = 784,
  localparam int unsigned DW   = $clog2(D),
  localparam int unsigned PW   = (N_POS > 1) ? $clog2(N_POS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          step,
  input  logic [PW-1:0] pos,
  input  logic [DW-1:0] vdc,
  output logic          p_bit
);

  logic [N_POS-1:0] tq;
  logic [DW-1:0]    seed;
  logic             cmp;

  always_comb begin
    seed  = DW'(32'(pos) % D);
    cmp   = (vdc >= seed);
    p_bit = cmp ^ tq[pos];
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clr)               tq      <= '0;
    else if (step && cmp)            tq[pos] <= ~tq[pos];
  end

  initial assert ((1 << DW) == D) else $error("pos_hv_gen: D must be a power of 2");

endmodule
