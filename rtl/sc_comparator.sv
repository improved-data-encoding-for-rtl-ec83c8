// sc_comparator: bit-stream generator of stochastic / unary computing.
//
// Each clock-free evaluation compares a binary value with the current value of
// a sequence source and emits one stream bit: 1 when value > rnd.  Driven by a
// full period of a permutation sequence (a VDC-2^n source), the stream then
// holds exactly `value` ones in 2^W bits, i.e. it encodes value/2^W.  The
// comparator itself is the paper's; the sense of the comparison (value > rnd)
// is this design's choice.  Purely combinational.
module sc_comparator #(
  parameter int unsigned W = 10
) (
  input  logic [W-1:0] value,
  input  logic [W-1:0] rnd,
  output logic         bit_o
);
  always_comb bit_o = (value > rnd);
endmodule
