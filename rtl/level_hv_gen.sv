// level_hv_gen: unary-based correlated level-hypervector generator.
//
// A W-bit up-counter CNT (W = log2 D) supplies the dimension index.  The
// 8-bit pixel value is left-shifted by C = log2 D - 8, which scales it to the
// range of the counter, and a comparator emits
//   L'(t) = (CNT < pixel << C).
// The level HV of a pixel value p is thus unary: p * D/256 ones followed by
// zeros.  Consecutive pixel values differ in exactly 2^C bits, so level HVs
// are highly correlated in proportion to how close the values are, with no
// random source at all.
//
// From the paper: counter, left shifter with C = log2 D - 8 (D >= 256),
// comparator, 8-bit pixels.  This design's own: the comparator sense
// (CNT < shifted pixel, which yields the leading-ones patterns of the paper's
// examples), counter clear/advance control.
//
// Timing: l_bit is combinational from `pixel` and the counter; `adv` moves
// the counter to the next dimension on the clock edge, `clr` returns it to 0.
module level_hv_gen #(
  parameter int unsigned D        = 1024,
  parameter int unsigned PIX_BITS = 8,
  localparam int unsigned W       = $clog2(D),
  localparam int unsigned C       = W - PIX_BITS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clr,
  input  logic                adv,
  input  logic [PIX_BITS-1:0] pixel,
  output logic [W-1:0]        dim,
  output logic                l_bit
);

  logic [W-1:0] shifted;

  always_ff @(posedge clk) begin
    if (!rst_n || clr) dim <= '0;
    else if (adv)      dim <= dim + 1'b1;
  end

  always_comb begin
    shifted = W'(pixel) << C;
    l_bit   = (dim < shifted);
  end

  initial assert (W >= PIX_BITS && (1 << W) == D)
    else $error("level_hv_gen: D must be a power of 2 and at least 2^PIX_BITS");

endmodule
