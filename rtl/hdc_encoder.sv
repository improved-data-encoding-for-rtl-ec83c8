// hdc_encoder: binding, bundling and sign of the HDC image encoder.
//
// For one dimension t it receives, one position per clock, the position bit
// P'_i(t) and the level bit L'_i(t).  Binding is the bipolar product of the
// two (bit 1 = +1, bit 0 = -1), i.e. XNOR; bundling adds the N_POS products in
// a signed accumulator; the sign of the sum (1 when positive, 0 otherwise)
// is bit t of the image hypervector.  Working one dimension at a time means a
// single accumulator instead of D of them.
//
// From the paper: binding of each position HV with its level HV, bundling
// (sum) and sign.  This design's own: the bipolar mapping, the tie rule (a
// zero sum gives 0) and the dimension-serial order.
//
// Timing: assert `valid` with `first` on the first position and `last` on the
// last one of a dimension.  One clock after the `last` beat, hv_valid pulses
// and hv_bit holds the sign until the next result.
module hdc_encoder #(
  parameter int unsigned N_POS = 784,
  localparam int unsigned AW   = $clog2(N_POS + 1) + 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic valid,
  input  logic first,
  input  logic last,
  input  logic p_bit,
  input  logic l_bit,
  output logic hv_valid,
  output logic hv_bit
);

  logic signed [AW-1:0] acc, sum;

  always_comb begin
    sum = (first ? AW'(0) : acc) + ((p_bit ~^ l_bit) ? AW'(1) : -AW'(1));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc      <= '0;
      hv_valid <= 1'b0;
      hv_bit   <= 1'b0;
    end else begin
      hv_valid <= valid && last;
      if (valid) begin
        acc <= sum;
        if (last) hv_bit <= (sum > 0);
      end
    end
  end

endmodule
