// sc_div: stochastic-computing divider with a dynamic correlation controller.
//
// The divisor y becomes a bit-stream Y by comparison with a VDC-2^n sequence.
// A down counter, loaded with the dividend x, counts down on every clock in
// which Y is 1 until it reaches zero; X = Y AND NOT zero is therefore the
// stream made of the first x ones of Y, maximally correlated with Y and of
// value x/2^N_BITS.  A 2:1 multiplexer selected by Y passes X when Y = 1 and
// otherwise repeats its own previous output, held in a D flip-flop.  Because
// Y's ones are evenly spread by the low-discrepancy sequence, X runs out of
// ones after about (x/y) * 2^N_BITS clocks, and the output stream has value
// x/y (for x <= y).
//
// From the paper: down counter with enable and zero flag, AND gate, VDC-2^n
// comparator for y, the mux with its D flip-flop feedback.  This design's
// own: 8-bit precision, the VDC-2 base (bit reversal), the comparator sense,
// the output flip-flop reset to 0, the start/done control and the ones
// counter.
//
// Timing: `start` (while idle) loads x, clears the sequence counter and the
// output flip-flop; the next 2^N_BITS clocks emit q_bit with q_valid high;
// `done` pulses for one cycle after the last bit and q_count then holds the
// number of ones ((x/y) * 2^N_BITS).  `y` must be held during the run.
module sc_div #(
  parameter int unsigned N_BITS = 8,
  parameter int unsigned LOG2B  = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [N_BITS-1:0] x,
  input  logic [N_BITS-1:0] y,
  output logic              busy,
  output logic              q_bit,
  output logic              q_valid,
  output logic              done,
  output logic [N_BITS:0]   q_count
);

  localparam int unsigned K_ALL [1] = '{LOG2B};

  logic                   clr, last;
  logic [N_BITS-1:0]      count;
  logic [0:0][N_BITS-1:0] seq;

  assign clr  = start && !busy;
  assign last = busy && (count == '1);

  vdc2n_gen #(.W(N_BITS), .NSEQ(1), .LOG2B(K_ALL)) u_vdc (
    .clk, .rst_n, .en(busy), .clr, .count, .seq
  );

  logic y_s;
  sc_comparator #(.W(N_BITS)) u_cy (.value(y), .rnd(seq[0]), .bit_o(y_s));

  // Down counter (the dynamic correlation controller).
  logic [N_BITS-1:0] dcnt;
  logic              zero, x_s;
  assign zero = (dcnt == '0);
  assign x_s  = y_s & ~zero;

  always_ff @(posedge clk) begin
    if (!rst_n)                 dcnt <= '0;
    else if (clr)               dcnt <= x;
    else if (busy && y_s && !zero) dcnt <= dcnt - 1'b1;
  end

  // Mux with D flip-flop feedback.
  logic q_hold;
  assign q_bit   = y_s ? x_s : q_hold;
  assign q_valid = busy;

  always_ff @(posedge clk) begin
    if (!rst_n || clr) q_hold <= 1'b0;
    else if (busy)     q_hold <= q_bit;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      q_count <= '0;
    end else begin
      done <= last;
      if (clr) begin
        busy    <= 1'b1;
        q_count <= '0;
      end else if (busy) begin
        q_count <= q_count + (N_BITS+1)'(q_bit);
        if (last) busy <= 1'b0;
      end
    end
  end

endmodule
