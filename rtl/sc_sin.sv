// sc_sin: stochastic-computing sin(x) unit driven by VDC-2^n sequences.
//
// The unit evaluates the 7th-order Maclaurin polynomial
//   sin(x) ~ x - x^3/3! + x^5/5! - x^7/7! = x (1 - x^2/6 (1 - x^2/20 (1 - x^2/42)))
// on bit-streams.  A stream X of value x is made by comparing x with a VDC-4
// sequence; X delayed by two clocks (the only delay element, "2D") is an
// uncorrelated copy, so X AND X(t-2) has value x^2.  Each Horner factor
// 1 - a*b*c is a NAND gate over x^2, a coefficient stream and the previous
// factor; the coefficient streams 1/42, 1/20 and 1/6 come from VDC-128,
// VDC-256 and VDC-512 wirings of the same counter.  The final AND with X(t-2)
// gives Y, whose fraction of ones over 2^N_BITS clocks approximates sin(x).
//
// From the paper: the polynomial, the coefficients, the single 2-cycle delay,
// the sequence bases (Table I) and the use of one counter for all sequences.
// This design's own: which coefficient uses which base (listed order), the
// rounding of the coefficients, the comparator sense (value > sequence), the
// start/done control, the ones counter at the output.
//
// Timing: `start` (while idle) clears the counter and the delay line; the
// next 2^N_BITS clocks emit y_bit with y_valid high, one bit per clock; the
// clock after the last bit raises `done` for one cycle, and y_count then holds
// the number of ones (sin(x) * 2^N_BITS) until the next start.  `x` must be
// held during the run.
module sc_sin #(
  parameter int unsigned N_BITS = 10,
  parameter int unsigned K_X    = 2,   // VDC-4 for the input
  parameter int unsigned K_C42  = 7,   // VDC-128
  parameter int unsigned K_C20  = 8,   // VDC-256
  parameter int unsigned K_C6   = 9,   // VDC-512
  parameter int unsigned C42    = 24,  // round(2^N_BITS / 42)
  parameter int unsigned C20    = 51,  // round(2^N_BITS / 20)
  parameter int unsigned C6     = 171  // round(2^N_BITS / 6)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [N_BITS-1:0] x,
  output logic              busy,
  output logic              y_bit,
  output logic              y_valid,
  output logic              done,
  output logic [N_BITS:0]   y_count
);

  localparam int unsigned K_ALL [4] = '{K_X, K_C42, K_C20, K_C6};

  logic                   clr, last;
  logic [N_BITS-1:0]      count;
  logic [3:0][N_BITS-1:0] seq;

  assign clr  = start && !busy;
  assign last = busy && (count == '1);

  vdc2n_gen #(.W(N_BITS), .NSEQ(4), .LOG2B(K_ALL)) u_vdc (
    .clk, .rst_n, .en(busy), .clr, .count, .seq
  );

  // Bit-stream generators.
  logic x_s, c42_s, c20_s, c6_s;
  sc_comparator #(.W(N_BITS)) u_cx  (.value(x),              .rnd(seq[0]), .bit_o(x_s));
  sc_comparator #(.W(N_BITS)) u_c42 (.value(N_BITS'(C42)),   .rnd(seq[1]), .bit_o(c42_s));
  sc_comparator #(.W(N_BITS)) u_c20 (.value(N_BITS'(C20)),   .rnd(seq[2]), .bit_o(c20_s));
  sc_comparator #(.W(N_BITS)) u_c6  (.value(N_BITS'(C6)),    .rnd(seq[3]), .bit_o(c6_s));

  // Two-cycle delay of X.
  logic [1:0] x_dly;
  always_ff @(posedge clk) begin
    if (!rst_n || clr) x_dly <= '0;
    else if (busy)     x_dly <= {x_dly[0], x_s};
  end

  // Horner network.
  logic x2, s1, s2, s3;
  always_comb begin
    x2    = x_s & x_dly[1];
    s1    = ~(x2 & c42_s);
    s2    = ~(x2 & c20_s & s1);
    s3    = ~(x2 & c6_s & s2);
    y_bit = x_dly[1] & s3;
  end
  assign y_valid = busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      y_count <= '0;
    end else begin
      done <= last;
      if (clr) begin
        busy    <= 1'b1;
        y_count <= '0;
      end else if (busy) begin
        y_count <= y_count + (N_BITS+1)'(y_bit);
        if (last) busy <= 1'b0;
      end
    end
  end

endmodule
