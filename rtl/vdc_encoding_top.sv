// vdc_encoding_top: VDC-2^n encoding engines for stochastic and
// hyperdimensional computing.
//
// Three independent engines, each built around a VDC-2^n sequence source
// (a counter whose bits are hardwired into Van der Corput sequences):
//   * sc_sin         - stochastic sin(x), 2^SIN_BITS-bit streams;
//   * sc_div         - stochastic division x/y with a correlation controller;
//   * uhd_classifier - unary HDC image classifier (on-the-fly position and
//                      level hypervectors, encoder, associative memory).
// They share the clock and reset and nothing else; each keeps its own
// start/done handshake (see the modules).  Placing them under one top is
// this design's own arrangement: the paper presents them as separate uses of
// the same encoder.
module vdc_encoding_top #(
  parameter int unsigned SIN_BITS = 10,
  parameter int unsigned DIV_BITS = 8,
  parameter int unsigned D        = 1024,
  parameter int unsigned N_POS    = 784,
  parameter int unsigned N_CLASS  = 10,
  localparam int unsigned DW      = $clog2(D),
  localparam int unsigned PW      = (N_POS > 1) ? $clog2(N_POS) : 1,
  localparam int unsigned CW      = (N_CLASS > 1) ? $clog2(N_CLASS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // sin(x)
  input  logic                sin_start,
  input  logic [SIN_BITS-1:0] sin_x,
  output logic                sin_busy,
  output logic                sin_y_bit,
  output logic                sin_y_valid,
  output logic                sin_done,
  output logic [SIN_BITS:0]   sin_y_count,
  // division
  input  logic                div_start,
  input  logic [DIV_BITS-1:0] div_x,
  input  logic [DIV_BITS-1:0] div_y,
  output logic                div_busy,
  output logic                div_q_bit,
  output logic                div_q_valid,
  output logic                div_done,
  output logic [DIV_BITS:0]   div_q_count,
  // HDC classifier
  input  logic                hd_pix_we,
  input  logic [PW-1:0]       hd_pix_addr,
  input  logic [7:0]          hd_pix_data,
  input  logic                hd_am_clr,
  output logic                hd_am_busy,
  input  logic                hd_start,
  input  logic                hd_train,
  input  logic [CW-1:0]       hd_label,
  input  logic                hd_unlearn,
  input  logic [CW-1:0]       hd_wrong,
  output logic                hd_busy,
  output logic                hd_hv_valid,
  output logic                hd_hv_bit,
  output logic [DW-1:0]       hd_hv_dim,
  output logic                hd_done,
  output logic                hd_res_valid,
  output logic [CW-1:0]       hd_res_class,
  output logic [DW:0]         hd_res_score
);

  sc_sin #(.N_BITS(SIN_BITS)) u_sin (
    .clk, .rst_n, .start(sin_start), .x(sin_x), .busy(sin_busy),
    .y_bit(sin_y_bit), .y_valid(sin_y_valid), .done(sin_done), .y_count(sin_y_count)
  );

  sc_div #(.N_BITS(DIV_BITS)) u_div (
    .clk, .rst_n, .start(div_start), .x(div_x), .y(div_y), .busy(div_busy),
    .q_bit(div_q_bit), .q_valid(div_q_valid), .done(div_done), .q_count(div_q_count)
  );

  uhd_classifier #(.D(D), .N_POS(N_POS), .N_CLASS(N_CLASS)) u_hdc (
    .clk, .rst_n,
    .pix_we(hd_pix_we), .pix_addr(hd_pix_addr), .pix_data(hd_pix_data),
    .am_clr(hd_am_clr), .am_busy(hd_am_busy),
    .start(hd_start), .train(hd_train), .label(hd_label),
    .unlearn(hd_unlearn), .wrong(hd_wrong), .busy(hd_busy),
    .hv_valid(hd_hv_valid), .hv_bit(hd_hv_bit), .hv_dim(hd_hv_dim), .done(hd_done),
    .res_valid(hd_res_valid), .res_class(hd_res_class), .res_score(hd_res_score)
  );

endmodule
