// pixel_buffer: image buffer of the HDC classifier.
//
// Holds the N_POS pixels of one image (28 x 28 = 784 pixels of 8 bits for
// MNIST-sized inputs).  One write port for the host, one read port for the
// encoder, which reads every pixel once per dimension.  Written as an array so
// that synthesis can map it to a memory.
//
// Timing: write on the clock edge when `we` is high; read data appears one
// clock after raddr (registered read).  Contents are not reset.
module pixel_buffer #(
  parameter int unsigned N_POS    = 784,
  parameter int unsigned PIX_BITS = 8,
  localparam int unsigned PW      = (N_POS > 1) ? $clog2(N_POS) : 1
) (
  input  logic                clk,
  input  logic                we,
  input  logic [PW-1:0]       waddr,
  input  logic [PIX_BITS-1:0] wdata,
  input  logic [PW-1:0]       raddr,
  output logic [PIX_BITS-1:0] rdata
);

  logic [PIX_BITS-1:0] mem [N_POS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
