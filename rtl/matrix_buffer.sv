// matrix_buffer: storage for one DIM x DIM matrix tile.
//
// The accelerator holds three of these: the two input operands A and B and
// the result C. Elements are kept row-major, word (row*DIM + col). The buffer
// has one synchronous write port and one asynchronous read port, so that the
// matrix engine can read an element and use it in the same cycle; on an FPGA
// this maps to distributed (LUT) RAM. The tile size follows the 16 x 16 input
// size of the accelerator; the port structure is this design's choice.
// Timing: a write with we = 1 takes effect at the rising clock edge and is
// visible on rdata in the next cycle when raddr points at it.
module matrix_buffer #(
  parameter int unsigned DIM    = mxu_pkg::DIM,
  parameter int unsigned DATA_W = mxu_pkg::DATA_W,
  localparam int unsigned DEPTH = DIM * DIM,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic [AW-1:0]     raddr,
  output logic [DATA_W-1:0] rdata
);

  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
