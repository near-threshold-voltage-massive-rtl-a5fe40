// matrix_accel: the matrix accelerator, top level.
//
// A fixed-size (DIM x DIM, DIM = 16) single-precision matrix operation unit
// for a massive-MIMO detector. The host processor keeps all of the detection
// algorithm (Newton iteration for the inverse of the Gram matrix) and all of
// the algorithm-based fault tolerance (checksum rows and columns, and the
// checks of them) in software, cuts its matrices into DIM x DIM tiles padded
// with zeros, and sends each tile operation here: multiply, add or subtract.
// Because every check is done by the host on the results, this block may run
// at a reduced supply voltage: a timing error inside it shows up as a checksum
// mismatch in software. The block itself holds no checking logic.
//
// Structure: mxu_ctrl takes the start/done handshake and the two streams;
// three matrix_buffer instances hold the operands A, B and the result C;
// mxu_engine computes C from A and B with one two-stage floating-point
// multiply-add datapath (fp32_mul, fp32_addsub), accumulating in the C buffer.
//
// Use: with ap_idle high, pulse ap_start with op set; stream 2*DIM*DIM words
// (A then B, row-major) into s_axis; after the computation DIM*DIM words of C
// come out of m_axis (row-major, tlast on the last one) and ap_done pulses.
// busy is high while the engine computes (between the streams).
// Latency from the last input word to the first output word: DIM^3 + 4
// cycles for OP_MUL, DIM^2 + 4 for OP_ADD / OP_SUB. Reset is synchronous,
// active low.
module matrix_accel
  import mxu_pkg::fp32_t, mxu_pkg::mxu_op_e;
#(
  parameter int unsigned DIM = mxu_pkg::DIM,
  localparam int unsigned AW = $clog2(DIM * DIM)
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    ap_start,
  input  mxu_op_e op,
  output logic    ap_idle,
  output logic    ap_done,
  output logic    busy,
  input  fp32_t   s_axis_tdata,
  input  logic    s_axis_tvalid,
  output logic    s_axis_tready,
  output fp32_t   m_axis_tdata,
  output logic    m_axis_tvalid,
  input  logic    m_axis_tready,
  output logic    m_axis_tlast
);

  logic          a_we, b_we, c_we;
  logic [AW-1:0] ab_waddr, a_raddr, b_raddr, c_waddr, c_raddr;
  logic [AW-1:0] ctrl_c_raddr, eng_c_raddr;
  fp32_t         ab_wdata, a_rdata, b_rdata, c_wdata, c_rdata;
  logic          eng_start, eng_done;
  mxu_op_e       eng_op;

  mxu_ctrl #(.DIM(DIM)) u_ctrl (
    .clk, .rst_n, .ap_start, .op, .ap_idle, .ap_done,
    .s_axis_tdata, .s_axis_tvalid, .s_axis_tready,
    .m_axis_tdata, .m_axis_tvalid, .m_axis_tready, .m_axis_tlast,
    .a_we, .b_we, .ab_waddr, .ab_wdata,
    .eng_start, .eng_op, .eng_done,
    .c_raddr(ctrl_c_raddr), .c_rdata
  );

  matrix_buffer #(.DIM(DIM)) u_buf_a (
    .clk, .we(a_we), .waddr(ab_waddr), .wdata(ab_wdata), .raddr(a_raddr), .rdata(a_rdata)
  );
  matrix_buffer #(.DIM(DIM)) u_buf_b (
    .clk, .we(b_we), .waddr(ab_waddr), .wdata(ab_wdata), .raddr(b_raddr), .rdata(b_rdata)
  );
  matrix_buffer #(.DIM(DIM)) u_buf_c (
    .clk, .we(c_we), .waddr(c_waddr), .wdata(c_wdata), .raddr(c_raddr), .rdata(c_rdata)
  );

  mxu_engine #(.DIM(DIM)) u_engine (
    .clk, .rst_n, .start(eng_start), .op(eng_op), .busy(busy), .done(eng_done),
    .a_raddr, .a_rdata, .b_raddr, .b_rdata,
    .c_raddr(eng_c_raddr), .c_rdata, .c_we, .c_waddr, .c_wdata
  );

  // The C read port serves the engine's partial sums while it runs and the
  // output stream otherwise.
  assign c_raddr = busy ? eng_c_raddr : ctrl_c_raddr;

endmodule
