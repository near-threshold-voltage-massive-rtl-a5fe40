// mxu_engine: the matrix operation unit.
//
// Computes, over the tiles held in the A, B and C buffers, one of
//   OP_MUL : C = A * B      (DIM*DIM dot products of length DIM)
//   OP_ADD : C = A + B      (element-wise)
//   OP_SUB : C = A - B      (element-wise)
// in single precision floating point. These three operations are what the
// accelerator offers the host; the host builds the Newton-iteration MIMO
// detector and its checksum (ABFT) protection out of them.
//
// How it works: one binary32 multiplier and one binary32 adder, separated by
// a pipeline register. For OP_MUL the engine walks row i, inner index k and
// column j (j innermost). Stage 1 reads A[i][k] and B[k][j] and multiplies
// them. Stage 2, one cycle later, reads the partial sum of C[i][j] back from
// the C buffer (or takes +0 when k = 0), adds the product and writes C[i][j].
// Consecutive updates of the same element are DIM cycles apart, so the
// read-modify-write needs no forwarding. Each C[i][j] is thus summed in the
// fixed order k = 0, 1, ..., DIM-1, with a rounding after every multiply and
// every add. For OP_ADD and OP_SUB stage 1 only registers A[i][j] and B[i][j]
// and stage 2 adds or subtracts them. The single datapath, the loop order and
// the two-stage pipeline are this design's choices; how the accelerator
// computes internally is not published.
//
// Interface and timing: start is sampled in the idle state together with op.
// busy is high from the next cycle until the last element is written; done is
// a one-cycle pulse in the cycle after that write. OP_MUL takes DIM^3 + 1
// cycles (4097 at DIM = 16), OP_ADD and OP_SUB DIM^2 + 1 (257): done rises
// that many cycles after the clock edge that samples start. Buffer reads are
// combinational (see matrix_buffer); the engine owns the C read port while
// busy. An op code other than the three above is treated as OP_ADD.
module mxu_engine
  import mxu_pkg::fp32_t, mxu_pkg::mxu_op_e, mxu_pkg::OP_MUL, mxu_pkg::OP_SUB,
         mxu_pkg::FP32_POS_ZERO;
#(
  parameter int unsigned DIM = mxu_pkg::DIM,
  localparam int unsigned AW = $clog2(DIM * DIM),
  localparam int unsigned IW = $clog2(DIM)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  mxu_op_e       op,
  output logic          busy,
  output logic          done,
  // operand A buffer read port
  output logic [AW-1:0] a_raddr,
  input  fp32_t         a_rdata,
  // operand B buffer read port
  output logic [AW-1:0] b_raddr,
  input  fp32_t         b_rdata,
  // result C buffer read port (partial sums) and write port
  output logic [AW-1:0] c_raddr,
  input  fp32_t         c_rdata,
  output logic          c_we,
  output logic [AW-1:0] c_waddr,
  output fp32_t         c_wdata
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;

  state_e        state;
  mxu_op_e       op_q;
  logic [IW-1:0] i_q, k_q, j_q;     // stage 1 loop indices
  logic          last_issue;
  fp32_t         prod;
  // stage 2 registers
  logic          s2_valid, s2_first, s2_last;
  logic [AW-1:0] s2_addr;
  fp32_t         s2_x, s2_y;
  fp32_t         add_a, add_b, add_s;

  fp32_mul    u_mul (.a(a_rdata), .b(b_rdata), .p(prod));
  fp32_addsub u_add (.a(add_a), .b(add_b), .sub(op_q == OP_SUB), .s(add_s));

  // Stage 1: operand addresses.
  always_comb begin
    if (op_q == OP_MUL) begin
      a_raddr    = AW'({i_q, k_q});
      b_raddr    = AW'({k_q, j_q});
      last_issue = (i_q == IW'(DIM - 1)) && (k_q == IW'(DIM - 1)) && (j_q == IW'(DIM - 1));
    end else begin
      a_raddr    = AW'({i_q, j_q});
      b_raddr    = AW'({i_q, j_q});
      last_issue = (i_q == IW'(DIM - 1)) && (j_q == IW'(DIM - 1));
    end
  end

  // Stage 2: accumulate or add, write C.
  always_comb begin
    c_raddr = s2_addr;
    if (op_q == OP_MUL) begin
      add_a = s2_first ? FP32_POS_ZERO : c_rdata;
      add_b = s2_x;
    end else begin
      add_a = s2_x;
      add_b = s2_y;
    end
    c_we    = s2_valid;
    c_waddr = s2_addr;
    c_wdata = add_s;
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      op_q     <= OP_MUL;
      i_q      <= '0;
      k_q      <= '0;
      j_q      <= '0;
      s2_valid <= 1'b0;
      s2_first <= 1'b0;
      s2_last  <= 1'b0;
      s2_addr  <= '0;
      s2_x     <= FP32_POS_ZERO;
      s2_y     <= FP32_POS_ZERO;
      done     <= 1'b0;
    end else begin
      done     <= s2_valid && s2_last;
      s2_valid <= 1'b0;
      s2_last  <= 1'b0;
      case (state)
        S_IDLE: begin
          if (start) begin
            state <= S_RUN;
            op_q  <= op;
            i_q   <= '0;
            k_q   <= '0;
            j_q   <= '0;
          end
        end
        S_RUN: begin
          s2_valid <= 1'b1;
          s2_last  <= last_issue;
          s2_addr  <= AW'({i_q, j_q});
          if (op_q == OP_MUL) begin
            s2_first <= (k_q == '0);
            s2_x     <= prod;
            // j innermost, then k, then i
            j_q <= j_q + 1'b1;
            if (j_q == IW'(DIM - 1)) begin
              k_q <= k_q + 1'b1;
              if (k_q == IW'(DIM - 1)) i_q <= i_q + 1'b1;
            end
          end else begin
            s2_first <= 1'b1;
            s2_x     <= a_rdata;
            s2_y     <= b_rdata;
            j_q <= j_q + 1'b1;
            if (j_q == IW'(DIM - 1)) i_q <= i_q + 1'b1;
          end
          if (last_issue) state <= S_DRAIN;
        end
        S_DRAIN: state <= S_IDLE;     // the last element is written this cycle
        default: state <= S_IDLE;
      endcase
    end
  end

  // The tile size must be a power of two for the {row, col} address packing.
  initial assert (DIM >= 2 && (DIM & (DIM - 1)) == 0)
    else $error("mxu_engine: DIM must be a power of two");

endmodule
