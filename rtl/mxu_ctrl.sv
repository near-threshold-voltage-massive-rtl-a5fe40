// mxu_ctrl: sequencing and streaming controller of the matrix accelerator.
//
// The host starts one operation with a start/done handshake (in the style of
// a high-level-synthesis block: ap_start, ap_idle, ap_done) and the operation
// code. The controller then
//   1. accepts 2*DIM*DIM words on the input stream: matrix A row-major,
//      followed by matrix B row-major, written into the A and B buffers;
//   2. starts the matrix engine and waits for its done pulse;
//   3. sends the DIM*DIM words of C row-major on the output stream, with
//      tlast on the final word;
//   4. pulses ap_done and returns to idle.
// That the two operand tiles are streamed in and the result streamed back
// follows the accelerator described for the MIMO detector; the stream
// protocol (valid/ready, AXI4-Stream style), the order A then B and the
// start/done handshake are this design's choices.
//
// Timing: ap_start is sampled when ap_idle is high. s_axis_tready is high
// from the next cycle until the last input word is taken, one word per cycle
// when the host keeps tvalid high. The engine is started one cycle after the
// last input word and the first output word is valid one cycle after the
// engine's done pulse. ap_done is a one-cycle pulse in the cycle after the
// last output word was taken. Both streams obey valid/ready: a word moves on
// a cycle where both are high, and the output holds its data while stalled.
module mxu_ctrl
  import mxu_pkg::fp32_t, mxu_pkg::mxu_op_e, mxu_pkg::OP_MUL;
#(
  parameter int unsigned DIM = mxu_pkg::DIM,
  localparam int unsigned DEPTH = DIM * DIM,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // start / done handshake with the host
  input  logic          ap_start,
  input  mxu_op_e       op,
  output logic          ap_idle,
  output logic          ap_done,
  // input stream: A then B, row-major
  input  fp32_t         s_axis_tdata,
  input  logic          s_axis_tvalid,
  output logic          s_axis_tready,
  // output stream: C, row-major
  output fp32_t         m_axis_tdata,
  output logic          m_axis_tvalid,
  input  logic          m_axis_tready,
  output logic          m_axis_tlast,
  // operand buffer write ports
  output logic          a_we,
  output logic          b_we,
  output logic [AW-1:0] ab_waddr,
  output fp32_t         ab_wdata,
  // matrix engine
  output logic          eng_start,
  output mxu_op_e       eng_op,
  input  logic          eng_done,
  // result buffer read port
  output logic [AW-1:0] c_raddr,
  input  fp32_t         c_rdata
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_START, S_WAIT, S_UNLOAD} state_e;

  state_e      state;
  mxu_op_e     op_q;
  logic [AW:0] cnt;       // word counter: one bit more than a tile address
  logic        in_fire, out_fire;

  assign ap_idle       = (state == S_IDLE);
  assign s_axis_tready = (state == S_LOAD);
  assign in_fire       = s_axis_tvalid && s_axis_tready;
  assign a_we          = in_fire && !cnt[AW];
  assign b_we          = in_fire &&  cnt[AW];
  assign ab_waddr      = cnt[AW-1:0];
  assign ab_wdata      = s_axis_tdata;

  assign eng_start     = (state == S_START);
  assign eng_op        = op_q;

  assign m_axis_tvalid = (state == S_UNLOAD);
  assign c_raddr       = cnt[AW-1:0];
  assign m_axis_tdata  = c_rdata;
  assign m_axis_tlast  = (state == S_UNLOAD) && (cnt[AW-1:0] == AW'(DEPTH - 1));
  assign out_fire      = m_axis_tvalid && m_axis_tready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      op_q    <= OP_MUL;
      cnt     <= '0;
      ap_done <= 1'b0;
    end else begin
      ap_done <= 1'b0;
      case (state)
        S_IDLE: begin
          if (ap_start) begin
            state <= S_LOAD;
            op_q  <= op;
            cnt   <= '0;
          end
        end
        S_LOAD: begin
          if (in_fire) begin
            cnt <= cnt + 1'b1;
            if (cnt == (AW+1)'(2 * DEPTH - 1)) state <= S_START;
          end
        end
        S_START: state <= S_WAIT;
        S_WAIT: begin
          if (eng_done) begin
            state <= S_UNLOAD;
            cnt   <= '0;
          end
        end
        S_UNLOAD: begin
          if (out_fire) begin
            cnt <= cnt + 1'b1;
            if (m_axis_tlast) begin
              state   <= S_IDLE;
              ap_done <= 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Output stream rule: once valid, the word stays valid and unchanged
  // until it is taken.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (m_axis_tvalid && !m_axis_tready) |=> (m_axis_tvalid && $stable(m_axis_tdata)));
  // The engine only reports completion of an operation it was given.
  a_eng_done: assert property (@(posedge clk) disable iff (!rst_n)
    eng_done |-> (state == S_WAIT));

endmodule
