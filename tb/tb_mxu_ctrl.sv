// tb_mxu_ctrl: self-checking test of the sequencing and streaming controller.
// The testbench stands in for the buffers and the engine: it records every
// operand-buffer write, answers eng_start with a done pulse after a random
// delay, and serves a known result tile on the C read port. It checks that
// the 2*DIM*DIM input words land in A then B at the right addresses, that the
// engine is started exactly once per operation with the requested op and only
// after the last input word, that the output stream carries C in order with
// tlast on the last word only, holds its data under back-pressure, and that
// ap_done pulses once per operation. Both streams are throttled at random.
module tb_mxu_ctrl;
  import mxu_pkg::*;

  localparam int unsigned N     = 16;
  localparam int unsigned DEPTH = N * N;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          ap_start = 1'b0, ap_idle, ap_done;
  mxu_op_e       op = OP_MUL;
  fp32_t         s_axis_tdata = '0, m_axis_tdata;
  logic          s_axis_tvalid = 1'b0, s_axis_tready;
  logic          m_axis_tvalid, m_axis_tready = 1'b0, m_axis_tlast;
  logic          a_we, b_we, eng_start, eng_done = 1'b0;
  logic [AW-1:0] ab_waddr, c_raddr;
  fp32_t         ab_wdata, c_rdata;
  mxu_op_e       eng_op;

  fp32_t A [DEPTH], B [DEPTH], C [DEPTH];
  int    a_writes = 0, b_writes = 0, starts = 0, dones = 0, inputs_sent = 0;
  int checks = 0, failures = 0;

  mxu_ctrl #(.DIM(N)) dut (.*);

  assign c_rdata = C[c_raddr];

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Record buffer writes and engine starts.
  always @(posedge clk) if (rst_n) begin
    if (a_we) begin A[ab_waddr] <= ab_wdata; a_writes <= a_writes + 1; end
    if (b_we) begin B[ab_waddr] <= ab_wdata; b_writes <= b_writes + 1; end
    if (a_we && b_we) begin
      failures++;
      $display("FAIL a_we and b_we together");
    end
    if (eng_start) starts <= starts + 1;
    if (ap_done) dones <= dones + 1;
  end

  // Engine model: done a random number of cycles after start.
  int eng_delay = 0;
  always @(posedge clk) begin
    eng_done <= 1'b0;
    if (eng_start) eng_delay <= 1 + int'($urandom_range(20, 1));
    else if (eng_delay > 1) eng_delay <= eng_delay - 1;
    else if (eng_delay == 1) begin
      eng_delay <= 0;
      eng_done  <= 1'b1;
    end
  end

  task automatic one_op(input mxu_op_e o);
    fp32_t in_words [2*DEPTH];
    int    got, starts0, dones0, a0, b0;
    foreach (in_words[n]) in_words[n] = $urandom;
    foreach (C[n]) C[n] = $urandom;
    starts0 = starts; dones0 = dones; a0 = a_writes; b0 = b_writes;
    @(negedge clk);
    chk(ap_idle, "idle before start");
    ap_start = 1'b1; op = o;
    @(negedge clk);
    ap_start = 1'b0;
    // input stream with random gaps
    for (int n = 0; n < 2*DEPTH; n++) begin
      while ($urandom_range(3, 0) == 0) begin
        s_axis_tvalid = 1'b0;
        @(negedge clk);
      end
      s_axis_tvalid = 1'b1;
      s_axis_tdata  = in_words[n];
      @(posedge clk);
      while (!s_axis_tready) @(posedge clk);
      chk(starts == starts0, "engine started before the last input word");
      @(negedge clk);
    end
    s_axis_tvalid = 1'b0;
    // output stream with random back-pressure
    got = 0;
    while (got < DEPTH) begin
      m_axis_tready = ($urandom_range(2, 0) != 0);
      @(posedge clk);
      if (m_axis_tvalid && m_axis_tready) begin
        chk(m_axis_tdata === C[got], $sformatf("out word %0d = %h expected %h", got, m_axis_tdata, C[got]));
        chk(m_axis_tlast == (got == DEPTH - 1), $sformatf("tlast at word %0d", got));
        got++;
      end
      @(negedge clk);
    end
    m_axis_tready = 1'b0;
    repeat (2) @(negedge clk);
    chk(starts == starts0 + 1, "one engine start per operation");
    chk(eng_op == o, "op passed to engine");
    chk(dones == dones0 + 1, "one ap_done per operation");
    chk(a_writes == a0 + DEPTH && b_writes == b0 + DEPTH, "write counts");
    for (int n = 0; n < DEPTH; n++) begin
      chk(A[n] === in_words[n], $sformatf("A[%0d]", n));
      chk(B[n] === in_words[DEPTH + n], $sformatf("B[%0d]", n));
    end
    chk(ap_idle && !m_axis_tvalid && !s_axis_tready, "idle after operation");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    one_op(OP_MUL);
    one_op(OP_SUB);
    one_op(OP_ADD);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
