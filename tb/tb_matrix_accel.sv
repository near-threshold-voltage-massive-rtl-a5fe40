// tb_matrix_accel: end-to-end test of the matrix accelerator at its default
// tile size (16 x 16), with no parameter overridden.
//
// The testbench acts as the host: it starts an operation, streams A then B
// in with random gaps, drains C with random back-pressure and compares every
// result word bit for bit with a reference computed in the testbench
// (binary32 rounding after every multiply and add, dot products summed in the
// order k = 0..15). It runs a sequence of multiplications, additions and
// subtractions, some back to back, and checks the latency from the last
// input word to the first output word (DIM^3 + 4 cycles for a multiply,
// DIM^2 + 4 for add and subtract) and that busy is high for the computation.
// Each mechanism of the design is counted and must occur at least once:
// each of the three operations, an input-stream gap, output back-pressure and
// an operation started right after the previous one finished.
module tb_matrix_accel;
  import mxu_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned N     = mxu_pkg::DIM;
  localparam int unsigned DEPTH = N * N;

  logic    clk = 1'b0, rst_n = 1'b0;
  logic    ap_start = 1'b0, ap_idle, ap_done, busy;
  mxu_op_e op = OP_MUL;
  fp32_t   s_axis_tdata = '0, m_axis_tdata;
  logic    s_axis_tvalid = 1'b0, s_axis_tready;
  logic    m_axis_tvalid, m_axis_tready = 1'b0, m_axis_tlast;

  int checks = 0, failures = 0;
  int cyc = 0;
  int n_mul = 0, n_add = 0, n_sub = 0, n_in_gap = 0, n_out_stall = 0, n_b2b = 0;
  int busy_cycles = 0;

  matrix_accel dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (busy) busy_cycles <= busy_cycles + 1;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One operation; back_to_back starts it in the cycle right after ap_done.
  task automatic one_op(input mxu_op_e o, input int span, input bit gaps, input bit stalls);
    fp32_t A [DEPTH], B [DEPTH], R [DEPTH];
    int    got, e_last, e_out, lat_exp, busy0;
    bit    seen_out;
    foreach (A[n]) A[n] = rand_fp(span);
    foreach (B[n]) B[n] = rand_fp(span);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        fp32_t acc;
        case (o)
          OP_MUL: begin
            acc = 32'h0;
            for (int k = 0; k < N; k++) acc = fadd(acc, fmul(A[i*N+k], B[k*N+j]));
          end
          OP_ADD:  acc = fadd(A[i*N+j], B[i*N+j]);
          default: acc = fsub(A[i*N+j], B[i*N+j]);
        endcase
        R[i*N+j] = acc;
      end
    chk(ap_idle, "idle before start");
    ap_start = 1'b1; op = o;
    @(negedge clk);
    ap_start = 1'b0;
    busy0 = busy_cycles;
    for (int n = 0; n < 2*DEPTH; n++) begin
      while (gaps && $urandom_range(4, 0) == 0) begin
        s_axis_tvalid = 1'b0;
        if (s_axis_tready) n_in_gap++;
        @(negedge clk);
      end
      s_axis_tvalid = 1'b1;
      s_axis_tdata  = (n < DEPTH) ? A[n] : B[n - DEPTH];
      while (!s_axis_tready) @(negedge clk);
      e_last = cyc + 1;
      @(negedge clk);
    end
    s_axis_tvalid = 1'b0;
    got = 0;
    seen_out = 1'b0;
    e_out = 0;
    while (got < DEPTH) begin
      m_axis_tready = stalls ? ($urandom_range(3, 0) != 0) : 1'b1;
      #1;
      if (m_axis_tvalid && !seen_out) begin
        seen_out = 1'b1;
        e_out = cyc + 1;
      end
      if (m_axis_tvalid && !m_axis_tready) n_out_stall++;
      if (m_axis_tvalid && m_axis_tready) begin
        chk(m_axis_tdata === R[got], $sformatf("%s C[%0d] = %h expected %h", o.name(), got, m_axis_tdata, R[got]));
        chk(m_axis_tlast == (got == DEPTH - 1), $sformatf("tlast at word %0d", got));
        got++;
      end
      @(negedge clk);
    end
    m_axis_tready = 1'b0;
    lat_exp = ((o == OP_MUL) ? N*N*N : N*N) + 4;
    chk(e_out - e_last == lat_exp, $sformatf("%s latency %0d expected %0d", o.name(), e_out - e_last, lat_exp));
    chk(busy_cycles - busy0 == lat_exp - 3, $sformatf("busy for %0d cycles", busy_cycles - busy0));
    chk(ap_done, "ap_done after the last output word");
    case (o)
      OP_MUL:  n_mul++;
      OP_ADD:  n_add++;
      default: n_sub++;
    endcase
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    one_op(OP_MUL, 6, 1'b0, 1'b0);
    one_op(OP_ADD, 6, 1'b1, 1'b1);
    n_b2b++;                            // next one starts in the ap_done cycle
    one_op(OP_SUB, 2, 1'b1, 1'b0);
    n_b2b++;
    one_op(OP_MUL, 10, 1'b1, 1'b1);
    @(negedge clk);
    one_op(OP_SUB, 4, 1'b0, 1'b1);
    $display("mechanisms: mul=%0d add=%0d sub=%0d input_gaps=%0d output_stalls=%0d back_to_back=%0d",
             n_mul, n_add, n_sub, n_in_gap, n_out_stall, n_b2b);
    chk(n_mul > 0, "multiply exercised");
    chk(n_add > 0, "add exercised");
    chk(n_sub > 0, "subtract exercised");
    chk(n_in_gap > 0, "input gap exercised");
    chk(n_out_stall > 0, "output back-pressure exercised");
    chk(n_b2b > 0, "back-to-back operations exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
