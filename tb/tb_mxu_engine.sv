// tb_mxu_engine: self-checking test of the matrix operation unit.
// The testbench plays the three buffers itself (A, B and C as arrays read
// combinationally, C written through the write port). For several random tile
// pairs it runs OP_MUL, OP_ADD and OP_SUB and compares every element of C bit
// for bit with a reference that forms each dot product in the same order,
// k = 0..DIM-1, rounding after every binary32 multiply and add. It also checks
// that each element is written DIM times (multiply) or once (add,
// subtract), that busy covers the run and
// that done rises DIM^3 + 1 (multiply) or DIM^2 + 1 (add, subtract) cycles
// after start is sampled.
module tb_mxu_engine;
  import mxu_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned N  = 16;
  localparam int unsigned AW = $clog2(N * N);

  logic          clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  mxu_op_e       op = OP_MUL;
  logic          busy, done, c_we;
  logic [AW-1:0] a_raddr, b_raddr, c_raddr, c_waddr;
  fp32_t         a_rdata, b_rdata, c_rdata, c_wdata;
  fp32_t         A [N*N], B [N*N], C [N*N], R [N*N];
  int            wcount [N*N];
  int checks = 0, failures = 0;

  mxu_engine #(.DIM(N)) dut (.clk, .rst_n, .start, .op, .busy, .done,
                             .a_raddr, .a_rdata, .b_raddr, .b_rdata,
                             .c_raddr, .c_rdata, .c_we, .c_waddr, .c_wdata);

  assign a_rdata = A[a_raddr];
  assign b_rdata = B[b_raddr];
  assign c_rdata = C[c_raddr];

  always #5 clk = ~clk;

  always @(posedge clk) if (c_we) begin
    C[c_waddr] <= c_wdata;
    wcount[c_waddr] <= wcount[c_waddr] + 1;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic run(input mxu_op_e o, input int span);
    int cyc, expected_cycles;
    foreach (A[n]) A[n] = rand_fp(span);
    foreach (B[n]) B[n] = rand_fp(span);
    if (o == OP_MUL) A[5] = 32'h0000_0000;   // a zero operand
    foreach (wcount[n]) wcount[n] = 0;
    foreach (C[n]) C[n] = $urandom;     // stale contents must not leak in
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
    expected_cycles = ((o == OP_MUL) ? N*N*N : N*N) + 1;
    @(negedge clk);
    op = o; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    chk(busy, "busy after start");
    while (!done) begin
      @(negedge clk);
      cyc++;
      if (cyc > expected_cycles + 10) break;
    end
    // cyc counts falling edges from the one after the sampling edge;
    // done must rise at the expected_cycles-th rising edge after it.
    chk(cyc - 1 == expected_cycles, $sformatf("op %s latency %0d expected %0d", o.name(), cyc, expected_cycles));
    chk(!busy, "busy low at done");
    foreach (R[n]) begin
      chk(C[n] === R[n], $sformatf("op %s C[%0d]=%h expected %h", o.name(), n, C[n], R[n]));
      chk(wcount[n] == ((o == OP_MUL) ? N : 1), $sformatf("C[%0d] written %0d times", n, wcount[n]));
    end
  endtask

  initial begin
    foreach (C[n]) C[n] = '0;
    foreach (wcount[n]) wcount[n] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    chk(!busy && !done, "idle after reset");
    for (int r = 0; r < 2; r++) begin
      run(OP_MUL, 8);
      run(OP_ADD, 8);
      run(OP_SUB, 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
