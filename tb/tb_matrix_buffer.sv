// tb_matrix_buffer: self-checking test of the tile buffer.
// Fills all DIM*DIM words in a random order with random data, reads every
// word back through the asynchronous read port and checks it against a
// testbench copy; then checks that a write with we = 0 changes nothing and
// that a new write is visible in the cycle after its clock edge.
module tb_matrix_buffer;
  localparam int unsigned DIM   = 16;
  localparam int unsigned DEPTH = DIM * DIM;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic          clk = 1'b0;
  logic          we;
  logic [AW-1:0] waddr, raddr;
  logic [31:0]   wdata, rdata;
  logic [31:0]   model [DEPTH];
  int checks = 0, failures = 0;

  matrix_buffer #(.DIM(DIM)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_word(input int unsigned adr);
    raddr = AW'(adr);
    #1;
    checks++;
    if (rdata !== model[adr]) begin
      failures++;
      if (failures < 10) $display("FAIL addr %0d: %h expected %h", adr, rdata, model[adr]);
    end
  endtask

  initial begin
    int unsigned perm [DEPTH];
    we = 1'b0; waddr = '0; wdata = '0; raddr = '0;
    foreach (perm[n]) perm[n] = n;
    perm.shuffle();
    // fill in random order
    foreach (perm[n]) begin
      @(negedge clk);
      we    = 1'b1;
      waddr = AW'(perm[n]);
      wdata = $urandom;
      model[perm[n]] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
    for (int unsigned n = 0; n < DEPTH; n++) check_word(n);
    // write disabled: no change
    @(negedge clk);
    waddr = AW'(7); wdata = ~model[7]; we = 1'b0;
    @(negedge clk);
    check_word(7);
    // write enabled: visible after the edge, not before
    waddr = AW'(9); wdata = ~model[9]; we = 1'b1; raddr = AW'(9);
    #1;
    checks++;
    if (rdata !== model[9]) failures++;
    @(negedge clk);
    we = 1'b0;
    model[9] = wdata;
    check_word(9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
