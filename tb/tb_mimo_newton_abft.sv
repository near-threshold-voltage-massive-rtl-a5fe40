// tb_mimo_newton_abft: the accelerator inside the ABFT-protected
// Newton-iteration MIMO detector, 3 iterations, QPSK, SNR 10 dB.
//
// The testbench plays the host processor. For Nt users and Nr antennas it
// generates a channel H, QPSK symbols and noise, converts the complex problem
// to a real one (Hr is 2Nr x 2Nt), appends the checksum row 1'Hr' to Hr', and
// has the accelerator compute, in 16 x 16 tiles (zero padded, partial
// products summed with OP_ADD):
//   A = [Hr'; 1'Hr'] Hr + s2 [I; 1'],    b = [Hr'; 1'Hr'] yr
// It checks the checksum row of A and the checksum element of b, then runs
// the Newton iteration on the 2Nt x 2Nt data part with a checksum column
// carried along:
//   P0 = [diag(D), D] with D = 1 ./ diag(A),  E = 2 [I 1]
//   P  <- P(:,1:2Nt) (E - A P)
// and solves x = [P(:,1:2Nt); P(:,2Nt+1)'] b, whose last element must equal
// the sum of the others. The host-side arithmetic (checksum row,
// reciprocals, comparisons) is done in the testbench.
//
// Nt = 8, Nr = 64 is the reference size. There the testbench runs three
// clean detections (no checksum may fail; the result must agree with a
// double-precision model of the same algorithm), one detection where a
// result word of the first preprocessing multiply is corrupted on its way
// back (the preprocessing check must fire) and one where a result word of the
// first multiply of the second Newton iteration is corrupted (the final check
// must fire). The corruption stands for a timing error of an undervolted
// accelerator. For Nt = 4, 8, 12 and 16 (Nr = 8 Nt) it also runs one clean
// detection and one without checksums, and prints the cycle overhead of ABFT.
module tb_mimo_newton_abft;
  import mxu_pkg::*;
  import tb_fp_pkg::*;

  localparam int ITER = 3;
  localparam int CAMPAIGN = 80;   // detections with one injected bit flip each
  localparam int T    = mxu_pkg::DIM;
  localparam int TT   = T * T;
  localparam real SNR_DB = 10.0;

  typedef fp32_t tile_t [TT];
  typedef fp32_t mat_t [];          // row-major, dimensions passed alongside

  logic    clk = 1'b0, rst_n = 1'b0;
  logic    ap_start = 1'b0, ap_idle, ap_done, busy;
  mxu_op_e op = OP_MUL;
  fp32_t   s_axis_tdata = '0, m_axis_tdata;
  logic    s_axis_tvalid = 1'b0, s_axis_tready;
  logic    m_axis_tvalid, m_axis_tready = 1'b0, m_axis_tlast;

  int checks = 0, failures = 0;
  longint cyc = 0;
  int op_count = 0, inj_op = -1;
  logic [31:0] inj_mask = 32'h0040_0000;
  int n_pre_detect = 0, n_iter_detect = 0, n_clean_pass = 0;
  int inj_word = 0;

  matrix_accel dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (80000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One tile operation on the accelerator. If this is operation number
  // inj_op, word inj_word of the result has the bits of inj_mask flipped on
  // arrival (by default word 0, top mantissa bit).
  task automatic accel(input mxu_op_e o, input tile_t ta, input tile_t tb, output tile_t tc);
    int got;
    @(negedge clk);
    ap_start = 1'b1; op = o;
    @(negedge clk);
    ap_start = 1'b0;
    for (int n = 0; n < 2*TT; n++) begin
      s_axis_tvalid = 1'b1;
      s_axis_tdata  = (n < TT) ? ta[n] : tb[n - TT];
      @(posedge clk);
      while (!s_axis_tready) @(posedge clk);
      @(negedge clk);
    end
    s_axis_tvalid = 1'b0;
    m_axis_tready = 1'b1;
    got = 0;
    while (got < TT) begin
      @(posedge clk);
      if (m_axis_tvalid) begin
        tc[got] = m_axis_tdata;
        got++;
      end
    end
    @(negedge clk);
    m_axis_tready = 1'b0;
    if (op_count == inj_op) tc[inj_word] = tc[inj_word] ^ inj_mask;
    op_count++;
  endtask

  // Tile (bi, bj) of an m x n row-major matrix, zero padded.
  function automatic tile_t get_tile(input mat_t x, input int m, input int n, input int bi, input int bj);
    tile_t t;
    for (int i = 0; i < T; i++)
      for (int j = 0; j < T; j++)
        t[i*T+j] = (bi*T + i < m && bj*T + j < n) ? x[(bi*T + i)*n + bj*T + j] : 32'h0;
    return t;
  endfunction

  // Z (m x n) = X (m x k) * Y (k x n) on the accelerator.
  task automatic tiled_mul(input mat_t x, input mat_t y, input int m, input int k, input int n,
                           output mat_t z);
    tile_t acc, tc;
    z = new[m * n];
    for (int bi = 0; bi < (m + T - 1) / T; bi++)
      for (int bj = 0; bj < (n + T - 1) / T; bj++) begin
        for (int bk = 0; bk < (k + T - 1) / T; bk++) begin
          accel(OP_MUL, get_tile(x, m, k, bi, bk), get_tile(y, k, n, bk, bj), tc);
          if (bk == 0) acc = tc;
          else accel(OP_ADD, acc, tc, acc);
        end
        for (int i = 0; i < T; i++)
          for (int j = 0; j < T; j++)
            if (bi*T + i < m && bj*T + j < n) z[(bi*T + i)*n + bj*T + j] = acc[i*T+j];
      end
  endtask

  // Z = X + Y or X - Y (m x n) on the accelerator.
  task automatic tiled_addsub(input mxu_op_e o, input mat_t x, input mat_t y, input int m,
                              input int n, output mat_t z);
    tile_t tc;
    z = new[m * n];
    for (int bi = 0; bi < (m + T - 1) / T; bi++)
      for (int bj = 0; bj < (n + T - 1) / T; bj++) begin
        accel(o, get_tile(x, m, n, bi, bj), get_tile(y, m, n, bi, bj), tc);
        for (int i = 0; i < T; i++)
          for (int j = 0; j < T; j++)
            if (bi*T + i < m && bj*T + j < n) z[(bi*T + i)*n + bj*T + j] = tc[i*T+j];
      end
  endtask

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // Problem data (binary32, as the host holds it): Hr is R x C, yr is R.
  int    NT, NR, R, C;
  mat_t  Hr, yr;
  fp32_t s2;
  int    sym_bits [];

  task automatic make_problem(input int nt, input int nr);
    real n0, sc, hre, him, xr [], yv [];
    NT = nt; NR = nr; R = 2 * nr; C = 2 * nt;
    Hr = new[R * C];
    yr = new[R];
    sym_bits = new[C];
    xr = new[C];
    yv = new[R];
    n0 = real'(NT) / (10.0 ** (SNR_DB / 10.0));
    sc = 1.0 / $sqrt(2.0);
    for (int i = 0; i < C; i++) begin
      sym_bits[i] = int'($urandom_range(1, 0));
      xr[i] = (sym_bits[i] != 0) ? sc : -sc;
    end
    // Real conversion: Hr = [Re -Im; Im Re]
    for (int a = 0; a < NR; a++)
      for (int u = 0; u < NT; u++) begin
        hre = f2r(r2f(gauss() * sc));
        him = f2r(r2f(gauss() * sc));
        Hr[a*C + u]             = r2f(hre);
        Hr[a*C + u + NT]        = r2f(-him);
        Hr[(a + NR)*C + u]      = r2f(him);
        Hr[(a + NR)*C + u + NT] = r2f(hre);
      end
    // yr = Hr xr + noise
    for (int r = 0; r < R; r++) begin
      yv[r] = gauss() * $sqrt(n0 / 2.0);
      for (int i = 0; i < C; i++) yv[r] += f2r(Hr[r*C + i]) * xr[i];
      yr[r] = r2f(yv[r]);
    end
    s2 = r2f(n0);
  endtask

  // Double-precision model of the detector on the same inputs (no checksums).
  task automatic model(output real xm []);
    real A [], b [], X [], M [], XN [];
    A = new[C*C]; b = new[C]; X = new[C*C]; M = new[C*C]; XN = new[C*C];
    xm = new[C];
    for (int i = 0; i < C; i++) begin
      b[i] = 0.0;
      for (int r = 0; r < R; r++) b[i] += f2r(Hr[r*C + i]) * f2r(yr[r]);
      for (int j = 0; j < C; j++) begin
        A[i*C + j] = (i == j) ? f2r(s2) : 0.0;
        for (int r = 0; r < R; r++) A[i*C + j] += f2r(Hr[r*C + i]) * f2r(Hr[r*C + j]);
      end
    end
    for (int i = 0; i < C; i++)
      for (int j = 0; j < C; j++) X[i*C + j] = (i == j) ? 1.0 / A[i*C + i] : 0.0;
    for (int it = 0; it < ITER; it++) begin
      for (int i = 0; i < C; i++)
        for (int j = 0; j < C; j++) begin
          M[i*C + j] = (i == j) ? 2.0 : 0.0;
          for (int k = 0; k < C; k++) M[i*C + j] -= A[i*C + k] * X[k*C + j];
        end
      for (int i = 0; i < C; i++)
        for (int j = 0; j < C; j++) begin
          XN[i*C + j] = 0.0;
          for (int k = 0; k < C; k++) XN[i*C + j] += X[i*C + k] * M[k*C + j];
        end
      X = XN;
    end
    for (int i = 0; i < C; i++) begin
      xm[i] = 0.0;
      for (int k = 0; k < C; k++) xm[i] += X[i*C + k] * b[k];
    end
  endtask

  // |chk - sum(data)| within tolerance? v holds the data elements and then
  // the checksum, with the given stride.
  function automatic bit sum_ok(input mat_t v, input int first, input int stride, input int len);
    real s, mag, c;
    s = 0.0; mag = 0.0;
    for (int i = 0; i < len; i++) begin
      s   += f2r(v[first + i*stride]);
      mag += fabs(f2r(v[first + i*stride]));
    end
    c = f2r(v[first + len*stride]);
    return fabs(c - s) <= 1e-3 * (mag + 1.0);
  endfunction

  // The detector on the accelerator. abft = 0 runs it without checksums.
  // inject: 1 corrupts the first preprocessing multiply, 2 the first multiply
  // of the second Newton iteration. status 0: ok, 1: preprocessing check
  // failed, 2: final check failed. x holds the 2Nt real outputs.
  task automatic detect(input bit abft, input int inject, output int status, output real x [],
                        output longint cycles);
    mat_t   HA, S, A, b, Ad, P, X, E, AP, M, XS, xs;
    int     ra, cp;
    longint c0;
    c0 = cyc;
    status = 0;
    x = new[C];
    ra = abft ? C + 1 : C;             // rows of [Hr'; 1'Hr']
    cp = abft ? C + 1 : C;             // columns of P
    HA = new[ra * R];
    for (int r = 0; r < R; r++) begin
      real s;
      s = 0.0;
      for (int i = 0; i < C; i++) begin
        HA[i*R + r] = Hr[r*C + i];
        s += f2r(Hr[r*C + i]);
      end
      if (abft) HA[C*R + r] = r2f(s);
    end
    // A = HA Hr + s2 [I; 1'],  b = HA yr
    if (inject == 1) inj_op = op_count;
    tiled_mul(HA, Hr, ra, R, C, A);
    S = new[ra * C];
    foreach (S[n]) S[n] = 32'h0;
    for (int j = 0; j < C; j++) begin
      S[j*C + j] = s2;
      if (abft) S[C*C + j] = s2;
    end
    tiled_addsub(OP_ADD, A, S, ra, C, A);
    tiled_mul(HA, yr, ra, R, 1, b);
    if (abft) begin
      for (int j = 0; j < C; j++) if (!sum_ok(A, j, C, C)) status = 1;
      if (!sum_ok(b, 0, 1, C)) status = 1;
    end
    if (status != 0) begin
      cycles = cyc - c0;
      return;
    end
    // Initialise: P = [diag(D), D], E = 2 [I 1]
    Ad = new[C * C];
    for (int n = 0; n < C * C; n++) Ad[n] = A[n];
    P = new[C * cp];
    E = new[C * cp];
    for (int i = 0; i < C; i++)
      for (int j = 0; j < cp; j++) begin
        P[i*cp + j] = (j == i || j == C) ? r2f(1.0 / f2r(A[i*C + i])) : 32'h0;
        E[i*cp + j] = (j == i || j == C) ? 32'h4000_0000 : 32'h0;
      end
    for (int it = 0; it < ITER; it++) begin
      X = new[C * C];
      for (int i = 0; i < C; i++)
        for (int j = 0; j < C; j++) X[i*C + j] = P[i*cp + j];
      if (inject == 2 && it == 1) inj_op = op_count;
      tiled_mul(Ad, P, C, C, cp, AP);
      tiled_addsub(OP_SUB, E, AP, C, cp, M);
      tiled_mul(X, M, C, C, cp, P);
    end
    // Solve: x = [P(:,1:2Nt); P(:,2Nt+1)'] b
    XS = new[ra * C];
    for (int i = 0; i < C; i++)
      for (int j = 0; j < C; j++) begin
        XS[i*C + j] = P[i*cp + j];
        if (abft) XS[C*C + j] = P[j*cp + C];
      end
    tiled_mul(XS, b, ra, C, 1, xs);
    if (abft && !sum_ok(xs, 0, 1, C)) status = 2;
    for (int i = 0; i < C; i++) x[i] = f2r(xs[i]);
    cycles = cyc - c0;
  endtask

  initial begin
    int     status, ops0, bit_err, bits;
    real    x [], xm [];
    longint cyc_abft, cyc_base;
    real    ovh [4];
    int     sizes [4];
    bit_err = 0; bits = 0;
    sizes = '{4, 8, 12, 16};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Reference size: clean detections.
    for (int run = 0; run < 3; run++) begin
      make_problem(8, 64);
      model(xm);
      ops0 = op_count;
      detect(1'b1, 0, status, x, cyc_abft);
      chk(status == 0, $sformatf("clean run %0d flagged (status %0d)", run, status));
      if (status == 0) n_clean_pass++;
      for (int i = 0; i < C; i++) begin
        chk(fabs(x[i] - xm[i]) <= 1e-3 * (fabs(xm[i]) + 1.0),
            $sformatf("run %0d x[%0d] = %f, model %f", run, i, x[i], xm[i]));
        bits++;
        if ((x[i] > 0.0) != (sym_bits[i] == 1)) bit_err++;
      end
      $display("Nt=8 Nr=64 run %0d: %0d tile operations, %0d cycles", run, op_count - ops0, cyc_abft);
    end
    chk(op_count - ops0 == 82, "82 tile operations per detection at Nt=8, Nr=64");
    // Corrupted preprocessing result.
    make_problem(8, 64);
    detect(1'b1, 1, status, x, cyc_abft);
    chk(status == 1, $sformatf("preprocessing error not detected (status %0d)", status));
    if (status == 1) n_pre_detect++;
    // Corrupted Newton iteration result.
    make_problem(8, 64);
    detect(1'b1, 2, status, x, cyc_abft);
    chk(status == 2, $sformatf("iteration error not detected (status %0d)", status));
    if (status == 2) n_iter_detect++;
    inj_op = -1;
    // Error campaign: one random flip of one of bits 15..30 (upper mantissa
    // and exponent) in one random result word of one
    // random tile operation per detection. Each outcome is classed against a
    // clean run of the same problem: detected; undetected but visible (some
    // output moved by more than 1e-3 relative: a false negative, possible for
    // errors below the checksum tolerance); undetected and harmful (a detected
    // bit changed). The last must never happen.
    begin
      int  n_det, n_silent, n_visible, n_harmful, op_hit;
      real xc [];
      n_det = 0; n_silent = 0; n_visible = 0; n_harmful = 0;
      for (int e = 0; e < CAMPAIGN; e++) begin
        bit visible, flipped;
        make_problem(8, 64);
        detect(1'b1, 0, status, xc, cyc_abft);
        chk(status == 0, "campaign clean run");
        op_hit   = op_count + int'($urandom_range(81, 0));
        inj_op   = op_hit;
        inj_word = int'($urandom_range(TT - 1, 0));
        inj_mask = 32'h1 << $urandom_range(30, 15);
        detect(1'b1, 0, status, x, cyc_abft);
        inj_op = -1;
        visible = 1'b0;
        flipped = 1'b0;
        for (int i = 0; i < C; i++) begin
          if (fabs(x[i] - xc[i]) > 1e-3 * (fabs(xc[i]) + 1.0)) visible = 1'b1;
          if ((x[i] > 0.0) != (xc[i] > 0.0)) flipped = 1'b1;
        end
        if (status != 0) n_det++;
        else begin
          if (visible) n_visible++;
          else n_silent++;
          if (flipped) begin
            n_harmful++;
            $display("undetected error changed a bit: op %0d word %0d mask %h",
                     op_hit - (op_count - 82), inj_word, inj_mask);
          end
        end
      end
      inj_word = 0;
      inj_mask = 32'h0040_0000;
      $display("error campaign (%0d single bit flips): detected %0d, undetected and invisible %0d, undetected but visible %0d, undetected and bit-changing %0d",
               CAMPAIGN, n_det, n_silent, n_visible, n_harmful);
      chk(n_harmful == 0, "no undetected error changes a detected bit");
      chk(n_det > 0, "campaign produced detections");
    end
    // Overhead over problem sizes.
    foreach (sizes[s]) begin
      make_problem(sizes[s], 8 * sizes[s]);
      model(xm);
      detect(1'b1, 0, status, x, cyc_abft);
      chk(status == 0, $sformatf("Nt=%0d flagged (status %0d)", sizes[s], status));
      if (status == 0) n_clean_pass++;
      for (int i = 0; i < C; i++) begin
        chk(fabs(x[i] - xm[i]) <= 1e-3 * (fabs(xm[i]) + 1.0),
            $sformatf("Nt=%0d x[%0d] = %f, model %f", sizes[s], i, x[i], xm[i]));
        bits++;
        if ((x[i] > 0.0) != (sym_bits[i] == 1)) bit_err++;
      end
      detect(1'b0, 0, status, x, cyc_base);
      chk(status == 0, "baseline run status");
      ovh[s] = 100.0 * real'(cyc_abft - cyc_base) / real'(cyc_base);
      $display("Nt=%0d Nr=%0d: cycles with ABFT %0d, without %0d, overhead %0.1f %%",
               sizes[s], 8 * sizes[s], cyc_abft, cyc_base, ovh[s]);
      chk(cyc_abft >= cyc_base, "ABFT run not shorter than the baseline");
    end
    // 2Nt = 16 and 32 fill whole tiles (boundary case); 2Nt = 24 leaves room.
    chk(ovh[2] < ovh[1], "overhead at Nt=12 below the boundary case Nt=8");
    $display("QPSK bit errors in clean runs: %0d of %0d", bit_err, bits);
    $display("mechanisms: clean_pass=%0d preprocessing_detect=%0d iteration_detect=%0d",
             n_clean_pass, n_pre_detect, n_iter_detect);
    chk(n_clean_pass > 0 && n_pre_detect > 0 && n_iter_detect > 0, "every ABFT outcome exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
