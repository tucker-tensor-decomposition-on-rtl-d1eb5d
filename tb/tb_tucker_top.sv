// tb_tucker_top: end-to-end, full-size test of the Tucker engine at its
// default parameters (Q = R = 32 TTM array, P = 128 SVD lanes).
//
// The testbench builds a 12 x 10 x 8 tensor of exact multilinear rank
// (3, 3, 2): a random core times three orthonormal factor matrices, scaled so
// that the Frobenius norm is 24000 and rounded to 16-bit integers. It then
// plays the host: the factor matrices U_k start as identities in DRAM and it
// pushes the warm-start HOOI program (two iterations over the three modes):
//   for k = 1..3:  TTM with A_j^T for j != k (decreasing j),
//                  TTM with U_k^T on mode k,
//                  LOAD_T (B^(k) into the on-chip memory), LOAD_U (U_k),
//                  SVD (Jacobi sweeps), STORE_U (new U_k, all I_k columns).
// A_k is the first R_k columns of U_k. Because the data's dominant rows stay
// in front under rotations of at most pi/4, the first R_k left singular
// vectors land in the first R_k columns; the factor matrices of the test
// are built close to the coordinate axes so that this holds.
// A last TTM on a tensor of large values with a large matrix checks output
// saturation and forces ping-pong stalls.
//
// Checks: every factor matrix A_k read back from DRAM is orthonormal
// (max |A^T A - I| < 2e-3) and spans the true subspace
// (||A_true^T A_k||_F^2 >= R_k - 1e-3); the relative reconstruction error of
// X with the hardware factors is below 2e-3; no element clips during HOOI;
// the saturation TTM clips every output. Each mechanism must have happened
// at least once: mode-1 TTM, mode-j TTM, ping-pong stall, saturation, gather
// load, transposing load, LOAD_U, STORE_U, SVD and SVD hazard stalls.
// The TTM compute time of each HOOI command is checked against the rate
// I*H*ceil(L/Q)*ceil(R_out/R) (mode-j) or H*ceil(I/Q)*ceil(R_out/R)
// (mode-1): the op must not finish before that many cycles.
`timescale 1ns/1ps
module tb_tucker_top;
  import tucker_pkg::*;
  localparam int Q = 32, R = 32;
  localparam int I1 = 12, I2 = 10, I3 = 8;
  localparam int R1 = 3, R2 = 3, R3 = 2;
  localparam int ITERS = 2, SWEEPS = 4;
  localparam int XB = 0, UB1 = 2000, UB2 = 2400, UB3 = 2700;
  localparam int T1B = 4000, T2B = 5000, BB = 6000;
  localparam int SMB = 9000, SXB = 10000, SYB = 13000, SL = 2048;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, idle;
  cmd_t cmd;
  logic    dram_rd_valid, dram_rd_ready, dram_rsp_valid, dram_wr_valid, dram_wr_ready;
  addr_t   dram_rd_addr, dram_wr_addr;
  tensor_t dram_rsp_data [Q], dram_wr_data [Q];
  logic    dram_wr_mask [Q];
  logic [31:0] op_count [5], op_cycles [5];
  logic [31:0] ttm_sat_count, ttm_pp_stalls, svd_pairs, svd_hazard_stalls, perm_tiles;

  tucker_top dut (.*);

  dram_model #(.LANES(Q), .DEPTH(1 << 16), .RD_LAT(6), .STALL_PCT(10)) u_dram (
    .clk, .rd_valid(dram_rd_valid), .rd_addr(dram_rd_addr), .rd_ready(dram_rd_ready),
    .rsp_valid(dram_rsp_valid), .rsp_data(dram_rsp_data),
    .wr_valid(dram_wr_valid), .wr_addr(dram_wr_addr), .wr_data(dram_wr_data),
    .wr_mask(dram_wr_mask), .wr_ready(dram_wr_ready));

  int checks = 0, failures = 0;
  int n_mode1 = 0, n_modej = 0, n_gather = 0, n_transpose_loads = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
    else $display("ok:   %s", what);
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // --------------------------------------------------------- monitors
  int   ttm_t0, ttm_min;
  logic ttm_run = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.ttm_start) begin
      if (dut.cur.dim_l == 1) n_mode1++; else n_modej++;
      ttm_t0 = $time / 10;
      ttm_min = (dut.cur.dim_l == 1)
        ? int'(dut.cur.dim_h) * ((int'(dut.cur.dim_i) + Q - 1) / Q) * ((int'(dut.cur.dim_r) + R - 1) / R)
        : int'(dut.cur.dim_i) * int'(dut.cur.dim_h) * ((int'(dut.cur.dim_l) + Q - 1) / Q)
          * ((int'(dut.cur.dim_r) + R - 1) / R);
      ttm_run = 1;
    end
    if (dut.ttm_done && ttm_run) begin
      checks++;
      if ($time / 10 - ttm_t0 < ttm_min) begin
        failures++;
        $display("FAIL: TTM finished in %0d cycles, below the array rate %0d", $time / 10 - ttm_t0, ttm_min);
      end
      ttm_run = 0;
    end
    if (dut.perm_start && dut.cur.op == OP_LOAD_T) begin
      if (dut.cur.dim_l == 1) n_transpose_loads++; else n_gather++;
    end
  end

  // --------------------------------------------------------- host helpers
  task automatic push(input cmd_t c);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic ttm(input int src, input int dst, input int mat, input int L, input int I,
                     input int Ro, input int H);
    cmd_t c;
    c = '0; c.op = OP_TTM; c.src = src; c.dst = dst; c.mat = mat;
    c.dim_l = L; c.dim_i = I; c.dim_r = Ro; c.dim_h = H;
    push(c);
  endtask

  task automatic perm(input op_e op, input int src, input int dst, input int L, input int I,
                      input int Rr, input int H);
    cmd_t c;
    c = '0; c.op = op; c.src = src; c.dst = dst;
    c.dim_l = L; c.dim_i = I; c.dim_r = Rr; c.dim_h = H; c.wb = 1; c.wu = 1;
    push(c);
  endtask

  task automatic svd(input int n);
    cmd_t c;
    c = '0; c.op = OP_SVD; c.dim_i = n; c.wb = 1; c.wu = 1; c.sweeps = SWEEPS;
    push(c);
  endtask

  task automatic wait_idle();
    repeat (5) @(posedge clk);
    while (!idle) @(posedge clk);
  endtask

  function automatic void put_mat(input int base, input int n, input int i, input int r,
                                  input real v);
    logic [31:0] w;
    w = 32'(signed'(mat_t'($rtoi(v * real'(1 << MAT_FRAC) + (v >= 0 ? 0.5 : -0.5)))));
    u_dram.mem[base + 2 * (i + n * r)]     = w[15:0];
    u_dram.mem[base + 2 * (i + n * r) + 1] = w[31:16];
  endfunction

  function automatic real get_mat(input int base, input int n, input int i, input int r);
    logic [31:0] w;
    w = {u_dram.mem[base + 2 * (i + n * r) + 1], u_dram.mem[base + 2 * (i + n * r)]};
    return real'(mat_t'(w[MAT_W-1:0])) / real'(1 << MAT_FRAC);
  endfunction

  function automatic real rnd();
    return (real'($urandom_range(2000000)) / 1000000.0) - 1.0;
  endfunction

  // --------------------------------------------------------- model data
  real At1 [I1][R1], At2 [I2][R2], At3 [I3][R3];
  real Ah1 [I1][R1], Ah2 [I2][R2], Ah3 [I3][R3];
  real G [R1][R2][R3];
  real X [I1][I2][I3];

  // near-axis orthonormal columns by Gram-Schmidt
  task automatic make_factor(input int n, input int r, output real A [][]);
    A = new[n];
    for (int i = 0; i < n; i++) A[i] = new[r];
    for (int c = 0; c < r; c++) begin
      real nrm;
      for (int i = 0; i < n; i++) A[i][c] = (i == c ? 1.0 : 0.0) + 0.25 * rnd();
      for (int p = 0; p < c; p++) begin
        real d = 0;
        for (int i = 0; i < n; i++) d += A[i][c] * A[i][p];
        for (int i = 0; i < n; i++) A[i][c] -= d * A[i][p];
      end
      nrm = 0;
      for (int i = 0; i < n; i++) nrm += A[i][c] * A[i][c];
      nrm = $sqrt(nrm);
      for (int i = 0; i < n; i++) A[i][c] /= nrm;
    end
  endtask

  // relative error of X against its projection on the factor subspaces
  function automatic real recon_err(input real B1 [I1][R1], input real B2 [I2][R2],
                                    input real B3 [I3][R3]);
    real C [R1][R2][R3];
    real e = 0, t = 0;
    for (int a = 0; a < R1; a++) for (int b = 0; b < R2; b++) for (int c = 0; c < R3; c++) begin
      C[a][b][c] = 0;
      for (int i = 0; i < I1; i++) for (int j = 0; j < I2; j++) for (int k = 0; k < I3; k++)
        C[a][b][c] += X[i][j][k] * B1[i][a] * B2[j][b] * B3[k][c];
    end
    for (int i = 0; i < I1; i++) for (int j = 0; j < I2; j++) for (int k = 0; k < I3; k++) begin
      real v = 0;
      for (int a = 0; a < R1; a++) for (int b = 0; b < R2; b++) for (int c = 0; c < R3; c++)
        v += C[a][b][c] * B1[i][a] * B2[j][b] * B3[k][c];
      e += (X[i][j][k] - v) ** 2;
      t += X[i][j][k] ** 2;
    end
    return $sqrt(e / t);
  endfunction

  task automatic check_factor(input int k, input int base, input int n, input int r,
                              input real At [][]);
    real Ah [][];
    real worst = 0, span = 0;
    Ah = new[n];
    for (int i = 0; i < n; i++) begin
      Ah[i] = new[r];
      for (int c = 0; c < r; c++) Ah[i][c] = get_mat(base, n, i, c);
    end
    for (int a = 0; a < r; a++) for (int b = 0; b < r; b++) begin
      real d = 0, s = 0;
      for (int i = 0; i < n; i++) begin d += Ah[i][a] * Ah[i][b]; s += At[i][a] * Ah[i][b]; end
      d -= (a == b) ? 1.0 : 0.0;
      if (d > worst) worst = d;
      if (-d > worst) worst = -d;
      span += s * s;
    end
    check(worst < 2e-3, $sformatf("A_%0d orthonormal (max |A^T A - I| = %g)", k, worst));
    check(span >= r - 1e-3, $sformatf("A_%0d spans the true subspace (%f of %0d)", k, span, r));
    for (int i = 0; i < n; i++) for (int c = 0; c < r; c++) begin
      if (k == 1) Ah1[i][c] = Ah[i][c];
      if (k == 2) Ah2[i][c] = Ah[i][c];
      if (k == 3) Ah3[i][c] = Ah[i][c];
    end
  endtask

  initial begin
    real A1d [][], A2d [][], A3d [][];
    real nrm, e_hw, e_true;
    int  sat_hooi;
    cmd_valid = 0; cmd = '0;

    // build the test tensor
    make_factor(I1, R1, A1d);
    make_factor(I2, R2, A2d);
    make_factor(I3, R3, A3d);
    for (int i = 0; i < I1; i++) for (int c = 0; c < R1; c++) At1[i][c] = A1d[i][c];
    for (int i = 0; i < I2; i++) for (int c = 0; c < R2; c++) At2[i][c] = A2d[i][c];
    for (int i = 0; i < I3; i++) for (int c = 0; c < R3; c++) At3[i][c] = A3d[i][c];
    for (int a = 0; a < R1; a++) for (int b = 0; b < R2; b++) for (int c = 0; c < R3; c++)
      G[a][b][c] = rnd() + ((a == b && b == c) ? 3.0 - a : 0.0);
    nrm = 0;
    for (int i = 0; i < I1; i++) for (int j = 0; j < I2; j++) for (int k = 0; k < I3; k++) begin
      X[i][j][k] = 0;
      for (int a = 0; a < R1; a++) for (int b = 0; b < R2; b++) for (int c = 0; c < R3; c++)
        X[i][j][k] += G[a][b][c] * At1[i][a] * At2[j][b] * At3[k][c];
      nrm += X[i][j][k] ** 2;
    end
    nrm = 24000.0 / $sqrt(nrm);
    for (int i = 0; i < I1; i++) for (int j = 0; j < I2; j++) for (int k = 0; k < I3; k++) begin
      X[i][j][k] = real'($rtoi(X[i][j][k] * nrm + (X[i][j][k] >= 0 ? 0.5 : -0.5)));
      u_dram.mem[XB + i + I1 * (j + I2 * k)] = tensor_t'($rtoi(X[i][j][k]));
    end
    // identity factor matrices
    for (int i = 0; i < I1; i++) for (int c = 0; c < I1; c++) put_mat(UB1, I1, i, c, i == c ? 1.0 : 0.0);
    for (int i = 0; i < I2; i++) for (int c = 0; c < I2; c++) put_mat(UB2, I2, i, c, i == c ? 1.0 : 0.0);
    for (int i = 0; i < I3; i++) for (int c = 0; c < I3; c++) put_mat(UB3, I3, i, c, i == c ? 1.0 : 0.0);
    // saturation test data
    for (int e = 0; e < SL; e++) u_dram.mem[SXB + e] = 16'sd30000;
    put_mat(SMB, 1, 0, 0, 1.9);
    put_mat(SMB, 1, 0, 1, -1.9);

    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int it = 0; it < ITERS; it++) begin
      // mode 1: X x3 A3^T x2 A2^T -> [I1, R2, R3], then x1 U1^T
      ttm(XB,  T1B, UB3, I1 * I2, I3, R3, 1);
      ttm(T1B, T2B, UB2, I1, I2, R2, R3);
      ttm(T2B, BB,  UB1, 1, I1, I1, R2 * R3);
      perm(OP_LOAD_T, BB, 0, 1, I1, 0, R2 * R3);
      perm(OP_LOAD_U, UB1, 0, 0, I1, 0, 0);
      svd(I1);
      perm(OP_STORE_U, 0, UB1, 0, I1, I1, 0);
      // mode 2: X x3 A3^T x1 A1^T -> [R1, I2, R3], then x2 U2^T
      ttm(XB,  T1B, UB3, I1 * I2, I3, R3, 1);
      ttm(T1B, T2B, UB1, 1, I1, R1, I2 * R3);
      ttm(T2B, BB,  UB2, R1, I2, I2, R3);
      perm(OP_LOAD_T, BB, 0, R1, I2, 0, R3);
      perm(OP_LOAD_U, UB2, 0, 0, I2, 0, 0);
      svd(I2);
      perm(OP_STORE_U, 0, UB2, 0, I2, I2, 0);
      // mode 3: X x2 A2^T x1 A1^T -> [R1, R2, I3], then x3 U3^T
      ttm(XB,  T1B, UB2, I1, I2, R2, I3);
      ttm(T1B, T2B, UB1, 1, I1, R1, R2 * I3);
      ttm(T2B, BB,  UB3, R1 * R2, I3, I3, 1);
      perm(OP_LOAD_T, BB, 0, R1 * R2, I3, 0, 1);
      perm(OP_LOAD_U, UB3, 0, 0, I3, 0, 0);
      svd(I3);
      perm(OP_STORE_U, 0, UB3, 0, I3, I3, 0);
    end
    wait_idle();
    $display("HOOI done at cycle %0d", $time / 10);
    sat_hooi = int'(ttm_sat_count);
    check(sat_hooi == 0, $sformatf("no clipping during HOOI (%0d)", sat_hooi));

    check_factor(1, UB1, I1, R1, A1d);
    check_factor(2, UB2, I2, R2, A2d);
    check_factor(3, UB3, I3, R3, A3d);
    e_hw = recon_err(Ah1, Ah2, Ah3);
    e_true = recon_err(At1, At2, At3);
    check(e_hw < 2e-3, $sformatf("reconstruction error %g (true factors %g)", e_hw, e_true));

    // saturation and ping-pong stalls: 2048 x 1 x 1 tensor of 30000, x 1.9
    ttm(SXB, SYB, SMB, SL, 1, 2, 1);
    wait_idle();
    begin
      int bad = 0;
      for (int e = 0; e < SL; e++) begin
        if (u_dram.mem[SYB + e] != 16'sh7fff) bad++;
        if (u_dram.mem[SYB + SL + e] != 16'sh8000) bad++;
      end
      check(bad == 0, $sformatf("saturated outputs (%0d wrong)", bad));
    end
    check(int'(ttm_sat_count) - sat_hooi == 2 * SL, $sformatf("saturation count %0d", int'(ttm_sat_count) - sat_hooi));

    // every mechanism happened
    check(n_mode1 > 0, $sformatf("mode-1 TTM ran %0d times", n_mode1));
    check(n_modej > 0, $sformatf("mode-j TTM ran %0d times", n_modej));
    check(ttm_pp_stalls > 0, $sformatf("ping-pong stalls %0d", ttm_pp_stalls));
    check(ttm_sat_count > 0, $sformatf("saturations %0d", ttm_sat_count));
    check(n_gather > 0, $sformatf("gather loads %0d", n_gather));
    check(n_transpose_loads > 0 && perm_tiles > 0, $sformatf("transposing loads %0d, tiles %0d", n_transpose_loads, perm_tiles));
    check(op_count[OP_LOAD_U] == 3 * ITERS, $sformatf("LOAD_U ops %0d", op_count[OP_LOAD_U]));
    check(op_count[OP_STORE_U] == 3 * ITERS, $sformatf("STORE_U ops %0d", op_count[OP_STORE_U]));
    check(op_count[OP_SVD] == 3 * ITERS, $sformatf("SVD ops %0d", op_count[OP_SVD]));
    check(op_count[OP_TTM] == 9 * ITERS + 1, $sformatf("TTM ops %0d", op_count[OP_TTM]));
    // the pair counter restarts with each SVD command: the last one was mode 3
    check(svd_pairs == SWEEPS * I3 * (I3 - 1) / 2, $sformatf("SVD pairs of the last SVD %0d", svd_pairs));
    check(svd_hazard_stalls > 0, $sformatf("SVD hazard stalls %0d", svd_hazard_stalls));
    for (int o = 0; o < 5; o++) $display("op %0d: %0d commands, %0d cycles", o, op_count[o], op_cycles[o]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
