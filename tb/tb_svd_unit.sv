// tb_svd_unit: self-checking test of the Jacobi SVD unit with P = 4 lanes.
// A random 6 x 10 matrix B (two of its three 4-lane words per row full, the
// third half used) and U = I are placed in the on-chip memory; the unit runs
// 8 sweeps. The testbench then checks, in double precision and independently
// of the unit: the number of pairs rotated, that the rows of B are mutually
// orthogonal, that U stayed orthonormal, that B_final = U_final * B_initial,
// that the row norms equal the singular values obtained by a double-precision
// Jacobi reference, and that run time stays within the pair-fetch time
// 2*(wb+wu)+1 per pair plus hazard stalls and pipeline latency. A second run
// with a different matrix (7 rows, odd) checks the ordering for odd n.
`timescale 1ns/1ps
module tb_svd_unit;
  import tucker_pkg::*;
  localparam int P = 4, DEPTH = 256;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  logic [15:0] cfg_n, cfg_wb, cfg_wu;
  logic [7:0] cfg_sweeps;
  logic mem_rd_en, mem_wr_en;
  logic [7:0] mem_rd_addr, mem_wr_addr;
  mat_t mem_rd_data [P], mem_wr_data [P];
  logic [31:0] pairs_done, hazard_stalls;

  svd_unit #(.P(P), .NMAX(16), .MEM_DEPTH(DEPTH), .FIFO_DEPTH(32), .MAX_INFLIGHT(4)) dut (.*);
  onchip_mem #(.P(P), .DEPTH(DEPTH)) u_mem (
    .clk, .rd_en(mem_rd_en), .rd_addr(mem_rd_addr), .rd_data(mem_rd_data),
    .wr_en(mem_wr_en), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data));

  int checks = 0, failures = 0, cyc = 0, waits = 0;
  always @(posedge clk) begin
    cyc++;
    if (int'(dut.rstate) == 1 && !dut.can_go) waits++;  // 1 = R_WAIT
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real get(input int row, input int col, input int rw);
    mat_t v;
    v = mat_t'(u_mem.mem[row*rw + col/P][(col%P)*MAT_W +: MAT_W]);
    return real'(v);
  endfunction

  task automatic put(input int row, input int col, input int rw, input int val);
    u_mem.mem[row*rw + col/P][(col%P)*MAT_W +: MAT_W] = MAT_W'(val);
  endtask

  function automatic real rabs(input real x); return x < 0 ? -x : x; endfunction

  task automatic run(input int n, input int L, input int sweeps);
    int wb, wu, rw, t0, npairs;
    real b0 [16][16];
    real b  [16][16];
    real u  [16][16];
    real rb [16][16];
    real sv_dut [16], sv_ref [16];
    real worst_orth, worst_u, worst_rec, worst_sv, one;
    wb = (L + P - 1) / P; wu = (n + P - 1) / P; rw = wb + wu;
    one = real'(1 << MAT_FRAC);
    for (int a = 0; a < DEPTH; a++) u_mem.mem[a] = '0;
    for (int i = 0; i < n; i++) begin
      for (int j = 0; j < L; j++) begin
        int v;
        v = int'($urandom_range(1 << 21)) - (1 << 20);
        put(i, j, rw, v);
        b0[i][j] = real'(v);
        rb[i][j] = real'(v);
      end
      put(i, wb*P + i, rw, 1 << MAT_FRAC);
    end
    @(negedge clk);
    cfg_n = n; cfg_wb = wb; cfg_wu = wu; cfg_sweeps = sweeps; start = 1;
    @(negedge clk);
    start = 0;
    t0 = cyc;
    waits = 0;
    while (!done) @(posedge clk);
    @(negedge clk);
    npairs = sweeps * n * (n - 1) / 2;
    check(pairs_done == npairs, $sformatf("pairs %0d expected %0d", pairs_done, npairs));
    check(cyc - t0 >= npairs * 2 * rw, "faster than the fetch time");
    // every cycle is a fetch cycle, a cycle waiting for a free row, FIFO
    // space or pipeline slot, or the final drain of the pipeline
    check(cyc - t0 <= npairs * (2 * rw + 1) + waits + 200,
          $sformatf("cycles %0d, pairs %0d, waits %0d", cyc - t0, npairs, waits));
    check(hazard_stalls <= waits, "hazard stalls exceed wait cycles");
    $display("SVD n=%0d L=%0d sweeps=%0d: %0d cycles, %0d pairs, %0d hazard-stall cycles",
             n, L, sweeps, cyc - t0, npairs, hazard_stalls);
    for (int i = 0; i < n; i++) begin
      for (int j = 0; j < L; j++) b[i][j] = get(i, j, rw);
      for (int j = 0; j < n; j++) u[i][j] = get(i, wb*P + j, rw) / one;
    end
    // orthogonality of B rows
    worst_orth = 0;
    for (int i = 0; i < n; i++)
      for (int j = i + 1; j < n; j++) begin
        real d, ni, nj;
        d = 0; ni = 0; nj = 0;
        for (int c = 0; c < L; c++) begin
          d += b[i][c] * b[j][c]; ni += b[i][c] * b[i][c]; nj += b[j][c] * b[j][c];
        end
        if (ni > 0 && nj > 0 && rabs(d) / $sqrt(ni * nj) > worst_orth) worst_orth = rabs(d) / $sqrt(ni * nj);
      end
    check(worst_orth < 1e-4, $sformatf("rows of B not orthogonal: %g", worst_orth));
    // U orthonormal
    worst_u = 0;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        real d;
        d = 0;
        for (int c = 0; c < n; c++) d += u[i][c] * u[j][c];
        d -= (i == j) ? 1.0 : 0.0;
        if (rabs(d) > worst_u) worst_u = rabs(d);
      end
    check(worst_u < 1e-5, $sformatf("U not orthonormal: %g", worst_u));
    // B_final = U * B_initial
    worst_rec = 0;
    for (int i = 0; i < n; i++)
      for (int c = 0; c < L; c++) begin
        real d;
        d = 0;
        for (int k = 0; k < n; k++) d += u[i][k] * b0[k][c];
        if (rabs(d - b[i][c]) > worst_rec) worst_rec = rabs(d - b[i][c]);
      end
    check(worst_rec < 64.0, $sformatf("B_final differs from U*B: %g", worst_rec));
    // reference singular values: double-precision cyclic Jacobi
    for (int s = 0; s < 30; s++)
      for (int i = 0; i < n; i++)
        for (int j = i + 1; j < n; j++) begin
          real al, be, ga, th, c, sn, t;
          al = 0; be = 0; ga = 0;
          for (int k = 0; k < L; k++) begin
            al += rb[i][k] * rb[i][k]; be += rb[j][k] * rb[j][k]; ga += rb[i][k] * rb[j][k];
          end
          if (ga != 0) begin
            th = 0.5 * $atan2(2 * ga, be - al);
            c = $cos(th); sn = $sin(th);
            for (int k = 0; k < L; k++) begin
              t = rb[i][k];
              rb[i][k] = c * t - sn * rb[j][k];
              rb[j][k] = sn * t + c * rb[j][k];
            end
          end
        end
    for (int i = 0; i < n; i++) begin
      sv_dut[i] = 0; sv_ref[i] = 0;
      for (int k = 0; k < L; k++) begin
        sv_dut[i] += b[i][k] * b[i][k]; sv_ref[i] += rb[i][k] * rb[i][k];
      end
      sv_dut[i] = $sqrt(sv_dut[i]); sv_ref[i] = $sqrt(sv_ref[i]);
    end
    // sort both
    for (int i = 0; i < n; i++)
      for (int j = i + 1; j < n; j++) begin
        real t;
        if (sv_dut[j] > sv_dut[i]) begin t = sv_dut[i]; sv_dut[i] = sv_dut[j]; sv_dut[j] = t; end
        if (sv_ref[j] > sv_ref[i]) begin t = sv_ref[i]; sv_ref[i] = sv_ref[j]; sv_ref[j] = t; end
      end
    worst_sv = 0;
    for (int i = 0; i < n; i++)
      if (rabs(sv_dut[i] - sv_ref[i]) / sv_ref[0] > worst_sv) worst_sv = rabs(sv_dut[i] - sv_ref[i]) / sv_ref[0];
    check(worst_sv < 1e-4, $sformatf("singular values differ: %g", worst_sv));
    $display("  orthogonality %g, U error %g, reconstruction %g, singular-value error %g",
             worst_orth, worst_u, worst_rec, worst_sv);
  endtask

  initial begin
    start = 0; cfg_n = 0; cfg_wb = 0; cfg_wu = 0; cfg_sweeps = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    run(6, 10, 8);
    check(hazard_stalls > 0, "hazard stall never happened");
    run(7, 16, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
