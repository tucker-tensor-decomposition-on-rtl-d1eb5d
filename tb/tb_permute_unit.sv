// tb_permute_unit: self-checking test of the permute/reshape unit with a
// 4-lane DRAM port and 8-lane on-chip words. It loads a tensor unfolded
// along a middle mode (gather: runs of L = 3 elements), along mode 1
// (transpose through the buffer, with a partial last tile), loads a 6 x 6
// matrix into the U part and stores U rows back as matrix columns. Every
// on-chip word and DRAM element is compared with the index arithmetic of
// the unfolding, B^(k)(i, l + L*h) = B(l, i, h), computed here; words that
// must not change (the U part during a tensor load, DRAM slots past the
// matrix) are checked too, and the number of DRAM reads of the gather is
// compared with the expected count of runs.
`timescale 1ns/1ps
module tb_permute_unit;
  import tucker_pkg::*;
  localparam int Q = 4, P = 8, DEPTH = 512, BS = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  op_e cfg_op;
  addr_t cfg_src, cfg_dst;
  logic [31:0] cfg_l, cfg_h;
  logic [15:0] cfg_i, cfg_r, cfg_wb, cfg_wu;
  logic rd_valid, rd_ready, rsp_valid, wr_valid, wr_ready;
  addr_t rd_addr, wr_addr;
  tensor_t rsp_data [Q], wr_data [Q];
  logic wr_mask [Q];
  logic mem_rd_en, mem_wr_en;
  logic [8:0] mem_rd_addr, mem_wr_addr;
  mat_t mem_rd_data [P], mem_wr_data [P];
  logic [31:0] transposed_tiles;

  permute_unit #(.Q(Q), .P(P), .MEM_DEPTH(DEPTH), .TAGQ(8), .B_SHIFT(BS)) dut (.*);
  dram_model #(.LANES(Q), .DEPTH(4096), .RD_LAT(3), .STALL_PCT(25)) u_dram (
    .clk, .rd_valid, .rd_addr, .rd_ready, .rsp_valid, .rsp_data,
    .wr_valid, .wr_addr, .wr_data, .wr_mask, .wr_ready);
  onchip_mem #(.P(P), .DEPTH(DEPTH)) u_mem (
    .clk, .rd_en(mem_rd_en), .rd_addr(mem_rd_addr), .rd_data(mem_rd_data),
    .wr_en(mem_wr_en), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data));

  int checks = 0, failures = 0;

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

  function automatic mat_t mget(input int addr, input int c);
    return mat_t'(u_mem.mem[addr][c*MAT_W +: MAT_W]);
  endfunction

  task automatic go(input op_e op, input addr_t s, input addr_t d, input int L, input int I,
                    input int Rr, input int H, input int wb, input int wu);
    @(negedge clk);
    cfg_op = op; cfg_src = s; cfg_dst = d; cfg_l = L; cfg_i = I; cfg_r = Rr; cfg_h = H;
    cfg_wb = wb; cfg_wu = wu; start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(posedge clk);
    @(negedge clk);
  endtask

  task automatic load_tensor(input int L, input int I, input int H);
    int J, wb, rw, bad, ubad, nseg, expseg;
    longint r0;
    J = L * H; wb = (J + P - 1) / P; rw = wb + 1;
    for (int e = 0; e < L*I*H; e++) u_dram.mem[100 + e] = tensor_t'($urandom_range(60000) - 30000);
    for (int a = 0; a < DEPTH; a++) u_mem.mem[a] = {P{27'h1234567}};
    r0 = u_dram.reads;
    go(OP_LOAD_T, 100, 0, L, I, 0, H, wb, 1);
    bad = 0; ubad = 0;
    for (int i = 0; i < I; i++) begin
      for (int w = 0; w < wb; w++)
        for (int c = 0; c < P; c++) begin
          int j;
          mat_t exp;
          j = w * P + c;
          exp = (j < J) ? (mat_t'(u_dram.mem[100 + (j % L) + L * (i + I * (j / L))]) <<< BS) : '0;
          if (mget(i * rw + w, c) !== exp) bad++;
        end
      for (int c = 0; c < P; c++) if (mget(i * rw + wb, c) !== mat_t'(27'h1234567)) ubad++;
    end
    check(bad == 0, $sformatf("LOAD_T L=%0d I=%0d H=%0d: %0d wrong values", L, I, H, bad));
    check(ubad == 0, "LOAD_T overwrote the U part");
    // expected DRAM reads
    expseg = 0;
    if (L == 1) expseg = ((I + Q - 1) / Q) * J;
    else
      for (int i = 0; i < I; i++)
        for (int w = 0; w < wb; w++) begin
          int j, je;
          j = w * P; je = (w * P + P < J) ? w * P + P : J;
          while (j < je) begin
            int len;
            len = L - (j % L);
            if (len > Q) len = Q;
            if (len > je - j) len = je - j;
            j += len; expseg++;
          end
        end
    nseg = int'(u_dram.reads - r0);
    check(nseg == expseg, $sformatf("LOAD_T reads %0d expected %0d", nseg, expseg));
  endtask

  initial begin
    int n, wb, wu, rw, bad;
    start = 0; cfg_op = OP_LOAD_T; cfg_src = 0; cfg_dst = 0; cfg_l = 0; cfg_i = 0; cfg_r = 0;
    cfg_h = 0; cfg_wb = 0; cfg_wu = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    load_tensor(3, 5, 4);   // gather, runs of 3, partial last word
    load_tensor(9, 3, 2);   // gather, runs longer than Q
    load_tensor(1, 6, 10);  // transpose, partial last tile
    check(transposed_tiles > 0, "transpose path never used");
    // matrix in / out
    n = 6; wb = 1; wu = 1; rw = 2;
    for (int e = 0; e < n * n; e++) begin
      logic [31:0] w;
      w = 32'(signed'(32'($urandom_range(1 << 26) - (1 << 25))));
      u_dram.mem[1000 + 2*e] = w[15:0];
      u_dram.mem[1000 + 2*e + 1] = w[31:16];
    end
    go(OP_LOAD_U, 1000, 0, 0, n, 0, 0, wb, wu);
    bad = 0;
    for (int r = 0; r < n; r++)
      for (int i = 0; i < n; i++) begin
        logic [31:0] w;
        w = {u_dram.mem[1000 + 2*(i + n*r) + 1], u_dram.mem[1000 + 2*(i + n*r)]};
        if (mget(r * rw + wb, i) !== mat_t'(w[26:0])) bad++;
      end
    check(bad == 0, $sformatf("LOAD_U: %0d wrong entries", bad));
    for (int e = 0; e < 2 * n * n + 8; e++) u_dram.mem[2000 + e] = 16'h7777;
    go(OP_STORE_U, 0, 2000, 0, n, 4, 0, wb, wu);   // first 4 columns
    bad = 0;
    for (int r = 0; r < 4; r++)
      for (int i = 0; i < n; i++) begin
        logic [31:0] w;
        w = {u_dram.mem[2000 + 2*(i + n*r) + 1], u_dram.mem[2000 + 2*(i + n*r)]};
        if (w !== 32'(signed'(mget(r * rw + wb, i)))) bad++;
      end
    check(bad == 0, $sformatf("STORE_U: %0d wrong entries", bad));
    check(u_dram.mem[2000 + 2 * n * 4] == 16'h7777, "STORE_U wrote past the stored columns");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
