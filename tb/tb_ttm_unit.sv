// tb_ttm_unit: self-checking test of the TTM unit on a reduced array
// (4 x 4 PEs, 2-entry result buffers) so that every edge case is reached:
// ragged fibers (L and I not multiples of Q), ragged output ranks (R_out not
// a multiple of R), several sub-tensors, several row groups, mode-1 and
// mode-j operation, saturation and ping-pong stalls. Outputs are compared
// with a reference computed here from the same fixed-point rules (48-bit sum,
// arithmetic shift by 25, saturation to 16 bits). The number of DRAM reads
// is checked against the cycle formula of the unit, and the total run time
// against that count plus a bounded overhead.
`timescale 1ns/1ps
module tb_ttm_unit;
  import tucker_pkg::*;
  localparam int Q = 4, R = 4, NB = 2;
  localparam addr_t XB = 0, AB = 4096, YB = 8192;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  addr_t cfg_src, cfg_dst, cfg_mat;
  logic [31:0] cfg_l, cfg_h;
  logic [15:0] cfg_i, cfg_r;
  logic cfg_mode1;
  logic rd_valid, rd_ready, rsp_valid, wr_valid, wr_ready;
  addr_t rd_addr, wr_addr;
  tensor_t rsp_data [Q], wr_data [Q];
  logic wr_mask [Q];
  logic [31:0] sat_count, pp_stall_count;

  ttm_unit #(.Q(Q), .R(R), .NB(NB), .NQ_MAX(4), .RG_MAX(2), .IJ_MAX(16), .TAGQ(8)) dut (.*);
  dram_model #(.LANES(Q), .DEPTH(16384), .RD_LAT(3), .STALL_PCT(20)) u_mem (
    .clk, .rd_valid, .rd_addr, .rd_ready, .rsp_valid, .rsp_data,
    .wr_valid, .wr_addr, .wr_data, .wr_mask, .wr_ready);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // one TTM: x [L, I, H], A [I, Ro] -> y [L, Ro, H]
  task automatic run(input int L, input int I, input int Ro, input int H, input bit m1,
                     input int xmax, input int amax);
    longint acc;
    tensor_t exp;
    int bad = 0, t0, t1;
    longint rd0;
    int n_rd, n_rg;
    for (int i = 0; i < L*I*H; i++) u_mem.mem[XB+i] = tensor_t'($urandom_range(2*xmax) - xmax);
    for (int e = 0; e < I*Ro; e++) begin
      logic [31:0] w;
      w = 32'(signed'(32'($urandom_range(2*amax) - amax)));
      u_mem.mem[AB+2*e]   = w[15:0];
      u_mem.mem[AB+2*e+1] = w[31:16];
    end
    for (int i = 0; i < L*Ro*H + 8; i++) u_mem.mem[YB+i] = 16'h5a5a;
    rd0 = u_mem.reads;
    @(negedge clk);
    cfg_src = XB; cfg_dst = YB; cfg_mat = AB;
    cfg_l = L; cfg_i = I; cfg_r = Ro; cfg_h = H; cfg_mode1 = m1;
    start = 1;
    @(negedge clk);
    start = 0;
    t0 = cyc;
    while (!done) @(posedge clk);
    t1 = cyc;
    @(negedge clk);
    for (int h = 0; h < H; h++)
      for (int r = 0; r < Ro; r++)
        for (int l = 0; l < L; l++) begin
          acc = 0;
          for (int i = 0; i < I; i++) begin
            logic [31:0] w;
            longint a;
            w = {u_mem.mem[AB+2*(i+I*r)+1], u_mem.mem[AB+2*(i+I*r)]};
            a = longint'(signed'(w));
            acc += longint'(u_mem.mem[XB + l + L*i + L*I*h]) * a;
          end
          exp = sat_tensor(prod_t'(acc), MAT_FRAC);
          if (u_mem.mem[YB + l + L*r + L*Ro*h] !== exp) bad++;
        end
    check(bad == 0, $sformatf("TTM L=%0d I=%0d R=%0d H=%0d mode1=%0d: %0d wrong elements", L, I, Ro, H, m1, bad));
    check(u_mem.mem[YB + L*Ro*H] == 16'h5a5a, "write past the end of the output");
    n_rg = (Ro + R - 1) / R;
    if (m1) n_rd = H * ((I + Q - 1) / Q) * n_rg + Ro * (((I + Q - 1) / Q) * Q / (Q/2));
    else    n_rd = I * H * ((L + Q - 1) / Q) * n_rg + Ro * ((I + Q/2 - 1) / (Q/2));
    check(int'(u_mem.reads - rd0) == n_rd, $sformatf("reads %0d, formula %0d", u_mem.reads - rd0, n_rd));
    // with 20%% random DRAM stalls the run may take longer than the reads,
    // but not by more than the stall share plus pipeline and drain latency
    check((t1 - t0) >= n_rd && (t1 - t0) <= n_rd * 2 + 60,
          $sformatf("cycles %0d for %0d reads", t1 - t0, n_rd));
    $display("TTM L=%0d I=%0d R=%0d H=%0d mode1=%0d: %0d cycles, %0d reads", L, I, Ro, H, m1, t1-t0, n_rd);
  endtask

  initial begin
    start = 0;
    cfg_src = 0; cfg_dst = 0; cfg_mat = 0; cfg_l = 0; cfg_i = 0; cfg_r = 0; cfg_h = 0; cfg_mode1 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    run(10, 5, 6, 2, 0, 3000, 1 << 25);   // mode-j: 2 sub-tensors, ragged, 2 row groups
    run(1, 10, 6, 3, 1, 3000, 1 << 25);   // mode-1: ragged fiber, 2 row groups
    run(8, 1, 4, 2, 0, 3000, 1 << 25);    // mode-j with I = 1: ping-pong stalls
    run(1, 4, 3, 5, 1, 3000, 1 << 25);    // mode-1, one group per fiber
    begin
      int s0;
      s0 = sat_count;
      run(6, 8, 5, 1, 0, 32000, (1 << 25) - 1);  // large values: saturation
      check(sat_count > s0, "saturation never happened");
    end
    check(pp_stall_count > 0, "ping-pong stall never happened");
    $display("saturated elements %0d, ping-pong stall cycles %0d", sat_count, pp_stall_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
