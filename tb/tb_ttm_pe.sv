// tb_ttm_pe: self-checking test of one TTM processing element. Random
// sequences of multiply-accumulates in both modes (matrix operand from the
// local A_1 RAM or from the row bus), with new-batch restarts and both
// result banks, are compared with a model kept in the testbench.
`timescale 1ns/1ps
module tb_ttm_pe;
  import tucker_pkg::*;
  localparam int NB = 4, RD = 8;
  logic clk = 0;
  always #5 clk = ~clk;

  logic ram_we, valid, mode1, new_batch, buf_sel, rd_sel;
  logic [2:0] ram_waddr, ram_raddr;
  logic [1:0] buf_addr, rd_addr;
  mat_t ram_wdata, a_bus;
  tensor_t x;
  prod_t rd_data;

  ttm_pe #(.NB(NB), .RAM_DEPTH(RD)) dut (.*);

  int checks = 0, failures = 0;
  longint model [2][NB];
  longint ram [RD];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ram_we = 0; valid = 0; mode1 = 0; new_batch = 0; buf_sel = 0; rd_sel = 0;
    ram_waddr = 0; ram_raddr = 0; buf_addr = 0; rd_addr = 0; ram_wdata = 0; a_bus = 0; x = 0;
    // load the A_1 RAM
    for (int i = 0; i < RD; i++) begin
      @(negedge clk);
      ram_we = 1; ram_waddr = i; ram_wdata = mat_t'($urandom_range(1 << 26) - (1 << 25));
      ram[i] = longint'(ram_wdata);
    end
    @(negedge clk);
    ram_we = 0;
    // start every entry of both banks with a new batch
    for (int s = 0; s < 2; s++)
      for (int a = 0; a < NB; a++) begin
        @(negedge clk);
        valid = 1; mode1 = 0; new_batch = 1; buf_sel = s; buf_addr = a;
        x = tensor_t'($urandom_range(65535)); a_bus = mat_t'($urandom_range(1 << 26) - (1 << 25));
        model[s][a] = longint'(x) * longint'(a_bus);
      end
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      valid = ($urandom_range(3) != 0);
      mode1 = $urandom_range(1);
      new_batch = ($urandom_range(9) == 0);
      buf_sel = $urandom_range(1);
      buf_addr = $urandom_range(NB - 1);
      ram_raddr = $urandom_range(RD - 1);
      x = tensor_t'($urandom_range(65535));
      a_bus = mat_t'($urandom_range(1 << 26) - (1 << 25));
      rd_sel = $urandom_range(1);
      rd_addr = $urandom_range(NB - 1);
      #1;
      checks++;
      if (rd_data !== prod_t'(model[rd_sel][rd_addr])) begin
        failures++;
        if (failures < 5) $display("FAIL t=%0d bank %0d entry %0d: %0d vs %0d", t, rd_sel, rd_addr, rd_data, model[rd_sel][rd_addr]);
      end
      if (valid) begin
        longint p;
        p = longint'(x) * (mode1 ? ram[ram_raddr] : longint'(a_bus));
        model[buf_sel][buf_addr] = (new_batch ? 0 : model[buf_sel][buf_addr]) + p;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
