// tb_onchip_mem: self-checking test of the dual-port on-chip memory: random
// simultaneous reads and writes; read data must appear one cycle after the
// request and equal a model kept here (a read of the word written in the
// same cycle returns the old value).
`timescale 1ns/1ps
module tb_onchip_mem;
  import tucker_pkg::*;
  localparam int P = 4, DEPTH = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rd_en, wr_en;
  logic [5:0] rd_addr, wr_addr;
  mat_t rd_data [P], wr_data [P];
  onchip_mem #(.P(P), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  mat_t model [DEPTH][P];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mat_t expd [P];
    bit pend;
    rd_en = 0; wr_en = 0; rd_addr = 0; wr_addr = 0;
    for (int l = 0; l < P; l++) wr_data[l] = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = a;
      for (int l = 0; l < P; l++) begin
        wr_data[l] = mat_t'($urandom);
        model[a][l] = wr_data[l];
      end
    end
    pend = 0;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      if (pend) begin
        checks++;
        for (int l = 0; l < P; l++) if (rd_data[l] !== expd[l]) begin failures++; break; end
      end
      rd_en = $urandom_range(1); rd_addr = $urandom_range(DEPTH - 1);
      wr_en = $urandom_range(1); wr_addr = $urandom_range(DEPTH - 1);
      for (int l = 0; l < P; l++) wr_data[l] = mat_t'($urandom);
      pend = rd_en;
      if (rd_en) for (int l = 0; l < P; l++) expd[l] = model[rd_addr][l];
      if (wr_en) for (int l = 0; l < P; l++) model[wr_addr][l] = wr_data[l];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
