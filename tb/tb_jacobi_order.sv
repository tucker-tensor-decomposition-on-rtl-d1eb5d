// tb_jacobi_order: self-checking test of the Jacobi pair sequence. For
// n = 2..12 it walks whole sweeps and checks that every pair p < q appears
// exactly once per sweep, that the sweep ends on (n-1, n) with `last`, that
// each step follows the successor rule (computed here independently) and
// that the next sweep starts again at (1, 2).
`timescale 1ns/1ps
module tb_jacobi_order;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic init, advance, last;
  logic [15:0] n, p, q;
  jacobi_order #(.IW(16)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    init = 0; advance = 0; n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int nn = 2; nn <= 12; nn++) begin
      bit seen [13][13];
      int ep, eq;
      @(negedge clk);
      n = nn; init = 1;
      @(negedge clk);
      init = 0;
      for (int a = 0; a < 13; a++) for (int b = 0; b < 13; b++) seen[a][b] = 0;
      ep = 1; eq = 2;
      for (int k = 0; k < nn * (nn - 1) / 2; k++) begin
        check(p == ep && q == eq, $sformatf("n=%0d step %0d: (%0d,%0d) expected (%0d,%0d)", nn, k, p, q, ep, eq));
        check(p >= 1 && p < q && q <= nn && !seen[p][q], $sformatf("n=%0d bad or repeated pair (%0d,%0d)", nn, p, q));
        seen[p][q] = 1;
        check(last == (k == nn * (nn - 1) / 2 - 1), "last flag");
        if (eq - ep > 2) begin ep++; eq--; end
        else if (ep == nn - 1 && eq == nn) begin ep = 1; eq = 2; end
        else if (ep + eq <= nn) begin eq = ep + eq; ep = 1; end
        else begin ep = ep + eq + 1 - nn; eq = nn; end
        advance = 1;
        @(negedge clk);
        advance = 0;
      end
      check(p == 1 && q == 2, "new sweep starts at (1,2)");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
