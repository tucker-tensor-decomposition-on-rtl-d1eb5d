// tb_inplace_adder_tree: self-checking test of the in-place adder tree for
// N = 32 and N = 8: random signed inputs, the sum is compared with a sum
// formed here, and done must come exactly log2(N) cycles after the cycle in
// which the load was registered (log2(N)+1 cycles after load is raised).
`timescale 1ns/1ps
module tb_inplace_adder_tree;
  import tucker_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic load32, busy32, done32, load8, busy8, done8;
  prod_t din32 [32], din8 [8], sum32, sum8;

  inplace_adder_tree #(.N(32)) dut32 (.clk, .rst_n, .load(load32), .din(din32), .busy(busy32), .done(done32), .sum(sum32));
  inplace_adder_tree #(.N(8))  dut8  (.clk, .rst_n, .load(load8),  .din(din8),  .busy(busy8),  .done(done8),  .sum(sum8));

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    longint e32, e8;
    int lat;
    load32 = 0; load8 = 0;
    for (int i = 0; i < 32; i++) din32[i] = 0;
    for (int i = 0; i < 8; i++) din8[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      @(negedge clk);
      e32 = 0; e8 = 0;
      for (int i = 0; i < 32; i++) begin
        din32[i] = prod_t'({$urandom, $urandom}) >>> 3;
        e32 += longint'(din32[i]);
      end
      for (int i = 0; i < 8; i++) begin
        din8[i] = prod_t'({$urandom, $urandom}) >>> 3;
        e8 += longint'(din8[i]);
      end
      load32 = 1; load8 = 1;
      @(negedge clk);
      load32 = 0; load8 = 0;
      lat = 1;
      while (!done32) begin
        if (done8) begin
          check(lat == 4, $sformatf("N=8 latency %0d", lat));
          check(sum8 == prod_t'(e8), "N=8 sum");
        end
        @(negedge clk);
        lat++;
      end
      check(lat == 6, $sformatf("N=32 latency %0d", lat));
      check(sum32 == prod_t'(e32), $sformatf("N=32 sum %0d vs %0d", sum32, e32));
      check(!busy32, "busy after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
