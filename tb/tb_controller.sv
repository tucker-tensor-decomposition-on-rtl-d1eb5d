// tb_controller: self-checking test of the command sequencer. Stand-in
// units answer each start with done after a random delay. The testbench
// checks that commands run in the order pushed, one at a time, on the unit
// their operation belongs to, with the matching owner code, that the queue
// applies back-pressure when full, and the per-operation counters.
`timescale 1ns/1ps
module tb_controller;
  import tucker_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid, cmd_ready, idle, ttm_start, perm_start, svd_start;
  logic ttm_done, perm_done, svd_done;
  cmd_t cmd, cur;
  logic [1:0] owner;
  logic [31:0] op_count [5], op_cycles [5];

  controller #(.CMDQ(4)) dut (.*);

  int checks = 0, failures = 0;
  op_e sent [$];
  int  busy_left = -1;
  int  unit_of_run;
  int  expect_count [5];

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

  // stand-in units
  always @(posedge clk) begin
    ttm_done <= 0; perm_done <= 0; svd_done <= 0;
    if (ttm_start || perm_start || svd_start) begin
      op_e e;
      int u;
      check(busy_left < 0, "start while a unit runs");
      e = sent.pop_front();
      check(cur.op == e, $sformatf("order: got %0d expected %0d", cur.op, e));
      u = ttm_start ? 1 : perm_start ? 2 : 3;
      check(u == ((e == OP_TTM) ? 1 : (e == OP_SVD) ? 3 : 2), "wrong unit started");
      unit_of_run = u;
      busy_left = $urandom_range(6);
    end else if (busy_left >= 0) begin
      check(owner == 2'(unit_of_run), "owner while running");
      if (busy_left == 0) begin
        if (unit_of_run == 1) ttm_done <= 1;
        else if (unit_of_run == 2) perm_done <= 1;
        else svd_done <= 1;
      end
      busy_left--;
    end
  end

  initial begin
    int stalls = 0;
    cmd_valid = 0; cmd = '0; ttm_done = 0; perm_done = 0; svd_done = 0;
    for (int i = 0; i < 5; i++) expect_count[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 60; k++) begin
      op_e e;
      e = op_e'($urandom_range(4));
      @(negedge clk);
      cmd = '0; cmd.op = e; cmd.src = addr_t'(k); cmd_valid = 1;
      while (!cmd_ready) begin stalls++; @(negedge clk); end
      sent.push_back(e);
      expect_count[e]++;
      @(negedge clk);
      cmd_valid = 0;
    end
    while (!idle || busy_left >= 0) @(negedge clk);
    repeat (3) @(negedge clk);
    check(sent.size() == 0, "commands left unexecuted");
    check(stalls > 0, "queue never filled");
    for (int i = 0; i < 5; i++) check(op_count[i] == expect_count[i], $sformatf("count of op %0d", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
