// tb_cordic_sincos: self-checking test of the rotation CORDIC: random angles
// in [-pi/4, pi/4] one per cycle; cos and sin (Q1.25) are compared with $cos
// and $sin within 2^-21, results must appear exactly ITER+1 cycles after the
// input.
`timescale 1ns/1ps
module tb_cordic_sincos;
  import tucker_pkg::*;
  localparam int ITER = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  ang_t theta;
  mat_t cos_o, sin_o;
  logic [7:0] tag_in, tag_out;
  cordic_sincos #(.ITER(ITER), .TAG_W(8)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  real thq [$];
  int  tq [$];
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    real th, c, s;
    int t0;
    th = thq.pop_front();
    t0 = tq.pop_front();
    c = real'(cos_o) / real'(1 << MAT_FRAC);
    s = real'(sin_o) / real'(1 << MAT_FRAC);
    checks++;
    if ((c - $cos(th)) > 5e-7 || (c - $cos(th)) < -5e-7 ||
        (s - $sin(th)) > 5e-7 || (s - $sin(th)) < -5e-7 ||
        cyc - t0 != ITER + 1) begin
      failures++;
      if (failures < 5) $display("FAIL: theta %f cos %f sin %f latency %0d", th, c, s, cyc - t0);
    end
  end

  initial begin
    in_valid = 0; theta = 0; tag_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      in_valid = 1;
      theta = ang_t'($urandom_range(843314857)) - ang_t'(421657428);  // +-pi/4
      thq.push_back(real'(theta) / real'(1 << ANG_FRAC));
      tq.push_back(cyc);
    end
    @(negedge clk);
    in_valid = 0;
    repeat (ITER + 3) @(negedge clk);
    checks++;
    if (thq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
