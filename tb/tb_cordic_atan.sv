// tb_cordic_atan: self-checking test of the vectoring CORDIC. Random vectors
// with x >= 0 (and the edge cases y = 0, x = 0) are fed one per cycle; each
// result, ITER+1 cycles later, is compared with $atan2 within 2^-20 rad, and
// the tag must come out with it.
`timescale 1ns/1ps
module tb_cordic_atan;
  import tucker_pkg::*;
  localparam int ITER = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  ang_t x, y, z;
  logic [7:0] tag_in, tag_out;
  cordic_atan #(.ITER(ITER), .TAG_W(8)) dut (.*);

  int checks = 0, failures = 0;
  real expq [$];
  int  tagq [$];
  int  sent = 0, got = 0, lat_ok = 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    real e, zr, d;
    int et;
    e = expq.pop_front();
    et = tagq.pop_front();
    zr = real'(z) / real'(1 << ANG_FRAC);
    d = zr - e;
    checks++;
    if (d > 1e-6 || d < -1e-6 || tag_out != 8'(et)) begin
      failures++;
      if (failures < 5) $display("FAIL: atan %f expected %f", zr, e);
    end
    got++;
  end

  initial begin
    in_valid = 0; x = 0; y = 0; tag_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      in_valid = 1;
      x = ang_t'($urandom_range(1 << 29));
      y = ang_t'($urandom_range(1 << 30)) - ang_t'(1 << 29);
      if (t == 0) y = 0;
      if (t == 1) x = 0;
      if (t == 2) begin x = 0; y = 0; end
      tag_in = 8'(t);
      expq.push_back((x == 0 && y == 0) ? 0.0 : $atan2(real'(y), real'(x)));
      tagq.push_back(t);
      sent++;
    end
    @(negedge clk);
    in_valid = 0;
    repeat (ITER + 3) @(negedge clk);
    checks++;
    if (got != sent) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
