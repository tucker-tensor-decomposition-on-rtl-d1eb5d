// cordic_atan: pipelined CORDIC in vectoring mode, z = atan(y / x).
//
// The vector (x, y), x >= 0, is rotated towards the positive x axis by the
// elementary angles atan(2^-i), i = 0..ITER-1, one per pipeline stage; the
// sum of the rotations applied is the angle of the input vector. The result
// is in [-pi/2, pi/2] in radians with 29 fraction bits (ang_t). Two guard
// bits absorb the CORDIC gain (about 1.65) so 32-bit inputs cannot
// overflow. A full-throughput pipeline: one input per cycle, the result and
// the `tag_in` value leave ITER+1 cycles later with out_valid.
//
// In the Jacobi SVD it turns the ratio 2*gamma / (beta - alpha) into the
// double rotation angle. The design takes the arctan from CORDIC; the
// pipeline depth and widths are this RTL's choice.
module cordic_atan
  import tucker_pkg::*;
#(
  parameter int ITER  = 24,
  parameter int TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  ang_t             x,
  input  ang_t             y,
  input  logic [TAG_W-1:0] tag_in,
  output logic             out_valid,
  output ang_t             z,
  output logic [TAG_W-1:0] tag_out
);
  localparam int IW = ANG_W + 2;
  typedef logic signed [IW-1:0] iw_t;

  iw_t              xs [ITER+1];
  iw_t              ys [ITER+1];
  ang_t             zs [ITER+1];
  logic             vs [ITER+1];
  logic [TAG_W-1:0] ts [ITER+1];
  logic             zf [ITER+1];  // input was (0, 0): angle forced to 0

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i <= ITER; i++) vs[i] <= 1'b0;
    end else begin
      vs[0] <= in_valid;
      for (int i = 0; i < ITER; i++) vs[i+1] <= vs[i];
    end
  end

  always_ff @(posedge clk) begin
    xs[0] <= iw_t'(x);
    ys[0] <= iw_t'(y);
    zs[0] <= '0;
    ts[0] <= tag_in;
    zf[0] <= (x == '0) && (y == '0);
    for (int i = 0; i < ITER; i++) begin
      if (ys[i] >= 0) begin
        xs[i+1] <= xs[i] + (ys[i] >>> i);
        ys[i+1] <= ys[i] - (xs[i] >>> i);
        zs[i+1] <= zs[i] + ang_t'(CORDIC_ATAN[i]);
      end else begin
        xs[i+1] <= xs[i] - (ys[i] >>> i);
        ys[i+1] <= ys[i] + (xs[i] >>> i);
        zs[i+1] <= zs[i] - ang_t'(CORDIC_ATAN[i]);
      end
      ts[i+1] <= ts[i];
      zf[i+1] <= zf[i];
    end
  end

  assign out_valid = vs[ITER];
  assign z         = zf[ITER] ? '0 : zs[ITER];
  assign tag_out   = ts[ITER];
endmodule
