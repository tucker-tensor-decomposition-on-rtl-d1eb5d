// cordic_sincos: pipelined CORDIC in rotation mode, (cos theta, sin theta).
//
// Starts from the vector (K, 0), K = 1/CORDIC gain, and rotates it by
// +-atan(2^-i) per stage, steering by the sign of the remaining angle, so that
// after ITER stages it points at theta with unit length. Input theta is in
// radians with 29 fraction bits, |theta| <= 1.74; outputs are Q1.25 matrix
// values (mat_t), rounded. One input per cycle; results and `tag_in` appear
// ITER+1 cycles later with out_valid.
//
// The design computes sin and cos by CORDIC; the pipeline depth, the
// internal precision (30 fraction bits) and rounding are this RTL's choice.
module cordic_sincos
  import tucker_pkg::*;
#(
  parameter int ITER  = 24,
  parameter int TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  ang_t             theta,
  input  logic [TAG_W-1:0] tag_in,
  output logic             out_valid,
  output mat_t             cos_o,
  output mat_t             sin_o,
  output logic [TAG_W-1:0] tag_out
);
  localparam int IW   = 34;        // 30 fraction bits
  localparam int DROP = 30 - MAT_FRAC;
  typedef logic signed [IW-1:0] iw_t;

  iw_t              xs [ITER+1];
  iw_t              ys [ITER+1];
  ang_t             zs [ITER+1];
  logic             vs [ITER+1];
  logic [TAG_W-1:0] ts [ITER+1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i <= ITER; i++) vs[i] <= 1'b0;
    end else begin
      vs[0] <= in_valid;
      for (int i = 0; i < ITER; i++) vs[i+1] <= vs[i];
    end
  end

  always_ff @(posedge clk) begin
    xs[0] <= iw_t'(CORDIC_K);
    ys[0] <= '0;
    zs[0] <= theta;
    ts[0] <= tag_in;
    for (int i = 0; i < ITER; i++) begin
      if (zs[i] >= 0) begin
        xs[i+1] <= xs[i] - (ys[i] >>> i);
        ys[i+1] <= ys[i] + (xs[i] >>> i);
        zs[i+1] <= zs[i] - ang_t'(CORDIC_ATAN[i]);
      end else begin
        xs[i+1] <= xs[i] + (ys[i] >>> i);
        ys[i+1] <= ys[i] - (xs[i] >>> i);
        zs[i+1] <= zs[i] + ang_t'(CORDIC_ATAN[i]);
      end
      ts[i+1] <= ts[i];
    end
  end

  iw_t xr, yr;
  assign xr        = (xs[ITER] + iw_t'(1 << (DROP - 1))) >>> DROP;
  assign yr        = (ys[ITER] + iw_t'(1 << (DROP - 1))) >>> DROP;
  assign cos_o     = mat_t'(xr);
  assign sin_o     = mat_t'(yr);
  assign out_valid = vs[ITER];
  assign tag_out   = ts[ITER];
endmodule
