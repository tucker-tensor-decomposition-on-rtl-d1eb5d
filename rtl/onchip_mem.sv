// onchip_mem: the on-chip memory that holds the matrix of the SVD.
//
// Each word is P matrix values (27 bit). Row i of the stored matrix occupies
// the words i*(wb+wu) ... : first the words of row i of B^(k), then the words
// of row i of U. One read port and one write port work independently in the
// same cycle: a read returns the word on the next cycle (registered output,
// as a block RAM would), a write stores it at the clock edge. The SVD unit
// reads pairs of rows through the read port and writes rotated rows back
// through the write port; the permute unit fills and empties it.
//
// The two independent ports are the design's; the depth is this RTL's choice:
// the default 66048 words hold 256 rows of 256 B words plus 2 U words, the
// largest SVD of the evaluated workloads (a 256^4 tensor with ranks 32).
module onchip_mem
  import tucker_pkg::*;
#(
  parameter int P     = 128,
  parameter int DEPTH = 66048
) (
  input  logic                     clk,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output mat_t                     rd_data [P],
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  mat_t                     wr_data [P]
);
  typedef logic [P*MAT_W-1:0] word_t;
  word_t mem [DEPTH];
  word_t q;
  word_t wd;

  always_comb
    for (int l = 0; l < P; l++) wd[l*MAT_W +: MAT_W] = wr_data[l];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wd;
    if (rd_en) q <= mem[rd_addr];
  end

  always_comb
    for (int l = 0; l < P; l++) rd_data[l] = mat_t'(q[l*MAT_W +: MAT_W]);
endmodule
