// ttm_pe: one processing element of the TTM array.
//
// Each cycle with `valid` the PE multiplies one tensor element `x` (from the
// column's tensor bus) with one factor-matrix element and adds the product
// into its result buffer. The matrix operand comes through the mode MUX:
// in mode-1 TTM from the PE's own small RAM holding A_1 entries, otherwise
// from the row's horizontal matrix bus `a_bus`. A second MUX, steered by
// `new_batch`, feeds the adder either 0 (first term of a new output) or the
// value already held in the buffer entry, so the buffer accumulates in place.
//
// The result buffer is ping-pong: two banks of NB entries. `buf_sel` picks
// the bank being accumulated; the other bank is read out through `rd_sel` /
// `rd_addr` (combinational read) for the adder tree or the DRAM writer.
// In mode-1 only entry 0 is used; in mode-j entry n holds the partial sum of
// output element l + n*q of the current sub-tensor.
//
// Timing: one multiply-accumulate per cycle, result visible in the buffer on
// the next cycle. RAM writes (`ram_we`) load A_1 before a mode-1 TTM.
// Follows the PE structure of the design (RAM A1, mode MUX, multiplier, new
// batch MUX, adder, result buffer, second buffer for write-out); the single
// cycle multiply-add and the buffer depth NB are choices of this RTL.
module ttm_pe
  import tucker_pkg::*;
#(
  parameter int NB        = 16,   // result-buffer entries per bank
  parameter int RAM_DEPTH = 256   // A_1 entries held per PE
) (
  input  logic                         clk,
  // A_1 RAM write port
  input  logic                         ram_we,
  input  logic [$clog2(RAM_DEPTH)-1:0] ram_waddr,
  input  mat_t                         ram_wdata,
  // multiply-accumulate
  input  logic                         valid,
  input  logic                         mode1,
  input  tensor_t                      x,
  input  mat_t                         a_bus,
  input  logic [$clog2(RAM_DEPTH)-1:0] ram_raddr,
  input  logic [$clog2(NB)-1:0]        buf_addr,
  input  logic                         new_batch,
  input  logic                         buf_sel,
  // read-out of the idle bank
  input  logic                         rd_sel,
  input  logic [$clog2(NB)-1:0]        rd_addr,
  output prod_t                        rd_data
);
  mat_t  ram  [RAM_DEPTH];
  prod_t rbuf [2][NB];

  mat_t  a_sel;
  prod_t product, acc_in;

  always_ff @(posedge clk) begin
    if (ram_we) ram[ram_waddr] <= ram_wdata;
  end

  always_comb begin
    a_sel   = mode1 ? ram[ram_raddr] : a_bus;
    product = prod_t'(x) * prod_t'(a_sel);
    acc_in  = new_batch ? '0 : rbuf[buf_sel][buf_addr];
  end

  always_ff @(posedge clk) begin
    if (valid) rbuf[buf_sel][buf_addr] <= acc_in + product;
  end

  assign rd_data = rbuf[rd_sel][rd_addr];
endmodule
