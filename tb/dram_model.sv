// dram_model: behavioural model of the external DRAM together with its
// controller, as seen by the accelerator (not synthesizable).
//
// The memory is an array of 16-bit elements addressed per element. A read
// request (rd_valid && rd_ready) returns the LANES elements starting at the
// address RD_LAT cycles later on rsp_valid/rsp_data, in request order. A
// write (wr_valid && wr_ready) stores each lane whose wr_mask bit is set.
// With STALL_PCT > 0 rd_ready and wr_ready drop at random to exercise
// back-pressure. Testbenches reach the array `mem` hierarchically to load
// inputs and read results.
module dram_model
  import tucker_pkg::*;
#(
  parameter int LANES     = 32,
  parameter int DEPTH     = 1 << 16,
  parameter int RD_LAT    = 4,
  parameter int STALL_PCT = 0
) (
  input  logic    clk,
  input  logic    rd_valid,
  input  addr_t   rd_addr,
  output logic    rd_ready,
  output logic    rsp_valid,
  output tensor_t rsp_data [LANES],
  input  logic    wr_valid,
  input  addr_t   wr_addr,
  input  tensor_t wr_data [LANES],
  input  logic    wr_mask [LANES],
  output logic    wr_ready
);
  tensor_t mem [DEPTH];
  logic    pv  [RD_LAT];
  addr_t   pa  [RD_LAT];
  longint  reads = 0, writes = 0;

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
    for (int i = 0; i < RD_LAT; i++) pv[i] = 1'b0;
    rd_ready = 1'b1;
    wr_ready = 1'b1;
  end

  always @(posedge clk) begin
    rd_ready <= ($urandom_range(99) >= STALL_PCT);
    wr_ready <= ($urandom_range(99) >= STALL_PCT);
    for (int i = RD_LAT - 1; i > 0; i--) begin
      pv[i] <= pv[i-1];
      pa[i] <= pa[i-1];
    end
    pv[0] <= rd_valid && rd_ready;
    pa[0] <= rd_addr;
    if (rd_valid && rd_ready) reads++;
    if (wr_valid && wr_ready) begin
      writes++;
      for (int l = 0; l < LANES; l++)
        if (wr_mask[l] && (wr_addr + addr_t'(l) < addr_t'(DEPTH))) mem[wr_addr + addr_t'(l)] <= wr_data[l];
    end
  end

  always_comb begin
    rsp_valid = pv[RD_LAT-1];
    for (int l = 0; l < LANES; l++)
      rsp_data[l] = (pa[RD_LAT-1] + addr_t'(l) < addr_t'(DEPTH)) ? mem[pa[RD_LAT-1] + addr_t'(l)] : '0;
  end
endmodule
