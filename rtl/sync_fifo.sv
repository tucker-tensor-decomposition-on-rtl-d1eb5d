// sync_fifo: single-clock first-in first-out queue used for read tags,
// pending jobs and the SVD vector queue.
//
// Interface: push/din write when not full, pop/dout read the head (dout is
// the head combinationally, valid while !empty). count gives the number of
// stored entries. DEPTH must be a power of two. Reset empties the queue;
// the storage itself is not reset.
module sync_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  logic [W-1:0]             din,
  input  logic                     pop,
  output logic [W-1:0]             dout,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign empty = (count == 0);
  assign full  = (count == (AW+1)'(DEPTH));
  assign dout  = mem[rp];

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push && !full) wp <= wp + 1'b1;
      if (pop && !empty) rp <= rp + 1'b1;
      count <= count + (AW+1)'(push && !full) - (AW+1)'(pop && !empty);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
