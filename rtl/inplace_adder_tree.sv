// inplace_adder_tree: sums N values with N/2 adders and one bank of N
// registers, reusing both for every level of the tree.
//
// On `load` the N inputs are captured. Each following cycle performs one
// level in place: a[i] <= a[2i] + a[2i+1] for i < N/2 and a[i] <= 0 for the
// upper half. After log2(N) levels a[0] holds the sum, `done` pulses for one
// cycle and `sum` stays valid until the next load. `busy` is high from the
// load until done. A full pipelined tree would need N-1 adders and registers
// at every level; since a row of the TTM array produces one sum per batch and
// not per cycle, this tree halves that cost. N must be a power of two.
//
// This follows the in-place adder tree of the design; the load/busy/done
// handshake is this RTL's choice.
module inplace_adder_tree
  import tucker_pkg::*;
#(
  parameter int N = 32,
  parameter int W = PROD_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                load,
  input  logic signed [W-1:0] din [N],
  output logic                busy,
  output logic                done,
  output logic signed [W-1:0] sum
);
  localparam int LEVELS = (N > 1) ? $clog2(N) : 1;
  logic signed [W-1:0] a [N];
  logic [$clog2(LEVELS+1)-1:0] level;

  assign sum = a[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      level <= '0;
      for (int i = 0; i < N; i++) a[i] <= '0;
    end else begin
      done <= 1'b0;
      if (load) begin
        for (int i = 0; i < N; i++) a[i] <= din[i];
        busy  <= (N > 1);
        done  <= (N == 1);
        level <= '0;
      end else if (busy) begin
        for (int i = 0; i < N/2; i++) a[i] <= a[2*i] + a[2*i+1];
        for (int i = N/2; i < N; i++) a[i] <= '0;
        level <= level + 1'b1;
        if (level == $bits(level)'(LEVELS-1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
