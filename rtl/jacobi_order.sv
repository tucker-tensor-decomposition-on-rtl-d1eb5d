// jacobi_order: row-pair sequence of the one-sided Jacobi sweep.
//
// Holds the current pair (p, q), 1 <= p < q <= n, 1-based, and on `advance`
// replaces it by its successor:
//   (p+1, q-1)      if q - p > 2
//   (1, p+q)        if q - p <= 2 and p+q <= n
//   (p+q+1-n, n)    if q - p <= 2 and n < p+q < 2n-1
//   (1, 2)          if p = n-1 and q = n
// Starting from (1, 2) this walks the anti-diagonals p+q = 3, 4, ..., 2n-1 of
// the pair table and visits each of the n(n-1)/2 pairs exactly once per
// sweep, so that consecutive pairs mostly share no row. `last` is high on
// (n-1, n), the final pair of a sweep. `init` loads (1, 2) and the size n.
//
// The update rule is the design's; applying it to one pair at a time (the
// pair being rotated by the SVD pipeline) rather than to n/2 pairs at once
// is this RTL's reading of it, because only that reading yields every pair.
module jacobi_order #(
  parameter int IW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          init,
  input  logic [IW-1:0] n,
  input  logic          advance,
  output logic [IW-1:0] p,
  output logic [IW-1:0] q,
  output logic          last
);
  logic [IW-1:0] nn;
  logic [IW:0]   s;

  assign s    = {1'b0, p} + {1'b0, q};
  assign last = (p == nn - 1) && (q == nn);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p <= IW'(1); q <= IW'(2); nn <= IW'(2);
    end else if (init) begin
      p <= IW'(1); q <= IW'(2); nn <= n;
    end else if (advance) begin
      if (q - p > IW'(2)) begin
        p <= p + 1'b1;
        q <= q - 1'b1;
      end else if (last) begin
        p <= IW'(1);
        q <= IW'(2);
      end else if (s <= {1'b0, nn}) begin
        p <= IW'(1);
        q <= s[IW-1:0];
      end else begin
        p <= IW'(s + 1'b1 - {1'b0, nn});
        q <= nn;
      end
    end
  end
endmodule
