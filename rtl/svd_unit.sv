// svd_unit: singular value decomposition by one-sided (Hestenes) Jacobi
// rotations on the matrix held in onchip_mem.
//
// Each memory row i holds row b_i of B followed by row u_i of U (words
// 0..wb-1 and wb..wb+wu-1). For every row pair (i, j) of a sweep the unit
//  1. fetches the two rows through the memory read port, a word of row i and
//     the same word of row j alternately (2*(wb+wu) cycles);
//  2. on the B words only, forms alpha = |b_i|^2 and beta = |b_j|^2 with one
//     set of P squarers (shared, since the rows arrive alternately) and
//     gamma = <b_i, b_j> with a second set of P multipliers that see the
//     row-i word delayed by one cycle (z^-1); each set feeds an adder tree and
//     an accumulator; all fetched words also enter the FIFO;
//  3. normalises (beta - alpha, 2*gamma) to 32 bits and gets the double angle
//     2*theta = atan(2*gamma / (beta - alpha)) from cordic_atan, then
//     cos theta and sin theta from cordic_sincos;
//  4. rotation logic takes the words back out of the FIFO and writes
//        b_i <- c*b_i - s*b_j,  b_j <- s*b_i + c*b_j   (and the same for u)
//     through the write port, using two multipliers per lane over the two
//     cycles of a word pair.
// Each word is read once per pair. Pairs come from jacobi_order and overlap
// in the pipeline; a pair whose row is still being rotated by an earlier
// pair waits (hazard stall, counted in `hazard_stalls`). Up to MAX_INFLIGHT
// pairs and FIFO_DEPTH words are in flight.
//
// Rotating by the angle of tan(2 theta) = 2 gamma / (beta - alpha) makes
// <b_i, b_j> zero; the unit therefore halves the CORDIC angle. With U = I at
// the start, after convergence the rows of B are orthogonal (their norms are
// the singular values) and row r of U is the r-th left singular vector.
// With warm start U holds the previous factor matrix and B = U^T B^(k).
//
// Interface: start with cfg_n rows, cfg_wb/cfg_wu words per row part and
// cfg_sweeps sweeps; done pulses when the last row is written back.
// Timing per pair: 2*(wb+wu)+1 read cycles when no hazard stalls.
//
// Fetch order, the two multiplier/accumulator sets, CORDIC for angle and
// sin/cos, the FIFO and rotation logic, and keeping U in the same memory
// follow the design. The halved angle, the normalisation to 32 bits, the
// hazard interlock, the product shift (54 to 48 bits) and all depths are
// this RTL's choices.
module svd_unit
  import tucker_pkg::*;
#(
  parameter int P            = 128,
  parameter int NMAX         = 512,
  parameter int MEM_DEPTH    = 66048,
  parameter int FIFO_DEPTH   = 128,
  parameter int MAX_INFLIGHT = 8,
  parameter int ITER         = 24,
  parameter int PSHIFT       = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] cfg_n,
  input  logic [15:0] cfg_wb,
  input  logic [15:0] cfg_wu,
  input  logic [7:0]  cfg_sweeps,
  output logic        busy,
  output logic        done,
  // on-chip memory ports
  output logic                         mem_rd_en,
  output logic [$clog2(MEM_DEPTH)-1:0] mem_rd_addr,
  input  mat_t                         mem_rd_data [P],
  output logic                         mem_wr_en,
  output logic [$clog2(MEM_DEPTH)-1:0] mem_wr_addr,
  output mat_t                         mem_wr_data [P],
  // statistics
  output logic [31:0] pairs_done,
  output logic [31:0] hazard_stalls
);
  localparam int MAW   = $clog2(MEM_DEPTH);
  localparam int NW    = $clog2(NMAX);
  localparam int ACC_W = 64;
  localparam int TAG_W = 2 * NW;
  localparam int FCW   = $clog2(FIFO_DEPTH) + 1;
  localparam int DW    = P * MAT_W;

  typedef logic signed [ACC_W-1:0] acc_t;
  typedef logic [DW-1:0]           word_t;

  // ------------------------------------------------------------- reader
  typedef enum logic [1:0] {R_IDLE, R_WAIT, R_READ, R_DONE} rstate_e;
  rstate_e rstate;
  logic [15:0] n_rows, wb, rw;
  logic [7:0]  sweeps, sweep_cnt;
  logic [15:0] op, oq;
  logic        o_last, o_init, o_adv;
  logic [NW-1:0] ri, rj;
  logic [16:0] rc;
  logic        busy_row [NMAX];
  logic [FCW:0] reserved;
  logic [$clog2(MAX_INFLIGHT):0] inflight;
  logic        can_go, hazard;

  jacobi_order #(.IW(16)) u_order (
    .clk, .rst_n, .init(o_init), .n(cfg_n), .advance(o_adv), .p(op), .q(oq), .last(o_last));

  assign o_init = (rstate == R_IDLE) && start;
  assign o_adv  = (rstate == R_READ) && (rc == {rw, 1'b0} - 1);
  assign hazard = busy_row[NW'(op - 1)] || busy_row[NW'(oq - 1)];
  assign can_go = !hazard && (reserved + (FCW+1)'({rw, 1'b0}) <= (FCW+1)'(FIFO_DEPTH)) &&
                  (inflight < ($clog2(MAX_INFLIGHT)+1)'(MAX_INFLIGHT));

  assign mem_rd_en   = (rstate == R_READ);
  assign mem_rd_addr = MAW'(32'(rc[0] ? rj : ri) * 32'(rw) + 32'(rc[16:1]));

  // read data arrives one cycle after the request
  logic        rv, rv_j, rv_last;
  logic [15:0] rv_w;
  logic [NW-1:0] rv_i, rv_jr;

  // --------------------------------------------------- norms / inner product
  mat_t  hold [P];
  acc_t  alpha, beta, gamma;
  acc_t  sq_sum, cr_sum;
  acc_t  alpha_n, beta_n, gamma_n;
  logic  acc_en;

  always_comb begin
    sq_sum = '0;
    cr_sum = '0;
    for (int l = 0; l < P; l++) begin
      sq_sum += acc_t'((64'(mem_rd_data[l]) * 64'(mem_rd_data[l])) >>> PSHIFT);
      cr_sum += acc_t'((64'(mem_rd_data[l]) * 64'(hold[l])) >>> PSHIFT);
    end
    acc_en  = rv && (rv_w < wb);
    alpha_n = alpha;
    beta_n  = beta;
    gamma_n = gamma;
    if (acc_en) begin
      if (!rv_j) alpha_n = ((rv_w == 0) ? acc_t'(0) : alpha) + sq_sum;
      else begin
        beta_n  = ((rv_w == 0) ? acc_t'(0) : beta)  + sq_sum;
        gamma_n = ((rv_w == 0) ? acc_t'(0) : gamma) + cr_sum;
      end
    end
  end

  // normalise (beta - alpha, 2 gamma) into 32-bit CORDIC inputs
  logic signed [ACC_W:0] dx, dy, mag;
  int   msb;
  ang_t cx, cy;
  logic ang_valid;
  always_comb begin
    dx = {beta_n[ACC_W-1], beta_n} - {alpha_n[ACC_W-1], alpha_n};
    dy = {gamma_n, 1'b0};
    if (dx < 0) begin
      dx = -dx;
      dy = -dy;
    end
    mag = (dy < 0) ? -dy : dy;
    if (dx > mag) mag = dx;
    msb = 0;
    for (int b = 0; b <= ACC_W; b++) if (mag[b]) msb = b;
    if (msb > 28) begin
      cx = ang_t'(dx >>> (msb - 28));
      cy = ang_t'(dy >>> (msb - 28));
    end else begin
      cx = ang_t'(dx <<< (28 - msb));
      cy = ang_t'(dy <<< (28 - msb));
    end
    ang_valid = rv && rv_j && rv_last;
  end

  ang_t two_theta, theta;
  logic atan_v, sc_v;
  logic [TAG_W-1:0] atan_tag, sc_tag;
  mat_t c_o, s_o;

  cordic_atan #(.ITER(ITER), .TAG_W(TAG_W)) u_atan (
    .clk, .rst_n, .in_valid(ang_valid), .x(cx), .y(cy), .tag_in({rv_i, rv_jr}),
    .out_valid(atan_v), .z(two_theta), .tag_out(atan_tag));

  assign theta = two_theta >>> 1;

  cordic_sincos #(.ITER(ITER), .TAG_W(TAG_W)) u_sincos (
    .clk, .rst_n, .in_valid(atan_v), .theta(theta), .tag_in(atan_tag),
    .out_valid(sc_v), .cos_o(c_o), .sin_o(s_o), .tag_out(sc_tag));

  // (c, s, i, j) of pairs waiting for rotation
  typedef struct packed { mat_t c; mat_t s; logic [TAG_W-1:0] ij; } cs_t;
  cs_t  cs_head;
  logic cs_empty, cs_full, cs_pop;
  logic [$clog2(MAX_INFLIGHT):0] cs_count;
  sync_fifo #(.W($bits(cs_t)), .DEPTH(MAX_INFLIGHT)) u_cs (
    .clk, .rst_n, .push(sc_v), .din({c_o, s_o, sc_tag}), .pop(cs_pop), .dout(cs_head),
    .empty(cs_empty), .full(cs_full), .count(cs_count));

  // vectors waiting for their rotation
  word_t fifo_in, fifo_out;
  logic  df_empty, df_full, df_pop;
  logic [FCW-1:0] df_count;
  always_comb for (int l = 0; l < P; l++) fifo_in[l*MAT_W +: MAT_W] = mem_rd_data[l];
  sync_fifo #(.W(DW), .DEPTH(FIFO_DEPTH)) u_vec (
    .clk, .rst_n, .push(rv), .din(fifo_in), .pop(df_pop), .dout(fifo_out),
    .empty(df_empty), .full(df_full), .count(df_count));

  // ------------------------------------------------------- rotation logic
  typedef enum logic [1:0] {T_IDLE, T_A, T_B} tstate_e;
  tstate_e tstate;
  mat_t  rc_c, rc_s;
  logic [NW-1:0] t_i, t_j;
  logic [15:0] t_w;
  logic signed [2*MAT_W-1:0] pa1 [P];
  logic signed [2*MAT_W-1:0] pa2 [P];
  mat_t  new_i [P];
  mat_t  new_j [P];
  mat_t  pend_d [P];
  logic  pend_v, pend_last;
  logic [MAW-1:0] pend_a;
  logic [NW-1:0]  pend_i, pend_j;
  mat_t  fo [P];

  function automatic mat_t sat_mat(input logic signed [2*MAT_W:0] v);
    logic signed [2*MAT_W:0] s;
    s = v >>> MAT_FRAC;
    if (s > ((2*MAT_W+1)'(1) <<< (MAT_W-1)) - 1) return {1'b0, {(MAT_W-1){1'b1}}};
    if (s < -((2*MAT_W+1)'(1) <<< (MAT_W-1)))    return {1'b1, {(MAT_W-1){1'b0}}};
    return mat_t'(s);
  endfunction

  always_comb begin
    for (int l = 0; l < P; l++) begin
      fo[l]    = mat_t'(fifo_out[l*MAT_W +: MAT_W]);
      new_i[l] = sat_mat((2*MAT_W+1)'(pa1[l]) - (2*MAT_W+1)'(rc_s * fo[l]));
      new_j[l] = sat_mat((2*MAT_W+1)'(pa2[l]) + (2*MAT_W+1)'(rc_c * fo[l]));
    end
  end

  assign cs_pop = (tstate == T_IDLE || (tstate == T_B && t_w == rw - 1)) && !cs_empty;
  assign df_pop = (tstate == T_A) || (tstate == T_B);

  always_comb begin
    mem_wr_en   = 1'b0;
    mem_wr_addr = pend_a;
    for (int l = 0; l < P; l++) mem_wr_data[l] = pend_d[l];
    if (tstate == T_B) begin
      mem_wr_en   = 1'b1;
      mem_wr_addr = MAW'(32'(t_i) * 32'(rw) + 32'(t_w));
      for (int l = 0; l < P; l++) mem_wr_data[l] = new_i[l];
    end else if (pend_v) begin
      mem_wr_en = 1'b1;
    end
  end

  // ----------------------------------------------------------- control
  assign busy = (rstate != R_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rstate <= R_IDLE; done <= 1'b0;
      n_rows <= '0; wb <= '0; rw <= '0; sweeps <= '0; sweep_cnt <= '0;
      ri <= '0; rj <= '0; rc <= '0;
      for (int r = 0; r < NMAX; r++) busy_row[r] <= 1'b0;
      reserved <= '0; inflight <= '0;
      rv <= 1'b0; rv_j <= 1'b0; rv_last <= 1'b0; rv_w <= '0; rv_i <= '0; rv_jr <= '0;
      alpha <= '0; beta <= '0; gamma <= '0;
      for (int l = 0; l < P; l++) hold[l] <= '0;
      tstate <= T_IDLE; rc_c <= '0; rc_s <= '0; t_i <= '0; t_j <= '0; t_w <= '0;
      pend_v <= 1'b0; pend_last <= 1'b0; pend_a <= '0; pend_i <= '0; pend_j <= '0;
      for (int l = 0; l < P; l++) begin
        pa1[l] <= '0; pa2[l] <= '0; pend_d[l] <= '0;
      end
      pairs_done <= '0; hazard_stalls <= '0;
    end else begin
      done <= 1'b0;

      // fetch
      rv      <= (rstate == R_READ);
      rv_j    <= rc[0];
      rv_w    <= rc[16:1];
      rv_last <= (rc == {rw, 1'b0} - 1);
      rv_i    <= ri;
      rv_jr   <= rj;
      case (rstate)
        R_IDLE: if (start) begin
          n_rows <= cfg_n; wb <= cfg_wb; rw <= cfg_wb + cfg_wu;
          sweeps <= cfg_sweeps; sweep_cnt <= '0;
          pairs_done <= '0; hazard_stalls <= '0;
          rstate <= (cfg_n < 2 || cfg_sweeps == 0) ? R_DONE : R_WAIT;
        end
        R_WAIT: begin
          if (can_go) begin
            ri <= NW'(op - 1);
            rj <= NW'(oq - 1);
            rc <= '0;
            rstate <= R_READ;
          end else if (hazard) hazard_stalls <= hazard_stalls + 1;
        end
        R_READ: begin
          rc <= rc + 1;
          if (rc == {rw, 1'b0} - 1) begin
            if (o_last) begin
              sweep_cnt <= sweep_cnt + 1;
              rstate <= (sweep_cnt + 1 == sweeps) ? R_DONE : R_WAIT;
            end else rstate <= R_WAIT;
          end
        end
        R_DONE: if (inflight == 0 && !pend_v && tstate == T_IDLE) begin
          rstate <= R_IDLE;
          done   <= 1'b1;
        end
        default: rstate <= R_IDLE;
      endcase

      // accumulators
      if (rv) begin
        if (!rv_j) for (int l = 0; l < P; l++) hold[l] <= mem_rd_data[l];
        alpha <= alpha_n;
        beta  <= beta_n;
        gamma <= gamma_n;
      end

      // rotation
      case (tstate)
        T_IDLE: if (!cs_empty) begin
          rc_c <= cs_head.c; rc_s <= cs_head.s;
          t_i  <= cs_head.ij[TAG_W-1:NW]; t_j <= cs_head.ij[NW-1:0];
          t_w  <= '0;
          tstate <= T_A;
        end
        T_A: begin
          for (int l = 0; l < P; l++) begin
            pa1[l] <= rc_c * fo[l];
            pa2[l] <= rc_s * fo[l];
          end
          tstate <= T_B;
        end
        T_B: begin
          for (int l = 0; l < P; l++) pend_d[l] <= new_j[l];
          pend_a    <= MAW'(32'(t_j) * 32'(rw) + 32'(t_w));
          pend_last <= (t_w == rw - 1);
          pend_i    <= t_i;
          pend_j    <= t_j;
          if (t_w == rw - 1) begin
            if (!cs_empty) begin
              rc_c <= cs_head.c; rc_s <= cs_head.s;
              t_i  <= cs_head.ij[TAG_W-1:NW]; t_j <= cs_head.ij[NW-1:0];
              t_w  <= '0;
              tstate <= T_A;
            end else tstate <= T_IDLE;
          end else begin
            t_w    <= t_w + 1;
            tstate <= T_A;
          end
        end
        default: tstate <= T_IDLE;
      endcase
      pend_v <= (tstate == T_B);
      if (pend_v && pend_last) begin
        busy_row[pend_i] <= 1'b0;
        busy_row[pend_j] <= 1'b0;
        pairs_done <= pairs_done + 1;
      end

      // bookkeeping of claimed rows, FIFO space and pairs in flight
      if (rstate == R_WAIT && can_go) begin
        busy_row[NW'(op - 1)] <= 1'b1;
        busy_row[NW'(oq - 1)] <= 1'b1;
      end
      reserved <= reserved + ((rstate == R_WAIT && can_go) ? (FCW+1)'({rw, 1'b0}) : '0)
                           - (FCW+1)'(df_pop);
      inflight <= inflight + ($clog2(MAX_INFLIGHT)+1)'(rstate == R_WAIT && can_go)
                           - ($clog2(MAX_INFLIGHT)+1)'(pend_v && pend_last);
    end
  end

  a_fifo_ready: assert property (@(posedge clk) disable iff (!rst_n) df_pop |-> !df_empty);
  a_rows_differ: assert property (@(posedge clk) disable iff (!rst_n)
                                  (rstate == R_READ) |-> (ri != rj));
endmodule
