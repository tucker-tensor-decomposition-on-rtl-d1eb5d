// ttm_unit: tensor-times-matrix without tensor permutation.
//
// Computes Y = X x_j A^T, i.e. y(.., r, ..) = sum_i x(.., i, ..) * A(i, r), on a
// tensor stored in DRAM with mode 1 varying fastest. The tensor is described
// folded into three modes [L, I, H]: L is the product of the modes before the
// mode being multiplied, I that mode's size, H the product of the modes after
// it; the output is [L, R_out, H]. A (I x R_out) sits in DRAM column by
// column, one 27-bit entry per two 16-bit slots (see tucker_pkg).
//
// The datapath is a Q-column by R-row array of ttm_pe. All PEs of a column
// see the same tensor element (the column's lane of the DRAM read), all PEs
// of a row work on the same output index r. Two ways of use:
//  * mode-j (L > 1, `mode1` = 0): each cycle the array reads Q neighbouring
//    elements x(l+nQ, i, h) of a fiber; row r gets A(i, r) on its horizontal
//    bus. The PE in column l accumulates y(l+nQ, r, h) in buffer entry n over
//    the I rounds. The L axis is cut into sub-tensors of m = NB*Q elements so
//    that the result buffers stay small. Rows are reused ceil(R_out/R) times.
//  * mode-1 (L = 1, `mode1` = 1): Q consecutive elements of one fiber
//    x(nQ.., h) per cycle; PE (r, l) takes A(l+nQ, r) from its own RAM, filled
//    before the run. Each PE sums its share of the fiber; at the end of the
//    fiber the row's in-place adder tree adds the Q partial sums.
// A batch is one fiber (mode-1) or one sub-tensor slice (mode-j). Its results
// are written to DRAM from the idle bank of the ping-pong result buffers
// while the next batch accumulates in the other bank; a batch may start only
// when the bank it needs has been drained (counted as a ping-pong stall).
//
// Compute time is I*H*ceil(L/Q)*ceil(R_out/R) cycles for mode-j and
// H*ceil(I/Q)*ceil(R_out/R) for mode-1, plus the factor load
// (R_out*ceil(I/(Q/2)) reads) and pipeline latency.
//
// DRAM side: element-addressed read requests (rd_valid/rd_ready, Q lanes
// returned in order on rsp_valid, any latency, no back-pressure on
// responses; at most TAGQ outstanding) and masked Q-lane writes
// (wr_valid/wr_ready). Outputs are the 48-bit sums shifted right by 25 and
// saturated to 16 bits (`sat_count` counts clipped elements).
//
// The array, the two ways of use, the sub-tensor blocking and the ping-pong
// buffers follow the design. The factor-matrix buffer feeding the horizontal
// buses, the DRAM request interface, the sub-tensor size and the output
// scaling are this RTL's choices.
module ttm_unit
  import tucker_pkg::*;
#(
  parameter int Q      = 32,   // PE columns (q)
  parameter int R      = 32,   // PE rows (r)
  parameter int NB     = 16,   // result-buffer entries: sub-tensor m = NB*Q
  parameter int NQ_MAX = 16,   // mode-1: fiber length up to NQ_MAX*Q
  parameter int RG_MAX = 16,   // R_out up to RG_MAX*R
  parameter int IJ_MAX = 512,  // mode-j: I up to IJ_MAX
  parameter int TAGQ   = 16,   // outstanding DRAM reads
  parameter int OUT_SHIFT = MAT_FRAC
) (
  input  logic        clk,
  input  logic        rst_n,
  // command
  input  logic        start,
  input  addr_t       cfg_src,
  input  addr_t       cfg_dst,
  input  addr_t       cfg_mat,
  input  logic [31:0] cfg_l,
  input  logic [15:0] cfg_i,
  input  logic [15:0] cfg_r,
  input  logic [31:0] cfg_h,
  input  logic        cfg_mode1,
  output logic        busy,
  output logic        done,
  // DRAM read
  output logic        rd_valid,
  output addr_t       rd_addr,
  input  logic        rd_ready,
  input  logic        rsp_valid,
  input  tensor_t     rsp_data [Q],
  // DRAM write
  output logic        wr_valid,
  output addr_t       wr_addr,
  output tensor_t     wr_data [Q],
  output logic        wr_mask [Q],
  input  logic        wr_ready,
  // statistics
  output logic [31:0] sat_count,
  output logic [31:0] pp_stall_count
);
  localparam int HALF      = Q / 2;
  localparam int FW_MAX    = (IJ_MAX + HALF - 1) / HALF;
  localparam int RAM_DEPTH = RG_MAX * NQ_MAX;
  localparam int RAW       = $clog2(RAM_DEPTH);
  localparam int NBW       = $clog2(NB);
  localparam int FBW       = $clog2(RG_MAX * FW_MAX);
  localparam int NCHUNK    = (R + Q - 1) / Q;
  localparam int RW        = (R > 1) ? $clog2(R) : 1;

  typedef struct packed {
    logic        load;    // factor-load response
    logic [15:0] col;     // load: matrix column
    logic [15:0] i0;      // load: first row of the Q/2 entries
    logic [15:0] n;       // compute: group index within the batch
    logic [15:0] rg;      // row group
    logic [15:0] ij;      // mode-j round
    logic        first;   // first term of the buffer entry
    logic        last;    // last request of the batch
    logic        sel;     // result bank
    logic [31:0] ibase;   // batch: first L index
    logic [15:0] nb;      // batch: groups in the sub-tensor
    logic [31:0] h;       // batch: outer index
  } tag_t;

  typedef struct packed {
    logic        sel;
    logic [31:0] ibase;
    logic [15:0] nb;
    logic [15:0] rg;
    logic [31:0] h;
  } job_t;

  // ---------------------------------------------------------------- config
  addr_t       src, dst, mat;
  logic [31:0] dl, dh;
  logic [15:0] di, dr;
  logic        m1;
  logic [15:0] n_rg, n_q1;

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_COMP, S_FLUSH} state_e;
  state_e state;

  // ------------------------------------------------------------ issue side
  logic [15:0] ld_col, ld_i0, ld_lim;
  logic [31:0] c_h, c_ib;
  logic [15:0] c_rg, c_ij, c_n, nb_cur;
  logic [31:0] started, drained;
  logic        cur_sel;
  logic [$clog2(TAGQ):0] outstanding;
  logic        is_batch_start, gate_ok, issue;
  tag_t        tag_in, tag_out;
  logic        tag_empty, tag_full;
  logic [$clog2(TAGQ):0] tag_count;

  function automatic logic [15:0] min_nb(input logic [31:0] remaining);
    logic [31:0] g;
    g = (remaining + 32'(Q - 1)) / 32'(Q);
    return (g > 32'(NB)) ? 16'(NB) : g[15:0];
  endfunction

  assign nb_cur         = min_nb(dl - c_ib);
  assign is_batch_start = (state == S_COMP) && (m1 ? (c_n == 0) : (c_n == 0 && c_ij == 0));
  assign gate_ok        = !is_batch_start || (started - drained < 32'd2);
  assign rd_valid       = ((state == S_LOAD) || (state == S_COMP)) && gate_ok &&
                          (outstanding < ($clog2(TAGQ)+1)'(TAGQ));
  assign issue          = rd_valid && rd_ready;

  always_comb begin
    tag_in = '0;
    if (state == S_LOAD) begin
      rd_addr     = mat + 2 * (32'(ld_i0) + 32'(di) * 32'(ld_col));
      tag_in.load = 1'b1;
      tag_in.col  = ld_col;
      tag_in.i0   = ld_i0;
    end else if (m1) begin
      rd_addr      = src + 32'(c_n) * 32'(Q) + 32'(di) * c_h;
      tag_in.n     = c_n;
      tag_in.rg    = c_rg;
      tag_in.first = (c_n == 0);
      tag_in.last  = (c_n == n_q1 - 1);
      tag_in.sel   = is_batch_start ? started[0] : cur_sel;
      tag_in.nb    = 16'd1;
      tag_in.h     = c_h;
    end else begin
      rd_addr      = src + c_ib + 32'(c_n) * 32'(Q) + dl * 32'(c_ij) + dl * 32'(di) * c_h;
      tag_in.n     = c_n;
      tag_in.rg    = c_rg;
      tag_in.ij    = c_ij;
      tag_in.first = (c_ij == 0);
      tag_in.last  = (c_ij == di - 1) && (c_n == nb_cur - 1);
      tag_in.sel   = is_batch_start ? started[0] : cur_sel;
      tag_in.ibase = c_ib;
      tag_in.nb    = nb_cur;
      tag_in.h     = c_h;
    end
  end

  sync_fifo #(.W($bits(tag_t)), .DEPTH(TAGQ)) u_tags (
    .clk, .rst_n, .push(issue), .din(tag_in), .pop(rsp_valid), .dout(tag_out),
    .empty(tag_empty), .full(tag_full), .count(tag_count));

  // ------------------------------------------------------------ drain side
  typedef enum logic [2:0] {D_IDLE, D_LOAD, D_TREE, D_WR1, D_WRJ} dstate_e;
  dstate_e dstate;
  job_t    job_in, job_out, djob;
  logic    job_empty, job_full, job_push, job_pop;
  logic [2:0] job_count;
  logic [15:0] d_row, d_n, d_chunk;

  assign job_push = rsp_valid && !tag_out.load && tag_out.last;
  assign job_in   = '{sel: tag_out.sel, ibase: tag_out.ibase, nb: tag_out.nb,
                      rg: tag_out.rg, h: tag_out.h};
  assign job_pop  = (dstate == D_IDLE) && !job_empty;

  sync_fifo #(.W($bits(job_t)), .DEPTH(4)) u_jobs (
    .clk, .rst_n, .push(job_push), .din(job_in), .pop(job_pop), .dout(job_out),
    .empty(job_empty), .full(job_full), .count(job_count));

  // --------------------------------------------------------------- PE array
  prod_t pe_rd   [R][Q];
  mat_t  a_bus   [R];
  prod_t tree_sum[R];
  logic  tree_busy[R], tree_done[R];
  logic  tree_load;
  prod_t sums    [R];
  logic  rd_sel;
  logic [NBW-1:0] rd_addr_b;

  // factor buffer for the horizontal buses (mode-j)
  mat_t fbuf [R][RG_MAX*FW_MAX][HALF];

  function automatic mat_t entry(input tensor_t lo, input tensor_t hi);
    logic [31:0] w;
    w = {hi, lo};
    return mat_t'(w[MAT_W-1:0]);
  endfunction

  logic [FBW-1:0] fb_rd_word, fb_wr_word;
  assign fb_rd_word = FBW'(32'(tag_out.rg) * 32'(FW_MAX) + 32'(tag_out.ij) / 32'(HALF));
  assign fb_wr_word = FBW'((32'(tag_out.col) / 32'(R)) * 32'(FW_MAX) + 32'(tag_out.i0) / 32'(HALF));

  always_ff @(posedge clk) begin
    if (rsp_valid && tag_out.load && !m1) begin
      for (int e = 0; e < HALF; e++)
        fbuf[32'(tag_out.col) % R][fb_wr_word][e] <=
          (32'(tag_out.i0) + 32'(e) < 32'(di)) ? entry(rsp_data[2*e], rsp_data[2*e+1]) : '0;
    end
  end

  assign rd_sel    = djob.sel;
  assign rd_addr_b = (dstate == D_WRJ) ? d_n[NBW-1:0] : '0;
  assign tree_load = (dstate == D_LOAD);

  for (genvar r = 0; r < R; r++) begin : g_row
    assign a_bus[r] = fbuf[r][fb_rd_word][32'(tag_out.ij) % HALF];
    for (genvar l = 0; l < Q; l++) begin : g_col
      logic           we;
      logic [RAW-1:0] waddr, raddr;
      mat_t           wdata;
      int             e;
      always_comb begin
        e     = l - int'(32'(tag_out.i0) % Q);
        we    = rsp_valid && tag_out.load && m1 && (32'(tag_out.col) % R == r) &&
                (e >= 0) && (e < HALF);
        waddr = RAW'((32'(tag_out.col) / R) * NQ_MAX + 32'(tag_out.i0) / Q);
        wdata = (we && (32'(tag_out.i0) + 32'(e) < 32'(di))) ?
                entry(rsp_data[2*(e%HALF)], rsp_data[2*(e%HALF)+1]) : '0;
        raddr = RAW'(32'(tag_out.rg) * NQ_MAX + 32'(tag_out.n));
      end
      ttm_pe #(.NB(NB), .RAM_DEPTH(RAM_DEPTH)) u_pe (
        .clk,
        .ram_we(we), .ram_waddr(waddr), .ram_wdata(wdata),
        .valid(rsp_valid && !tag_out.load), .mode1(m1), .x(rsp_data[l]),
        .a_bus(a_bus[r]), .ram_raddr(raddr),
        .buf_addr(m1 ? '0 : tag_out.n[NBW-1:0]), .new_batch(tag_out.first),
        .buf_sel(tag_out.sel), .rd_sel(rd_sel), .rd_addr(rd_addr_b),
        .rd_data(pe_rd[r][l]));
    end
    inplace_adder_tree #(.N(Q), .W(PROD_W)) u_tree (
      .clk, .rst_n, .load(tree_load), .din(pe_rd[r]), .busy(tree_busy[r]),
      .done(tree_done[r]), .sum(tree_sum[r]));
  end

  // DRAM write data
  logic [31:0] row_abs;
  int          row;
  always_comb begin
    row      = 0;
    wr_valid = 1'b0;
    wr_addr  = '0;
    row_abs  = 32'(djob.rg) * 32'(R) + 32'(d_row);
    for (int l = 0; l < Q; l++) begin
      wr_data[l] = '0;
      wr_mask[l] = 1'b0;
    end
    if (dstate == D_WR1) begin
      wr_valid = 1'b1;
      wr_addr  = dst + 32'(djob.rg) * 32'(R) + 32'(d_chunk) * 32'(Q) + 32'(dr) * djob.h;
      for (int l = 0; l < Q; l++) begin
        row = int'(d_chunk) * Q + l;
        if (row < R) begin
          wr_data[l] = sat_tensor(sums[row], OUT_SHIFT);
          wr_mask[l] = (32'(djob.rg) * 32'(R) + 32'(row) < 32'(dr));
        end
      end
    end else if (dstate == D_WRJ) begin
      wr_valid = 1'b1;
      wr_addr  = dst + djob.ibase + 32'(d_n) * 32'(Q) + dl * row_abs + dl * 32'(dr) * djob.h;
      for (int l = 0; l < Q; l++) begin
        wr_data[l] = sat_tensor(pe_rd[d_row[RW-1:0]][l], OUT_SHIFT);
        wr_mask[l] = (djob.ibase + 32'(d_n) * 32'(Q) + 32'(l) < dl);
      end
    end
  end

  logic [31:0] clipped;
  always_comb begin
    clipped = '0;
    for (int l = 0; l < Q; l++)
      if (wr_mask[l]) begin
        if (dstate == D_WR1 && (int'(d_chunk) * Q + l) < R)
          clipped += 32'(sat_clips(sums[int'(d_chunk) * Q + l], OUT_SHIFT));
        else if (dstate == D_WRJ)
          clipped += 32'(sat_clips(pe_rd[d_row[RW-1:0]][l], OUT_SHIFT));
      end
  end

  // ------------------------------------------------------------ sequencing
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0;
      src <= '0; dst <= '0; mat <= '0; dl <= '0; dh <= '0; di <= '0; dr <= '0; m1 <= 1'b0;
      n_rg <= '0; n_q1 <= '0;
      ld_col <= '0; ld_i0 <= '0; ld_lim <= '0;
      c_h <= '0; c_ib <= '0; c_rg <= '0; c_ij <= '0; c_n <= '0;
      started <= '0; drained <= '0; cur_sel <= 1'b0; outstanding <= '0;
      dstate <= D_IDLE; djob <= '0; d_row <= '0; d_n <= '0; d_chunk <= '0;
      for (int r = 0; r < R; r++) sums[r] <= '0;
      sat_count <= '0; pp_stall_count <= '0;
    end else begin
      done <= 1'b0;
      outstanding <= outstanding + ($clog2(TAGQ)+1)'(issue) - ($clog2(TAGQ)+1)'(rsp_valid);
      if (is_batch_start && !gate_ok) pp_stall_count <= pp_stall_count + 1;

      case (state)
        S_IDLE: if (start) begin
          src <= cfg_src; dst <= cfg_dst; mat <= cfg_mat;
          dl <= cfg_l; di <= cfg_i; dr <= cfg_r; dh <= cfg_h; m1 <= cfg_mode1;
          n_rg <= (cfg_r + 16'(R - 1)) / 16'(R);
          n_q1 <= (cfg_i + 16'(Q - 1)) / 16'(Q);
          ld_lim <= cfg_mode1 ? ((cfg_i + 16'(Q - 1)) / 16'(Q)) * 16'(Q) : cfg_i;
          ld_col <= '0; ld_i0 <= '0;
          c_h <= '0; c_ib <= '0; c_rg <= '0; c_ij <= '0; c_n <= '0;
          started <= '0; drained <= '0;
          state <= S_LOAD;
        end
        S_LOAD: if (issue) begin
          if (ld_i0 + 16'(HALF) >= ld_lim) begin
            ld_i0 <= '0;
            if (ld_col == dr - 1) state <= S_COMP;
            else ld_col <= ld_col + 1;
          end else ld_i0 <= ld_i0 + 16'(HALF);
        end
        S_COMP: if (issue) begin
          if (is_batch_start) begin
            started <= started + 1;
            cur_sel <= started[0];
          end
          if (m1) begin
            if (c_n == n_q1 - 1) begin
              c_n <= '0;
              if (c_rg == n_rg - 1) begin
                c_rg <= '0;
                if (c_h == dh - 1) state <= S_FLUSH;
                else c_h <= c_h + 1;
              end else c_rg <= c_rg + 1;
            end else c_n <= c_n + 1;
          end else begin
            if (c_n == nb_cur - 1) begin
              c_n <= '0;
              if (c_ij == di - 1) begin
                c_ij <= '0;
                if (c_rg == n_rg - 1) begin
                  c_rg <= '0;
                  if (c_ib + 32'(NB * Q) >= dl) begin
                    c_ib <= '0;
                    if (c_h == dh - 1) state <= S_FLUSH;
                    else c_h <= c_h + 1;
                  end else c_ib <= c_ib + 32'(NB * Q);
                end else c_rg <= c_rg + 1;
              end else c_ij <= c_ij + 1;
            end else c_n <= c_n + 1;
          end
        end
        S_FLUSH: if (outstanding == 0 && tag_empty && job_empty && dstate == D_IDLE &&
                     drained == started) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase

      // drain of finished batches
      case (dstate)
        D_IDLE: if (!job_empty) begin
          djob  <= job_out;
          d_row <= '0; d_n <= '0; d_chunk <= '0;
          dstate <= m1 ? D_LOAD : D_WRJ;
        end
        D_LOAD: begin
          drained <= drained + 1;
          dstate  <= D_TREE;
        end
        D_TREE: if (tree_done[0]) begin
          for (int r = 0; r < R; r++) sums[r] <= tree_sum[r];
          dstate <= D_WR1;
        end
        D_WR1: if (wr_ready) begin
          sat_count <= sat_count + clipped;
          if (d_chunk == 16'(NCHUNK - 1)) dstate <= D_IDLE;
          else d_chunk <= d_chunk + 1;
        end
        D_WRJ: if (wr_ready) begin
          sat_count <= sat_count + clipped;
          if (d_n == djob.nb - 1) begin
            d_n <= '0;
            if (d_row == 16'(R - 1) || row_abs + 1 >= 32'(dr)) begin
              drained <= drained + 1;
              dstate  <= D_IDLE;
            end else d_row <= d_row + 1;
          end else d_n <= d_n + 1;
        end
        default: dstate <= D_IDLE;
      endcase
    end
  end

  a_resp_expected: assert property (@(posedge clk) disable iff (!rst_n) rsp_valid |-> !tag_empty);
endmodule
