// tucker_top: the HOOI engine for Tucker decomposition.
//
// Blocks: the controller, the TTM unit (Q x R PE array), the SVD unit
// (P-lane Jacobi), the on-chip memory holding the matrix of the SVD, and the
// permute unit that moves data between that memory and DRAM. All tensors and
// factor matrices live in DRAM, reached through the DRAM controller's port,
// which is brought out here: Q 16-bit lanes (512 bits at Q = 32), element
// addressed, with in-order read responses. The TTM unit and the permute
// unit share that port and the SVD and permute units share the on-chip
// memory; the controller runs one command at a time and its `owner` output
// steers both multiplexers.
//
// The host pushes commands (cmd_t) through cmd_valid/cmd_ready and waits for
// `idle`. Statistics of the units come out for monitoring.
//
// Defaults: Q = R = 32 (TTM array 32 x 32), P = 128 (SVD lanes and permute
// buffer width), the largest configurations of the evaluated design;
// the remaining sizes are this RTL's choices.
module tucker_top
  import tucker_pkg::*;
#(
  parameter int Q         = 32,
  parameter int R         = 32,
  parameter int P         = 128,
  parameter int NB        = 16,
  parameter int NQ_MAX    = 16,
  parameter int RG_MAX    = 16,
  parameter int IJ_MAX    = 512,
  parameter int NMAX      = 512,
  parameter int MEM_DEPTH = 66048,
  parameter int SVD_FIFO  = 128,
  parameter int TAGQ      = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // commands
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  cmd_t        cmd,
  output logic        idle,
  // DRAM controller port
  output logic        dram_rd_valid,
  output addr_t       dram_rd_addr,
  input  logic        dram_rd_ready,
  input  logic        dram_rsp_valid,
  input  tensor_t     dram_rsp_data [Q],
  output logic        dram_wr_valid,
  output addr_t       dram_wr_addr,
  output tensor_t     dram_wr_data [Q],
  output logic        dram_wr_mask [Q],
  input  logic        dram_wr_ready,
  // statistics
  output logic [31:0] op_count  [5],
  output logic [31:0] op_cycles [5],
  output logic [31:0] ttm_sat_count,
  output logic [31:0] ttm_pp_stalls,
  output logic [31:0] svd_pairs,
  output logic [31:0] svd_hazard_stalls,
  output logic [31:0] perm_tiles
);
  localparam int MAW = $clog2(MEM_DEPTH);

  cmd_t cur;
  logic ttm_start, perm_start, svd_start, ttm_done, perm_done, svd_done;
  logic ttm_busy, perm_busy, svd_busy;
  logic [1:0] owner;

  controller u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .idle, .cur,
    .ttm_start, .perm_start, .svd_start, .ttm_done, .perm_done, .svd_done,
    .owner, .op_count, .op_cycles);

  // ------------------------------------------------------------- TTM
  logic    t_rd_valid, t_wr_valid;
  addr_t   t_rd_addr, t_wr_addr;
  tensor_t t_wr_data [Q];
  logic    t_wr_mask [Q];

  ttm_unit #(.Q(Q), .R(R), .NB(NB), .NQ_MAX(NQ_MAX), .RG_MAX(RG_MAX), .IJ_MAX(IJ_MAX),
             .TAGQ(TAGQ)) u_ttm (
    .clk, .rst_n, .start(ttm_start),
    .cfg_src(cur.src), .cfg_dst(cur.dst), .cfg_mat(cur.mat),
    .cfg_l(cur.dim_l), .cfg_i(cur.dim_i), .cfg_r(cur.dim_r), .cfg_h(cur.dim_h),
    .cfg_mode1(cur.dim_l == 32'd1), .busy(ttm_busy), .done(ttm_done),
    .rd_valid(t_rd_valid), .rd_addr(t_rd_addr), .rd_ready(dram_rd_ready && owner == 2'd1),
    .rsp_valid(dram_rsp_valid && owner == 2'd1), .rsp_data(dram_rsp_data),
    .wr_valid(t_wr_valid), .wr_addr(t_wr_addr), .wr_data(t_wr_data), .wr_mask(t_wr_mask),
    .wr_ready(dram_wr_ready && owner == 2'd1),
    .sat_count(ttm_sat_count), .pp_stall_count(ttm_pp_stalls));

  // --------------------------------------------------------- permute
  logic    p_rd_valid, p_wr_valid;
  addr_t   p_rd_addr, p_wr_addr;
  tensor_t p_wr_data [Q];
  logic    p_wr_mask [Q];
  logic           p_mrd_en, p_mwr_en;
  logic [MAW-1:0] p_mrd_addr, p_mwr_addr;
  mat_t           p_mwr_data [P];

  // ------------------------------------------------------------- SVD
  logic           s_mrd_en, s_mwr_en;
  logic [MAW-1:0] s_mrd_addr, s_mwr_addr;
  mat_t           s_mwr_data [P];

  // ------------------------------------------------- on-chip memory
  logic           m_rd_en, m_wr_en;
  logic [MAW-1:0] m_rd_addr, m_wr_addr;
  mat_t           m_rd_data [P], m_wr_data [P];

  permute_unit #(.Q(Q), .P(P), .MEM_DEPTH(MEM_DEPTH), .TAGQ(TAGQ)) u_perm (
    .clk, .rst_n, .start(perm_start), .cfg_op(cur.op),
    .cfg_src(cur.src), .cfg_dst(cur.dst), .cfg_l(cur.dim_l), .cfg_i(cur.dim_i),
    .cfg_r(cur.dim_r), .cfg_h(cur.dim_h), .cfg_wb(cur.wb), .cfg_wu(cur.wu),
    .busy(perm_busy), .done(perm_done),
    .rd_valid(p_rd_valid), .rd_addr(p_rd_addr), .rd_ready(dram_rd_ready && owner == 2'd2),
    .rsp_valid(dram_rsp_valid && owner == 2'd2), .rsp_data(dram_rsp_data),
    .wr_valid(p_wr_valid), .wr_addr(p_wr_addr), .wr_data(p_wr_data), .wr_mask(p_wr_mask),
    .wr_ready(dram_wr_ready && owner == 2'd2),
    .mem_rd_en(p_mrd_en), .mem_rd_addr(p_mrd_addr), .mem_rd_data(m_rd_data),
    .mem_wr_en(p_mwr_en), .mem_wr_addr(p_mwr_addr), .mem_wr_data(p_mwr_data),
    .transposed_tiles(perm_tiles));

  svd_unit #(.P(P), .NMAX(NMAX), .MEM_DEPTH(MEM_DEPTH), .FIFO_DEPTH(SVD_FIFO)) u_svd (
    .clk, .rst_n, .start(svd_start), .cfg_n(cur.dim_i), .cfg_wb(cur.wb), .cfg_wu(cur.wu),
    .cfg_sweeps(cur.sweeps), .busy(svd_busy), .done(svd_done),
    .mem_rd_en(s_mrd_en), .mem_rd_addr(s_mrd_addr), .mem_rd_data(m_rd_data),
    .mem_wr_en(s_mwr_en), .mem_wr_addr(s_mwr_addr), .mem_wr_data(s_mwr_data),
    .pairs_done(svd_pairs), .hazard_stalls(svd_hazard_stalls));

  onchip_mem #(.P(P), .DEPTH(MEM_DEPTH)) u_mem (
    .clk, .rd_en(m_rd_en), .rd_addr(m_rd_addr), .rd_data(m_rd_data),
    .wr_en(m_wr_en), .wr_addr(m_wr_addr), .wr_data(m_wr_data));

  // memory port steering
  always_comb begin
    if (owner == 2'd3) begin
      m_rd_en = s_mrd_en; m_rd_addr = s_mrd_addr;
      m_wr_en = s_mwr_en; m_wr_addr = s_mwr_addr; m_wr_data = s_mwr_data;
    end else begin
      m_rd_en = p_mrd_en && owner == 2'd2; m_rd_addr = p_mrd_addr;
      m_wr_en = p_mwr_en && owner == 2'd2; m_wr_addr = p_mwr_addr; m_wr_data = p_mwr_data;
    end
  end

  // DRAM port steering
  always_comb begin
    if (owner == 2'd1) begin
      dram_rd_valid = t_rd_valid; dram_rd_addr = t_rd_addr;
      dram_wr_valid = t_wr_valid; dram_wr_addr = t_wr_addr;
      dram_wr_data  = t_wr_data;  dram_wr_mask = t_wr_mask;
    end else begin
      dram_rd_valid = p_rd_valid && owner == 2'd2; dram_rd_addr = p_rd_addr;
      dram_wr_valid = p_wr_valid && owner == 2'd2; dram_wr_addr = p_wr_addr;
      dram_wr_data  = p_wr_data;  dram_wr_mask = p_wr_mask;
    end
  end

  a_single_unit: assert property (@(posedge clk) disable iff (!rst_n)
                                  $onehot0({ttm_busy, perm_busy, svd_busy}));
endmodule
