// permute_unit: moves data between DRAM and the on-chip SVD memory and
// reorders it on the way, through a P x Q buffer (p' x q' with p' = p, q' = q).
//
// Operations (cfg_op):
//  * OP_LOAD_T: tensor B, stored in DRAM mode-1 fastest and described folded
//    as [L, I, H], becomes the mode unfolding B^(k): on-chip row i holds the
//    J = L*H elements with that index, column j = l + L*h, in words
//    0..wb-1 of the row. Elements are sign-extended to 27 bits and shifted
//    left by B_SHIFT.
//      - L > 1 (gather): a row's elements lie in runs of L consecutive DRAM
//        elements; each read takes up to Q of a run and places them at their
//        lane offset in the buffer's first column; a full word is written
//        to the memory with the last piece.
//      - L = 1 (transpose, mode 1): consecutive DRAM elements belong to
//        consecutive rows. A tile of Q rows x P columns is read column by
//        column (Q elements per read) into the buffer, then written row by
//        row (P elements per write): the buffer transposes the tile.
//  * OP_LOAD_U: an I x I matrix stored column by column in DRAM (two 16-bit
//    slots per 27-bit entry) becomes the U part of the rows: on-chip row r,
//    words wb.., holds column r. This is how the previous factor matrix U_k
//    is brought back as the warm-start guess.
//  * OP_STORE_U: rows 0..cfg_r-1 of the U part go back to DRAM as columns of
//    the I x I factor matrix (the left singular vectors become columns).
// DRAM reads are pipelined (up to TAGQ outstanding); writes wait for
// wr_ready. The on-chip memory read has one cycle of latency.
//
// Interface and timing: start with the cfg_* values; done pulses at the end.
// Gather loads take about one read per min(Q, L) elements, transposing loads
// P reads and Q writes per tile plus the DRAM latency, matrix moves one
// DRAM access per Q/2 entries.
//
// Moving B between DRAM and the on-chip memory, reorganising it into
// B^(k), moving the factor matrix back, and the p' x q' buffer follow the
// design. The two load methods, the storage of matrices in DRAM and the
// scaling of tensor values are this RTL's choices.
module permute_unit
  import tucker_pkg::*;
#(
  parameter int Q         = 32,
  parameter int P         = 128,
  parameter int MEM_DEPTH = 66048,
  parameter int TAGQ      = 16,
  parameter int B_SHIFT   = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  op_e         cfg_op,
  input  addr_t       cfg_src,
  input  addr_t       cfg_dst,
  input  logic [31:0] cfg_l,
  input  logic [15:0] cfg_i,
  input  logic [15:0] cfg_r,
  input  logic [31:0] cfg_h,
  input  logic [15:0] cfg_wb,
  input  logic [15:0] cfg_wu,
  output logic        busy,
  output logic        done,
  // DRAM
  output logic        rd_valid,
  output addr_t       rd_addr,
  input  logic        rd_ready,
  input  logic        rsp_valid,
  input  tensor_t     rsp_data [Q],
  output logic        wr_valid,
  output addr_t       wr_addr,
  output tensor_t     wr_data [Q],
  output logic        wr_mask [Q],
  input  logic        wr_ready,
  // on-chip memory
  output logic                         mem_rd_en,
  output logic [$clog2(MEM_DEPTH)-1:0] mem_rd_addr,
  input  mat_t                         mem_rd_data [P],
  output logic                         mem_wr_en,
  output logic [$clog2(MEM_DEPTH)-1:0] mem_wr_addr,
  output mat_t                         mem_wr_data [P],
  // statistics
  output logic [31:0] transposed_tiles
);
  localparam int HALF = Q / 2;
  localparam int MAW  = $clog2(MEM_DEPTH);
  localparam int OW   = $clog2(TAGQ) + 1;

  typedef struct packed {
    logic [15:0]    off;   // first buffer lane written
    logic [15:0]    len;   // lanes written
    logic           esz2;  // two DRAM slots per value (matrix entry)
    logic           last;  // completes the memory word
    logic [MAW-1:0] maddr; // memory word
    logic [15:0]    tcol;  // transpose: buffer column
  } tag_t;

  typedef enum logic [3:0] {
    S_IDLE, S_GATHER, S_GWAIT, S_TISSUE, S_TWAIT, S_TDRAIN, S_SREAD, S_SLATCH, S_SWRITE, S_END
  } state_e;
  state_e state;

  mat_t buffer [P][Q];

  // configuration
  op_e         op;
  addr_t       src, dst;
  logic [31:0] dl, dh, dj;
  logic [15:0] di, dr, wb, wu, rw;

  // counters
  logic [31:0] g_j, g_l, g_h, jend;
  logic [15:0] g_row, g_w, g_len;
  logic [31:0] t_ib, t_c;
  logic [15:0] t_w, t_b;
  logic [15:0] s_row, s_w, s_e0;
  logic [OW-1:0] outstanding;
  tag_t tag_in, tag_out;
  logic tag_empty, tag_full;
  logic [OW-1:0] tag_count;
  logic issue;

  function automatic logic [31:0] min3(input logic [31:0] a, input logic [31:0] b,
                                       input logic [31:0] c);
    logic [31:0] m;
    m = (a < b) ? a : b;
    return (m < c) ? m : c;
  endfunction

  function automatic mat_t ext(input tensor_t t);
    return mat_t'(t) <<< B_SHIFT;
  endfunction

  function automatic mat_t entry(input tensor_t lo, input tensor_t hi);
    logic [31:0] w;
    w = {hi, lo};
    return mat_t'(w[MAT_W-1:0]);
  endfunction

  // ---------------------------------------------------------------- issue
  always_comb begin
    tag_in   = '0;
    rd_addr  = '0;
    rd_valid = 1'b0;
    if (op == OP_LOAD_T) begin
      jend  = min3((32'(g_w) + 1) * 32'(P), dj, 32'hffff_ffff);
      g_len = 16'(min3(dl - g_l, 32'(Q), jend - g_j));
      rd_addr     = src + g_l + dl * (32'(g_row) + 32'(di) * g_h);
      tag_in.off  = 16'(g_j - 32'(g_w) * 32'(P));
      tag_in.len  = g_len;
      tag_in.last = (g_j + 32'(g_len) == jend);
    end else begin
      jend  = min3(32'(P), 32'(di) - 32'(g_w) * 32'(P), 32'hffff_ffff);
      g_len = 16'(min3(32'(HALF), jend - g_j, 32'hffff_ffff));
      rd_addr     = src + 2 * (32'(g_w) * 32'(P) + g_j + 32'(di) * 32'(g_row));
      tag_in.off  = 16'(g_j);
      tag_in.len  = g_len;
      tag_in.esz2 = 1'b1;
      tag_in.last = (g_j + 32'(g_len) >= jend);
    end
    tag_in.maddr = MAW'(32'(g_row) * 32'(rw) + 32'(g_w) + ((op == OP_LOAD_U) ? 32'(wb) : 32'd0));
    if (state == S_TISSUE) begin
      rd_addr     = src + t_ib + 32'(di) * (32'(t_w) * 32'(P) + t_c);
      tag_in      = '0;
      tag_in.tcol = 16'(t_c);
    end
    rd_valid = ((state == S_GATHER) || (state == S_TISSUE)) && (outstanding < OW'(TAGQ));
  end
  assign issue = rd_valid && rd_ready;

  sync_fifo #(.W($bits(tag_t)), .DEPTH(TAGQ)) u_tags (
    .clk, .rst_n, .push(issue), .din(tag_in), .pop(rsp_valid), .dout(tag_out),
    .empty(tag_empty), .full(tag_full), .count(tag_count));

  // ------------------------------------------------------------ responses
  mat_t merged [P];
  always_comb begin
    for (int c = 0; c < P; c++) begin
      int e;
      e = c - int'(tag_out.off);
      merged[c] = buffer[c][0];
      if (e >= 0 && e < int'(tag_out.len)) begin
        if (tag_out.esz2) merged[c] = entry(rsp_data[(2*e) % Q], rsp_data[(2*e+1) % Q]);
        else              merged[c] = ext(rsp_data[e % Q]);
      end
    end
  end

  // memory ports
  logic tdrain_row_ok;
  assign tdrain_row_ok = (t_ib + 32'(t_b) < 32'(di));
  always_comb begin
    mem_wr_en   = 1'b0;
    mem_wr_addr = tag_out.maddr;
    for (int c = 0; c < P; c++) mem_wr_data[c] = merged[c];
    if (rsp_valid && (state == S_GATHER || state == S_GWAIT) && tag_out.last) begin
      mem_wr_en = 1'b1;
    end else if (state == S_TDRAIN) begin
      mem_wr_en   = tdrain_row_ok;
      mem_wr_addr = MAW'((t_ib + 32'(t_b)) * 32'(rw) + 32'(t_w));
      for (int c = 0; c < P; c++)
        mem_wr_data[c] = (32'(t_w) * 32'(P) + 32'(c) < dj) ? buffer[c][t_b % Q] : '0;
    end
  end
  assign mem_rd_en   = (state == S_SREAD);
  assign mem_rd_addr = MAW'(32'(s_row) * 32'(rw) + 32'(wb) + 32'(s_w));

  // DRAM writes (matrix store)
  always_comb begin
    wr_valid = (state == S_SWRITE);
    wr_addr  = dst + 2 * (32'(s_w) * 32'(P) + 32'(s_e0) + 32'(di) * 32'(s_row));
    for (int e = 0; e < HALF; e++) begin
      logic [31:0] w;
      w = 32'(signed'(buffer[(int'(s_e0) + e) % P][0]));
      wr_data[2*e]     = w[15:0];
      wr_data[2*e+1]   = w[31:16];
      wr_mask[2*e]     = (int'(s_e0) + e < P) && (32'(s_w) * 32'(P) + 32'(s_e0) + 32'(e) < 32'(di));
      wr_mask[2*e+1]   = wr_mask[2*e];
    end
  end

  // ---------------------------------------------------------- sequencing
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (state == S_IDLE && start) begin
      for (int c = 0; c < P; c++) buffer[c][0] <= '0;
    end else if (rsp_valid && (state == S_TISSUE || state == S_TWAIT)) begin
      for (int b = 0; b < Q; b++) buffer[tag_out.tcol % P][b] <= ext(rsp_data[b]);
    end else if (rsp_valid) begin
      for (int c = 0; c < P; c++) buffer[c][0] <= tag_out.last ? '0 : merged[c];
    end else if (state == S_SLATCH) begin
      for (int c = 0; c < P; c++) buffer[c][0] <= mem_rd_data[c];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; op <= OP_LOAD_T;
      src <= '0; dst <= '0; dl <= '0; dh <= '0; dj <= '0; di <= '0; dr <= '0;
      wb <= '0; wu <= '0; rw <= '0;
      g_j <= '0; g_l <= '0; g_h <= '0; g_row <= '0; g_w <= '0;
      t_ib <= '0; t_c <= '0; t_w <= '0; t_b <= '0;
      s_row <= '0; s_w <= '0; s_e0 <= '0;
      outstanding <= '0; transposed_tiles <= '0;
    end else begin
      done <= 1'b0;
      outstanding <= outstanding + OW'(issue) - OW'(rsp_valid);
      case (state)
        S_IDLE: if (start) begin
          op <= cfg_op; src <= cfg_src; dst <= cfg_dst;
          dl <= cfg_l; dh <= cfg_h; dj <= cfg_l * cfg_h; di <= cfg_i; dr <= cfg_r;
          wb <= cfg_wb; wu <= cfg_wu; rw <= cfg_wb + cfg_wu;
          g_j <= '0; g_l <= '0; g_h <= '0; g_row <= '0; g_w <= '0;
          t_ib <= '0; t_c <= '0; t_w <= '0; t_b <= '0;
          s_row <= '0; s_w <= '0; s_e0 <= '0;
          case (cfg_op)
            OP_LOAD_T:  state <= (cfg_l == 1) ? S_TISSUE : S_GATHER;
            OP_LOAD_U:  state <= S_GATHER;
            OP_STORE_U: state <= S_SREAD;
            default:    state <= S_END;
          endcase
        end
        // gather: LOAD_T with L > 1 and LOAD_U
        S_GATHER: if (issue) begin
          if (op == OP_LOAD_T) begin
            if (g_l + 32'(g_len) == dl) begin
              g_l <= '0;
              g_h <= g_h + 1;
            end else g_l <= g_l + 32'(g_len);
          end
          if (tag_in.last) begin
            g_j <= (op == OP_LOAD_T) ? g_j + 32'(g_len) : 32'd0;
            if (g_w == ((op == OP_LOAD_T) ? wb : wu) - 1) begin
              g_w <= '0; g_j <= '0; g_l <= '0; g_h <= '0;
              if (g_row == di - 1) state <= S_GWAIT;
              else g_row <= g_row + 1;
            end else g_w <= g_w + 1;
          end else g_j <= g_j + 32'(g_len);
        end
        S_GWAIT: if (outstanding == 0) state <= S_END;
        // transpose: LOAD_T with L = 1
        S_TISSUE: if (issue) begin
          if (t_c == 32'(P - 1) || 32'(t_w) * 32'(P) + t_c + 1 >= dj) begin
            t_c <= '0;
            state <= S_TWAIT;
          end else t_c <= t_c + 1;
        end
        S_TWAIT: if (outstanding == 0 && !rsp_valid) begin
          t_b <= '0;
          state <= S_TDRAIN;
        end
        S_TDRAIN: begin
          if (t_b == 16'(Q - 1) || !tdrain_row_ok) begin
            transposed_tiles <= transposed_tiles + 1;
            t_b <= '0;
            if (t_w == wb - 1) begin
              t_w <= '0;
              if (t_ib + 32'(Q) >= 32'(di)) state <= S_END;
              else begin
                t_ib <= t_ib + 32'(Q);
                state <= S_TISSUE;
              end
            end else begin
              t_w <= t_w + 1;
              state <= S_TISSUE;
            end
          end else t_b <= t_b + 1;
        end
        // store U rows as matrix columns
        S_SREAD:  state <= S_SLATCH;
        S_SLATCH: begin
          s_e0  <= '0;
          state <= S_SWRITE;
        end
        S_SWRITE: if (wr_ready) begin
          if (32'(s_e0) + 32'(HALF) >= 32'(P) ||
              32'(s_w) * 32'(P) + 32'(s_e0) + 32'(HALF) >= 32'(di)) begin
            s_e0 <= '0;
            if (s_w == wu - 1) begin
              s_w <= '0;
              if (s_row == dr - 1) state <= S_END;
              else begin
                s_row <= s_row + 1;
                state <= S_SREAD;
              end
            end else begin
              s_w <= s_w + 1;
              state <= S_SREAD;
            end
          end else s_e0 <= s_e0 + 16'(HALF);
        end
        S_END: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_resp_expected: assert property (@(posedge clk) disable iff (!rst_n) rsp_valid |-> !tag_empty);
endmodule
