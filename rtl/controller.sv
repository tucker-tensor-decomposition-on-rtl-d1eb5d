// controller: sequences the TTM, permute and SVD units.
//
// The host (or a microcontroller) pushes commands (cmd_t) into a queue
// through cmd_valid/cmd_ready. The controller takes them in order, starts
// the unit that executes the operation with a one-cycle start pulse, and
// waits for that unit's done before taking the next command. While a unit
// runs, `owner` tells the top level which unit the DRAM port and the on-chip
// memory ports belong to. A HOOI iteration is a sequence of such commands:
// for each mode k the TTMs with the other factor matrices, the TTM with
// U_k^T (warm start), loading B^(k) and U_k on chip, the Jacobi sweeps and
// storing the new U_k.
//
// Counters report the commands finished per operation and the cycles spent
// in each, so that run time can be compared with the cycle formulas.
//
// The design shows a controller driving the three units but does not
// describe it; the command queue, the one-unit-at-a-time policy and the
// counters are this RTL's choices.
module controller
  import tucker_pkg::*;
#(
  parameter int CMDQ = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // command queue
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  cmd_t        cmd,
  output logic        idle,
  // unit control
  output cmd_t        cur,
  output logic        ttm_start,
  output logic        perm_start,
  output logic        svd_start,
  input  logic        ttm_done,
  input  logic        perm_done,
  input  logic        svd_done,
  output logic [1:0]  owner,        // 0 none, 1 TTM, 2 permute, 3 SVD
  // statistics, indexed by op_e
  output logic [31:0] op_count  [5],
  output logic [31:0] op_cycles [5]
);
  typedef enum logic [1:0] {C_IDLE, C_START, C_RUN} cstate_e;
  cstate_e state;
  cmd_t head;
  logic q_empty, q_full, q_pop;
  logic [$clog2(CMDQ):0] q_count;
  logic unit_done;

  sync_fifo #(.W($bits(cmd_t)), .DEPTH(CMDQ)) u_q (
    .clk, .rst_n, .push(cmd_valid && !q_full), .din(cmd), .pop(q_pop), .dout(head),
    .empty(q_empty), .full(q_full), .count(q_count));

  assign cmd_ready = !q_full;
  assign q_pop     = (state == C_IDLE) && !q_empty;
  assign idle      = (state == C_IDLE) && q_empty;

  always_comb begin
    unique case (cur.op)
      OP_TTM:               unit_done = ttm_done;
      OP_LOAD_T, OP_LOAD_U,
      OP_STORE_U:           unit_done = perm_done;
      OP_SVD:               unit_done = svd_done;
      default:              unit_done = 1'b1;
    endcase
  end

  assign ttm_start  = (state == C_START) && (cur.op == OP_TTM);
  assign perm_start = (state == C_START) &&
                      (cur.op == OP_LOAD_T || cur.op == OP_LOAD_U || cur.op == OP_STORE_U);
  assign svd_start  = (state == C_START) && (cur.op == OP_SVD);

  always_comb begin
    owner = 2'd0;
    if (state != C_IDLE) begin
      if (cur.op == OP_TTM)      owner = 2'd1;
      else if (cur.op == OP_SVD) owner = 2'd3;
      else                       owner = 2'd2;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE;
      cur   <= '0;
      for (int i = 0; i < 5; i++) begin
        op_count[i]  <= '0;
        op_cycles[i] <= '0;
      end
    end else begin
      case (state)
        C_IDLE: if (!q_empty) begin
          cur   <= head;
          state <= C_START;
        end
        C_START: begin
          op_cycles[cur.op] <= op_cycles[cur.op] + 1;
          state <= C_RUN;
        end
        C_RUN: begin
          op_cycles[cur.op] <= op_cycles[cur.op] + 1;
          if (unit_done) begin
            op_count[cur.op] <= op_count[cur.op] + 1;
            state <= C_IDLE;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  a_one_start: assert property (@(posedge clk) disable iff (!rst_n)
                                $onehot0({ttm_start, perm_start, svd_start}));
endmodule
