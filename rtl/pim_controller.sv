// pim_controller: the on-chip controller of the PIM memory.
//
// The host driver already translates every high-level instruction into
// micro-operations whose fields map directly to periphery controls, so the
// controller only buffers the 64-bit operations (pim_op_fifo), splits each one into
// its fields and broadcasts it to all crossbars, one operation per cycle, and returns
// the N-bit word of a read operation.
//
// Inter-array move: the operation carries the destination crossbar of the first pair,
// XB_dest = XB_start + XB_dist. The controller keeps a copy of the last crossbar-mask
// range (start, stop, step), derives the distance and broadcasts the destination range
// [start+xb_dist, stop+xb_dist] with the same step, so that each crossbar can tell whether
// it receives. It also sets the H-tree isolation level: log4(step) when several
// crossbars send, the root when only one does. Both derivations are this design's
// choice of how to carry out what the paper specifies.
//
// Interface: host side op_valid/op_ready/op (hold op stable while op_valid and not
// op_ready); read data returns on resp_valid/resp_data two cycles after the read is
// the oldest buffered operation (one cycle in the broadcast register, captured from
// the H-tree root at the end of that cycle). bc/tree_level are registered outputs.
// Reset: FIFO empty, NOP broadcast, shadow crossbar range = all crossbars.
module pim_controller
  import pim_pkg::*;
#(
  parameter int unsigned N          = 32,
  parameter int unsigned LEVELS     = 8,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  // host
  input  logic             op_valid,
  output logic             op_ready,
  input  logic [OP_W-1:0]  op,
  output logic             resp_valid,
  output logic [N-1:0]     resp_data,
  // crossbars and H-tree
  output pim_bcast_t       bc,
  output logic [3:0]       tree_level,
  input  logic [N-1:0]     tree_root
);

  logic            q_valid;
  logic [OP_W-1:0] q_op;
  pim_bcast_t      bc_d;
  logic [3:0]      level_d;
  logic [XB_W-1:0] xb_start_q, xb_stop_q, xb_step_q, xb_dist;

  op_mask_xb_t  f_mx;
  op_mask_row_t f_mr;
  op_rw_t       f_rw;
  op_logic_h_t  f_lh;
  op_logic_v_t  f_lv;
  op_move_t     f_mv;

  pim_op_fifo #(.WIDTH(OP_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid (op_valid), .in_ready (op_ready), .in_data (op),
    .out_valid (q_valid), .out_ready (1'b1), .out_data (q_op)
  );

  // log4 of a power of four; the step of a multi-source move must be one
  function automatic logic [3:0] log4(input logic [XB_W-1:0] s);
    logic [3:0] r;
    r = '0;
    for (int unsigned i = 0; i < XB_W; i += 2)
      if (s[i]) r = 4'(i / 2);
    return r;
  endfunction

  always_comb begin
    f_mx = q_op;
    f_mr = q_op;
    f_rw = q_op;
    f_lh = q_op;
    f_lv = q_op;
    f_mv = q_op;
    xb_dist = f_mv.dst_array - xb_start_q;

    bc_d          = '0;
    bc_d.kind     = K_NOP;
    bc_d.xb_start = f_mx.start;
    bc_d.xb_stop  = f_mx.stop;
    bc_d.xb_step  = f_mx.step;
    bc_d.row_start = f_mr.start;
    bc_d.row_stop  = f_mr.stop;
    bc_d.row_step  = f_mr.step;
    bc_d.index    = f_rw.index;
    bc_d.imm      = f_rw.imm;
    bc_d.hl       = '{gate: f_lh.gate, in_a: f_lh.in_a, p_a: f_lh.p_a, in_b: f_lh.in_b,
                      p_b: f_lh.p_b, out: f_lh.out, p_out: f_lh.p_out, p_end: f_lh.p_end,
                      p_step: f_lh.p_step};
    bc_d.vgate    = f_lv.gate;
    bc_d.row_a    = f_lv.in_row;
    bc_d.row_b    = f_lv.out_row;
    level_d       = 4'(LEVELS);

    if (q_valid) begin
      case (op_type_e'(q_op[OP_W-1 -: 3]))
        OP_MASK_XB:  bc_d.kind = K_MASK_XB;
        OP_MASK_ROW: bc_d.kind = K_MASK_ROW;
        OP_READ:     bc_d.kind = K_READ;
        OP_WRITE:    bc_d.kind = K_WRITE;
        OP_LOGIC_H:  bc_d.kind = K_LOGIC_H;
        OP_LOGIC_V: begin
          bc_d.kind  = K_LOGIC_V;
          bc_d.index = f_lv.index;
        end
        default: begin
          bc_d.kind     = K_MOVE;
          bc_d.xb_start = f_mv.dst_array;
          bc_d.xb_stop  = xb_stop_q + xb_dist;
          bc_d.xb_step  = xb_step_q;
          bc_d.row_a    = f_mv.src_row;
          bc_d.row_b    = f_mv.dst_row;
          bc_d.index    = f_mv.src_index;
          bc_d.index_b  = f_mv.dst_index;
          if (xb_start_q != xb_stop_q) level_d = log4(xb_step_q);
        end
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bc         <= '0;
      tree_level <= 4'(LEVELS);
      xb_start_q <= '0;
      xb_stop_q  <= XB_W'((4 ** LEVELS) - 1);
      xb_step_q  <= XB_W'(1);
      resp_valid <= 1'b0;
      resp_data  <= '0;
    end else begin
      bc         <= bc_d;
      tree_level <= level_d;
      if (bc_d.kind == K_MASK_XB) begin
        xb_start_q <= f_mx.start;
        xb_stop_q  <= f_mx.stop;
        xb_step_q  <= f_mx.step;
      end
      resp_valid <= bc.kind == K_READ;
      if (bc.kind == K_READ) resp_data <= tree_root;
    end
  end

  // Host handshake: an offered operation stays unchanged until it is accepted.
  a_op_stable: assert property (@(posedge clk) disable iff (!rst_n)
    op_valid && !op_ready |=> op_valid && $stable(op));

  // A move with several sources needs a power-of-four crossbar step.
  a_move_step: assert property (@(posedge clk) disable iff (!rst_n)
    bc_d.kind == K_MOVE && xb_start_q != xb_stop_q |->
      (xb_step_q != '0) && ((xb_step_q & (xb_step_q - 1'b1)) == '0) && ((xb_step_q & 16'h5555) != '0));

endmodule
