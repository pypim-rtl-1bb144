// pim_top: a partitioned memristive processing-in-memory memory.
//
// 4^XB_LEVELS crossbars of H x W cells with N partitions each, an H-tree joining
// them and the controller that buffers and broadcasts 64-bit micro-operations from
// the host. The host sends mask, read, write, horizontal/vertical logic and move
// operations on op_valid/op_ready/op; read data returns on resp_valid/resp_data.
// Each operation occupies the crossbars for one cycle; the memory accepts one
// operation per cycle while the buffer has room.
//
// The paper's memory has 64k crossbars of 1024 x 1024 cells (8 GB) and N = 32; the
// crossbar count here is 4^XB_LEVELS with a default of 4^4 = 256, because the lint
// tool's memory grows about fourfold per H-tree level (2.3 GB at 64 crossbars).
module pim_top
  import pim_pkg::*;
#(
  parameter int unsigned XB_LEVELS  = 4,
  parameter int unsigned H          = 1024,
  parameter int unsigned W          = 1024,
  parameter int unsigned N          = 32,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            op_valid,
  output logic            op_ready,
  input  logic [OP_W-1:0] op,
  output logic            resp_valid,
  output logic [N-1:0]    resp_data
);

  localparam int unsigned NUM_XB = 4 ** XB_LEVELS;

  pim_bcast_t                bc;
  logic [3:0]                tree_level;
  logic [N-1:0]              tree_root;
  logic [NUM_XB-1:0][N-1:0]  leaf_out, leaf_in;
  logic [NUM_XB-1:0]         xb_active;

  pim_controller #(.N(N), .LEVELS(XB_LEVELS), .FIFO_DEPTH(FIFO_DEPTH)) u_ctrl (
    .clk, .rst_n, .op_valid, .op_ready, .op, .resp_valid, .resp_data,
    .bc, .tree_level, .tree_root
  );

  pim_htree #(.LEVELS(XB_LEVELS), .N(N)) u_htree (
    .level (tree_level), .leaf_out, .leaf_in, .root (tree_root)
  );

  // Crossbars in groups of up to 256 (four H-tree levels) per generate block.
  localparam int unsigned INNER = (NUM_XB >= 256) ? 256 : NUM_XB;
  localparam int unsigned OUTER = NUM_XB / INNER;

  for (genvar g = 0; g < OUTER; g++) begin : g_grp
    for (genvar i = 0; i < INNER; i++) begin : g_xb
      pim_crossbar #(.H(H), .W(W), .N(N)) u_xb (
        .clk, .rst_n,
        .xb_id    (XB_W'(g * INNER + i)),
        .bc,
        .tree_out (leaf_out[g * INNER + i]),
        .tree_in  (leaf_in[g * INNER + i]),
        .active   (xb_active[g * INNER + i])
      );
    end
  end

endmodule
