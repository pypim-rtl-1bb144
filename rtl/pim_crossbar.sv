// pim_crossbar: one crossbar tile with its control periphery.
//
// Every tile receives the same decoded micro-operation broadcast by the controller
// and acts on it locally:
//   crossbar mask  - the tile's activation bit (pim_xb_mask) is reloaded;
//   row mask       - the tile's row range (pim_row_mask) is reloaded;
//   read           - an active tile drives the word at the selected row and
//                    intra-partition index onto its H-tree port (one mux and sense
//                    amplifier per partition);
//   write          - an active tile writes the immediate word into every selected row;
//   logic (horiz.) - the partition opcodes and transistor selects (pim_halfgate_gen)
//                    drive N half-gate column decoders (pim_col_decoder), and the array
//                    performs the gates in all selected rows;
//   logic (vert.)  - the array applies the vertical gate between two rows;
//   move           - an active tile is a source: it reads (src row, src index) onto
//                    the H-tree; a tile whose index lies in the broadcast destination
//                    range writes the word arriving from the H-tree at (dst row, dst index).
// Non-mask operations are ignored by an inactive tile (move destinations excepted).
//
// Timing: state changes on the rising edge that ends the cycle in which the
// operation is broadcast; the H-tree output (read data, move source) is
// combinational within that cycle. Row masks are not applied to vertical logic and
// moves, which name their rows explicitly.
module pim_crossbar
  import pim_pkg::*;
#(
  parameter int unsigned H = 1024,
  parameter int unsigned W = 1024,
  parameter int unsigned N = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [XB_W-1:0] xb_id,
  input  pim_bcast_t      bc,
  // H-tree endpoint
  output logic [N-1:0]    tree_out,   // word driven onto the H-tree (0 when not driving)
  input  logic [N-1:0]    tree_in,    // word arriving from the H-tree
  output logic            active      // crossbar activation bit (observability)
);

  localparam int unsigned C = W / N;

  logic             is_dest;
  logic [H-1:0]     row_en;
  logic [N-1:0][2:0] opc;
  logic [N-2:0]     tsel;
  logic [W-1:0]     v1_en, v2_en;
  logic [H-1:0]     src_row_1h, dst_row_1h;
  logic             do_write, do_move_dst;
  logic [N-1:0]     rd_data;

  pim_xb_mask u_xb_mask (
    .clk, .rst_n, .xb_id,
    .load      (bc.kind == K_MASK_XB),
    .start     (bc.xb_start), .stop (bc.xb_stop), .step (bc.xb_step),
    .dst_start (bc.xb_start), .dst_stop (bc.xb_stop), .dst_step (bc.xb_step),
    .active, .is_dest
  );

  pim_row_mask #(.H(H)) u_row_mask (
    .clk, .rst_n,
    .load  (bc.kind == K_MASK_ROW),
    .start (bc.row_start), .stop (bc.row_stop), .step (bc.row_step),
    .row_en
  );

  pim_halfgate_gen #(.N(N)) u_hg (.hl(bc.hl), .opc, .tsel);

  for (genvar p = 0; p < N; p++) begin : g_dec
    pim_col_decoder #(.COLS(C)) u_dec (
      .opc   (opc[p]),
      .in_a  (bc.hl.in_a), .in_b (bc.hl.in_b), .out (bc.hl.out),
      .v1_en (v1_en[p*C +: C]),
      .v2_en (v2_en[p*C +: C])
    );
  end

  always_comb begin
    src_row_1h = '0;
    dst_row_1h = '0;
    src_row_1h[bc.row_a] = 1'b1;
    dst_row_1h[bc.row_b] = 1'b1;
  end

  assign do_write    = active && bc.kind == K_WRITE;
  assign do_move_dst = is_dest && bc.kind == K_MOVE;

  pim_crossbar_array #(.H(H), .W(W), .N(N)) u_array (
    .clk,
    .h_en      (active && bc.kind == K_LOGIC_H),
    .h_gate    (bc.hl.gate),
    .v1_en, .v2_en, .tsel, .row_en,
    .v_en      (active && bc.kind == K_LOGIC_V),
    .v_gate    (bc.vgate),
    .v_in_row  (bc.row_a),
    .v_out_row (bc.row_b),
    .v_index   (bc.index),
    .wr_en     (do_write || do_move_dst),
    .wr_rows   (do_write ? row_en : dst_row_1h),
    .wr_index  (do_write ? bc.index : bc.index_b),
    .wr_data   (do_write ? bc.imm[N-1:0] : tree_in),
    .rd_rows   (bc.kind == K_MOVE ? src_row_1h : row_en),
    .rd_index  (bc.index),
    .rd_data
  );

  assign tree_out = (active && (bc.kind == K_READ || bc.kind == K_MOVE)) ? rd_data : '0;

endmodule
