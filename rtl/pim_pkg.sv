// pim_pkg: shared constants and types of the partitioned memristive PIM memory.
//
// Every operation the host sends is one 64-bit micro-operation. The three most
// significant bits select the type (mask of crossbars, mask of rows, read, write,
// horizontal logic, vertical logic); the two-bit code 2'b11 is the inter-array
// move. The field widths below are those of a memory of 64k crossbars of
// 1024 x 1024 cells with N = 32 partitions and a 32-bit word. The order of the
// fields, most significant first, and the unused low bits follow the layout
// drawing of the operation formats; the exact bit positions are this design's
// choice (fields packed downward from bit 63).
//
// The decoded form that the controller broadcasts to every crossbar is pim_bcast_t.
package pim_pkg;

  // Format-level sizes (fixed by the 64-bit operation format)
  localparam int unsigned OP_W      = 64;
  localparam int unsigned WORD_W    = 32;  // N, word size
  localparam int unsigned ROW_W     = 10;  // log2(h), h = 1024
  localparam int unsigned IDX_W     = 5;   // log2(w/N), w/N = 32
  localparam int unsigned PART_W    = 5;   // log2(N)
  localparam int unsigned XB_W      = 16;  // crossbar index, 64k crossbars

  // Operation type (bits 63:61). Move uses only bits 63:62 = 2'b11.
  typedef enum logic [2:0] {
    OP_MASK_XB  = 3'b000,
    OP_MASK_ROW = 3'b001,
    OP_READ     = 3'b010,
    OP_WRITE    = 3'b011,
    OP_LOGIC_H  = 3'b100,
    OP_LOGIC_V  = 3'b101,
    OP_MOVE0    = 3'b110,
    OP_MOVE1    = 3'b111
  } op_type_e;

  // Gate type of logic operations. Vertical logic supports INIT0, INIT1 and NOT.
  typedef enum logic [1:0] {
    GATE_INIT0 = 2'b00,
    GATE_INIT1 = 2'b01,
    GATE_NOT   = 2'b10,
    GATE_NOR   = 2'b11
  } gate_e;

  // Raw field layouts, most significant field first.
  typedef struct packed {
    logic [2:0]      op;
    logic [XB_W-1:0] start;
    logic [XB_W-1:0] stop;
    logic [XB_W-1:0] step;
    logic [12:0]     unused;
  } op_mask_xb_t;

  typedef struct packed {
    logic [2:0]       op;
    logic [ROW_W-1:0] start;
    logic [ROW_W-1:0] stop;
    logic [ROW_W-1:0] step;
    logic [30:0]      unused;
  } op_mask_row_t;

  typedef struct packed {
    logic [2:0]        op;
    logic [IDX_W-1:0]  index;
    logic [WORD_W-1:0] imm;     // unused by read
    logic [23:0]       unused;
  } op_rw_t;

  typedef struct packed {
    logic [2:0]        op;
    gate_e             gate;
    logic [IDX_W-1:0]  in_a;
    logic [PART_W-1:0] p_a;
    logic [IDX_W-1:0]  in_b;
    logic [PART_W-1:0] p_b;
    logic [IDX_W-1:0]  out;
    logic [PART_W-1:0] p_out;
    logic [PART_W-1:0] p_end;
    logic [PART_W-1:0] p_step;
    logic [18:0]       unused;
  } op_logic_h_t;

  typedef struct packed {
    logic [2:0]       op;
    gate_e            gate;
    logic [ROW_W-1:0] in_row;
    logic [ROW_W-1:0] out_row;
    logic [IDX_W-1:0] index;
    logic [33:0]      unused;
  } op_logic_v_t;

  typedef struct packed {
    logic [1:0]       op;
    logic [ROW_W-1:0] src_row;
    logic [IDX_W-1:0] src_index;
    logic [ROW_W-1:0] dst_row;
    logic [IDX_W-1:0] dst_index;
    logic [XB_W-1:0]  dst_array;
    logic [15:0]      unused;
  } op_move_t;

  // Horizontal logic fields as broadcast to the crossbars.
  typedef struct packed {
    gate_e             gate;
    logic [IDX_W-1:0]  in_a;
    logic [PART_W-1:0] p_a;
    logic [IDX_W-1:0]  in_b;
    logic [PART_W-1:0] p_b;
    logic [IDX_W-1:0]  out;
    logic [PART_W-1:0] p_out;
    logic [PART_W-1:0] p_end;
    logic [PART_W-1:0] p_step;
  } hlogic_t;

  // Decoded operation broadcast by the controller to all crossbars, one per cycle.
  typedef enum logic [2:0] {
    K_NOP, K_MASK_XB, K_MASK_ROW, K_READ, K_WRITE, K_LOGIC_H, K_LOGIC_V, K_MOVE
  } kind_e;

  typedef struct packed {
    kind_e             kind;
    // crossbar range: crossbar-mask operands, or for a move the destination range
    logic [XB_W-1:0]   xb_start;
    logic [XB_W-1:0]   xb_stop;
    logic [XB_W-1:0]   xb_step;
    // row mask operands
    logic [ROW_W-1:0]  row_start;
    logic [ROW_W-1:0]  row_stop;
    logic [ROW_W-1:0]  row_step;
    // read / write / vertical-logic index, move source index
    logic [IDX_W-1:0]  index;
    logic [WORD_W-1:0] imm;
    hlogic_t           hl;
    // vertical logic gate and rows; move rows and destination index
    gate_e             vgate;
    logic [ROW_W-1:0]  row_a;     // vertical input row / move source row
    logic [ROW_W-1:0]  row_b;     // vertical output row / move destination row
    logic [IDX_W-1:0]  index_b;   // move destination index
  } pim_bcast_t;

  // Range pattern {start, start+step, ..., stop}; step 0 is taken as 1.
  function automatic logic in_range(input logic [XB_W-1:0] x, input logic [XB_W-1:0] start,
                                    input logic [XB_W-1:0] stop, input logic [XB_W-1:0] step);
    logic [XB_W-1:0] s;
    s = (step == '0) ? XB_W'(1) : step;
    return (x >= start) && (x <= stop) && (((x - start) % s) == '0);
  endfunction

endpackage
