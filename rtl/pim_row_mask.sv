// pim_row_mask: the row mask of one crossbar.
//
// The crossbar stores the start, stop and step of a range pattern over its h rows
// and, while an operation runs, expands them into an h-bit vector of enabled rows
// {start, start+step, ..., stop}. Rows outside the vector are isolated (V_iso) in
// read/write and horizontal-logic operations. Storing the three values and expanding
// them on use follows the paper; the expansion as one comparator and remainder per
// row is this design's choice. A step of 0 is taken as 1.
//
// Interface: `load` (one cycle) with start/stop/step stores the pattern on the next
// edge; `row_en` is a combinational function of the stored pattern.
// Reset: all rows enabled (start 0, stop h-1, step 1), this design's choice.
module pim_row_mask
  import pim_pkg::*;
#(
  parameter int unsigned H = 1024
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [ROW_W-1:0] start,
  input  logic [ROW_W-1:0] stop,
  input  logic [ROW_W-1:0] step,
  output logic [H-1:0]     row_en
);

  logic [ROW_W-1:0] start_q, stop_q, step_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_q <= '0;
      stop_q  <= ROW_W'(H - 1);
      step_q  <= ROW_W'(1);
    end else if (load) begin
      start_q <= start;
      stop_q  <= stop;
      step_q  <= step;
    end
  end

  always_comb begin
    for (int unsigned r = 0; r < H; r++)
      row_en[r] = in_range(XB_W'(r), XB_W'(start_q), XB_W'(stop_q), XB_W'(step_q));
  end

endmodule
