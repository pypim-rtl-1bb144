// pim_crossbar_array: logical model of one h x w memristive crossbar with N partitions.
//
// Cells hold one bit each (low resistance = 1). The w columns are split into N
// partitions of C = w/N consecutive columns; N-1 transistors between neighbouring
// partitions (tsel[k] between partitions k and k+1, 1 = conducting) join partitions
// into sections. Storage is kept column by column (cols[c] is the h-bit column c) so
// that one operation acts on all rows at once, as the array does.
//
// Horizontal stateful logic (h_en): in every row enabled by row_en and in every
// section, the bitlines marked v1_en are the gate inputs and those marked v2_en the
// outputs. NOR and NOT follow the MAGIC behaviour: the output cell, which the
// driver must have set to 1 beforehand (INIT1), switches to 0 when any input of its
// section is 1, so out <= out & ~(OR of inputs). INIT0/INIT1 set the outputs to a
// constant. Rows not enabled are isolated and keep their values.
//
// Vertical logic (v_en): the same gates applied along the columns, from row v_in_row
// to row v_out_row, on the N columns at intra-partition index v_index (one per
// partition). Only INIT0, INIT1 and NOT exist in this direction; NOR does nothing.
//
// Write (wr_en): bit j of wr_data goes to partition j, column j*C + wr_index, in every
// row marked in wr_rows (strided word format). Read: rd_data bit j is the sense
// amplifier output of partition j at column j*C + rd_index for the row marked in
// rd_rows (a wired OR if several rows are marked, which the masks must avoid).
//
// Timing: all updates on the rising clock edge; rd_data is combinational. At most one
// of h_en, v_en, wr_en is high in a cycle. The stateful-logic physics are replaced by
// their logical effect; voltages, sense amplifiers and device non-idealities are not
// modelled. The MAGIC output rule and the section behaviour follow the paper; the
// column-wise storage and the port split are this design's choice.
module pim_crossbar_array
  import pim_pkg::*;
#(
  parameter int unsigned H = 1024,
  parameter int unsigned W = 1024,
  parameter int unsigned N = 32
) (
  input  logic              clk,
  // horizontal logic
  input  logic              h_en,
  input  gate_e             h_gate,
  input  logic [W-1:0]      v1_en,
  input  logic [W-1:0]      v2_en,
  input  logic [N-2:0]      tsel,
  input  logic [H-1:0]      row_en,
  // vertical logic
  input  logic              v_en,
  input  gate_e             v_gate,
  input  logic [ROW_W-1:0]  v_in_row,
  input  logic [ROW_W-1:0]  v_out_row,
  input  logic [IDX_W-1:0]  v_index,
  // strided write
  input  logic              wr_en,
  input  logic [H-1:0]      wr_rows,
  input  logic [IDX_W-1:0]  wr_index,
  input  logic [N-1:0]      wr_data,
  // strided read
  input  logic [H-1:0]      rd_rows,
  input  logic [IDX_W-1:0]  rd_index,
  output logic [N-1:0]      rd_data
);

  localparam int unsigned C = W / N;

  logic [H-1:0] cols [W];
  logic [H-1:0] in_or  [N];   // OR of the input bitlines of each partition
  logic [H-1:0] lr     [N];   // segmented OR scanning left to right
  logic [H-1:0] rl     [N];   // segmented OR scanning right to left
  logic [H-1:0] sec_or [N];   // OR of all inputs of the section holding partition p

  // Section inputs: OR of the V1 bitlines, joined across conducting transistors.
  always_comb begin
    for (int unsigned p = 0; p < N; p++) begin
      in_or[p] = '0;
      if (h_en)
        for (int unsigned c = 0; c < C; c++)
          if (v1_en[p*C + c]) in_or[p] |= cols[p*C + c];
    end
    lr[0] = in_or[0];
    for (int unsigned p = 1; p < N; p++)
      lr[p] = in_or[p] | (tsel[p-1] ? lr[p-1] : '0);
    rl[N-1] = in_or[N-1];
    for (int p = int'(N) - 2; p >= 0; p--)
      rl[p] = in_or[p] | (tsel[p] ? rl[p+1] : '0);
    for (int unsigned p = 0; p < N; p++)
      sec_or[p] = lr[p] | rl[p];
  end

  always_ff @(posedge clk) begin
    if (h_en) begin
      for (int unsigned c = 0; c < W; c++)
        if (v2_en[c])
          case (h_gate)
            GATE_INIT0: cols[c] <= cols[c] & ~row_en;
            GATE_INIT1: cols[c] <= cols[c] | row_en;
            default:    cols[c] <= cols[c] & ~(sec_or[c / C] & row_en);
          endcase
    end else if (v_en) begin
      for (int unsigned p = 0; p < N; p++)
        case (v_gate)
          GATE_INIT0: cols[p*C + 32'(v_index)][v_out_row] <= 1'b0;
          GATE_INIT1: cols[p*C + 32'(v_index)][v_out_row] <= 1'b1;
          GATE_NOT:   cols[p*C + 32'(v_index)][v_out_row] <= cols[p*C + 32'(v_index)][v_out_row]
                                                             & ~cols[p*C + 32'(v_index)][v_in_row];
          default: ;
        endcase
    end else if (wr_en) begin
      for (int unsigned p = 0; p < N; p++)
        cols[p*C + 32'(wr_index)] <= (cols[p*C + 32'(wr_index)] & ~wr_rows)
                                     | (wr_data[p] ? wr_rows : '0);
    end
  end

  always_comb begin
    for (int unsigned p = 0; p < N; p++)
      rd_data[p] = |(cols[p*C + 32'(rd_index)] & rd_rows);
  end

endmodule
