// pim_col_decoder: the half-gate column decoder of one partition.
//
// Each partition has one column decoder made of two input decoders and one output
// decoder over its w/N bitlines. The 3-bit per-partition opcode enables them: bit 2
// the InA input decoder, bit 1 the InB input decoder, bit 0 the output decoder. An
// enabled input decoder marks bitline InA (or InB) to receive V1; the enabled output
// decoder marks bitline Out to receive V2. A partition may thus apply only the input
// half or only the output half of a gate and rely on another partition of the same
// section for the other half. The intra-partition indices InA, InB, Out are the same
// in every partition (they are broadcast once per operation).
//
// Outputs are one-hot (or two-hot for two distinct inputs) bitline selects; the
// voltage levels themselves belong to the analog drivers and are not modelled.
// Purely combinational.
module pim_col_decoder
  import pim_pkg::*;
#(
  parameter int unsigned COLS = 32   // w/N bitlines per partition
) (
  input  logic [2:0]       opc,
  input  logic [IDX_W-1:0] in_a,
  input  logic [IDX_W-1:0] in_b,
  input  logic [IDX_W-1:0] out,
  output logic [COLS-1:0]  v1_en,   // bitlines driven as gate inputs
  output logic [COLS-1:0]  v2_en    // bitlines driven as gate outputs
);

  always_comb begin
    for (int unsigned c = 0; c < COLS; c++) begin
      v1_en[c] = (opc[2] && 32'(in_a) == c) || (opc[1] && 32'(in_b) == c);
      v2_en[c] =  opc[0] && 32'(out) == c;
    end
  end

endmodule
