// pim_halfgate_gen: expands the compact horizontal-logic operands into per-partition
// half-gate opcodes and partition-transistor selects.
//
// A horizontal logic operation names only the leftmost gate: the partitions p_a,
// p_b of its two inputs (p_a <= p_b) and p_out of its output, plus the partition
// p_end holding the output of the last gate and the period p_step. Gate j (j = 0..K,
// K = (p_end - p_out) / p_step) uses partitions p_a + j*p_step, p_b + j*p_step and
// p_out + j*p_step. Partition p gets the 3-bit opcode {InA, InB, Out}: bit 2 enables
// its InA input decoder, bit 1 its InB input decoder, bit 0 its output decoder
// (000 = no voltages, 001 = "? -> Out", 110 = "(InA, InB) -> ?", 111 = full gate).
//
// The transistor between partitions k and k+1 (tsel[k], 1 = conducting) is opened
// only where one gate's section ends and the next begins: when partition k holds the
// rightmost end of a gate or partition k+1 holds the leftmost end of a gate. The
// paper states this rule for p_a <= p_out, with the output as the right end and InA
// as the left end, and calls the mirrored case similar; this module uses
// min(p_a, p_out) as the left end and max(p_b, p_out) as the right end, which is the
// paper's rule whenever p_b <= p_out and its mirror otherwise.
//
// Gate type: NOT drives only InA, INIT0/INIT1 drive only the output, so the InB (and
// for INIT the InA) enables are cleared; the transistor selects are computed from the
// full pattern in every case. A p_step of 0, or p_end below p_out, means one gate.
// Purely combinational.
module pim_halfgate_gen
  import pim_pkg::*;
#(
  parameter int unsigned N = 32
) (
  input  hlogic_t          hl,
  output logic [N-1:0][2:0] opc,
  output logic [N-2:0]      tsel
);

  logic [PART_W:0] k_last;      // K, number of gates minus one
  logic [N-1:0]    hit_a, hit_b, hit_o, hit_l, hit_r;
  logic [PART_W-1:0] p_left, p_right;

  // partition p is base + j*step for some 0 <= j <= K
  function automatic logic on_pattern(input int unsigned p, input logic [PART_W-1:0] base,
                                      input logic [PART_W-1:0] step, input logic [PART_W:0] k);
    int unsigned d;
    if (p < 32'(base)) return 1'b0;
    d = p - 32'(base);
    if (step == '0) return d == 0;
    return (d % 32'(step) == 0) && (d / 32'(step) <= 32'(k));
  endfunction

  always_comb begin
    if (hl.p_step == '0 || hl.p_end < hl.p_out) k_last = '0;
    else k_last = (PART_W+1)'((hl.p_end - hl.p_out) / hl.p_step);
    p_left  = (hl.p_a < hl.p_out) ? hl.p_a : hl.p_out;
    p_right = (hl.p_b > hl.p_out) ? hl.p_b : hl.p_out;
    for (int unsigned p = 0; p < N; p++) begin
      hit_a[p] = on_pattern(p, hl.p_a,   hl.p_step, k_last);
      hit_b[p] = on_pattern(p, hl.p_b,   hl.p_step, k_last);
      hit_o[p] = on_pattern(p, hl.p_out, hl.p_step, k_last);
      hit_l[p] = on_pattern(p, p_left,   hl.p_step, k_last);
      hit_r[p] = on_pattern(p, p_right,  hl.p_step, k_last);
    end
    for (int unsigned p = 0; p < N; p++) begin
      opc[p][2] = hit_a[p] && (hl.gate == GATE_NOT || hl.gate == GATE_NOR);
      opc[p][1] = hit_b[p] && (hl.gate == GATE_NOR);
      opc[p][0] = hit_o[p];
    end
    for (int unsigned k = 0; k < N - 1; k++)
      tsel[k] = !(hit_r[k] || hit_l[k+1]);
  end

endmodule
