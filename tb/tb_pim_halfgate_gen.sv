// tb_pim_halfgate_gen: checks the per-partition half-gate opcodes and transistor
// selects. First the worked example of two concurrent gates over four partitions
// (inputs in partitions 0 and 2, outputs in 1 and 3: opcodes 110/001/110/001,
// transistors 1/0/1), then the serial and parallel cases, then random operations
// against a reference that lists every gate and its section.
module tb_pim_halfgate_gen;
  import pim_pkg::*;
  localparam int N = 32;
  hlogic_t hl;
  logic [N-1:0][2:0] opc, eopc;
  logic [N-2:0] tsel, etsel;
  int checks = 0, failures = 0;

  pim_halfgate_gen #(.N(N)) dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic reference();
    int k, lo, hi, a, b, o;
    logic [N-1:0] lend, rend;
    eopc = '0; lend = '0; rend = '0;
    k = (hl.p_step == 0 || hl.p_end < hl.p_out) ? 0 : (int'(hl.p_end) - int'(hl.p_out)) / int'(hl.p_step);
    for (int j = 0; j <= k; j++) begin
      a = hl.p_a + j * hl.p_step; b = hl.p_b + j * hl.p_step; o = hl.p_out + j * hl.p_step;
      lo = (a < o) ? a : o; hi = (b > o) ? b : o;
      if (a < N && (hl.gate == GATE_NOT || hl.gate == GATE_NOR)) eopc[a][2] = 1'b1;
      if (b < N && hl.gate == GATE_NOR) eopc[b][1] = 1'b1;
      if (o < N) eopc[o][0] = 1'b1;
      if (lo < N) lend[lo] = 1'b1;
      if (hi < N) rend[hi] = 1'b1;
    end
    for (int t = 0; t < N - 1; t++) etsel[t] = !(rend[t] || lend[t+1]);
  endtask

  task automatic check(string what);
    #1; reference();
    checks++;
    if (opc !== eopc || tsel !== etsel) begin
      failures++; $display("%s: mismatch pa=%0d pb=%0d po=%0d pe=%0d ps=%0d", what,
                           hl.p_a, hl.p_b, hl.p_out, hl.p_end, hl.p_step);
    end
  endtask

  initial begin
    hl = '0;
    // worked example (first four partitions)
    hl.gate = GATE_NOR; hl.in_a = 0; hl.in_b = 1; hl.out = 3;
    hl.p_a = 0; hl.p_b = 0; hl.p_out = 1; hl.p_end = 3; hl.p_step = 2;
    #1;
    checks++;
    if (opc[0] !== 3'b110 || opc[1] !== 3'b001 || opc[2] !== 3'b110 || opc[3] !== 3'b001 ||
        tsel[0] !== 1'b1 || tsel[1] !== 1'b0 || tsel[2] !== 1'b1) begin
      failures++; $display("worked example failed");
    end
    check("example");
    // serial: one gate from partition 0 to partition 31, all transistors conducting
    hl.p_a = 0; hl.p_b = 1; hl.p_out = 31; hl.p_end = 31; hl.p_step = 0; #1;
    checks++; if (tsel !== '1 || opc[0] !== 3'b100 || opc[1] !== 3'b010 || opc[31] !== 3'b001) failures++;
    // parallel: one gate in each partition, all transistors off
    hl.p_a = 0; hl.p_b = 0; hl.p_out = 0; hl.p_end = 31; hl.p_step = 1; #1;
    checks++; if (tsel !== '0 || opc !== {N{3'b111}}) failures++;
    // random
    for (int t = 0; t < 3000; t++) begin
      hl.gate   = gate_e'($urandom_range(0, 3));
      hl.p_a    = 5'($urandom_range(0, 15));
      hl.p_b    = hl.p_a + 5'($urandom_range(0, 3));
      hl.p_out  = 5'($urandom_range(0, 20));
      hl.p_step = 5'($urandom_range(0, 12));
      hl.p_end  = 5'($urandom_range(int'(hl.p_out), 31));
      check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
