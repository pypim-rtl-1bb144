// tb_pim_col_decoder: drives every opcode with random intra-partition indices and
// checks which bitlines receive input (V1) and output (V2) voltages.
module tb_pim_col_decoder;
  import pim_pkg::*;
  localparam int C = 32;
  logic [2:0] opc;
  logic [IDX_W-1:0] in_a, in_b, out;
  logic [C-1:0] v1_en, v2_en, e1, e2;
  int checks = 0, failures = 0;

  pim_col_decoder #(.COLS(C)) dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int t = 0; t < 800; t++) begin
      opc = 3'(t); in_a = 5'($urandom); in_b = 5'($urandom); out = 5'($urandom);
      #1;
      e1 = '0; e2 = '0;
      if (opc[2]) e1[in_a] = 1'b1;
      if (opc[1]) e1[in_b] = 1'b1;
      if (opc[0]) e2[out]  = 1'b1;
      checks++;
      if (v1_en !== e1 || v2_en !== e2) begin
        failures++; $display("opc=%b a=%0d b=%0d o=%0d v1=%h v2=%h", opc, in_a, in_b, out, v1_en, v2_en);
      end
    end
    // Table III example "(InA, ?) -> Out" = 101
    opc = 3'b101; in_a = 0; in_b = 1; out = 3; #1;
    checks++; if (v1_en !== 32'h1 || v2_en !== 32'h8) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
