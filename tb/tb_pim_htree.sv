// tb_pim_htree: for a 16-crossbar tree (two levels of groups of four), drives one
// word from one crossbar per isolated group at every isolation level and checks that
// each crossbar sees exactly the word of its own group, and that the root carries
// the OR of all drivers.
module tb_pim_htree;
  localparam int L = 2, N = 32, NUM = 16;
  logic [3:0] level;
  logic [NUM-1:0][N-1:0] leaf_out, leaf_in;
  logic [N-1:0] root, eroot;
  logic [N-1:0] grp [NUM];
  int checks = 0, failures = 0;

  pim_htree #(.LEVELS(L), .N(N)) dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int t = 0; t < 300; t++) begin
      int gsz, lvl;
      lvl = t % (L + 1); level = 4'(lvl); gsz = 1 << (2 * lvl);
      leaf_out = '0;
      for (int g = 0; g < NUM / gsz; g++) begin
        int src; src = g * gsz + $urandom_range(0, gsz - 1);
        grp[g] = $urandom;
        leaf_out[src] = grp[g];
      end
      eroot = '0;
      for (int x = 0; x < NUM; x++) eroot |= leaf_out[x];
      #1;
      for (int x = 0; x < NUM; x++) begin
        checks++;
        if (leaf_in[x] !== grp[x / gsz]) begin
          failures++; $display("level %0d xb %0d got %h want %h", lvl, x, leaf_in[x], grp[x / gsz]);
        end
      end
      checks++; if (root !== eroot) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
