// tb_pim_row_mask: loads random row ranges (h = 1024) and compares the expanded
// row-enable vector with a reference built by stepping from start to stop.
module tb_pim_row_mask;
  import pim_pkg::*;
  localparam int H = 1024;
  logic clk = 0, rst_n = 0, load = 0;
  logic [ROW_W-1:0] start, stop, step;
  logic [H-1:0] row_en, expect_en;
  int checks = 0, failures = 0;

  pim_row_mask #(.H(H)) dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    start = 0; stop = 0; step = 0;
    #12 rst_n = 1; @(negedge clk);
    checks++; if (row_en !== '1) failures++;          // reset: all rows
    for (int t = 0; t < 200; t++) begin
      start = 10'($urandom_range(0, 1023));
      stop  = 10'($urandom_range(int'(start), 1023));
      step  = (t % 4 == 0) ? 10'd1 : 10'($urandom_range(0, 300));
      if (t == 7) begin start = 1022; stop = 1022; step = 1; end   // single row h-2
      load = 1; @(negedge clk); load = 0;
      expect_en = '0;
      for (int r = int'(start); r <= int'(stop); r += (step == 0 ? 1 : int'(step))) expect_en[r] = 1'b1;
      checks++;
      if (row_en !== expect_en) begin failures++; $display("mismatch %0d:%0d:%0d", start, stop, step); end
      // stored values hold while load is low
      start = 0; stop = 1023; step = 1; @(negedge clk);
      checks++; if (row_en !== expect_en) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
