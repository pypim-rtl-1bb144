// tb_pim_xb_mask: loads random crossbar ranges into one crossbar-mask unit for many
// crossbar indices and compares the stored activation bit, and the move-destination
// match, with a reference that enumerates the range element by element.
module tb_pim_xb_mask;
  import pim_pkg::*;
  logic clk = 0, rst_n = 0, load = 0;
  logic [XB_W-1:0] xb_id, start, stop, step, dst_start, dst_stop, dst_step;
  logic active, is_dest, prev;
  int checks = 0, failures = 0;

  pim_xb_mask dut (.*);
  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic logic ref_in(input int x, input int s, input int e, input int st);
    if (st == 0) st = 1;
    for (int v = s; v <= e; v += st) if (v == x) return 1'b1;
    return 1'b0;
  endfunction

  initial begin
    {xb_id, start, stop, step, dst_start, dst_stop, dst_step} = '0;
    #12 rst_n = 1;
    @(negedge clk);
    if (active !== 1'b1) failures++; checks++;   // reset: active
    for (int t = 0; t < 400; t++) begin
      start = 16'($urandom_range(0, 40)); stop = start + 16'($urandom_range(0, 60));
      step  = 16'($urandom_range(0, 9));
      xb_id = 16'($urandom_range(0, 110));
      dst_start = 16'($urandom_range(0, 40)); dst_stop = dst_start + 16'($urandom_range(0, 60));
      dst_step = 16'(1 << (2 * $urandom_range(0, 2)));
      load = 1; @(negedge clk); load = 0;
      checks++; if (active !== ref_in(xb_id, start, stop, step)) begin failures++;
        $display("active mismatch id=%0d %0d:%0d:%0d", xb_id, start, stop, step); end
      checks++; if (is_dest !== ref_in(xb_id, dst_start, dst_stop, dst_step)) failures++;
      // without load the bit holds
      prev = active; start = ~start; stop = ~stop; @(negedge clk);
      checks++; if (active !== prev) failures++;
    end
    // explicit hold check: load a range excluding this crossbar, then change inputs
    xb_id = 5; start = 0; stop = 15; step = 5; load = 1; @(negedge clk); load = 0;
    checks++; if (active !== 1'b1) failures++;
    start = 6; stop = 6; @(negedge clk);
    checks++; if (active !== 1'b1) failures++;
    load = 1; @(negedge clk); load = 0;
    checks++; if (active !== 1'b0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
