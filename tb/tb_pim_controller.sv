// tb_pim_controller: sends encoded 64-bit micro-operations back to back to a
// controller for 16 crossbars and checks the decoded broadcast one per cycle, two
// cycles after each operation is accepted: the fields of every operation type, the
// destination range and H-tree level of a multi-source move (step 4, level 1) and of
// a single-source move (root level), and the read response latency and data, with
// the H-tree root modelled by the testbench.
module tb_pim_controller;
  import pim_pkg::*;
  localparam int N = 32, L = 2;
  logic clk = 0, rst_n = 0;
  logic op_valid = 0, op_ready;
  logic [OP_W-1:0] op;
  logic resp_valid;
  logic [N-1:0] resp_data, tree_root;
  pim_bcast_t bc;
  logic [3:0] tree_level;
  int checks = 0, failures = 0, cyc = 0;

  pim_controller #(.N(N), .LEVELS(L), .FIFO_DEPTH(16)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // the "crossbar" answering reads: data depends on the broadcast index
  assign tree_root = (bc.kind == K_READ) ? {27'h5a5a5a5, bc.index} : '0;

  // expected broadcast per accepted operation
  typedef struct { kind_e kind; logic [63:0] f0, f1, f2, f3; } exp_t;
  exp_t q[$];
  int accept_cyc[$];

  function automatic logic [63:0] e_mask_xb(int s, int e, int st); return {3'b000, 16'(s), 16'(e), 16'(st), 13'd0}; endfunction
  function automatic logic [63:0] e_mask_row(int s, int e, int st); return {3'b001, 10'(s), 10'(e), 10'(st), 31'd0}; endfunction
  function automatic logic [63:0] e_read(int i); return {3'b010, 5'(i), 56'd0}; endfunction
  function automatic logic [63:0] e_write(int i, logic [31:0] d); return {3'b011, 5'(i), d, 24'd0}; endfunction
  function automatic logic [63:0] e_hl(int g, int ia, int pa, int ib, int pb, int o, int po, int pe, int ps);
    return {3'b100, 2'(g), 5'(ia), 5'(pa), 5'(ib), 5'(pb), 5'(o), 5'(po), 5'(pe), 5'(ps), 19'd0};
  endfunction
  function automatic logic [63:0] e_vl(int g, int ri, int ro, int i); return {3'b101, 2'(g), 10'(ri), 10'(ro), 5'(i), 34'd0}; endfunction
  function automatic logic [63:0] e_mv(int sr, int si, int dr, int di, int da); return {2'b11, 10'(sr), 5'(si), 10'(dr), 5'(di), 16'(da), 16'd0}; endfunction

  // checker: compare bc each cycle against the queue, two cycles after acceptance
  int nbc = 0, nresp = 0, f0 = 0, read_cyc[$];
  always @(negedge clk) if (rst_n) begin
    if (bc.kind != K_NOP) begin
      exp_t e; int ac;
      nbc++;
      e = q.pop_front(); ac = accept_cyc.pop_front();
      checks++;
      if (bc.kind != e.kind || cyc - ac != 1) begin failures++; $display("kind %s exp %s lat %0d", bc.kind.name(), e.kind.name(), cyc - ac); end
      checks++;
      f0 = failures;
      case (bc.kind)
        K_MASK_XB:  if ({bc.xb_start, bc.xb_stop, bc.xb_step} != 48'(e.f0)) failures++;
        K_MASK_ROW: if ({bc.row_start, bc.row_stop, bc.row_step} != 30'(e.f0)) failures++;
        K_WRITE:    if (bc.index != 5'(e.f0) || bc.imm != 32'(e.f1)) failures++;
        K_READ:     begin if (bc.index != 5'(e.f0)) failures++; read_cyc.push_back(cyc); end
        K_LOGIC_H:  if (bc.hl != hlogic_t'(e.f0[41:0])) failures++;
        K_LOGIC_V:  if (bc.vgate != gate_e'(e.f0[1:0]) || bc.row_a != 10'(e.f1) || bc.row_b != 10'(e.f2) || bc.index != 5'(e.f3)) failures++;
        K_MOVE:     if ({bc.xb_start, bc.xb_stop, bc.xb_step} != 48'(e.f0) || tree_level != 4'(e.f1) ||
                        {bc.row_a, bc.index, bc.row_b, bc.index_b} != 30'(e.f2)) begin
                      failures++; $display("move %h %h %0d", {bc.xb_start, bc.xb_stop, bc.xb_step}, e.f0, tree_level); end
        default: failures++;
      endcase
      if (failures != f0) $display("field mismatch in %s", bc.kind.name());
    end
    if (resp_valid) begin
      nresp++;
      checks++;
      if (resp_data !== {27'h5a5a5a5, 5'(nresp)} || cyc - read_cyc.pop_front() != 1) begin
        failures++; $display("resp %h", resp_data); end
    end
  end

  task automatic send(logic [63:0] o, exp_t e);
    op = o; op_valid = 1;
    @(posedge clk); while (!op_ready) @(posedge clk);
    q.push_back(e); accept_cyc.push_back(cyc + 1);
    #1 op_valid = 0;
  endtask

  initial begin
    op = '0;
    #12 rst_n = 1;
    @(negedge clk);
    fork
      begin
        int t0;
        t0 = cyc;
        send(e_mask_xb(1, 13, 4), '{K_MASK_XB, {16'd1, 16'd13, 16'd4}, 0, 0, 0});
        send(e_mask_row(3, 3, 1), '{K_MASK_ROW, {10'd3, 10'd3, 10'd1}, 0, 0, 0});
        send(e_write(7, 32'hdeadbeef), '{K_WRITE, 7, 32'hdeadbeef, 0, 0});
        for (int i = 1; i <= 5; i++) send(e_read(i), '{K_READ, i, 0, 0, 0});
        send(e_hl(3, 1, 2, 3, 4, 5, 6, 7, 8), '{K_LOGIC_H, {2'd3, 5'd1, 5'd2, 5'd3, 5'd4, 5'd5, 5'd6, 5'd7, 5'd8}, 0, 0, 0});
        send(e_vl(2, 17, 900, 9), '{K_LOGIC_V, 2, 17, 900, 9});
        // multi-source move: sources 1,5,9,13 -> 2,6,10,14 (distance 1), level log4(4) = 1
        send(e_mv(11, 3, 12, 4, 2), '{K_MOVE, {16'd2, 16'd14, 16'd4}, 1, {10'd11, 5'd3, 10'd12, 5'd4}, 0});
        // single source 3 -> 12 through the root
        send(e_mask_xb(3, 3, 1), '{K_MASK_XB, {16'd3, 16'd3, 16'd1}, 0, 0, 0});
        send(e_mv(1, 2, 3, 4, 12), '{K_MOVE, {16'd12, 16'd12, 16'd1}, L, {10'd1, 5'd2, 10'd3, 5'd4}, 0});
        // 13 operations accepted back to back: one per cycle
        checks++; if (cyc - t0 != 13) begin failures++; $display("throughput: %0d cycles", cyc - t0); end
      end
    join
    repeat (5) @(negedge clk);
    checks++; if (nbc != 13 || nresp != 5 || q.size() != 0) begin failures++; $display("nbc=%0d nresp=%0d q=%0d", nbc, nresp, q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
