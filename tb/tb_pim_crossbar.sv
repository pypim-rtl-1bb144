// tb_pim_crossbar: one 16 x 32 crossbar tile with 4 partitions (8 columns each),
// driven with decoded broadcast operations. It checks, through the H-tree port:
// strided write and read, a row mask with step 2, a partition-parallel NOR, the
// semi-parallel two-gate example (inputs in partitions 0/2, outputs in 1/3), a
// serial gate across all partitions, a vertical NOT between rows, that an inactive
// crossbar ignores writes and does not drive reads, and both ends of a move.
module tb_pim_crossbar;
  import pim_pkg::*;
  localparam int H = 16, W = 32, N = 4;
  logic clk = 0, rst_n = 0;
  logic [XB_W-1:0] xb_id = 16'd5;
  pim_bcast_t bc;
  logic [N-1:0] tree_out, tree_in;
  logic active;
  int checks = 0, failures = 0;

  pim_crossbar #(.H(H), .W(W), .N(N)) dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic issue(pim_bcast_t b); bc = b; @(negedge clk); bc = '0; endtask
  task automatic mask_xb(int s, int e, int st);
    pim_bcast_t b = '0; b.kind = K_MASK_XB; b.xb_start = 16'(s); b.xb_stop = 16'(e); b.xb_step = 16'(st); issue(b);
  endtask
  task automatic mask_row(int s, int e, int st);
    pim_bcast_t b = '0; b.kind = K_MASK_ROW; b.row_start = 10'(s); b.row_stop = 10'(e); b.row_step = 10'(st); issue(b);
  endtask
  task automatic write(int idx, logic [N-1:0] d);
    pim_bcast_t b = '0; b.kind = K_WRITE; b.index = 5'(idx); b.imm = 32'(d); issue(b);
  endtask
  task automatic hlogic(gate_e g, int ia, int pa, int ib, int pb, int o, int po, int pe, int ps);
    pim_bcast_t b = '0; b.kind = K_LOGIC_H;
    b.hl = '{gate: g, in_a: 5'(ia), p_a: 5'(pa), in_b: 5'(ib), p_b: 5'(pb), out: 5'(o),
             p_out: 5'(po), p_end: 5'(pe), p_step: 5'(ps)};
    issue(b);
  endtask
  task automatic vlogic(gate_e g, int ri, int ro, int idx);
    pim_bcast_t b = '0; b.kind = K_LOGIC_V; b.vgate = g; b.row_a = 10'(ri); b.row_b = 10'(ro); b.index = 5'(idx); issue(b);
  endtask
  task automatic expect_read(int row, int idx, logic [N-1:0] e, string what);
    pim_bcast_t b = '0;
    mask_row(row, row, 1);
    b.kind = K_READ; b.index = 5'(idx); bc = b; #1;
    checks++;
    if (tree_out !== e) begin failures++; $display("%s: row %0d idx %0d got %b want %b", what, row, idx, tree_out, e); end
    @(negedge clk); bc = '0;
  endtask

  logic [N-1:0] a [H], bb [H];

  initial begin
    bc = '0; tree_in = '0;
    #12 rst_n = 1; @(negedge clk);
    checks++; if (active !== 1'b1) failures++;
    // per-row data in indices 0 and 1
    for (int r = 0; r < H; r++) begin
      a[r] = N'($urandom); bb[r] = N'($urandom);
      mask_row(r, r, 1); write(0, a[r]); write(1, bb[r]);
    end
    for (int r = 0; r < H; r++) begin expect_read(r, 0, a[r], "write"); expect_read(r, 1, bb[r], "write"); end
    // row mask with step 2: index 7 = 1111 in even rows, 0000 before
    mask_row(0, H-1, 1); write(7, '0);
    mask_row(0, H-2, 2); write(7, '1);
    for (int r = 0; r < H; r++) expect_read(r, 7, (r % 2 == 0) ? '1 : '0, "row mask");
    // parallel NOR: index 2 of every partition = NOR(index 0, index 1)
    mask_row(0, H-1, 1);
    hlogic(GATE_INIT1, 0, 0, 0, 0, 2, 0, N-1, 1);
    hlogic(GATE_NOR,   0, 0, 1, 0, 2, 0, N-1, 1);
    for (int r = 0; r < H; r++) expect_read(r, 2, ~(a[r] | bb[r]), "parallel NOR");
    // semi-parallel: (InA,InB) in partitions 0 and 2, outputs in 1 and 3 at index 3
    mask_row(0, H-1, 1);
    hlogic(GATE_INIT1, 0, 0, 0, 0, 3, 0, N-1, 1);
    hlogic(GATE_NOR,   0, 0, 1, 0, 3, 1, 3, 2);
    for (int r = 0; r < H; r++) begin
      logic [N-1:0] e;
      e[0] = 1'b1; e[2] = 1'b1;
      e[1] = ~(a[r][0] | bb[r][0]); e[3] = ~(a[r][2] | bb[r][2]);
      expect_read(r, 3, e, "semi-parallel NOR");
    end
    // serial NOT from partition 0 (index 0) to partition 3 (index 4)
    mask_row(0, H-1, 1);
    hlogic(GATE_INIT1, 0, 0, 0, 0, 4, 0, N-1, 1);
    hlogic(GATE_NOT,   0, 0, 0, 0, 4, 3, 3, 0);
    for (int r = 0; r < H; r++) expect_read(r, 4, {~a[r][0], 3'b111}, "serial NOT");
    // vertical NOT: row 9 index 0 <= NOT row 2 index 0
    vlogic(GATE_INIT1, 0, 9, 0);
    vlogic(GATE_NOT, 2, 9, 0);
    expect_read(9, 0, ~a[2], "vertical NOT");
    // inactive crossbar: write is ignored, read drives nothing
    mask_xb(0, 4, 1);
    checks++; if (active !== 1'b0) failures++;
    mask_row(0, H-1, 1); write(0, '1);
    expect_read(3, 0, '0, "inactive read");
    mask_xb(0, 15, 5);
    expect_read(3, 0, a[3], "inactive write");
    // move source: crossbar 5 is active, drives row 4 index 1
    begin
      pim_bcast_t b = '0;
      b.kind = K_MOVE; b.row_a = 10'd4; b.index = 5'd1; b.row_b = 10'd6; b.index_b = 5'd5;
      b.xb_start = 16'd100; b.xb_stop = 16'd100; b.xb_step = 16'd1;   // destination elsewhere
      bc = b; #1; checks++; if (tree_out !== bb[4]) failures++;
      @(negedge clk); bc = '0;
      // move destination: range includes crossbar 5; word arrives on the H-tree
      mask_xb(9, 9, 1);
      b.xb_start = 16'd1; b.xb_stop = 16'd9; b.xb_step = 16'd4;
      tree_in = 4'b0110; bc = b; #1; checks++; if (tree_out !== '0) failures++;
      @(negedge clk); bc = '0; tree_in = '0;
      mask_xb(5, 5, 1);
      expect_read(6, 5, 4'b0110, "move destination");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
