// tb_pim_top: end-to-end test of the PIM memory with 16 crossbars (two H-tree
// levels) of 16 x 128 cells and 8 partitions, driven only through the 64-bit
// micro-operation interface, the way a host driver would use it.
//
//  1. strided writes fill two 8-bit vectors a (index 0) and b (index 1), one element
//     per row, in every crossbar;
//  2. with crossbar 15 masked off, a ripple-carry adder built from MAGIC NOR gates
//     (nine NORs per bit, carries handed from partition j to j+1 by cross-partition
//     NOT gates) computes a + b into index 3 of all rows of crossbars 0..14, with the
//     work registers initialised by partition-parallel INIT1 operations;
//  3. a semi-parallel NOT (inputs in even partitions, outputs in odd ones) and a
//     vertical NOT between rows;
//  4. a multi-source inter-crossbar move (crossbars 1,5,9,13 -> 2,6,10,14, isolated
//     in groups of four) and a single-source move across the root of the H-tree;
//  5. reads of every result, compared with values computed here.
// It counts each mechanism (parallel, serial, semi-parallel gates, vertical gates,
// both move kinds, masked-off crossbar, back-to-back issue, read responses) and
// counts a failure for any that never happened.
module tb_pim_top;
  import pim_pkg::*;
  localparam int L = 2, NXB = 16, H = 16, W = 128, N = 8;
  logic clk = 0, rst_n = 0;
  logic op_valid = 0, op_ready;
  logic [OP_W-1:0] op;
  logic resp_valid;
  logic [N-1:0] resp_data;
  int checks = 0, failures = 0;

  pim_top #(.XB_LEVELS(L), .H(H), .W(W), .N(N), .FIFO_DEPTH(8)) dut (.*);
  always #5 clk = ~clk;
  initial begin #20ms; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // ---------------- host-side encoding ----------------
  task automatic send(logic [63:0] o);
    op = o; op_valid = 1;
    @(posedge clk); while (!op_ready) @(posedge clk);
    #1 op_valid = 0;
  endtask
  task automatic mask_xb(int s, int e, int st); send({3'b000, 16'(s), 16'(e), 16'(st), 13'd0}); endtask
  task automatic mask_row(int s, int e, int st); send({3'b001, 10'(s), 10'(e), 10'(st), 31'd0}); endtask
  task automatic write(int i, logic [31:0] d); send({3'b011, 5'(i), d, 24'd0}); endtask
  task automatic hl(gate_e g, int ia, int pa, int ib, int pb, int o, int po, int pe, int ps);
    send({3'b100, g, 5'(ia), 5'(pa), 5'(ib), 5'(pb), 5'(o), 5'(po), 5'(pe), 5'(ps), 19'd0});
  endtask
  task automatic vl(gate_e g, int ri, int ro, int i); send({3'b101, g, 10'(ri), 10'(ro), 5'(i), 34'd0}); endtask
  task automatic mv(int sr, int si, int dr, int di, int da); send({2'b11, 10'(sr), 5'(si), 10'(dr), 5'(di), 16'(da), 16'd0}); endtask
  task automatic read(int xb, int row, int i, output logic [N-1:0] d);
    mask_xb(xb, xb, 1); mask_row(row, row, 1); send({3'b010, 5'(i), 56'd0});
    while (!resp_valid) @(posedge clk);
    d = resp_data;
    @(negedge clk);
  endtask
  // one gate per partition in every partition
  task automatic par(gate_e g, int ia, int ib, int o); hl(g, ia, 0, ib, 0, o, 0, N-1, 1); endtask
  // one NOR inside partition j
  task automatic nor_in(int j, int ia, int ib, int o);
    hl(GATE_NOR, ia, j, ib, j, o, j, j, 0);
  endtask

  // ---------------- mechanism counters ----------------
  int n_par = 0, n_ser = 0, n_semi = 0, n_vert = 0, n_mv_grp = 0, n_mv_root = 0;
  int n_skip = 0, n_b2b = 0, n_resp = 0;
  kind_e prev_kind = K_NOP;
  always @(posedge clk) if (rst_n) begin
    pim_bcast_t b;
    logic [N-2:0] ts;
    logic [N-1:0][2:0] oc;
    int nout;
    b  = dut.u_ctrl.bc;
    ts = dut.g_grp[0].g_xb[0].u_xb.tsel;
    oc = dut.g_grp[0].g_xb[0].u_xb.opc;
    nout = 0;
    for (int p = 0; p < N; p++) nout += int'(oc[p][0]);
    if (b.kind == K_LOGIC_H && nout > 1 && ts == '0) n_par++;
    if (b.kind == K_LOGIC_H && b.hl.gate inside {GATE_NOT, GATE_NOR}) begin
      if (nout == 1 && b.hl.p_a != b.hl.p_out) n_ser++;
      else if (nout > 1 && ts != '0) n_semi++;
    end
    if (b.kind == K_LOGIC_V) n_vert++;
    if (b.kind == K_MOVE && dut.tree_level < 4'(L)) n_mv_grp++;
    if (b.kind == K_MOVE && dut.tree_level == 4'(L)) n_mv_root++;
    if (b.kind != K_NOP && b.kind != K_MASK_XB && b.kind != K_MASK_ROW && !dut.xb_active[15]) n_skip++;
    if (b.kind != K_NOP && prev_kind != K_NOP) n_b2b++;
    prev_kind = b.kind;
    if (resp_valid) n_resp++;
  end

  // ---------------- reference data ----------------
  logic [N-1:0] a [NXB][H], bv [NXB][H], s [NXB][H];

  task automatic expect_eq(logic [N-1:0] got, logic [N-1:0] want, string what, int x, int r);
    checks++;
    if (got !== want) begin failures++; $display("%s xb %0d row %0d: got %h want %h", what, x, r, got, want); end
  endtask

  initial begin
    logic [N-1:0] d, e;
    int t0;
    op = '0;
    #12 rst_n = 1;
    @(negedge clk);
    // 1. load a, b; index 3 = 8'h5a everywhere
    mask_xb(0, NXB-1, 1); mask_row(0, H-1, 1); write(3, 32'h5a);
    for (int x = 0; x < NXB; x++) begin
      mask_xb(x, x, 1);
      for (int r = 0; r < H; r++) begin
        a[x][r] = N'($urandom); bv[x][r] = N'($urandom);
        mask_row(r, r, 1); write(0, 32'(a[x][r])); write(1, 32'(bv[x][r]));
      end
    end
    // 2. ripple-carry addition in crossbars 0..14, all rows
    t0 = $time;
    mask_xb(0, NXB-2, 1); mask_row(0, H-1, 1);
    for (int i = 2; i <= 12; i++) par(GATE_INIT1, 0, 0, i);
    hl(GATE_INIT0, 0, 0, 0, 0, 2, 0, 0, 0);            // carry-in of bit 0 = 0
    for (int j = 0; j < N; j++) begin
      nor_in(j, 0, 1, 4);  nor_in(j, 0, 4, 5);  nor_in(j, 1, 4, 6);
      nor_in(j, 5, 6, 7);  nor_in(j, 7, 2, 8);  nor_in(j, 7, 8, 9);
      nor_in(j, 2, 8, 10); nor_in(j, 9, 10, 3); nor_in(j, 4, 8, 11);
      if (j < N - 1) begin
        hl(GATE_NOT, 11, j, 11, j, 12, j + 1, j + 1, 0);   // carry to partition j+1 (inverted)
        hl(GATE_NOT, 12, j + 1, 12, j + 1, 2, j + 1, j + 1, 0);
      end
    end
    // index 3 initialised to 1 by INIT1 above, so the sum NOR sees a fresh output
    // 3. semi-parallel NOT: index 13 of odd partition 2k+1 = NOT index 3 of partition 2k
    par(GATE_INIT1, 0, 0, 13);
    hl(GATE_NOT, 3, 0, 3, 0, 13, 1, N-1, 2);
    //    vertical: row 15 index 13 = NOT row 0 index 13
    vl(GATE_INIT1, 0, 15, 13);
    vl(GATE_NOT, 0, 15, 13);
    // 4. moves: crossbars 1,5,9,13 -> 2,6,10,14, row 2 index 3 -> row 5 index 15
    mask_xb(1, 13, 4);
    mv(2, 3, 5, 15, 2);
    //    single source: crossbar 0 row 4 index 3 -> crossbar 12 row 6 index 15
    mask_xb(0, 0, 1);
    mv(4, 3, 6, 15, 12);
    // 5. read back and compare
    for (int x = 0; x < NXB; x++) for (int r = 0; r < H; r++) begin
      s[x][r] = (x == NXB - 1) ? N'(8'h5a) : a[x][r] + bv[x][r];
      read(x, r, 3, d);
      expect_eq(d, s[x][r], "sum", x, r);
    end
    for (int x = 0; x < NXB - 1; x++) for (int r = 0; r < H; r++) begin
      e = '1;
      for (int k = 0; k < N / 2; k++) e[2*k+1] = ~s[x][r][2*k];
      if (r == 15) for (int k = 0; k < N / 2; k++) begin e[2*k] = 1'b0; e[2*k+1] = s[x][0][2*k]; end
      read(x, r, 13, d);
      expect_eq(d, e, "semi-parallel/vertical", x, r);
    end
    for (int k = 0; k < 4; k++) begin
      read(4*k + 2, 5, 15, d);
      expect_eq(d, s[4*k + 1][2], "group move", 4*k + 2, 5);
    end
    read(12, 6, 15, d);
    expect_eq(d, s[0][4], "root move", 12, 6);
    // mechanisms
    begin
      int cnt [9];
      string nm [9];
      cnt = '{n_par, n_ser, n_semi, n_vert, n_mv_grp, n_mv_root, n_skip, n_b2b, n_resp};
      nm  = '{"parallel gate", "serial gate", "semi-parallel gate", "vertical gate", "group move",
              "root move", "masked-off crossbar", "back-to-back issue", "read response"};
      for (int i = 0; i < 9; i++) begin
        $display("mechanism %-20s %0d", nm[i], cnt[i]);
        checks++; if (cnt[i] == 0) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
