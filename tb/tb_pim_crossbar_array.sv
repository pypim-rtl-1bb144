// tb_pim_crossbar_array: a 16 x 32 array with 4 partitions of 8 columns. Random
// strided writes, reads, horizontal stateful gates with random partition-transistor
// settings and random input/output bitlines, and vertical gates are applied to the
// array and to a reference cell matrix in the testbench. The reference evaluates
// each gate row by row: it finds every section by walking the conducting
// transistors, ORs the input cells of the section and applies INIT/NOT/NOR (MAGIC:
// out &= ~inputs) to the output cells of the enabled rows.
module tb_pim_crossbar_array;
  import pim_pkg::*;
  localparam int H = 16, W = 32, N = 4, C = W / N;
  logic clk = 0;
  logic h_en = 0, v_en = 0, wr_en = 0;
  gate_e h_gate, v_gate;
  logic [W-1:0] v1_en, v2_en;
  logic [N-2:0] tsel;
  logic [H-1:0] row_en, wr_rows, rd_rows;
  logic [ROW_W-1:0] v_in_row, v_out_row;
  logic [IDX_W-1:0] v_index, wr_index, rd_index;
  logic [N-1:0] wr_data, rd_data;
  logic refm [H][W];
  int checks = 0, failures = 0;

  pim_crossbar_array #(.H(H), .W(W), .N(N)) dut (.*);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic idle(); h_en = 0; v_en = 0; wr_en = 0; endtask

  task automatic do_write(logic [H-1:0] rows, int idx, logic [N-1:0] d);
    idle(); wr_en = 1; wr_rows = rows; wr_index = 5'(idx); wr_data = d;
    @(negedge clk); idle();
    for (int r = 0; r < H; r++) if (rows[r]) for (int p = 0; p < N; p++) refm[r][p*C+idx] = d[p];
  endtask

  task automatic check_all();
    for (int r = 0; r < H; r++) for (int i = 0; i < C; i++) begin
      logic [N-1:0] e;
      rd_rows = '0; rd_rows[r] = 1'b1; rd_index = 5'(i); #1;
      for (int p = 0; p < N; p++) e[p] = refm[r][p*C+i];
      checks++;
      if (rd_data !== e) begin failures++; $display("row %0d idx %0d got %b want %b", r, i, rd_data, e); end
    end
    @(negedge clk);
  endtask

  task automatic do_hlogic();
    logic nxt [H][W];
    int lo, hi;
    logic any;
    h_gate = gate_e'($urandom_range(0, 3));
    tsel = (N-1)'($urandom);
    v1_en = '0; v2_en = '0;
    for (int k = 0; k < 3; k++) v1_en[$urandom_range(0, W-1)] = 1'b1;
    for (int k = 0; k < 2; k++) v2_en[$urandom_range(0, W-1)] = 1'b1;
    v1_en &= ~v2_en;
    row_en = H'($urandom);
    nxt = refm;
    for (int r = 0; r < H; r++) if (row_en[r]) for (int c = 0; c < W; c++) if (v2_en[c]) begin
      lo = c / C; hi = c / C;
      while (lo > 0 && tsel[lo-1]) lo--;
      while (hi < N-1 && tsel[hi]) hi++;
      any = 1'b0;
      for (int cc = lo*C; cc < (hi+1)*C; cc++) if (v1_en[cc]) any |= refm[r][cc];
      case (h_gate)
        GATE_INIT0: nxt[r][c] = 1'b0;
        GATE_INIT1: nxt[r][c] = 1'b1;
        default:    nxt[r][c] = refm[r][c] & ~any;
      endcase
    end
    h_en = 1; @(negedge clk); idle();
    refm = nxt;
  endtask

  task automatic do_vlogic();
    int ri, ro, ix;
    v_gate = gate_e'($urandom_range(0, 3));
    ri = $urandom_range(0, H-1); ro = $urandom_range(0, H-1); ix = $urandom_range(0, C-1);
    v_in_row = 10'(ri); v_out_row = 10'(ro); v_index = 5'(ix);
    v_en = 1; @(negedge clk); idle();
    for (int p = 0; p < N; p++)
      case (v_gate)
        GATE_INIT0: refm[ro][p*C+ix] = 1'b0;
        GATE_INIT1: refm[ro][p*C+ix] = 1'b1;
        GATE_NOT:   refm[ro][p*C+ix] = refm[ro][p*C+ix] & ~refm[ri][p*C+ix];
        default: ;
      endcase
  endtask

  initial begin
    {v1_en, v2_en, tsel, row_en, wr_rows, rd_rows, wr_data} = '0;
    {v_in_row, v_out_row, v_index, wr_index, rd_index} = '0;
    h_gate = GATE_NOR; v_gate = GATE_NOT;
    @(negedge clk);
    for (int r = 0; r < H; r++) for (int i = 0; i < C; i++) begin
      logic [H-1:0] one; one = '0; one[r] = 1'b1;
      do_write(one, i, N'($urandom));
    end
    check_all();
    for (int t = 0; t < 300; t++) begin
      case ($urandom_range(0, 3))
        0: do_write(H'($urandom), $urandom_range(0, C-1), N'($urandom));
        1, 2: do_hlogic();
        default: do_vlogic();
      endcase
      if (t % 10 == 9) check_all();
    end
    // NOR in one partition and across a two-partition section (serial-style gate)
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
