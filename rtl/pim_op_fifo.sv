// pim_op_fifo: first-word-fall-through FIFO that buffers micro-operations from the
// host until the controller broadcasts them.
//
// Interface: valid/ready on both sides. in_ready is high while the FIFO is not full;
// out_valid while it is not empty, with out_data showing the oldest entry. A push and
// a pop may happen in the same cycle. Depth must be a power of two.
module pim_op_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wr_ptr, rd_ptr;
  logic             push, pop;

  assign in_ready  = (wr_ptr - rd_ptr) != (AW+1)'(DEPTH);
  assign out_valid = wr_ptr != rd_ptr;
  assign out_data  = mem[rd_ptr[AW-1:0]];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (push) wr_ptr <= wr_ptr + 1'b1;
      if (pop)  rd_ptr <= rd_ptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr[AW-1:0]] <= in_data;
  end

endmodule
