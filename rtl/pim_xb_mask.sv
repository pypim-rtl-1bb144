// pim_xb_mask: the crossbar-activation bit of one crossbar.
//
// Every crossbar keeps a single volatile bit saying whether it takes part in the
// operations that follow. A crossbar-mask operation broadcasts a range pattern
// {start, start+step, ..., stop} over the 16-bit crossbar index; each crossbar
// compares its own index against it and stores the result (next clock edge).
// The stored bit then enables every non-mask operation in this crossbar.
//
// For an inter-array move the same range comparator tells the crossbar whether it
// is a destination: the controller broadcasts the destination range (the source
// range shifted by the move distance) and `is_dest` is high when this crossbar's
// index lies in it. That reuse of the comparator is this design's choice; the
// stored bit, its update by broadcast and its use as an enable follow the paper.
//
// Interface: `load` (one cycle) with start/stop/step updates `active` on the next
// edge. `dst_*` are combinational inputs, `is_dest` a combinational output.
// Reset: all crossbars active (reset value is this design's choice).
module pim_xb_mask
  import pim_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic [XB_W-1:0] xb_id,
  input  logic            load,
  input  logic [XB_W-1:0] start,
  input  logic [XB_W-1:0] stop,
  input  logic [XB_W-1:0] step,
  input  logic [XB_W-1:0] dst_start,
  input  logic [XB_W-1:0] dst_stop,
  input  logic [XB_W-1:0] dst_step,
  output logic            active,
  output logic            is_dest
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    active <= 1'b1;
    else if (load) active <= in_range(xb_id, start, stop, step);
  end

  assign is_dest = in_range(xb_id, dst_start, dst_stop, dst_step);

endmodule
