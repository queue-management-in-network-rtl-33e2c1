// mms_wr_mux: the data multiplexer in front of the data memory. The DMC
// names the segmentation port (sel: 0 = IN, 1 = CPU) whose buffer supplies
// the write data of the current access; this block forwards that buffer's
// head word to the DRAM write path and steers the DMC's pop to that buffer
// only. Purely combinational. Its place in the data path is the paper's; the
// pop steering is this design's.
module mms_wr_mux
  import mms_pkg::*;
(
  input  logic          sel,
  input  logic          pop,
  output logic [1:0]    pop_p,
  input  logic [DW-1:0] data_p [2],
  output logic [DW-1:0] data
);
  assign data  = data_p[sel];
  assign pop_p = {pop && sel, pop && !sel};
endmodule
