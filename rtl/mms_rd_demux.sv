// mms_rd_demux: the data demultiplexer behind the data memory. Each beat of
// segment data read from the DRAM is delivered, with its access descriptor,
// to the reassembly port the DMC names (sel: 0 = CPU port, 1 = OUT port).
// Data and descriptor go to both ports; only the selected port sees valid.
// Purely combinational. Its place in the data path is the paper's.
module mms_rd_demux
  import mms_pkg::*;
(
  input  logic          valid,
  input  logic          sel,
  output logic [1:0]    valid_p
);
  assign valid_p = {valid && sel, valid && !sel};
endmodule
