// mms_segmentation: one port of the segmentation block (ports 1 and 2 of the
// MMS). Packets arrive as a stream of DW-bit words, the first of which carries
// the flow number, the command opcode and, for move commands, the destination
// flow. The block cuts every packet into 64-byte segments (BEATS words), keeps
// their data in a data buffer and, once the last word of a segment is stored,
// pushes one segment command {op, flow, dst, len, eop} into the port's command
// FIFO. A short last segment is padded with zero words so that every segment
// occupies exactly BEATS buffer entries; len gives its true byte count.
//
// Interface: valid/ready on the packet input, first-word fall-through heads
// on the command FIFO (towards the internal scheduler) and on the data buffer
// (towards the DMC, which pops BEATS words per written segment).
// Timing: one word per clock; padding takes one clock per missing word, during
// which in_ready is low. The 64-byte segment size is the paper's; the word
// width, padding and buffer depth are this design's choices.
module mms_segmentation
  import mms_pkg::*;
#(
  parameter int DEPTH_SEGS = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // packet input
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [DW-1:0]     in_data,
  input  logic              in_eop,
  input  logic [4:0]        in_bytes,   // bytes valid in an eop word, 1..16
  input  logic [FLOW_W-1:0] in_flow,
  input  op_e               in_op,
  input  logic [FLOW_W-1:0] in_dst,
  // command FIFO head
  output logic              cmd_valid,
  input  logic              cmd_pop,
  output cmd_t              cmd,
  // data buffer head
  output logic              rd_valid,
  input  logic              rd_pop,
  output logic [DW-1:0]     rd_data
);
  localparam int BW = $clog2(BEATS);

  logic [BW-1:0]     beat;
  logic              in_pkt;    // inside a packet (first word already seen)
  logic              pad;       // padding the rest of a short segment
  logic              pad_eop;
  logic [LEN_W-1:0]  pad_len;
  cmd_t              hdr;       // op/flow/dst of the current packet
  logic              d_full, c_full;
  logic              d_push, c_push;
  logic [DW-1:0]     d_wdata;
  cmd_t              c_wdata;
  logic              acc;
  logic [LEN_W-1:0]  word_len;
  logic [$clog2(DEPTH_SEGS*BEATS):0] d_count;
  logic [$clog2(DEPTH_SEGS):0]       c_count;

  assign in_ready = !pad && !d_full && !c_full;
  assign acc      = in_valid && in_ready;
  assign word_len = LEN_W'(beat) * LEN_W'(DW/8) + (in_eop ? LEN_W'(in_bytes) : LEN_W'(DW/8));

  always_comb begin
    d_push  = 1'b0;
    d_wdata = in_data;
    c_push  = 1'b0;
    c_wdata = '0;
    c_wdata.op   = in_pkt ? hdr.op   : in_op;
    c_wdata.flow = in_pkt ? hdr.flow : in_flow;
    c_wdata.dst  = in_pkt ? hdr.dst  : in_dst;
    if (pad) begin
      d_push  = !d_full;
      d_wdata = '0;
      c_wdata.op = hdr.op; c_wdata.flow = hdr.flow; c_wdata.dst = hdr.dst;
      c_wdata.len = pad_len;
      c_wdata.eop = pad_eop;
      c_push  = !d_full && (beat == BW'(BEATS-1));
    end else if (acc) begin
      d_push      = 1'b1;
      c_wdata.len = word_len;
      c_wdata.eop = in_eop;
      c_push      = (beat == BW'(BEATS-1));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat <= '0; in_pkt <= 1'b0; pad <= 1'b0; pad_eop <= 1'b0; pad_len <= '0; hdr <= '0;
    end else if (pad) begin
      if (!d_full) begin
        beat <= beat + 1'b1;
        if (beat == BW'(BEATS-1)) pad <= 1'b0;
      end
    end else if (acc) begin
      if (!in_pkt) begin
        hdr.op <= in_op; hdr.flow <= in_flow; hdr.dst <= in_dst;
      end
      in_pkt <= !in_eop;
      beat   <= beat + 1'b1;
      if (in_eop && beat != BW'(BEATS-1)) begin
        pad     <= 1'b1;
        pad_len <= word_len;
        pad_eop <= 1'b1;
        if (!in_pkt) begin
          hdr.op <= in_op; hdr.flow <= in_flow; hdr.dst <= in_dst;
        end
      end
    end
  end

  mms_fifo #(.W(DW), .DEPTH(DEPTH_SEGS*BEATS)) u_data (
    .clk, .rst_n, .push(d_push), .wdata(d_wdata), .full(d_full),
    .pop(rd_pop), .rdata(rd_data), .valid(rd_valid), .count(d_count));

  mms_fifo #(.W($bits(cmd_t)), .DEPTH(DEPTH_SEGS)) u_cmd (
    .clk, .rst_n, .push(c_push), .wdata(c_wdata), .full(c_full),
    .pop(cmd_pop), .rdata(cmd), .valid(cmd_valid), .count(c_count));

  // A segment command may only appear once its data is complete.
  a_data_before_cmd: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid |-> d_count >= ($bits(d_count))'(BEATS));
endmodule
