// mms_reassembly: one port of the reassembly block (ports 3 and 4 of the MMS).
// It holds the port's command FIFO, whose head goes to the internal scheduler,
// and a data buffer that receives the segments the DMC reads from the data
// memory (BEATS words each, tagged with flow, length and end-of-packet). The
// buffered segments leave as a packet stream: words beyond a segment's length
// are dropped, the last word of an end-of-packet segment carries eop and its
// byte count, and sop marks the first word after an eop on this port.
//
// Backpressure (the paper's arrow from reassembly to the queue manager): bp is
// high while the segments in the buffer plus those promised to arrive could
// fill it. The queue manager pulses rsv when it accepts a reading command for
// this port and unrsv when such a command ends without data (empty queue).
// Timing: one output word per clock. The backpressure path is the paper's;
// the reservation rule, the framing and the depth are this design's choices.
module mms_reassembly
  import mms_pkg::*;
#(
  parameter int DEPTH_SEGS = 4,
  parameter int CMD_DEPTH  = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // commands from the port side
  input  logic              cmd_in_valid,
  output logic              cmd_in_ready,
  input  cmd_t              cmd_in,
  // command FIFO head to the scheduler
  output logic              cmd_valid,
  input  logic              cmd_pop,
  output cmd_t              cmd,
  // segment beats from the DMC
  input  logic              seg_valid,
  input  logic [DW-1:0]     seg_data,
  input  acc_t              seg_desc,
  // backpressure towards the queue manager
  input  logic              rsv,
  input  logic              unrsv,
  output logic              bp,
  // packet stream
  output logic              out_valid,
  input  logic              out_ready,
  output logic [DW-1:0]     out_data,
  output logic              out_sop,
  output logic              out_eop,
  output logic [4:0]        out_bytes,
  output logic [FLOW_W-1:0] out_flow
);
  localparam int BW = $clog2(BEATS);
  localparam int NW = DEPTH_SEGS * BEATS;

  typedef struct packed {
    logic [DW-1:0]     data;
    logic [FLOW_W-1:0] flow;
    logic [LEN_W-1:0]  len;
    logic              eop;
    logic [BW-1:0]     beat;
  } word_t;

  logic              c_full;
  logic [$clog2(CMD_DEPTH):0] c_count;
  logic [BW-1:0]     in_beat;
  word_t             w_in, w_head;
  logic              w_full, w_valid, w_pop;
  logic [$clog2(NW):0] w_count;
  logic [$clog2(DEPTH_SEGS)+1:0] outstanding, stored;
  logic              seg_done;
  logic              sop_next;
  logic              in_len, last_word;
  logic [LEN_W-1:0]  off;

  assign cmd_in_ready = !c_full;

  mms_fifo #(.W($bits(cmd_t)), .DEPTH(CMD_DEPTH)) u_cmd (
    .clk, .rst_n, .push(cmd_in_valid), .wdata(cmd_in), .full(c_full),
    .pop(cmd_pop), .rdata(cmd), .valid(cmd_valid), .count(c_count));

  assign w_in = '{data: seg_data, flow: seg_desc.flow, len: seg_desc.len,
                  eop: seg_desc.eop, beat: in_beat};

  mms_fifo #(.W($bits(word_t)), .DEPTH(NW)) u_data (
    .clk, .rst_n, .push(seg_valid), .wdata(w_in), .full(w_full),
    .pop(w_pop), .rdata(w_head), .valid(w_valid), .count(w_count));

  assign seg_done = seg_valid && (in_beat == BW'(BEATS-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_beat <= '0; outstanding <= '0; sop_next <= 1'b1;
    end else begin
      if (seg_valid) in_beat <= in_beat + 1'b1;
      outstanding <= outstanding + ($bits(outstanding))'(rsv)
                                 - ($bits(outstanding))'(unrsv)
                                 - ($bits(outstanding))'(seg_done);
      if (out_valid && out_ready) sop_next <= out_eop;
    end
  end

  // segments (whole or partly) in the buffer
  assign stored = ($bits(stored))'((w_count + ($bits(w_count))'(BEATS-1)) >> BW);
  assign bp     = (stored + outstanding) >= ($bits(stored))'(DEPTH_SEGS);

  // output framing
  assign off       = LEN_W'(w_head.beat) * LEN_W'(DW/8);
  assign in_len    = (w_head.beat == '0) || (off < w_head.len);
  assign last_word = (w_head.beat == BW'(BEATS-1)) || (off + LEN_W'(DW/8) >= w_head.len);
  assign out_valid = w_valid && in_len;
  assign out_data  = w_head.data;
  assign out_flow  = w_head.flow;
  assign out_sop   = sop_next;
  assign out_eop   = w_head.eop && last_word;
  assign out_bytes = (w_head.len - off >= LEN_W'(DW/8) || w_head.len <= off) ? 5'(DW/8)
                                                                            : 5'(w_head.len - off);
  assign w_pop     = w_valid && (!in_len || out_ready);

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) seg_valid |-> !w_full);
endmodule
