// mms_dqm: the Data Queue Manager. It executes the segment commands that the
// internal scheduler forwards, on per-flow queues kept as single-linked lists
// of 64-byte segments in the external pointer memory (a ZBT SRAM), and hands
// every data transfer the command needs to the data memory controller (DMC).
//
// Pointer memory (64-bit words, byte enables, reads return SRAM_RD_LAT clocks
// after the request):
//   queue table   address {0, flow}: [SEG_W-1:0] head, [31] non-empty,
//                                    [32+:SEG_W] tail
//   segment word  address {1, seg}:  [SEG_W-1:0] next, [38:32] length in
//                                    bytes, [40] end of packet
// Free segments are chained through their next fields from the fl_head
// register; segments never used yet are handed out by a high-water counter,
// so only the queue table has to be cleared after reset (NUM_FLOWS clocks,
// init_done rises when finished).
//
// Commands (mms_pkg::op_e): enqueue at the tail or at the head, read and
// dequeue the head segment, overwrite its data or its length, delete the head
// segment or the whole head packet, move the head packet to the tail of
// another flow, and the two overwrite-then-move combinations. A write
// access is passed to the DMC as soon as the segment number is known, i.e.
// right after the first pointer-memory access, so the data transfer runs in
// parallel with the remaining pointer updates, as the paper describes. Every
// command from a write port (IN, CPU data) produces exactly one write access,
// a "drop" one when the command fails, so the segment data in the port buffer
// is always consumed. One command is executed at a time; pointer-memory reads
// are pipelined and the FSM waits for them. Each command ends with a one-clock
// done pulse giving status and latency in clocks (accept to done).
//
// From the paper: the queue structure (linked segments, free list, queue
// table in the pointer memory), the command set, 32K flows, 64-byte segments,
// early start of the data access. This design's own: memory layout, encodings,
// the high-water allocator, the order of pointer accesses.
module mms_dqm
  import mms_pkg::*;
#(
  parameter int NUM_FLOWS   = 32768,
  parameter int NUM_SEGS    = 1 << SEG_W,
  parameter int SRAM_RD_LAT = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              init_done,
  // command from the internal scheduler
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  cmd_t              cmd,
  input  logic [1:0]        cmd_port,
  // backpressure from the reassembly ports (0: CPU port, 1: OUT port)
  input  logic [1:0]        bp,
  output logic [3:0]        rd_mask,
  output logic [1:0]        rsv,
  output logic [1:0]        unrsv,
  // pointer memory (ZBT SRAM)
  output logic              sram_req,
  output logic              sram_we,
  output logic [7:0]        sram_be,
  output logic [SA_W-1:0]   sram_addr,
  output logic [63:0]       sram_wdata,
  input  logic [63:0]       sram_rdata,
  // data access to the DMC
  output logic              dmc_valid,
  input  logic              dmc_ready,
  output logic [1:0]        dmc_port,
  output acc_t              dmc_acc,
  // completion
  output logic              done_valid,
  output logic [1:0]        done_port,
  output op_e               done_op,
  output logic [FLOW_W-1:0] done_flow,
  output status_e           done_status,
  output logic [7:0]        done_cycles
);
  typedef enum logic [4:0] {
    S_INIT, S_IDLE, S_Q0, S_WAIT, S_ALLOC, S_DACC, S_E1, S_E2, S_E3, S_E4,
    S_Q1, S_R2, S_UNLINK, S_FREE, S_M0, S_M1, S_M2, S_M3, S_M4, S_M5,
    S_DONE
  } state_e;

  typedef enum logic [1:0] {T_QT, T_SEG, T_FL} tag_e;

  typedef struct packed {
    logic             valid;
    logic [SEG_W-1:0] head;
    logic [SEG_W-1:0] tail;
  } qt_t;

  typedef struct packed {
    logic [SEG_W-1:0] next;
    logic [LEN_W-1:0] len;
    logic             eop;
  } sd_t;

  // ---- word packing ------------------------------------------------------
  function automatic logic [SA_W-1:0] qt_addr(logic [FLOW_W-1:0] f);
    return {1'b0, (SEG_W-FLOW_W)'(0), f};
  endfunction
  function automatic logic [SA_W-1:0] sd_addr(logic [SEG_W-1:0] s);
    return {1'b1, s};
  endfunction
  function automatic logic [63:0] qt_word(qt_t q);
    logic [63:0] w = '0;
    w[SEG_W-1:0]     = q.head;
    w[31]            = q.valid;
    w[32 +: SEG_W]   = q.tail;
    return w;
  endfunction
  function automatic qt_t qt_of(logic [63:0] w);
    qt_t q;
    q.head = w[SEG_W-1:0]; q.valid = w[31]; q.tail = w[32 +: SEG_W];
    return q;
  endfunction
  function automatic logic [63:0] sd_word(sd_t d);
    logic [63:0] w = '0;
    w[SEG_W-1:0]    = d.next;
    w[32 +: LEN_W]  = d.len;
    w[40]           = d.eop;
    return w;
  endfunction
  function automatic sd_t sd_of(logic [63:0] w);
    sd_t d;
    d.next = w[SEG_W-1:0]; d.len = w[32 +: LEN_W]; d.eop = w[40];
    return d;
  endfunction

  // ---- state ---------------------------------------------------------------
  state_e            state, ret, dacc_ret;
  cmd_t              c;
  logic [1:0]        port;
  qt_t               qt;          // queue-table entry being worked on
  sd_t               sd;          // last segment word read
  logic [SEG_W-1:0]  fl_next;     // next free segment after fl_head
  logic [SEG_W-1:0]  fl_head;
  logic [SEG_W:0]    fl_cnt;
  logic [SEG_W:0]    hw;          // segments never used yet start here
  logic [SEG_W-1:0]  newseg, cur, last, after, mh;
  logic              from_fl, full;
  status_e           status;
  logic [FLOW_W:0]   init_ctr;
  logic [SEQ_W-1:0]  seq;
  acc_t              acc;
  logic [7:0]        cycles;

  // read return pipeline: valid + tag per stage
  logic [SRAM_RD_LAT-1:0] rp_v;
  tag_e                   rp_t [SRAM_RD_LAT];
  logic                   rd_issue;
  tag_e                   rd_tag;

  assign init_done = (state != S_INIT);
  assign cmd_ready = (state == S_IDLE);
  assign rd_mask   = {bp[1], bp[0], 2'b00};
  assign dmc_valid = (state == S_DACC);
  assign dmc_port  = port;
  always_comb begin
    dmc_acc     = acc;
    dmc_acc.seq = seq;
  end
  assign done_valid  = (state == S_DONE);
  assign done_port   = port;
  assign done_op     = c.op;
  assign done_flow   = c.flow;
  assign done_status = status;
  assign done_cycles = cycles;

  wire is_wport = (cmd_port == 2'(P_IN)) || (cmd_port == 2'(P_CPUW));

  // ---- pointer-memory request, combinational from the state --------------
  always_comb begin
    sram_req = 1'b0; sram_we = 1'b0; sram_be = 8'hFF;
    sram_addr = '0; sram_wdata = '0;
    rd_issue = 1'b0; rd_tag = T_QT;
    unique case (state)
      S_INIT: begin
        sram_req = 1'b1; sram_we = 1'b1;
        sram_addr = qt_addr(init_ctr[FLOW_W-1:0]);
      end
      S_Q0: begin
        sram_req = 1'b1; sram_addr = qt_addr(c.flow); rd_issue = 1'b1; rd_tag = T_QT;
      end
      S_ALLOC: if (fl_cnt != '0) begin
        sram_req = 1'b1; sram_addr = sd_addr(fl_head); rd_issue = 1'b1; rd_tag = T_FL;
      end
      S_E1: if (!full) begin
        sram_req = 1'b1; sram_we = 1'b1; sram_addr = sd_addr(newseg);
        sram_wdata = sd_word('{next: (c.op == OP_ENQ_HEAD && qt.valid) ? qt.head : '0,
                               len: c.len, eop: c.eop});
      end
      S_E2: begin   // old tail -> new segment
        sram_req = 1'b1; sram_we = 1'b1; sram_be = 8'h0F; sram_addr = sd_addr(qt.tail);
        sram_wdata = sd_word('{next: newseg, len: '0, eop: 1'b0});
      end
      S_E3: begin   // tail field only
        sram_req = 1'b1; sram_we = 1'b1; sram_be = 8'hF0; sram_addr = qt_addr(c.flow);
        sram_wdata = qt_word('{valid: 1'b1, head: '0, tail: newseg});
      end
      S_E4: begin   // whole entry
        sram_req = 1'b1; sram_we = 1'b1; sram_addr = qt_addr(c.flow);
        sram_wdata = qt_word('{valid: 1'b1, head: newseg,
                               tail: (c.op == OP_ENQ_HEAD && qt.valid) ? qt.tail : newseg});
      end
      S_Q1: if (qt.valid) begin
        if (c.op inside {OP_READ, OP_DEQ, OP_DEL, OP_DEL_PKT}) begin
          sram_req = 1'b1; sram_addr = sd_addr(qt.head); rd_issue = 1'b1; rd_tag = T_SEG;
        end else if (c.op inside {OP_OVR_LEN, OP_OVR_LEN_MOVE}) begin
          sram_req = 1'b1; sram_we = 1'b1; sram_be = 8'h30; sram_addr = sd_addr(qt.head);
          sram_wdata = sd_word('{next: '0, len: c.len, eop: c.eop});
        end
      end
      S_UNLINK: begin
        sram_req = 1'b1; sram_we = 1'b1; sram_be = 8'h0F; sram_addr = qt_addr(c.flow);
        sram_wdata = (qt.head == qt.tail) ? '0
                   : qt_word('{valid: 1'b1, head: sd.next, tail: '0});
      end
      S_FREE: begin
        sram_req = 1'b1; sram_we = 1'b1; sram_be = 8'h0F; sram_addr = sd_addr(cur);
        sram_wdata = sd_word('{next: fl_head, len: '0, eop: 1'b0});
      end
      S_M0: begin
        sram_req = 1'b1; sram_addr = sd_addr(qt.head); rd_issue = 1'b1; rd_tag = T_SEG;
      end
      S_M1: if (!(sd.eop || cur == qt.tail)) begin
        sram_req = 1'b1; sram_addr = sd_addr(sd.next); rd_issue = 1'b1; rd_tag = T_SEG;
      end
      S_M2: begin
        sram_req = 1'b1; sram_we = 1'b1; sram_be = 8'h0F; sram_addr = qt_addr(c.flow);
        sram_wdata = (last == qt.tail) ? '0 : qt_word('{valid: 1'b1, head: after, tail: '0});
      end
      S_M3: begin
        sram_req = 1'b1; sram_addr = qt_addr(c.dst); rd_issue = 1'b1; rd_tag = T_QT;
      end
      S_M4: begin
        sram_req = 1'b1; sram_we = 1'b1;
        if (qt.valid) begin
          sram_be = 8'h0F; sram_addr = sd_addr(qt.tail);
          sram_wdata = sd_word('{next: mh, len: '0, eop: 1'b0});
        end else begin
          sram_addr = qt_addr(c.dst);
          sram_wdata = qt_word('{valid: 1'b1, head: mh, tail: last});
        end
      end
      S_M5: begin
        sram_req = 1'b1; sram_we = 1'b1; sram_be = 8'hF0; sram_addr = qt_addr(c.dst);
        sram_wdata = qt_word('{valid: 1'b1, head: '0, tail: last});
      end
      default: ;
    endcase
  end

  // ---- read return pipeline ------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp_v <= '0;
      for (int i = 0; i < SRAM_RD_LAT; i++) rp_t[i] <= T_QT;
    end else begin
      rp_v[0] <= rd_issue;
      rp_t[0] <= rd_tag;
      for (int i = 1; i < SRAM_RD_LAT; i++) begin
        rp_v[i] <= rp_v[i-1];
        rp_t[i] <= rp_t[i-1];
      end
    end
  end

  wire rd_ret = rp_v[SRAM_RD_LAT-1];
  wire tag_e ret_tag = rp_t[SRAM_RD_LAT-1];

  // ---- control ---------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_INIT; ret <= S_IDLE; dacc_ret <= S_IDLE;
      c <= '0; port <= '0; qt <= '0; sd <= '0; fl_next <= '0;
      fl_head <= '0; fl_cnt <= '0; hw <= '0;
      newseg <= '0; cur <= '0; last <= '0; after <= '0; mh <= '0;
      from_fl <= 1'b0; full <= 1'b0; status <= ST_OK;
      init_ctr <= '0; seq <= '0; acc <= '0; cycles <= '0;
      rsv <= '0; unrsv <= '0;
    end else begin
      rsv <= '0; unrsv <= '0;
      if (state != S_IDLE && cycles != 8'hFF) cycles <= cycles + 1'b1;
      if (rd_ret) begin
        unique case (ret_tag)
          T_QT:    qt      <= qt_of(sram_rdata);
          T_SEG:   sd      <= sd_of(sram_rdata);
          default: fl_next <= sd_of(sram_rdata).next;
        endcase
      end
      unique case (state)
        S_INIT: begin
          init_ctr <= init_ctr + 1'b1;
          if (init_ctr == (FLOW_W+1)'(NUM_FLOWS-1)) state <= S_IDLE;
        end
        S_IDLE: if (cmd_valid) begin
          c <= cmd; port <= cmd_port; status <= ST_OK; full <= 1'b0;
          cycles <= 8'd1;
          acc <= '0;
          acc.flow <= cmd.flow;
          if (is_wport != op_has_data(cmd.op)) begin
            status <= ST_BADOP;
            acc.drop <= 1'b1;
            dacc_ret <= S_DONE;
            state <= is_wport ? S_DACC : S_DONE;
          end else begin
            if (op_reads(cmd.op)) rsv[cmd_port[0]] <= 1'b1;
            state <= S_Q0;
          end
        end
        S_Q0: begin
          if (c.op inside {OP_ENQ, OP_ENQ_HEAD}) state <= S_ALLOC;
          else begin state <= S_WAIT; ret <= S_Q1; end
        end
        S_WAIT: if (rp_v == '0 && !rd_ret) state <= ret;
        S_ALLOC: begin
          acc.len <= c.len; acc.eop <= c.eop;
          if (fl_cnt != '0) begin
            newseg <= fl_head; from_fl <= 1'b1; acc.seg <= fl_head;
          end else if (hw < (SEG_W+1)'(NUM_SEGS)) begin
            newseg <= hw[SEG_W-1:0]; from_fl <= 1'b0; acc.seg <= hw[SEG_W-1:0];
            hw <= hw + 1'b1;
          end else begin
            full <= 1'b1; status <= ST_FULL; acc.drop <= 1'b1;
          end
          state <= S_DACC; dacc_ret <= S_WAIT; ret <= S_E1;
        end
        S_DACC: if (dmc_ready) begin
          seq <= seq + 1'b1;
          state <= dacc_ret;
        end
        S_E1: begin
          if (full) state <= S_DONE;
          else begin
            if (from_fl) begin fl_head <= fl_next; fl_cnt <= fl_cnt - 1'b1; end
            state <= (c.op == OP_ENQ && qt.valid) ? S_E2 : S_E4;
          end
        end
        S_E2: state <= S_E3;
        S_E3: state <= S_DONE;
        S_E4: state <= S_DONE;
        S_Q1: begin
          if (!qt.valid) begin
            status <= ST_EMPTY;
            if (op_reads(c.op)) unrsv[port[0]] <= 1'b1;
            if (op_has_data(c.op)) begin
              acc.drop <= 1'b1; dacc_ret <= S_DONE; state <= S_DACC;
            end else state <= S_DONE;
          end else begin
            unique case (c.op)
              OP_READ, OP_DEQ, OP_DEL, OP_DEL_PKT: begin
                cur <= qt.head; state <= S_WAIT; ret <= S_R2;
              end
              OP_OVR, OP_OVR_MOVE: begin
                acc.seg <= qt.head;
                acc.len <= c.len; acc.eop <= c.eop;
                state <= S_DACC;
                dacc_ret <= (c.op == OP_OVR) ? S_DONE : S_M0;
              end
              OP_OVR_LEN: state <= S_DONE;
              default: state <= S_M0;   // OP_MOVE, OP_OVR_LEN_MOVE
            endcase
          end
        end
        S_R2: begin
          if (op_reads(c.op)) begin
            acc.seg <= cur; acc.len <= sd.len; acc.eop <= sd.eop;
            state <= S_DACC;
            dacc_ret <= (c.op == OP_READ) ? S_DONE : S_UNLINK;
          end else state <= S_UNLINK;
        end
        S_UNLINK: begin
          if (qt.head == qt.tail) qt.valid <= 1'b0;
          else qt.head <= sd.next;
          state <= S_FREE;
        end
        S_FREE: begin
          fl_head <= cur; fl_cnt <= fl_cnt + 1'b1;
          if (c.op == OP_DEL_PKT && !sd.eop && qt.valid) begin
            // next segment of the same packet: read its word, then again
            state <= S_Q1;
          end else state <= S_DONE;
        end
        S_M0: begin
          mh <= qt.head; cur <= qt.head;
          state <= S_WAIT; ret <= S_M1;
        end
        S_M1: begin
          if (sd.eop || cur == qt.tail) begin
            last <= cur; after <= sd.next; state <= S_M2;
          end else begin
            cur <= sd.next; state <= S_WAIT; ret <= S_M1;
          end
        end
        S_M2: state <= S_M3;
        S_M3: begin state <= S_WAIT; ret <= S_M4; end
        S_M4: state <= qt.valid ? S_M5 : S_DONE;
        S_M5: state <= S_DONE;
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // Only write ports carry segment data that may have to be dropped.
  a_drop_on_wport: assert property (@(posedge clk) disable iff (!rst_n)
    dmc_valid && dmc_acc.drop |-> dmc_port <= 2'(P_CPUW));
endmodule
