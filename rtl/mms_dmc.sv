// mms_dmc: the Data Memory Controller. It performs the segment reads and
// writes of the data memory (DDR DRAM) requested by the queue manager and
// orders them to avoid bank conflicts, following the reordering scheduler of
// the paper's DRAM analysis:
//   * pending accesses wait in one FIFO per port (2 write ports: IN and CPU
//     segmentation; 2 read ports: CPU and OUT reassembly);
//   * one 64-byte access can start every access cycle of ACC_CLKS clocks;
//   * a bank stays busy for HIST+1 access cycles, so the scheduler remembers
//     the banks of the last HIST accesses and only considers FIFO heads that
//     address another bank;
//   * a write may not follow a read in the next access cycle (read-to-write
//     turnaround of one access cycle);
//   * among the eligible heads it picks round-robin; if none is eligible the
//     access cycle is lost (no-op).
// In addition, and as this design's own rule, a head is held back while an
// older access to the same segment waits in another FIFO, so reordering
// never swaps a read and a write of one segment. "Drop" entries (failed
// write commands) use an access cycle to discard the segment data from the
// port buffer without touching the DRAM.
//
// Timing: the choice for an access cycle is made in the last clock of the
// previous one. In clock 0 of the access cycle dram_cmd_valid is high; a
// write streams its BEATS data words in clocks 0..BEATS-1 (popping the
// selected segmentation buffer through wr_pop/wr_sel). Read data returns on
// dram_rvalid, BEATS beats per segment in issue order, and is forwarded with
// the access descriptor to the reassembly port on rd_valid/rd_sel.
// The bank number is the segment number modulo BANKS (own choice).
// slot_* outputs count access cycles for measurements of throughput loss.
module mms_dmc
  import mms_pkg::*;
#(
  parameter int BANKS    = 8,
  parameter int HIST     = 3,
  parameter int ACC_CLKS = 4,
  parameter int QDEPTH   = 4,
  parameter int RD_TAGS  = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // access requests from the queue manager
  input  logic              acc_valid,
  output logic              acc_ready,
  input  logic [1:0]        acc_port,
  input  acc_t              acc,
  // write data from the segmentation buffers (through the write multiplexer)
  output logic              wr_pop,
  output logic              wr_sel,
  input  logic [DW-1:0]     wr_data,
  // DRAM, segment-level port
  output logic              dram_cmd_valid,
  output logic              dram_cmd_write,
  output logic [SEG_W-1:0]  dram_cmd_seg,
  output logic              dram_wvalid,
  output logic [DW-1:0]     dram_wdata,
  input  logic              dram_rvalid,
  input  logic [DW-1:0]     dram_rdata,
  // read data to the reassembly ports (through the read demultiplexer)
  output logic              rd_valid,
  output logic              rd_sel,
  output logic [DW-1:0]     rd_data,
  output acc_t              rd_desc,
  // access-cycle accounting
  output logic              slot_start,    // first clock of an access cycle
  output logic              slot_used,     // ... which carries a DRAM access
  output logic              slot_pending   // ... while accesses were waiting
);
  localparam int NP  = 4;
  localparam int QAW = $clog2(QDEPTH);
  localparam int BW  = $clog2(BEATS);
  localparam int SW  = $clog2(ACC_CLKS);

  acc_t             q   [NP][QDEPTH];
  logic [QAW-1:0]   qwp [NP];
  logic [QAW-1:0]   qrp [NP];
  logic [QAW:0]     qcnt[NP];

  logic [SW-1:0]    slot;
  int unsigned      hbank [HIST];
  logic [HIST-1:0]  hvalid;
  logic             last_read;
  logic [1:0]       rr;

  // access of the current access cycle
  logic             cur_v, cur_write, cur_drop;
  logic             cur_port;     // port within its kind (0/1)
  acc_t             cur;
  logic [BW-1:0]    beat;

  logic [NP-1:0]    elig;
  logic             pick_v;
  logic [1:0]       pick;
  logic             decide;
  logic             any_pending;
  logic             pend_at_decide;

  // in-flight reads
  typedef struct packed { logic port; acc_t desc; } tag_t;
  tag_t             tq [RD_TAGS];
  logic [$clog2(RD_TAGS)-1:0] twp, trp;
  logic [BW-1:0]    rbeat;

  assign acc_ready = (qcnt[acc_port] != (QAW+1)'(QDEPTH));
  assign decide    = (slot == SW'(ACC_CLKS-1));

  function automatic int unsigned bank_of(logic [SEG_W-1:0] s);
    return int'({7'd0, s}) % BANKS;
  endfunction

  // ---- eligibility --------------------------------------------------------
  always_comb begin
    any_pending = 1'b0;
    for (int p = 0; p < NP; p++) begin
      acc_t h;
      h = q[p][qrp[p]];
      elig[p] = (qcnt[p] != '0);
      if (qcnt[p] != '0) any_pending = 1'b1;
      if (!(p < 2 && h.drop)) begin
        for (int i = 0; i < HIST; i++)
          if (hvalid[i] && hbank[i] == bank_of(h.seg)) elig[p] = 1'b0;
        if (p < 2 && last_read) elig[p] = 1'b0;
      end
      // an older access to the same segment waits elsewhere
      for (int o = 0; o < NP; o++) begin
        if (o != p) begin
          for (int e = 0; e < QDEPTH; e++) begin
            acc_t x;
            x = q[o][QAW'(qrp[o] + QAW'(e))];
            if ((QAW+1)'(e) < qcnt[o]
                && !(o < 2 && x.drop) && !(p < 2 && h.drop)
                && x.seg == h.seg
                && $signed(x.seq - h.seq) < 0)
              elig[p] = 1'b0;
          end
        end
      end
    end
  end

  // round-robin choice starting at rr
  always_comb begin
    pick_v = 1'b0;
    pick   = '0;
    for (int k = 0; k < NP; k++) begin
      logic [1:0] p;
      p = rr + 2'(k);
      if (!pick_v && elig[p]) begin pick_v = 1'b1; pick = p; end
    end
  end

  // ---- FIFOs, scheduler state ---------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NP; p++) begin qwp[p] <= '0; qrp[p] <= '0; qcnt[p] <= '0; end
      slot <= '0; hvalid <= '0; last_read <= 1'b0; rr <= '0;
      for (int i = 0; i < HIST; i++) hbank[i] <= 0;
      cur_v <= 1'b0; cur_write <= 1'b0; cur_drop <= 1'b0; cur_port <= 1'b0; cur <= '0;
      beat <= '0;
    end else begin
      slot <= (slot == SW'(ACC_CLKS-1)) ? '0 : slot + 1'b1;
      if (cur_v && cur_write && beat != BW'(BEATS-1)) beat <= beat + 1'b1;
      else if (decide) beat <= '0;
      for (int p = 0; p < NP; p++) begin
        logic push, pop;
        push = acc_valid && acc_ready && (acc_port == 2'(p));
        pop  = decide && pick_v && (pick == 2'(p));
        if (push) begin q[p][qwp[p]] <= acc; qwp[p] <= qwp[p] + 1'b1; end
        if (pop)  qrp[p] <= qrp[p] + 1'b1;
        qcnt[p] <= qcnt[p] + (QAW+1)'(push) - (QAW+1)'(pop);
      end
      if (decide) begin
        acc_t h;
        h = q[pick][qrp[pick]];
        cur_v     <= pick_v;
        cur_write <= (pick < 2);
        cur_drop  <= (pick < 2) && h.drop;
        cur_port  <= pick[0];
        cur       <= h;
        beat      <= '0;
        for (int i = HIST-1; i > 0; i--) begin
          hbank[i]  <= hbank[i-1];
          hvalid[i] <= hvalid[i-1];
        end
        hbank[0]  <= bank_of(h.seg);
        hvalid[0] <= pick_v && !((pick < 2) && h.drop);
        last_read <= pick_v && (pick >= 2);
        if (pick_v) rr <= pick + 1'b1;
      end
    end
  end

  // ---- DRAM command and write data -----------------------------------------
  wire wr_now = cur_v && cur_write && (int'(slot) < BEATS);
  assign dram_cmd_valid = cur_v && !cur_drop && (slot == '0);
  assign dram_cmd_write = cur_write;
  assign dram_cmd_seg   = cur.seg;
  assign wr_pop         = wr_now;
  assign wr_sel         = cur_port;
  assign dram_wvalid    = wr_now && !cur_drop;
  assign dram_wdata     = wr_data;

  assign slot_start   = (slot == '0);
  assign slot_used    = (slot == '0) && cur_v && !cur_drop;
  assign slot_pending = (slot == '0) && (cur_v || pend_at_decide);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pend_at_decide <= 1'b0;
    else if (decide) pend_at_decide <= any_pending;
  end

  // ---- read return ------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      twp <= '0; trp <= '0; rbeat <= '0;
    end else begin
      if (dram_cmd_valid && !cur_write) begin
        tq[twp] <= '{port: cur_port, desc: cur};
        twp <= twp + 1'b1;
      end
      if (dram_rvalid) begin
        rbeat <= rbeat + 1'b1;
        if (rbeat == BW'(BEATS-1)) trp <= trp + 1'b1;
      end
    end
  end

  assign rd_valid = dram_rvalid;
  assign rd_sel   = tq[trp].port;
  assign rd_data  = dram_rdata;
  assign rd_desc  = tq[trp].desc;

  a_one_access_per_cycle: assert property (@(posedge clk) disable iff (!rst_n)
    dram_cmd_valid |-> slot == '0);
  a_no_write_after_read: assert property (@(posedge clk) disable iff (!rst_n)
    decide && pick_v && pick < 2 && !q[pick][qrp[pick]].drop |-> !last_read);
endmodule
