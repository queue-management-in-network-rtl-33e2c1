// tb_mms_top: end-to-end test of the memory management system. All four
// ports run at once with random traffic: the IN port sends packets to a few
// flows, the CPU data port sends packets carrying enqueue-at-head, overwrite
// and overwrite-and-move commands, the CPU command port issues read, dequeue,
// delete, move and length-overwrite commands, and the OUT port dequeues.
// A reference model of the per-flow segment queues is updated in the order
// the queue manager reports completions (it executes one command at a time),
// predicts each completion status and the exact word stream each read port
// must deliver. Small sizes (NUM_FLOWS, NUM_SEGS) keep the run short and make
// the segment pool run out. The test counts how often each mechanism of the
// design occurred and fails if one never did: pool exhaustion, empty queues,
// free-list reuse, reassembly backpressure, DRAM bank-conflict reordering,
// lost access cycles, read-to-write turnaround, same-segment ordering holds,
// dropped segment data, rejected opcodes, segment padding and every opcode.
// At the end all queues are drained through the OUT port and checked.
module tb_mms_top;
  import mms_pkg::*;

  localparam int NF    = 16;
  localparam int NSEG  = 40;
  localparam int NBANK = 2;   // few banks: the DMC backlog grows and reordering shows
  localparam int FLOWS_USED = 4;
  localparam int NPKT_IN  = 250;
  localparam int NPKT_CPW = 60;
  localparam int NCMD_CPC = 120;
  localparam int NCMD_OUC = 500;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  // ---- DUT ----------------------------------------------------------------
  logic in_valid, in_ready, in_eop; logic [DW-1:0] in_data; logic [4:0] in_bytes; logic [FLOW_W-1:0] in_flow;
  logic cpw_valid, cpw_ready, cpw_eop; logic [DW-1:0] cpw_data; logic [4:0] cpw_bytes;
  logic [FLOW_W-1:0] cpw_flow, cpw_dst; op_e cpw_op;
  logic cpc_valid, cpc_ready; cmd_t cpc_cmd;
  logic cpr_valid, cpr_ready, cpr_sop, cpr_eop; logic [DW-1:0] cpr_data; logic [4:0] cpr_bytes; logic [FLOW_W-1:0] cpr_flow;
  logic ouc_valid, ouc_ready; cmd_t ouc_cmd;
  logic out_valid, out_ready, out_sop, out_eop; logic [DW-1:0] out_data; logic [4:0] out_bytes; logic [FLOW_W-1:0] out_flow;
  logic done_valid; logic [1:0] done_port; op_e done_op; logic [FLOW_W-1:0] done_flow; status_e done_status; logic [7:0] done_cycles;
  logic sram_req, sram_we; logic [7:0] sram_be; logic [SA_W-1:0] sram_addr; logic [63:0] sram_wdata, sram_rdata;
  logic dram_cmd_valid, dram_cmd_write, dram_wvalid, dram_rvalid; logic [SEG_W-1:0] dram_cmd_seg;
  logic [DW-1:0] dram_wdata, dram_rdata;
  logic slot_start, slot_used, slot_pending, init_done;
  logic [1:0] bp;
  int viol, nwr, nrd;

  mms_top #(.NUM_FLOWS(NF), .NUM_SEGS(NSEG), .BANKS(NBANK)) dut (.*);

  zbt_sram_model #(.AW(SA_W), .RD_LAT(2)) u_sram (.clk, .req(sram_req), .we(sram_we), .be(sram_be),
    .addr(sram_addr), .wdata(sram_wdata), .rdata(sram_rdata));
  ddr_dram_model #(.BANKS(NBANK)) u_dram (.clk, .cmd_valid(dram_cmd_valid), .cmd_write(dram_cmd_write), .cmd_seg(dram_cmd_seg),
    .wvalid(dram_wvalid), .wdata(dram_wdata), .rvalid(dram_rvalid), .rdata(dram_rdata),
    .violations(viol), .writes(nwr), .reads(nrd));

  // ---- reference model --------------------------------------------------------
  typedef struct { logic [4*DW-1:0] data; int len; bit eop; } seg_s;
  typedef struct { op_e op; int flow; int dst; seg_s s; } pend_s;
  typedef struct { logic [DW-1:0] data; bit eop; int bytes; int flow; } word_s;

  seg_s  q [NF][$];
  pend_s pend [4][$];
  word_s exp_out [2][$];
  int used = 0;

  // mechanism counters
  int n_full, n_empty, n_reuse, n_bp, n_reorder, n_nop, n_turn, n_hazard, n_drop, n_badop, n_pad, n_sched;
  int n_op [11];

  function automatic void expect_seg(int p, seg_s s, int flow);
    int nw = (s.len + 15) / 16;
    if (nw == 0) nw = 1;
    for (int i = 0; i < nw; i++) begin
      word_s w;
      w.data = s.data[DW*i +: DW];
      w.eop  = s.eop && (i == nw-1);
      w.bytes = (s.len - 16*i >= 16 || s.len <= 16*i) ? 16 : s.len - 16*i;
      w.flow = flow;
      exp_out[p].push_back(w);
    end
  endfunction

  function automatic int move_pkt(int src, int dst);
    seg_s tmp [$];
    while (q[src].size() != 0) begin
      seg_s s = q[src].pop_front();
      tmp.push_back(s);
      if (s.eop) break;
    end
    foreach (tmp[i]) q[dst].push_back(tmp[i]);
    return tmp.size();
  endfunction

  // completion monitor: apply each command to the model in execution order
  always @(posedge clk) if (rst_n && done_valid) begin
    pend_s c;
    status_e st;
    if (pend[done_port].size() == 0) begin
      check(0, "completion without a pending command");
    end else begin
      c = pend[done_port].pop_front();
      check(c.op == done_op && c.flow == int'(done_flow), $sformatf("completion order port %0d: got %s %0d want %s %0d", done_port, done_op.name(), done_flow, c.op.name(), c.flow));
      st = ST_OK;
      if ((done_port < 2) != op_has_data(c.op)) st = ST_BADOP;
      else if (c.op inside {OP_ENQ, OP_ENQ_HEAD}) st = (used < NSEG) ? ST_OK : ST_FULL;
      else if (q[c.flow].size() == 0) st = ST_EMPTY;
      check(done_status == st, $sformatf("status port %0d op %s flow %0d: got %s want %s",
                                         done_port, c.op.name(), c.flow, done_status.name(), st.name()));
      if (st == ST_FULL) n_full++;
      if (st == ST_EMPTY) n_empty++;
      if (st == ST_BADOP) n_badop++;
      if (st == ST_OK) begin
        n_op[c.op]++;
        unique case (c.op)
          OP_ENQ:      begin q[c.flow].push_back(c.s); used++; end
          OP_ENQ_HEAD: begin q[c.flow].push_front(c.s); used++; end
          OP_READ:     expect_seg(done_port - 2, q[c.flow][0], c.flow);
          OP_DEQ:      begin expect_seg(done_port - 2, q[c.flow][0], c.flow); void'(q[c.flow].pop_front()); used--; end
          OP_OVR:      q[c.flow][0].data = c.s.data;
          OP_OVR_LEN:  begin q[c.flow][0].len = c.s.len; q[c.flow][0].eop = c.s.eop; end
          OP_DEL:      begin void'(q[c.flow].pop_front()); used--; end
          OP_DEL_PKT:  while (q[c.flow].size() != 0) begin
                         seg_s s;
                         s = q[c.flow].pop_front(); used--;
                         if (s.eop) break;
                       end
          OP_MOVE:     void'(move_pkt(c.flow, c.dst));
          OP_OVR_LEN_MOVE: begin q[c.flow][0].len = c.s.len; q[c.flow][0].eop = c.s.eop; void'(move_pkt(c.flow, c.dst)); end
          OP_OVR_MOVE: begin q[c.flow][0].data = c.s.data; void'(move_pkt(c.flow, c.dst)); end
          default: ;
        endcase
      end
    end
  end

  // output checkers
  int got_words [2];
  task automatic check_word(int p, logic [DW-1:0] d, bit eop, int bytes, int flow);
    word_s w;
    if (exp_out[p].size() == 0) begin check(0, $sformatf("unexpected word on port %0d", p)); return; end
    w = exp_out[p].pop_front();
    check(w.data == d,      $sformatf("data port %0d word %0d", p, got_words[p]));
    check(w.eop == eop,     $sformatf("eop port %0d word %0d", p, got_words[p]));
    check(!eop || w.bytes == bytes, $sformatf("bytes port %0d word %0d: %0d vs %0d", p, got_words[p], bytes, w.bytes));
    check(w.flow == flow,   $sformatf("flow port %0d", p));
    got_words[p]++;
  endtask
  always @(posedge clk) if (rst_n) begin
    if (cpr_valid && cpr_ready) check_word(0, cpr_data, cpr_eop, cpr_bytes, cpr_flow);
    if (out_valid && out_ready) check_word(1, out_data, out_eop, out_bytes, out_flow);
  end

  // mechanism observers (internal signals of the DMC and DQM)
  int prev_fl_cnt = 0;
  always @(posedge clk) if (rst_n) begin
    if (|bp) n_bp++;
    if (slot_start && slot_pending && !slot_used) n_nop++;
    if (dut.u_dmc.decide) begin
      for (int p = 0; p < 4; p++)
        if (dut.u_dmc.qcnt[p] != 0 && !dut.u_dmc.elig[p]) begin
          bit busy;
          busy = 0;
          for (int i = 0; i < 3; i++)
            if (dut.u_dmc.hvalid[i] && dut.u_dmc.hbank[i] == int'(dut.u_dmc.q[p][dut.u_dmc.qrp[p]].seg) % NBANK) busy = 1;
          if (busy) n_reorder++;
          if (p < 2 && dut.u_dmc.last_read && !dut.u_dmc.q[p][dut.u_dmc.qrp[p]].drop) n_turn++;
          if (!busy && !(p < 2 && dut.u_dmc.last_read)) n_hazard++;
        end
    end
    if (dut.u_dmc.decide && dut.u_dmc.pick_v && dut.u_dmc.pick < 2 && dut.u_dmc.q[dut.u_dmc.pick][dut.u_dmc.qrp[dut.u_dmc.pick]].drop) n_drop++;
    if (int'(dut.u_dqm.fl_cnt) < prev_fl_cnt) n_reuse++;
    prev_fl_cnt = int'(dut.u_dqm.fl_cnt);
    if (dut.u_seg_in.pad || dut.u_seg_cpu.pad) n_pad++;
    if ($countones(dut.u_sched.elig) > 1 && dut.g_ready) n_sched++;
  end

  // ---- stimulus -------------------------------------------------------------
  function automatic logic [DW-1:0] rnd_word();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  // send one packet on a segmentation port; pend gets one entry per segment
  task automatic send_pkt(int port, int flow, op_e op, int dst, int nbytes);
    int nw = (nbytes + 15) / 16;
    seg_s s;
    s.data = '0; s.len = 0; s.eop = 0;
    for (int i = 0; i < nw; i++) begin
      logic [DW-1:0] w = rnd_word();
      int b = (i == nw-1) ? nbytes - 16*i : 16;
      s.data[DW*(i%4) +: DW] = w;
      s.len += b;
      if (i%4 == 3 || i == nw-1) begin
        pend_s pe;
        s.eop = (i == nw-1);
        pe.op = op; pe.flow = flow; pe.dst = dst; pe.s = s;
        pend[port].push_back(pe);
        s.data = '0; s.len = 0;
      end
      if (port == 0) begin
        in_valid <= 1; in_data <= w; in_eop <= (i == nw-1); in_bytes <= 5'(b); in_flow <= FLOW_W'(flow);
        @(posedge clk); while (!in_ready) @(posedge clk);
      end else begin
        cpw_valid <= 1; cpw_data <= w; cpw_eop <= (i == nw-1); cpw_bytes <= 5'(b); cpw_flow <= FLOW_W'(flow);
        cpw_op <= op; cpw_dst <= FLOW_W'(dst);
        @(posedge clk); while (!cpw_ready) @(posedge clk);
      end
    end
  endtask

  task automatic send_cmd(int port, op_e op, int flow, int dst, int len, bit eop);
    cmd_t c;
    pend_s pe;
    c.op = op; c.flow = FLOW_W'(flow); c.dst = FLOW_W'(dst); c.len = LEN_W'(len); c.eop = eop;
    pe.op = op; pe.flow = flow; pe.dst = dst; pe.s.data = '0; pe.s.len = len; pe.s.eop = eop;
    if (port == 2) begin
      cpc_valid <= 1; cpc_cmd <= c;
      @(posedge clk); while (!cpc_ready) @(posedge clk);
      pend[2].push_back(pe);
    end else begin
      ouc_valid <= 1; ouc_cmd <= c;
      @(posedge clk); while (!ouc_ready) @(posedge clk);
      pend[3].push_back(pe);
    end
  endtask

  // Valid stays high from one item to the next when there is no gap: the
  // driver never lowers and raises valid in the same clock.
  task automatic gap(int port, int n);
    if (n == 0) return;
    unique case (port)
      0: in_valid  <= 0;
      1: cpw_valid <= 0;
      2: cpc_valid <= 0;
      default: ouc_valid <= 0;
    endcase
    repeat (n) @(posedge clk);
  endtask

  function automatic int rflow(); return $urandom_range(FLOWS_USED-1); endfunction

  bit drive_done [4];
  initial begin
    in_valid = 0; cpw_valid = 0; cpc_valid = 0; ouc_valid = 0;
    in_data = '0; in_eop = 0; in_bytes = '0; in_flow = '0;
    cpw_data = '0; cpw_eop = 0; cpw_bytes = '0; cpw_flow = '0; cpw_op = OP_ENQ; cpw_dst = '0;
    cpc_cmd = '0; ouc_cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    @(posedge clk);
    fork
      begin
        for (int i = 0; i < NPKT_IN; i++) begin
          send_pkt(0, rflow(), OP_ENQ, 0, $urandom_range(128, 1));
          gap(0, $urandom_range(20));
        end
        gap(0, 1);
        drive_done[0] = 1;
      end
      begin
        for (int i = 0; i < NPKT_CPW; i++) begin
          op_e ops [5] = '{OP_ENQ_HEAD, OP_OVR, OP_OVR_MOVE, OP_ENQ, OP_READ};
          send_pkt(1, rflow(), ops[$urandom_range(4)], rflow(), $urandom_range(64, 1));
          gap(1, $urandom_range(20));
        end
        gap(1, 1);
        drive_done[1] = 1;
      end
      begin
        for (int i = 0; i < NCMD_CPC; i++) begin
          op_e ops [9] = '{OP_READ, OP_DEQ, OP_DEL, OP_DEL_PKT, OP_MOVE, OP_OVR_LEN,
                           OP_OVR_LEN_MOVE, OP_READ, OP_ENQ};
          send_cmd(2, ops[$urandom_range(8)], rflow(), rflow(), $urandom_range(64, 1), 1'($urandom_range(1)));
          gap(2, $urandom_range(20));
        end
        gap(2, 1);
        drive_done[2] = 1;
      end
      begin
        for (int i = 0; i < NCMD_OUC; i++) begin
          send_cmd(3, OP_DEQ, rflow(), 0, 0, 0);
          gap(3, $urandom_range(6));
        end
        gap(3, 1);
        drive_done[3] = 1;
      end
    join
    // let everything finish
    repeat (400) @(posedge clk);
    // drain every queue through the OUT port
    for (int f = 0; f < NF; f++) begin
      int n = q[f].size();
      for (int k = 0; k < n; k++) send_cmd(3, OP_DEQ, f, 0, 0, 0);
    end
    gap(3, 1);
    repeat (600) @(posedge clk);
    for (int f = 0; f < NF; f++) check(q[f].size() == 0, $sformatf("flow %0d not drained", f));
    for (int p = 0; p < 4; p++) check(pend[p].size() == 0, $sformatf("port %0d commands left", p));
    check(exp_out[0].size() == 0, "CPU read words missing");
    check(exp_out[1].size() == 0, "OUT words missing");
    check(viol == 0, $sformatf("DRAM timing violations: %0d", viol));
    check(used == 0, "segments still in use");
    // every mechanism must have happened
    check(n_full > 0,    "segment pool never ran out");
    check(n_empty > 0,   "no command on an empty queue");
    check(n_reuse > 0,   "free list never reused");
    check(n_bp > 0,      "no reassembly backpressure");
    check(n_reorder > 0, "no bank-conflict reordering");
    check(n_nop > 0,     "no lost access cycle");
    check(n_turn > 0,    "no read-to-write turnaround");
    check(n_hazard > 0,  "no same-segment ordering hold");
    check(n_drop > 0,    "no dropped segment");
    check(n_badop > 0,   "no rejected opcode");
    check(n_pad > 0,     "no padded segment");
    check(n_sched > 0,   "no scheduler arbitration");
    for (int o = 0; o < 11; o++) check(n_op[o] > 0, $sformatf("opcode %0d never executed", o));
    $display("mechanisms: full=%0d empty=%0d reuse=%0d bp=%0d reorder=%0d nop=%0d turn=%0d hazard=%0d drop=%0d badop=%0d pad=%0d sched=%0d",
             n_full, n_empty, n_reuse, n_bp, n_reorder, n_nop, n_turn, n_hazard, n_drop, n_badop, n_pad, n_sched);
    $display("opcodes: %p  words cpu=%0d out=%0d  dram wr=%0d rd=%0d", n_op, got_words[0], got_words[1], nwr, nrd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random readiness of the output ports makes backpressure happen
  always @(posedge clk) begin
    cpr_ready <= ($urandom_range(3) != 0);
    out_ready <= ($urandom_range(9) < 2);
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
