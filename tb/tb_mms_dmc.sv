// tb_mms_dmc: exercises the data memory controller with the DRAM model.
// Phase 1 sends random accesses on all four ports: writes and drops on the
// two write ports (data supplied from per-port word buffers), reads on the
// two read ports, with segment numbers from a small range so that bank
// conflicts and same-segment pairs are frequent. A reference memory, updated
// in access order, predicts every read beat; the DRAM model reports bank-
// timing and read-to-write violations, which must be zero. The test counts
// reordering (a younger access issued before an older one), lost access
// cycles, read-to-write turnarounds and same-segment holds.
// Phase 2 keeps all four FIFOs full with accesses to random segments
// (all distinct, random banks) and measures the fraction of lost access cycles, as in
// the paper's DRAM study (8 banks, 2 write and 2 read ports); phase 3 sends
// accesses to banks in rotation and checks one access per 4 clocks.
module tb_mms_dmc;
  import mms_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  logic av, ar; logic [1:0] ap; acc_t a;
  logic wr_pop, wr_sel; logic [DW-1:0] wr_data;
  logic cmdv, cmdw, wv, rv; logic [SEG_W-1:0] cmds; logic [DW-1:0] wd, rdd;
  logic rdv, rsel; logic [DW-1:0] rdata; acc_t rdesc;
  logic s_start, s_used, s_pend;
  int viol, nwr, nrd;

  mms_dmc dut (.clk, .rst_n, .acc_valid(av), .acc_ready(ar), .acc_port(ap), .acc(a),
    .wr_pop, .wr_sel, .wr_data, .dram_cmd_valid(cmdv), .dram_cmd_write(cmdw), .dram_cmd_seg(cmds),
    .dram_wvalid(wv), .dram_wdata(wd), .dram_rvalid(rv), .dram_rdata(rdd),
    .rd_valid(rdv), .rd_sel(rsel), .rd_data(rdata), .rd_desc(rdesc),
    .slot_start(s_start), .slot_used(s_used), .slot_pending(s_pend));
  ddr_dram_model u_dram (.clk, .cmd_valid(cmdv), .cmd_write(cmdw), .cmd_seg(cmds), .wvalid(wv), .wdata(wd),
    .rvalid(rv), .rdata(rdd), .violations(viol), .writes(nwr), .reads(nrd));

  // write data buffers of the two segmentation ports
  logic [DW-1:0] wbuf [2][16384];
  int wwp [2], wrp [2];
  assign wr_data = wbuf[wr_sel][wrp[wr_sel]];
  always @(posedge clk) if (rst_n && wr_pop) wrp[wr_sel] <= wrp[wr_sel] + 1;

  // reference memory and expected read beats per read port
  logic [4*DW-1:0] refm [int];
  logic [DW-1:0] exp_rd [2][$];
  int n_reorder = 0, n_nop = 0, n_turn = 0, n_hold = 0, n_rd = 0;
  logic [SEQ_W-1:0] seq = 0;
  int issued_seq_max = -1;

  always @(posedge clk) if (rst_n) begin
    if (rdv) begin
      check(exp_rd[rsel].size() != 0, "unexpected read beat");
      if (exp_rd[rsel].size() != 0) begin
        logic [DW-1:0] e;
        e = exp_rd[rsel].pop_front();
        check(rdata == e, $sformatf("read beat %0d port %0d seg %0d", n_rd, rsel, rdesc.seg));
      end
      n_rd++;
    end
    if (s_start && s_pend && !s_used) n_nop++;
    if (dut.decide && dut.pick_v) begin
      for (int p = 0; p < 4; p++)
        if (dut.qcnt[p] != 0 && p != int'(dut.pick)
            && $signed(dut.q[p][dut.qrp[p]].seq - dut.q[dut.pick][dut.qrp[dut.pick]].seq) < 0)
          n_reorder++;
    end
    if (dut.decide) begin
      for (int p = 0; p < 2; p++)
        if (dut.qcnt[p] != 0 && dut.last_read && !dut.q[p][dut.qrp[p]].drop) n_turn++;
      for (int p = 0; p < 4; p++)
        for (int o = 0; o < 4; o++)
          for (int e = 0; e < 4; e++)
            if (o != p && dut.qcnt[p] != 0 && e < int'(dut.qcnt[o])
                && dut.q[o][2'(int'(dut.qrp[o]) + e)].seg == dut.q[p][dut.qrp[p]].seg
                && !dut.q[o][2'(int'(dut.qrp[o]) + e)].drop && !(p < 2 && dut.q[p][dut.qrp[p]].drop)
                && $signed(dut.q[o][2'(int'(dut.qrp[o]) + e)].seq - dut.q[p][dut.qrp[p]].seq) < 0)
              n_hold++;
    end
  end

  task automatic push_acc(int port, int segn, bit drop);
    acc_t x;
    x = '0; x.seq = seq; x.seg = SEG_W'(segn); x.drop = drop; x.flow = FLOW_W'(port); x.len = 64; x.eop = 1;
    if (port < 2) begin
      logic [4*DW-1:0] d;
      d = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
           $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      for (int k = 0; k < 4; k++) wbuf[port][wwp[port] + k] = d[DW*k +: DW];
      wwp[port] += 4;
      if (!drop) refm[segn] = d;
    end else begin
      logic [4*DW-1:0] d;
      d = refm.exists(segn) ? refm[segn] : '0;
      for (int k = 0; k < 4; k++) exp_rd[port-2].push_back(d[DW*k +: DW]);
    end
    av <= 1; ap <= 2'(port); a <= x;
    @(negedge clk); while (!ar) @(negedge clk); @(posedge clk);
    seq++;
  endtask

  initial begin
    int slots, used, t0, loss_x1000;
    av = 0; ap = '0; a = '0; wwp = '{0, 0}; wrp = '{0, 0};
    repeat (3) @(posedge clk); rst_n = 1;
    @(posedge clk);
    // phase 1: random mix
    for (int n = 0; n < 3000; n++) begin
      int port;
      port = $urandom_range(3);
      push_acc(port, $urandom_range(23), port < 2 && $urandom_range(9) == 0);
      if ($urandom_range(3) == 0) begin av <= 0; repeat ($urandom_range(8, 1)) @(posedge clk); end
    end
    av <= 0;
    repeat (200) @(posedge clk);
    check(exp_rd[0].size() == 0 && exp_rd[1].size() == 0, "read beats missing");
    check(viol == 0, $sformatf("DRAM timing violations %0d", viol));
    check(n_reorder > 0, "no reordering");
    check(n_nop > 0, "no lost access cycle");
    check(n_turn > 0, "no read-to-write turnaround");
    check(n_hold > 0, "no same-segment hold");
    $display("phase 1: reorder=%0d nop=%0d turn=%0d hold=%0d reads=%0d writes=%0d", n_reorder, n_nop, n_turn, n_hold, nrd, nwr);
    // phase 2: saturated random traffic, measure access-cycle loss
    slots = 0; used = 0;
    fork
      begin
        for (int n = 0; n < 4000; n++) push_acc(n % 4, ((n + 4) << 8) | int'($urandom_range(255)), 0);
        av <= 0;
      end
      begin
        repeat (400) @(posedge clk);      // let the FIFOs fill
        for (int k = 0; k < 12000; k++) begin
          @(posedge clk);
          if (s_start) begin slots++; if (s_used) used++; end
        end
      end
    join
    repeat (200) @(posedge clk);
    loss_x1000 = 1000 * (slots - used) / slots;
    $display("phase 2: %0d access cycles, %0d used, loss %0d.%03d (published, 8 banks with reordering: 0.046 bank conflicts only, 0.199 with read/write turnaround)",
             slots, used, loss_x1000 / 1000, loss_x1000 % 1000);
    check(loss_x1000 < 390, "reordering loses more than the published round-robin figure 0.39");
    check(viol == 0, "DRAM timing violations in phase 2");
    check(exp_rd[0].size() == 0 && exp_rd[1].size() == 0, "phase 2 read beats missing");
    // phase 3: writes to banks in rotation, one access per 4 clocks
    t0 = -1; used = 0;
    fork
      for (int n = 0; n < 64; n++) push_acc(n % 2, 5000 + n, 0);
      begin
        while (used < 64) begin
          @(posedge clk);
          if (s_used) begin if (t0 < 0) t0 = $time / 10; used++; end
        end
        check(($time / 10) - t0 == 63 * 4, $sformatf("64 conflict-free writes took %0d clocks", ($time / 10) - t0));
      end
    join
    av <= 0;
    repeat (50) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
