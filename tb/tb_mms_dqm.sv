// tb_mms_dqm: exercises the data queue manager with its pointer SRAM model.
// The testbench plays the internal scheduler (one command at a time, from
// random ports) and the DMC (access FIFO ready at random). A reference model
// keeps, per flow, the list of segment numbers with their length and
// end-of-packet flag, the LIFO free list and the high-water counter, so it
// predicts the exact segment number of every data access, the status of
// every command and the backpressure reservations. Small NUM_FLOWS/NUM_SEGS
// make the pool run out. A second phase with the DMC always ready measures
// the latency of each command kind and checks it against the fixed counts
// this implementation is built for (listed in LAT below).
module tb_mms_dqm;
  import mms_pkg::*;
  localparam int NF = 8, NS = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  logic init_done, cv, cr; cmd_t c; logic [1:0] cport;
  logic [1:0] bp, rsv, unrsv; logic [3:0] rd_mask;
  logic sreq, swe; logic [7:0] sbe; logic [SA_W-1:0] saddr; logic [63:0] swd, srd;
  logic dv, dr; logic [1:0] dport; acc_t dacc;
  logic done; logic [1:0] dnp; op_e dop; logic [FLOW_W-1:0] dfl; status_e dst; logic [7:0] dcyc;

  mms_dqm #(.NUM_FLOWS(NF), .NUM_SEGS(NS)) dut (.clk, .rst_n, .init_done, .cmd_valid(cv), .cmd_ready(cr),
    .cmd(c), .cmd_port(cport), .bp, .rd_mask, .rsv, .unrsv,
    .sram_req(sreq), .sram_we(swe), .sram_be(sbe), .sram_addr(saddr), .sram_wdata(swd), .sram_rdata(srd),
    .dmc_valid(dv), .dmc_ready(dr), .dmc_port(dport), .dmc_acc(dacc),
    .done_valid(done), .done_port(dnp), .done_op(dop), .done_flow(dfl), .done_status(dst), .done_cycles(dcyc));
  zbt_sram_model #(.AW(SA_W), .RD_LAT(2)) u_sram (.clk, .req(sreq), .we(swe), .be(sbe), .addr(saddr),
    .wdata(swd), .rdata(srd));

  // reference model
  int q [NF][$];
  int mlen [NS]; bit meop [NS];
  int fstack [$];
  int hw = 0;
  typedef struct { int port; int seg; bit drop; int len; bit eop; } a_s;
  a_s exp_acc [$];
  int n_acc = 0, n_rsv = 0, n_unrsv = 0, exp_rsv = 0, exp_unrsv = 0;
  int n_full = 0, n_empty = 0, n_reuse = 0;
  // latency (clocks, accept to done) of this implementation with the DMC ready
  // (MOVE-type and DEL_PKT figures are for a 2-segment packet)
  localparam int LAT [11] = '{9, 8, 11, 13, 7, 6, 12, 19, 21, 18, 23};

  always @(posedge clk) if (rst_n) begin
    if (dv && dr) begin
      a_s e;
      check(exp_acc.size() != 0, "unexpected DMC access");
      if (exp_acc.size() != 0) begin
        e = exp_acc.pop_front();
        check(int'(dport) == e.port && dacc.drop == e.drop, $sformatf("access port/drop %0d/%0d want %0d/%0d", dport, dacc.drop, e.port, e.drop));
        if (!e.drop) begin
          check(int'(dacc.seg) == e.seg, $sformatf("access seg %0d want %0d", dacc.seg, e.seg));
          check(int'(dacc.len) == e.len && dacc.eop == e.eop, "access len/eop");
        end
      end
      n_acc++;
    end
    n_rsv += $countones(rsv);
    n_unrsv += $countones(unrsv);
  end

  function automatic int alloc();
    int s;
    if (fstack.size() != 0) begin s = fstack.pop_back(); n_reuse++; end
    else if (hw < NS) begin s = hw; hw++; end
    else s = -1;
    return s;
  endfunction

  function automatic void move_pkt(int src, int dst);
    int tmp [$];
    while (q[src].size() != 0) begin
      int s;
      s = q[src].pop_front();
      tmp.push_back(s);
      if (meop[s]) break;
    end
    foreach (tmp[i]) q[dst].push_back(tmp[i]);
  endfunction

  // predicts accesses and status; returns expected status
  function automatic status_e model(int port, cmd_t x);
    int f = int'(x.flow);
    bit wport = port < 2;
    if (wport != op_has_data(x.op)) begin
      if (wport) exp_acc.push_back('{port, 0, 1, 0, 0});
      return ST_BADOP;
    end
    if (op_reads(x.op)) exp_rsv++;
    if (x.op inside {OP_ENQ, OP_ENQ_HEAD}) begin
      int s = alloc();
      if (s < 0) begin exp_acc.push_back('{port, 0, 1, 0, 0}); n_full++; return ST_FULL; end
      exp_acc.push_back('{port, s, 0, int'(x.len), x.eop});
      mlen[s] = int'(x.len); meop[s] = x.eop;
      if (x.op == OP_ENQ) q[f].push_back(s); else q[f].push_front(s);
      return ST_OK;
    end
    if (q[f].size() == 0) begin
      if (op_has_data(x.op)) exp_acc.push_back('{port, 0, 1, 0, 0});
      if (op_reads(x.op)) exp_unrsv++;
      n_empty++;
      return ST_EMPTY;
    end
    unique case (x.op)
      OP_READ: exp_acc.push_back('{port, q[f][0], 0, mlen[q[f][0]], meop[q[f][0]]});
      OP_DEQ: begin
        exp_acc.push_back('{port, q[f][0], 0, mlen[q[f][0]], meop[q[f][0]]});
        fstack.push_back(q[f].pop_front());
      end
      OP_OVR: exp_acc.push_back('{port, q[f][0], 0, int'(x.len), x.eop});
      OP_OVR_LEN: begin mlen[q[f][0]] = int'(x.len); meop[q[f][0]] = x.eop; end
      OP_DEL: fstack.push_back(q[f].pop_front());
      OP_DEL_PKT: while (q[f].size() != 0) begin
        int s;
        s = q[f].pop_front(); fstack.push_back(s);
        if (meop[s]) break;
      end
      OP_MOVE: move_pkt(f, int'(x.dst));
      OP_OVR_LEN_MOVE: begin mlen[q[f][0]] = int'(x.len); meop[q[f][0]] = x.eop; move_pkt(f, int'(x.dst)); end
      OP_OVR_MOVE: begin exp_acc.push_back('{port, q[f][0], 0, int'(x.len), x.eop}); move_pkt(f, int'(x.dst)); end
      default: ;
    endcase
    return ST_OK;
  endfunction

  bit dr_random = 1;
  always @(posedge clk) dr <= dr_random ? ($urandom_range(2) != 0) : 1'b1;

  task automatic run_cmd(int port, cmd_t x, output int lat);
    status_e want;
    cv <= 1; c <= x; cport <= 2'(port);
    @(posedge clk); while (!cr) @(posedge clk);
    cv <= 0;
    want = model(port, x);
    @(posedge clk); while (!done) @(posedge clk);
    check(dst == want && dop == x.op && dfl == x.flow && int'(dnp) == port,
          $sformatf("op %s port %0d flow %0d: status %s want %s", x.op.name(), port, x.flow, dst.name(), want.name()));
    lat = int'(dcyc);
  endtask

  initial begin
    int lat;
    int lat_seen [11];
    cv = 0; c = '0; cport = '0; bp = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    wait (init_done);
    check($time / 10 >= NF, "queue table clear took fewer clocks than flows");
    @(posedge clk);
    for (int n = 0; n < 3000; n++) begin
      cmd_t x;
      int port;
      x = '0;
      x.op = op_e'($urandom_range(10));
      x.flow = FLOW_W'($urandom_range(3)); x.dst = FLOW_W'($urandom_range(3));
      x.len = LEN_W'($urandom_range(64, 1)); x.eop = 1'($urandom_range(1));
      if ($urandom_range(19) == 0) port = $urandom_range(3);
      else port = op_has_data(x.op) ? $urandom_range(1) : $urandom_range(3, 2);
      if (x.op inside {OP_ENQ, OP_ENQ_HEAD} && $urandom_range(1) == 0) port = 0;
      run_cmd(port, x, lat);
    end
    // latency phase: DMC always ready, one command of each kind on a non-empty queue
    dr_random = 0;
    repeat (5) @(posedge clk);
    for (int o = 0; o < 11; o++) begin
      cmd_t x;
      int port;
      // make sure flow 5 holds a 2-segment packet
      x = '0; x.op = OP_DEL_PKT; x.flow = 5;
      for (int k = 0; k < 20; k++) run_cmd(2, x, lat);
      x = '0; x.op = OP_ENQ; x.flow = 5; x.len = 64; x.eop = 0; run_cmd(0, x, lat);
      x.eop = 1; run_cmd(0, x, lat);
      x = '0; x.op = op_e'(o); x.flow = 5; x.dst = 6; x.len = 10; x.eop = 1;
      port = op_has_data(x.op) ? 1 : 2;
      run_cmd(port, x, lat);
      lat_seen[o] = lat;
      check(lat == LAT[o], $sformatf("latency of %s: %0d clocks, expected %0d", x.op.name(), lat, LAT[o]));
    end
    $display("latency per opcode (clocks): %p", lat_seen);
    repeat (10) @(posedge clk);
    check(exp_acc.size() == 0, "DMC accesses missing");
    check(n_rsv == exp_rsv && n_unrsv == exp_unrsv, $sformatf("reservations %0d/%0d want %0d/%0d", n_rsv, n_unrsv, exp_rsv, exp_unrsv));
    check(n_full > 0 && n_empty > 0 && n_reuse > 0, "pool exhaustion, empty queue and reuse all seen");
    check(rd_mask == 4'b0, "mask without backpressure");
    bp = 2'b10; #1 check(rd_mask == 4'b1000, "OUT backpressure masks port 4");
    $display("accesses=%0d full=%0d empty=%0d reuse=%0d", n_acc, n_full, n_empty, n_reuse);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
