// tb_mms_full: the memory management system at its full size (32K flows,
// 2^25 segments of 64 bytes, 8 DRAM banks), with every parameter of the top
// at its default. It waits for the queue table to be cleared after reset
// (one SRAM write per flow, so NUM_FLOWS clocks, checked), then takes two
// packets through complete operations:
//   * a 100-byte packet enters on the IN port for flow 20000 and is stored as
//     two segments (64 + 36 bytes);
//   * the CPU reads the head segment of that flow (the queue is unchanged);
//   * the CPU port sends a 20-byte packet with a plain enqueue to flow 32767,
//     the highest flow number;
//   * the OUT port dequeues flow 20000 twice and flow 32767 once, and then
//     once more on the empty flow 20000, which must be refused as EMPTY.
// Every word on the two read ports is compared with what was sent, and the
// completion status of each command is checked. The SRAM and DRAM are the
// behavioural models used by the other tests. The sizes are the published
// design's (32K flows, 2 GB of segments, 8 banks); the port traffic and
// the flow numbers are this test's choice.
module tb_mms_full;
  import mms_pkg::*;

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

  mms_top dut (.*);

  zbt_sram_model #(.AW(SA_W), .RD_LAT(2)) u_sram (.clk, .req(sram_req), .we(sram_we), .be(sram_be),
    .addr(sram_addr), .wdata(sram_wdata), .rdata(sram_rdata));
  ddr_dram_model u_dram (.clk, .cmd_valid(dram_cmd_valid), .cmd_write(dram_cmd_write), .cmd_seg(dram_cmd_seg),
    .wvalid(dram_wvalid), .wdata(dram_wdata), .rvalid(dram_rvalid), .rdata(dram_rdata),
    .violations(viol), .writes(nwr), .reads(nrd));

  // expected words on the CPU read port (0) and the OUT port (1)
  typedef struct { logic [DW-1:0] data; bit eop; int bytes; int flow; } word_s;
  word_s exp_out [2][$];
  // expected completions, in order
  typedef struct { op_e op; int flow; status_e st; } done_s;
  done_s exp_done [$];
  int n_done = 0;

  always @(posedge clk) if (rst_n) begin
    if (cpr_valid && cpr_ready) chk_word(0, cpr_data, cpr_eop, cpr_bytes, cpr_flow);
    if (out_valid && out_ready) chk_word(1, out_data, out_eop, out_bytes, out_flow);
    if (done_valid) begin
      if (exp_done.size() == 0) check(0, "unexpected completion");
      else begin
        done_s e;
        e = exp_done.pop_front();
        check(done_op == e.op && int'(done_flow) == e.flow && done_status == e.st,
              $sformatf("completion: got %s flow %0d %s, want %s flow %0d %s", done_op.name(), done_flow,
                        done_status.name(), e.op.name(), e.flow, e.st.name()));
      end
      n_done++;
    end
  end

  task automatic chk_word(int p, logic [DW-1:0] d, bit eop, int bytes, int flow);
    word_s w;
    if (exp_out[p].size() == 0) begin check(0, $sformatf("unexpected word on port %0d", p)); return; end
    w = exp_out[p].pop_front();
    check(w.data == d && w.eop == eop && w.flow == flow && (!eop || w.bytes == bytes),
          $sformatf("word on port %0d (flow %0d eop %0d bytes %0d)", p, flow, eop, bytes));
  endtask

  // packet words, kept to predict the read ports
  logic [DW-1:0] pa [7];
  logic [DW-1:0] pb [2];

  task automatic push_exp(int p, int flow, logic [DW-1:0] w, bit eop, int bytes);
    word_s x;
    x.data = w; x.eop = eop; x.bytes = bytes; x.flow = flow;
    exp_out[p].push_back(x);
  endtask

  task automatic send_cmd(int port, op_e op, int flow);
    cmd_t c;
    c = '0; c.op = op; c.flow = FLOW_W'(flow);
    if (port == 2) begin
      cpc_valid <= 1; cpc_cmd <= c;
      @(negedge clk); while (!cpc_ready) @(negedge clk); @(posedge clk);
      cpc_valid <= 0; @(posedge clk);
    end else begin
      ouc_valid <= 1; ouc_cmd <= c;
      @(negedge clk); while (!ouc_ready) @(negedge clk); @(posedge clk);
      ouc_valid <= 0; @(posedge clk);
    end
  endtask

  task automatic expect_done(op_e op, int flow, status_e st);
    done_s d;
    d.op = op; d.flow = flow; d.st = st;
    exp_done.push_back(d);
  endtask

  task automatic wait_done(int n);
    int t;
    t = 0;
    while (n_done < n && t < 2000) begin @(posedge clk); t++; end
    check(n_done >= n, $sformatf("only %0d of %0d commands completed", n_done, n));
  endtask

  initial begin
    int t_init;
    in_valid = 0; cpw_valid = 0; cpc_valid = 0; ouc_valid = 0;
    in_data = '0; in_eop = 0; in_bytes = '0; in_flow = '0;
    cpw_data = '0; cpw_eop = 0; cpw_bytes = '0; cpw_flow = '0; cpw_op = OP_ENQ; cpw_dst = '0;
    cpc_cmd = '0; ouc_cmd = '0; cpr_ready = 1; out_ready = 1;
    for (int i = 0; i < 7; i++) pa[i] = {$urandom, $urandom, $urandom, $urandom};
    for (int i = 0; i < 2; i++) pb[i] = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1;
    t_init = 0;
    while (!init_done) begin @(posedge clk); t_init++; end
    check(t_init >= 32768 && t_init <= 32768 + 4, $sformatf("queue table clear took %0d clocks", t_init));
    @(posedge clk);

    // 100-byte packet on IN for flow 20000: segments of 64 and 36 bytes
    expect_done(OP_ENQ, 20000, ST_OK);
    expect_done(OP_ENQ, 20000, ST_OK);
    for (int i = 0; i < 7; i++) begin
      in_valid <= 1; in_data <= pa[i]; in_eop <= (i == 6); in_bytes <= (i == 6) ? 5'd4 : 5'd16;
      in_flow <= FLOW_W'(20000);
      @(negedge clk); while (!in_ready) @(negedge clk); @(posedge clk);
    end
    in_valid <= 0;
    wait_done(2);

    // CPU reads the head segment of flow 20000
    for (int i = 0; i < 4; i++) push_exp(0, 20000, pa[i], 1'b0, 16);
    expect_done(OP_READ, 20000, ST_OK);
    send_cmd(2, OP_READ, 20000);
    wait_done(3);

    // 20-byte packet with a plain enqueue from the CPU data port to flow 32767
    expect_done(OP_ENQ, 32767, ST_OK);
    for (int i = 0; i < 2; i++) begin
      cpw_valid <= 1; cpw_data <= pb[i]; cpw_eop <= (i == 1); cpw_bytes <= (i == 1) ? 5'd4 : 5'd16;
      cpw_flow <= FLOW_W'(32767); cpw_op <= OP_ENQ; cpw_dst <= '0;
      @(negedge clk); while (!cpw_ready) @(negedge clk); @(posedge clk);
    end
    cpw_valid <= 0;
    wait_done(4);

    // OUT dequeues both flows, then tries the now empty flow 20000
    for (int i = 0; i < 7; i++) push_exp(1, 20000, pa[i], i == 6, (i == 6) ? 4 : 16);
    for (int i = 0; i < 2; i++) push_exp(1, 32767, pb[i], i == 1, (i == 1) ? 4 : 16);
    expect_done(OP_DEQ, 20000, ST_OK);
    expect_done(OP_DEQ, 20000, ST_OK);
    expect_done(OP_DEQ, 32767, ST_OK);
    expect_done(OP_DEQ, 20000, ST_EMPTY);
    send_cmd(3, OP_DEQ, 20000);
    send_cmd(3, OP_DEQ, 20000);
    send_cmd(3, OP_DEQ, 32767);
    send_cmd(3, OP_DEQ, 20000);
    wait_done(8);
    repeat (100) @(posedge clk);

    check(exp_out[0].size() == 0, "CPU read words missing");
    check(exp_out[1].size() == 0, "OUT words missing");
    check(exp_done.size() == 0, "completions missing");
    check(viol == 0, $sformatf("DRAM timing violations: %0d", viol));
    check(nwr == 3 && nrd == 4, $sformatf("DRAM saw %0d writes and %0d reads, want 3 and 4", nwr, nrd));
    $display("full size: init %0d clocks, %0d commands, dram wr=%0d rd=%0d", t_init, n_done, nwr, nrd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
