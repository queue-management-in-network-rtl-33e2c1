// tb_mms_segmentation: drives random packets (1..200 bytes, random flows and
// opcodes) into one segmentation port while the command FIFO and the data
// buffer are drained at random. Every popped segment command is compared
// with the expected {op, flow, dst, len, eop}, and every popped data word
// with the packet data (zero words padding short segments). Also checks that
// a whole 64-byte segment is taken in 4 consecutive clocks (one word per
// clock) and that padding happened.
module tb_mms_segmentation;
  import mms_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  logic iv, ir, ie; logic [DW-1:0] id; logic [4:0] ib; logic [FLOW_W-1:0] ifl, idst; op_e iop;
  logic cv, cp; cmd_t c; logic rv, rp; logic [DW-1:0] rd;
  mms_segmentation dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id), .in_eop(ie),
    .in_bytes(ib), .in_flow(ifl), .in_op(iop), .in_dst(idst),
    .cmd_valid(cv), .cmd_pop(cp), .cmd(c), .rd_valid(rv), .rd_pop(rp), .rd_data(rd));

  cmd_t          exp_cmd [$];
  logic [DW-1:0] exp_word [$];
  int n_pad = 0, n_cmds = 0;
  bit drain = 1;

  // consumers
  always @(posedge clk) if (rst_n) begin
    if (cv && cp) begin
      cmd_t e;
      check(exp_cmd.size() != 0, "unexpected command");
      if (exp_cmd.size() != 0) begin
        e = exp_cmd.pop_front();
        check(c == e, $sformatf("cmd: got op=%0d flow=%0d len=%0d eop=%0d want op=%0d flow=%0d len=%0d eop=%0d",
                                c.op, c.flow, c.len, c.eop, e.op, e.flow, e.len, e.eop));
      end
      n_cmds++;
    end
    if (rv && rp) begin
      check(exp_word.size() != 0, "unexpected word");
      if (exp_word.size() != 0) check(rd == exp_word.pop_front(), "data word");
    end
    if (dut.pad) n_pad++;
  end
  always @(posedge clk) begin
    cp <= drain && ($urandom_range(3) == 0);
    rp <= drain && ($urandom_range(1) == 0);
  end

  task automatic send(int nbytes, int flow, op_e op, int dst);
    int nw = (nbytes + 15) / 16;
    int slen = 0;
    for (int i = 0; i < nw; i++) begin
      logic [DW-1:0] w;
      int b;
      w = {$urandom, $urandom, $urandom, $urandom};
      b = (i == nw-1) ? nbytes - 16*i : 16;
      slen += b;
      exp_word.push_back(w);
      if (i % 4 == 3 || i == nw-1) begin
        cmd_t e;
        e.op = op; e.flow = FLOW_W'(flow); e.dst = FLOW_W'(dst); e.len = LEN_W'(slen); e.eop = (i == nw-1);
        exp_cmd.push_back(e);
        for (int k = i % 4; k < 3; k++) exp_word.push_back('0);
        slen = 0;
      end
      iv <= 1; id <= w; ie <= (i == nw-1); ib <= 5'(b); ifl <= FLOW_W'(flow); iop <= op; idst <= FLOW_W'(dst);
      @(posedge clk); while (!ir) @(posedge clk);
    end
  endtask

  initial begin
    int t0;
    iv = 0; id = '0; ie = 0; ib = '0; ifl = '0; iop = OP_ENQ; idst = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // rate: a 64-byte packet into empty buffers takes 4 clocks
    drain = 0;
    @(posedge clk);
    t0 = $time;
    send(64, 5, OP_ENQ, 0);
    iv <= 0;
    check(($time - t0) / 10 == 4, $sformatf("64-byte segment took %0d clocks", ($time - t0) / 10));
    drain = 1;
    for (int n = 0; n < 300; n++) begin
      op_e ops [4];
      int g;
      ops = '{OP_ENQ, OP_ENQ_HEAD, OP_OVR, OP_OVR_MOVE};
      send($urandom_range(200, 1), $urandom_range(32767), ops[$urandom_range(3)], $urandom_range(32767));
      g = $urandom_range(3);
      if (g != 0) begin iv <= 0; repeat (g) @(posedge clk); end
    end
    iv <= 0;
    repeat (400) @(posedge clk);
    check(exp_cmd.size() == 0, "commands missing");
    check(exp_word.size() == 0, "words missing");
    check(n_pad > 0, "no padding seen");
    $display("commands=%0d pad clocks=%0d", n_cmds, n_pad);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
