// tb_mms_reassembly: plays the queue manager and the DMC around one
// reassembly port. It reserves a buffer slot (rsv) only while bp is low, then
// either delivers a segment of 4 beats with a random length and end-of-packet
// flag or cancels the reservation (unrsv). The output stream is compared word
// by word with the expected framing: only the words inside the segment length,
// eop and byte count on the last word of an end-of-packet segment, sop on the
// first word after an eop. The command FIFO is checked for order. Counts that
// backpressure was raised and that the output ran at one word per clock.
module tb_mms_reassembly;
  import mms_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  logic civ, cir, cv, cp; cmd_t ci, c;
  logic sv; logic [DW-1:0] sd; acc_t sdesc;
  logic rsv, unrsv, bp;
  logic ov, ordy, osop, oeop; logic [DW-1:0] od; logic [4:0] ob; logic [FLOW_W-1:0] of;
  mms_reassembly dut (.clk, .rst_n, .cmd_in_valid(civ), .cmd_in_ready(cir), .cmd_in(ci),
    .cmd_valid(cv), .cmd_pop(cp), .cmd(c), .seg_valid(sv), .seg_data(sd), .seg_desc(sdesc),
    .rsv, .unrsv, .bp, .out_valid(ov), .out_ready(ordy), .out_data(od), .out_sop(osop),
    .out_eop(oeop), .out_bytes(ob), .out_flow(of));

  typedef struct { logic [DW-1:0] d; bit sop, eop; int bytes; int flow; } w_s;
  w_s exp_w [$];
  cmd_t exp_c [$];
  int n_bp = 0, n_words = 0, run = 0, max_run = 0;
  bit next_sop = 1;

  always @(posedge clk) if (rst_n) begin
    if (ov && ordy) begin
      w_s e;
      check(exp_w.size() != 0, "unexpected word");
      if (exp_w.size() != 0) begin
        e = exp_w.pop_front();
        check(od == e.d, "data");
        check(osop == e.sop, $sformatf("sop word %0d", n_words));
        check(oeop == e.eop, $sformatf("eop word %0d", n_words));
        check(!e.eop || int'(ob) == e.bytes, $sformatf("bytes %0d want %0d", ob, e.bytes));
        check(int'(of) == e.flow, "flow");
      end
      n_words++;
      run++; if (run > max_run) max_run = run;
    end else run = 0;
    if (cv && cp) begin
      check(exp_c.size() != 0 && c == exp_c.pop_front(), "command order");
    end
    if (bp) n_bp++;
  end

  always @(posedge clk) begin
    ordy <= (n_words < 200) ? ($urandom_range(3) == 0) : 1'b1;
    cp   <= ($urandom_range(1) == 0);
  end

  // commands in
  initial begin
    civ = 0; ci = '0;
    wait (rst_n);
    for (int i = 0; i < 60; i++) begin
      cmd_t x;
      x = '0; x.op = OP_DEQ; x.flow = FLOW_W'($urandom); x.len = LEN_W'(i);
      civ <= 1; ci <= x;
      @(posedge clk); while (!cir) @(posedge clk);
      exp_c.push_back(x);
    end
    civ <= 0;
  end

  // segments in
  initial begin
    rsv = 0; unrsv = 0; sv = 0; sd = '0; sdesc = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int s = 0; s < 150; s++) begin
      int len, nw;
      bit eop;
      acc_t a;
      logic [DW-1:0] w [4];
      while (bp) @(posedge clk);
      rsv <= 1; @(posedge clk); rsv <= 0;
      repeat ($urandom_range(4)) @(posedge clk);
      if ($urandom_range(9) == 0) begin
        unrsv <= 1; @(posedge clk); unrsv <= 0;
        continue;
      end
      len = $urandom_range(64, 1); eop = ($urandom_range(2) == 0);
      a = '0; a.flow = FLOW_W'(s); a.len = LEN_W'(len); a.eop = eop;
      nw = (len + 15) / 16;
      for (int k = 0; k < 4; k++) begin
        w_s e;
        w[k] = {$urandom, $urandom, $urandom, $urandom};
        if (k < nw) begin
          e.d = w[k]; e.sop = (k == 0) && next_sop; e.eop = eop && (k == nw-1);
          e.bytes = (k == nw-1) ? len - 16*k : 16; e.flow = s;
          exp_w.push_back(e);
        end
      end
      next_sop = eop;
      for (int k = 0; k < 4; k++) begin
        sv <= 1; sd <= w[k]; sdesc <= a; @(posedge clk);
      end
      sv <= 0;
    end
    repeat (300) @(posedge clk);
    check(exp_w.size() == 0, "words missing");
    check(exp_c.size() == 0, "commands missing");
    check(n_bp > 0, "backpressure never raised");
    check(max_run >= 4, $sformatf("longest back-to-back output run %0d words", max_run));
    $display("words=%0d bp clocks=%0d longest run=%0d", n_words, n_bp, max_run);
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
