// tb_mms_scheduler: applies every combination of FIFO-head valids and
// backpressure masks (and random commands) to the internal scheduler and
// compares the grant with a reference strict-priority choice using the
// default port levels {IN 3, CPU data 1, CPU command 0, OUT 2}. Also checks
// that exactly the granted FIFO is popped when the queue manager is ready
// and none when it is not.
module tb_mms_scheduler;
  import mms_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  logic [3:0] rv, pop, mask; cmd_t rc [4]; logic gv, gr; cmd_t gc; logic [1:0] gp;
  mms_scheduler dut (.req_valid(rv), .req_cmd(rc), .req_pop(pop), .mask, .grant_valid(gv),
                     .grant_ready(gr), .grant_cmd(gc), .grant_port(gp));

  localparam int LEVEL [4] = '{3, 1, 0, 2};

  initial begin
    for (int rep = 0; rep < 4; rep++)
      for (int v = 0; v < 16; v++)
        for (int m = 0; m < 16; m++) begin
          int want;
          rv = 4'(v); mask = 4'(m); gr = (rep[0] == 1'b0);
          for (int p = 0; p < 4; p++) begin
            rc[p] = '0; rc[p].flow = FLOW_W'($urandom); rc[p].op = op_e'($urandom_range(10));
          end
          want = -1;
          foreach (LEVEL[p]) if (rv[p] && !mask[p] && (want < 0 || LEVEL[p] > LEVEL[want])) want = p;
          #1;
          check(gv == (want >= 0), $sformatf("valid v=%b m=%b", rv, mask));
          if (want >= 0) begin
            check(int'(gp) == want, $sformatf("port v=%b m=%b got %0d want %0d", rv, mask, gp, want));
            check(gc == rc[want], "command");
            check(pop == (gr ? 4'(1 << want) : 4'b0), $sformatf("pop %b", pop));
          end else check(pop == 4'b0, "pop without grant");
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
