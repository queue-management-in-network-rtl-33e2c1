// tb_mms_wr_mux: checks that the write-data multiplexer forwards the head
// word of the selected segmentation buffer and steers the pop to that buffer
// only, for random data and all select/pop combinations.
module tb_mms_wr_mux;
  import mms_pkg::*;
  int checks = 0, failures = 0;
  logic sel, pop; logic [1:0] pop_p; logic [DW-1:0] dp [2]; logic [DW-1:0] d;
  mms_wr_mux dut (.sel, .pop, .pop_p, .data_p(dp), .data(d));
  initial begin
    for (int i = 0; i < 200; i++) begin
      sel = 1'($urandom); pop = 1'($urandom);
      dp[0] = {$urandom, $urandom, $urandom, $urandom};
      dp[1] = {$urandom, $urandom, $urandom, $urandom};
      #1;
      checks++; if (d != (sel ? dp[1] : dp[0])) failures++;
      checks++; if (pop_p != (pop ? (sel ? 2'b10 : 2'b01) : 2'b00)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
