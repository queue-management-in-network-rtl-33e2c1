// tb_mms_rd_demux: checks that a read beat is marked valid at exactly the
// reassembly port named by sel, for all valid/select combinations.
module tb_mms_rd_demux;
  int checks = 0, failures = 0;
  logic v, sel; logic [1:0] vp;
  mms_rd_demux dut (.valid(v), .sel, .valid_p(vp));
  initial begin
    for (int i = 0; i < 16; i++) begin
      v = i[0]; sel = i[1];
      #1;
      checks++;
      if (vp != (v ? (sel ? 2'b10 : 2'b01) : 2'b00)) failures++;
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
