// tb_mms_dmc_banks: the DRAM throughput-loss study for 1, 4, 8, 12 and 16
// banks. One data memory controller per bank count is fed with saturated
// random traffic on its two write and two read ports, and the fraction of
// access cycles lost to bank conflicts and read-to-write turnaround is
// measured over 3000 access cycles. The published figures for the same
// reordering scheduler are 0.750, 0.331, 0.199, 0.159 and 0.139. The test
// requires the single-bank loss to be exactly 0.750 (a bank is busy for 4
// access cycles), the loss not to grow with more banks, each figure to lie
// within 0.10 of the published one, and no DRAM timing violation. This
// design loses more than the published figures at 8 banks and above
// (about 0.25 against 0.20 at 8 banks): there the loss is dominated by the
// read-to-write turnaround rule, and the published study's DRAM model,
// whose timing it does not give in full, evidently charges it less often.
// The tolerance is this test's choice.
module tb_mms_dmc_banks;
  import mms_pkg::*;
  localparam int NB = 5;
  localparam int BANK_N [NB] = '{1, 4, 8, 12, 16};
  localparam int PAPER  [NB] = '{750, 331, 199, 159, 139};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic done [NB];
  int   loss [NB];
  int   viol [NB];

  for (genvar i = 0; i < NB; i++) begin : g_probe
    dmc_loss_probe #(.BANKS(BANK_N[i])) u_probe (.clk, .rst_n, .done(done[i]), .loss_x1000(loss[i]), .violations(viol[i]));
  end

  initial begin
    bit all;
    repeat (3) @(posedge clk);
    rst_n = 1;
    all = 0;
    while (!all) begin
      @(posedge clk);
      all = 1;
      for (int i = 0; i < NB; i++) if (!done[i]) all = 0;
    end
    for (int i = 0; i < NB; i++) begin
      int d;
      d = loss[i] - PAPER[i];
      checks++;
      if (d > 100 || d < -100) begin
        failures++;
        $display("FAIL: %0d banks: loss 0.%03d, published 0.%03d", BANK_N[i], loss[i], PAPER[i]);
      end
      checks++;
      if (viol[i] != 0) begin failures++; $display("FAIL: %0d banks: %0d DRAM timing violations", BANK_N[i], viol[i]); end
      checks++;
      if (i == 0 && loss[i] != 750) begin failures++; $display("FAIL: single-bank loss 0.%03d", loss[i]); end
      if (i > 0 && loss[i] > loss[i-1]) begin failures++; $display("FAIL: loss grows from %0d to %0d banks", BANK_N[i-1], BANK_N[i]); end
      $display("%0d banks: loss 0.%03d (published 0.%03d)", BANK_N[i], loss[i], PAPER[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
