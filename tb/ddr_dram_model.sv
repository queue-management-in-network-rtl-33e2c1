// ddr_dram_model: behavioural model (not synthesizable) of the DDR DRAM that
// holds segment data, at the level of the controller's segment port. A write
// command is followed by BEATS data beats starting in the same clock; a read
// returns BEATS beats starting RD_LAT clocks after the command. Storage is
// sparse. The model checks the timing rules the controller must keep: a bank
// is busy for BUSY_CLKS clocks after an access, and a write may not start
// within TURN_CLKS clocks after a read; violations are counted.
module ddr_dram_model #(
  parameter int SEG_W     = 25,
  parameter int DW        = 128,
  parameter int BEATS     = 4,
  parameter int BANKS     = 8,
  parameter int RD_LAT    = 6,
  parameter int BUSY_CLKS = 16,
  parameter int TURN_CLKS = 8
) (
  input  logic             clk,
  input  logic             cmd_valid,
  input  logic             cmd_write,
  input  logic [SEG_W-1:0] cmd_seg,
  input  logic             wvalid,
  input  logic [DW-1:0]    wdata,
  output logic             rvalid,
  output logic [DW-1:0]    rdata,
  output int               violations,
  output int               writes,
  output int               reads
);
  logic [DW*BEATS-1:0] mem [logic [SEG_W-1:0]];
  longint              bank_last [BANKS];
  longint              last_read, now;
  logic [SEG_W-1:0]    wseg;
  int                  wbeat;
  // read return queue: data word and the clock it is due
  logic [DW-1:0]       rq_data [$];
  longint              rq_due  [$];

  initial begin
    violations = 0; writes = 0; reads = 0; now = 0; last_read = -1000; wbeat = 0; wseg = '0;
    for (int b = 0; b < BANKS; b++) bank_last[b] = -1000;
    rvalid = 1'b0; rdata = '0;
  end

  always @(posedge clk) begin
    int b;
    now++;
    if (cmd_valid) begin
      b = int'(cmd_seg) % BANKS;
      if (now - bank_last[b] < BUSY_CLKS) violations++;
      bank_last[b] = now;
      if (cmd_write) begin
        if (now - last_read < TURN_CLKS) violations++;
        wseg = cmd_seg; wbeat = 0; writes++;
      end else begin
        logic [DW*BEATS-1:0] seg;
        seg = mem.exists(cmd_seg) ? mem[cmd_seg] : '0;
        last_read = now; reads++;
        for (int k = 0; k < BEATS; k++) begin
          rq_data.push_back(seg[DW*k +: DW]);
          rq_due.push_back(now + RD_LAT + k);
        end
      end
    end
    if (wvalid) begin
      logic [DW*BEATS-1:0] seg;
      seg = mem.exists(wseg) ? mem[wseg] : '0;
      seg[DW*wbeat +: DW] = wdata;
      mem[wseg] = seg;
      wbeat++;
    end
    if (rq_due.size() != 0 && rq_due[0] == now + 1) begin
      rvalid <= 1'b1;
      rdata  <= rq_data.pop_front();
      void'(rq_due.pop_front());
    end else begin
      rvalid <= 1'b0;
    end
  end
endmodule
