// dmc_loss_probe: test helper that drives one data memory controller,
// built with BANKS banks, with saturated random traffic and measures the
// fraction of access cycles it loses. The four access FIFOs (two write and
// two read ports) are kept full with accesses to distinct segments, so the
// banks they hit are uniformly random: the traffic model of the published
// DRAM study (random bank access, 2 write and 2 read ports). Write data is
// constant and read data is not checked. Segment numbers are distinct (a
// counter in the upper bits) with random low 8 bits, so the bank is random; the DRAM model counts timing
// violations. After a warm-up the probe counts NSLOTS access cycles and
// reports the lost ones, in thousandths, on loss_x1000 with done raised.
module dmc_loss_probe
  import mms_pkg::*;
#(
  parameter int BANKS  = 8,
  parameter int NSLOTS = 3000
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   loss_x1000,
  output int   violations
);
  logic av, ar; logic [1:0] ap; acc_t a;
  logic wr_pop, wr_sel;
  logic cmdv, cmdw, wv, rv; logic [SEG_W-1:0] cmds; logic [DW-1:0] wd, rdd;
  logic rdv, rsel; logic [DW-1:0] rdata; acc_t rdesc;
  logic s_start, s_used, s_pend;
  int nwr, nrd;

  mms_dmc #(.BANKS(BANKS)) u_dmc (.clk, .rst_n, .acc_valid(av), .acc_ready(ar), .acc_port(ap), .acc(a),
    .wr_pop, .wr_sel, .wr_data('0), .dram_cmd_valid(cmdv), .dram_cmd_write(cmdw), .dram_cmd_seg(cmds),
    .dram_wvalid(wv), .dram_wdata(wd), .dram_rvalid(rv), .dram_rdata(rdd),
    .rd_valid(rdv), .rd_sel(rsel), .rd_data(rdata), .rd_desc(rdesc),
    .slot_start(s_start), .slot_used(s_used), .slot_pending(s_pend));
  ddr_dram_model #(.BANKS(BANKS)) u_dram (.clk, .cmd_valid(cmdv), .cmd_write(cmdw), .cmd_seg(cmds),
    .wvalid(wv), .wdata(wd), .rvalid(rv), .rdata(rdd), .violations(violations), .writes(nwr), .reads(nrd));

  // one access per clock whenever the addressed FIFO has room; the port
  // rotates only on acceptance so that every FIFO stays full
  logic [SEQ_W-1:0] seq;
  int n;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      av <= 1'b0; ap <= '0; a <= '0; seq <= '0; n <= 0;
    end else begin
      av <= 1'b1;
      if (av && ar) begin
        acc_t x;
        x = '0;
        x.seq = seq + 1'b1; x.seg = SEG_W'(((n + 1) << 8) | int'($urandom_range(255))); x.flow = FLOW_W'(ap + 2'd1); x.len = 64; x.eop = 1'b1;
        a <= x; ap <= ap + 2'd1; seq <= seq + 1'b1; n <= n + 1;
      end else if (!av) begin
        acc_t x;
        x = '0;
        x.seq = '0; x.seg = SEG_W'(1000); x.len = 64; x.eop = 1'b1;
        a <= x;
      end
    end
  end

  int clk_n, slots, used;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clk_n <= 0; slots <= 0; used <= 0; done <= 1'b0; loss_x1000 <= 0;
    end else begin
      clk_n <= clk_n + 1;
      if (clk_n > 400 && slots < NSLOTS && s_start) begin
        slots <= slots + 1;
        if (s_used) used <= used + 1;
      end
      if (slots == NSLOTS && !done) begin
        done <= 1'b1;
        loss_x1000 <= 1000 * (NSLOTS - used) / NSLOTS;
      end
    end
  end
endmodule
