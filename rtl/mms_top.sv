// mms_top: the Memory Management System (MMS), a hardware queue manager for
// network processors. Packets are cut into 64-byte segments that are stored
// in an external DDR DRAM and chained into per-flow queues (up to 32K flows)
// whose pointers live in an external ZBT SRAM. Four ports feed it:
//   port 1  IN       packet stream, every segment is enqueued   (segmentation)
//   port 2  CPU      packets with a data-carrying command       (segmentation)
//   port 3  CPU      commands without data, read data returned  (reassembly)
//   port 4  OUT      dequeue commands, packet stream returned   (reassembly)
// The internal scheduler passes one command at a time from the port command
// FIFOs to the data queue manager (DQM), which updates the linked lists in
// the SRAM and hands the data transfers to the data memory controller (DMC).
// The DMC reorders them across the four ports to avoid DRAM bank conflicts;
// write data comes from the segmentation buffers through a multiplexer and
// read data goes to the reassembly buffers through a demultiplexer. The
// reassembly ports backpressure the DQM so read data always has room.
// The block structure and the data/command/backpressure paths follow the
// paper's architecture figure; widths, handshakes and the SRAM/DRAM port
// formats are this design's. Everything runs on one clock.
module mms_top
  import mms_pkg::*;
#(
  parameter int NUM_FLOWS   = 32768,
  parameter int NUM_SEGS    = 1 << SEG_W,
  parameter int SRAM_RD_LAT = 2,
  parameter int BANKS       = 8,
  parameter int BUF_SEGS    = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              init_done,
  // port 1: IN
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [DW-1:0]     in_data,
  input  logic              in_eop,
  input  logic [4:0]        in_bytes,
  input  logic [FLOW_W-1:0] in_flow,
  // port 2: CPU, packets with commands
  input  logic              cpw_valid,
  output logic              cpw_ready,
  input  logic [DW-1:0]     cpw_data,
  input  logic              cpw_eop,
  input  logic [4:0]        cpw_bytes,
  input  logic [FLOW_W-1:0] cpw_flow,
  input  op_e               cpw_op,
  input  logic [FLOW_W-1:0] cpw_dst,
  // port 3: CPU, commands and read data
  input  logic              cpc_valid,
  output logic              cpc_ready,
  input  cmd_t              cpc_cmd,
  output logic              cpr_valid,
  input  logic              cpr_ready,
  output logic [DW-1:0]     cpr_data,
  output logic              cpr_sop,
  output logic              cpr_eop,
  output logic [4:0]        cpr_bytes,
  output logic [FLOW_W-1:0] cpr_flow,
  // port 4: OUT, commands and packet stream
  input  logic              ouc_valid,
  output logic              ouc_ready,
  input  cmd_t              ouc_cmd,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [DW-1:0]     out_data,
  output logic              out_sop,
  output logic              out_eop,
  output logic [4:0]        out_bytes,
  output logic [FLOW_W-1:0] out_flow,
  // command completion
  output logic              done_valid,
  output logic [1:0]        done_port,
  output op_e               done_op,
  output logic [FLOW_W-1:0] done_flow,
  output status_e           done_status,
  output logic [7:0]        done_cycles,
  // pointer memory (ZBT SRAM)
  output logic              sram_req,
  output logic              sram_we,
  output logic [7:0]        sram_be,
  output logic [SA_W-1:0]   sram_addr,
  output logic [63:0]       sram_wdata,
  input  logic [63:0]       sram_rdata,
  // data memory (DDR DRAM), segment-level
  output logic              dram_cmd_valid,
  output logic              dram_cmd_write,
  output logic [SEG_W-1:0]  dram_cmd_seg,
  output logic              dram_wvalid,
  output logic [DW-1:0]     dram_wdata,
  input  logic              dram_rvalid,
  input  logic [DW-1:0]     dram_rdata,
  // DMC access-cycle accounting
  output logic              slot_start,
  output logic              slot_used,
  output logic              slot_pending,
  // backpressure of the reassembly ports (observation)
  output logic [1:0]        bp
);
  logic [3:0]  req_valid, req_pop, rd_mask;
  cmd_t        req_cmd [4];
  logic        g_valid, g_ready;
  cmd_t        g_cmd;
  logic [1:0]  g_port;
  logic [1:0]  rsv, unrsv;
  logic        a_valid, a_ready;
  logic [1:0]  a_port;
  acc_t        a_acc;
  logic        wr_pop, wr_sel;
  logic [1:0]  wr_pop_p;
  logic [DW-1:0] wr_data, wr_data_p [2];
  logic [1:0]  wr_valid_p;
  logic        rd_valid, rd_sel;
  logic [1:0]  rd_valid_p;
  logic [DW-1:0] rd_data;
  acc_t        rd_desc;


  // ---- segmentation, ports 1 and 2 ---------------------------------------
  mms_segmentation #(.DEPTH_SEGS(BUF_SEGS)) u_seg_in (
    .clk, .rst_n,
    .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data), .in_eop(in_eop),
    .in_bytes(in_bytes), .in_flow(in_flow), .in_op(OP_ENQ), .in_dst('0),
    .cmd_valid(req_valid[P_IN]), .cmd_pop(req_pop[P_IN]), .cmd(req_cmd[P_IN]),
    .rd_valid(wr_valid_p[0]), .rd_pop(wr_pop_p[0]), .rd_data(wr_data_p[0]));

  mms_segmentation #(.DEPTH_SEGS(BUF_SEGS)) u_seg_cpu (
    .clk, .rst_n,
    .in_valid(cpw_valid), .in_ready(cpw_ready), .in_data(cpw_data), .in_eop(cpw_eop),
    .in_bytes(cpw_bytes), .in_flow(cpw_flow), .in_op(cpw_op), .in_dst(cpw_dst),
    .cmd_valid(req_valid[P_CPUW]), .cmd_pop(req_pop[P_CPUW]), .cmd(req_cmd[P_CPUW]),
    .rd_valid(wr_valid_p[1]), .rd_pop(wr_pop_p[1]), .rd_data(wr_data_p[1]));

  // ---- reassembly, ports 3 and 4 -------------------------------------------

  mms_reassembly #(.DEPTH_SEGS(BUF_SEGS)) u_rea_cpu (
    .clk, .rst_n,
    .cmd_in_valid(cpc_valid), .cmd_in_ready(cpc_ready), .cmd_in(cpc_cmd),
    .cmd_valid(req_valid[P_CPUR]), .cmd_pop(req_pop[P_CPUR]), .cmd(req_cmd[P_CPUR]),
    .seg_valid(rd_valid_p[0]), .seg_data(rd_data), .seg_desc(rd_desc),
    .rsv(rsv[0]), .unrsv(unrsv[0]), .bp(bp[0]),
    .out_valid(cpr_valid), .out_ready(cpr_ready), .out_data(cpr_data), .out_sop(cpr_sop),
    .out_eop(cpr_eop), .out_bytes(cpr_bytes), .out_flow(cpr_flow));

  mms_reassembly #(.DEPTH_SEGS(BUF_SEGS)) u_rea_out (
    .clk, .rst_n,
    .cmd_in_valid(ouc_valid), .cmd_in_ready(ouc_ready), .cmd_in(ouc_cmd),
    .cmd_valid(req_valid[P_OUT]), .cmd_pop(req_pop[P_OUT]), .cmd(req_cmd[P_OUT]),
    .seg_valid(rd_valid_p[1]), .seg_data(rd_data), .seg_desc(rd_desc),
    .rsv(rsv[1]), .unrsv(unrsv[1]), .bp(bp[1]),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data), .out_sop(out_sop),
    .out_eop(out_eop), .out_bytes(out_bytes), .out_flow(out_flow));

  // ---- internal scheduler -----------------------------------------------------
  mms_scheduler u_sched (
    .req_valid, .req_cmd, .req_pop, .mask(rd_mask),
    .grant_valid(g_valid), .grant_ready(g_ready), .grant_cmd(g_cmd), .grant_port(g_port));

  // ---- data queue manager -------------------------------------------------------
  mms_dqm #(.NUM_FLOWS(NUM_FLOWS), .NUM_SEGS(NUM_SEGS), .SRAM_RD_LAT(SRAM_RD_LAT)) u_dqm (
    .clk, .rst_n, .init_done,
    .cmd_valid(g_valid), .cmd_ready(g_ready), .cmd(g_cmd), .cmd_port(g_port),
    .bp, .rd_mask, .rsv, .unrsv,
    .sram_req, .sram_we, .sram_be, .sram_addr, .sram_wdata, .sram_rdata,
    .dmc_valid(a_valid), .dmc_ready(a_ready), .dmc_port(a_port), .dmc_acc(a_acc),
    .done_valid, .done_port, .done_op, .done_flow, .done_status, .done_cycles);

  // ---- data memory controller and data path -------------------------------------
  mms_dmc #(.BANKS(BANKS)) u_dmc (
    .clk, .rst_n,
    .acc_valid(a_valid), .acc_ready(a_ready), .acc_port(a_port), .acc(a_acc),
    .wr_pop, .wr_sel, .wr_data,
    .dram_cmd_valid, .dram_cmd_write, .dram_cmd_seg, .dram_wvalid, .dram_wdata,
    .dram_rvalid, .dram_rdata,
    .rd_valid, .rd_sel, .rd_data, .rd_desc,
    .slot_start, .slot_used, .slot_pending);

  mms_wr_mux u_wmux (.sel(wr_sel), .pop(wr_pop), .pop_p(wr_pop_p), .data_p(wr_data_p), .data(wr_data));
  mms_rd_demux u_rdmx (.valid(rd_valid), .sel(rd_sel), .valid_p(rd_valid_p));

  // The DMC only pops segment data that the segmentation buffer holds.
  a_wr_data_present: assert property (@(posedge clk) disable iff (!rst_n)
    wr_pop |-> wr_valid_p[wr_sel]);
endmodule
