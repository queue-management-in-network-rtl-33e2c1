// mms_scheduler: the internal scheduler of the MMS. It looks at the heads of
// the four port command FIFOs (IN, CPU data, CPU command, OUT) and forwards
// one command to the data queue manager, giving each port its own service
// priority as the paper describes. The priority scheme itself is not given in
// the paper: this design uses strict priority with one level per port
// (parameter PRIO, higher wins, ties go to the lower port number). Ports named
// in mask (backpressured read ports) are skipped.
// Interface: grant_valid/grant_ready handshake with the queue manager; the
// selected FIFO is popped in the same clock as the handshake. Combinational,
// no latency.
module mms_scheduler
  import mms_pkg::*;
#(
  parameter int NPORTS = 4,
  parameter int PRIO [NPORTS] = '{3, 1, 0, 2}
) (
  input  logic [NPORTS-1:0]         req_valid,
  input  cmd_t                      req_cmd [NPORTS],
  output logic [NPORTS-1:0]         req_pop,
  input  logic [NPORTS-1:0]         mask,
  output logic                      grant_valid,
  input  logic                      grant_ready,
  output cmd_t                      grant_cmd,
  output logic [$clog2(NPORTS)-1:0] grant_port
);
  logic [NPORTS-1:0] elig;
  int                best;

  assign elig = req_valid & ~mask;

  always_comb begin
    best = -1;
    for (int i = 0; i < NPORTS; i++)
      if (elig[i] && (best < 0 || PRIO[i] > PRIO[best])) best = i;
  end

  assign grant_valid = (best >= 0);
  assign grant_port  = grant_valid ? ($clog2(NPORTS))'(best) : '0;
  assign grant_cmd   = req_cmd[grant_port];

  always_comb begin
    req_pop = '0;
    if (grant_valid && grant_ready) req_pop[grant_port] = 1'b1;
  end
endmodule
