// zbt_sram_model: behavioural model (not synthesizable) of the pipelined ZBT
// SRAM that holds the queue manager's pointers. 64-bit words with byte
// enables; a write takes effect at the clock edge of the request, a read
// returns its word RD_LAT clocks after the request. Storage is sparse, so the
// full 2^26-word address space costs only what is written. Words never written
// read as a fixed garbage pattern.
module zbt_sram_model #(
  parameter int AW     = 26,
  parameter int RD_LAT = 2
) (
  input  logic          clk,
  input  logic          req,
  input  logic          we,
  input  logic [7:0]    be,
  input  logic [AW-1:0] addr,
  input  logic [63:0]   wdata,
  output logic [63:0]   rdata
);
  logic [63:0] mem [logic [AW-1:0]];
  logic [63:0] pipe [RD_LAT];

  assign rdata = pipe[RD_LAT-1];

  always @(posedge clk) begin
    logic [63:0] w;
    for (int i = RD_LAT-1; i > 0; i--) pipe[i] <= pipe[i-1];
    pipe[0] <= 64'hBAD0_BAD0_BAD0_BAD0;
    if (req) begin
      w = mem.exists(addr) ? mem[addr] : 64'hBAD0_BAD0_BAD0_BAD0;
      if (we) begin
        for (int b = 0; b < 8; b++) if (be[b]) w[8*b +: 8] = wdata[8*b +: 8];
        mem[addr] = w;
      end else begin
        pipe[0] <= w;
      end
    end
  end
endmodule
