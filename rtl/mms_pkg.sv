// mms_pkg: types and constants shared by the blocks of the memory management
// system (MMS). A packet is cut into 64-byte segments; every segment is held
// in one slot of the data DRAM and described by one word of the pointer SRAM.
// The widths of flow and segment numbers follow the paper's 32K flows and a
// 2 GB data memory of 64-byte segments. The opcode list follows the paper's
// command set; the encodings, the command layout and the pointer-memory word
// layout are this design's own choices.
package mms_pkg;

  localparam int FLOW_W    = 15;            // 32K flows
  localparam int SEG_W     = 25;            // 2 GB / 64 B = 2^25 segments
  localparam int SEG_BYTES = 64;
  localparam int DW        = 128;           // 64-bit DDR, both clock edges
  localparam int BEATS     = SEG_BYTES / (DW / 8);   // 4 words per segment
  localparam int LEN_W     = 7;             // 0..64 bytes
  localparam int SA_W      = SEG_W + 1;     // pointer SRAM word address
  localparam int SEQ_W     = 8;             // age tag of data accesses

  // Port numbers of the paper's Figure 2 (1..4), here 0..3.
  localparam int P_IN   = 0;   // network in, segmentation
  localparam int P_CPUW = 1;   // CPU, segmentation (commands with data)
  localparam int P_CPUR = 2;   // CPU, reassembly (commands without data)
  localparam int P_OUT  = 3;   // network out, reassembly

  typedef enum logic [3:0] {
    OP_ENQ       = 4'd0,   // enqueue one segment at the tail
    OP_ENQ_HEAD  = 4'd1,   // append one segment at the head
    OP_READ      = 4'd2,   // read head segment, queue unchanged
    OP_DEQ       = 4'd3,   // read and remove head segment
    OP_OVR       = 4'd4,   // overwrite head segment data
    OP_OVR_LEN   = 4'd5,   // overwrite head segment length
    OP_DEL       = 4'd6,   // delete head segment
    OP_DEL_PKT   = 4'd7,   // delete head packet
    OP_MOVE      = 4'd8,   // move head packet to the tail of dst
    OP_OVR_LEN_MOVE = 4'd9,
    OP_OVR_MOVE  = 4'd10
  } op_e;

  typedef enum logic [1:0] {
    ST_OK    = 2'd0,
    ST_EMPTY = 2'd1,   // queue was empty
    ST_FULL  = 2'd2,   // no free segment
    ST_BADOP = 2'd3    // opcode not allowed on this port
  } status_e;

  typedef struct packed {
    op_e               op;
    logic [FLOW_W-1:0] flow;
    logic [FLOW_W-1:0] dst;
    logic [LEN_W-1:0]  len;
    logic              eop;
  } cmd_t;

  // One data access handed from the DQM to the DMC.
  typedef struct packed {
    logic [SEQ_W-1:0]  seq;
    logic              drop;     // write port only: discard the segment data
    logic [SEG_W-1:0]  seg;
    logic [FLOW_W-1:0] flow;
    logic [LEN_W-1:0]  len;
    logic              eop;
  } acc_t;

  function automatic logic op_has_data(op_e op);
    return op inside {OP_ENQ, OP_ENQ_HEAD, OP_OVR, OP_OVR_MOVE};
  endfunction

  function automatic logic op_reads(op_e op);
    return op inside {OP_READ, OP_DEQ};
  endfunction

endpackage
