// nv1_pkg -- types and constants shared by the NV-1 node array.
//
// The NV-1 is an array of small processor-memory nodes. Each node is programmed
// once with one instruction and with a table of the node IDs it listens to;
// at run time only data words travel, and each node recognises the words it
// wants by the position (slot) of the word in an epoch's stream.
//
// Following the published design: 16-bit node IDs (up to 64k nodes), a table
// of 256 sender IDs per node, 3200 nodes per chip. This design's own choices:
// 8-bit data words (taken from the "16 + 8 bits" read per clock used in the
// bandwidth figure), the instruction encoding, the control and configuration
// structs below.
package nv1_pkg;

  localparam int unsigned NODE_ID_W   = 16;   // node ID width (64k nodes)
  localparam int unsigned DATA_W      = 8;    // data word on the bus
  localparam int unsigned ACC_W       = 16;   // IPU accumulator width
  localparam int unsigned TABLE_DEPTH = 256;  // address-table entries per node
  localparam int unsigned TABLE_AW    = $clog2(TABLE_DEPTH);
  localparam int unsigned COUNT_W     = TABLE_AW + 1;  // 0 .. TABLE_DEPTH
  localparam int unsigned CHIP_NODES  = 3200; // nodes on one NV-1 die

  typedef logic [NODE_ID_W-1:0] node_id_t;
  typedef logic signed [DATA_W-1:0] data_t;

  // Instruction a node performs once per epoch on the sum of its inputs.
  typedef enum logic [1:0] {
    OP_SUM   = 2'd0,  // result = sum of inputs
    OP_MUL   = 2'd1,  // result = sum of inputs * imm (signed)
    OP_SHIFT = 2'd2,  // result = sum of inputs shifted by imm[3:0];
                      //          imm[7] = 1 selects an arithmetic right shift
    OP_RSVD  = 2'd3   // reserved, behaves as OP_SUM
  } opcode_e;

  // What a configuration write targets inside a node.
  typedef enum logic [1:0] {
    CFG_TABLE = 2'd0, // address-table entry cfg.addr <= cfg.data
    CFG_COUNT = 2'd1, // number of valid table entries <= cfg.data[COUNT_W-1:0]
    CFG_OP    = 2'd2, // opcode <= cfg.data[1:0], imm <= cfg.data[15:8]
    CFG_NONE  = 2'd3  // ignored
  } cfg_sel_e;

  // Run-time control, common to every node of a chip (and of all chained chips).
  typedef struct packed {
    logic epoch_start; // clear accumulators, load results into the output chain
    logic shift;       // move the output chain by one word
    logic epoch_end;   // apply the instruction, latch the node result
  } ctrl_t;

  // Boot-time configuration write, addressed by node ID.
  typedef struct packed {
    logic                 we;
    node_id_t             node;
    cfg_sel_e             sel;
    logic [TABLE_AW-1:0]  addr;
    logic [15:0]          data;
  } cfg_t;

  // Latency, in clocks, from a shift seen at the chip pins to the last word of
  // that shift being accumulated by the nodes, when the stream loops straight
  // back from data_out to bcast_in. epoch_end must follow the last shift by at
  // least this many clocks.
  localparam int unsigned END_GAP = 4;

endpackage
