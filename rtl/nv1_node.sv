// nv1_node -- one NV-1 node (core): Message Handler, Memory Handler, SRAM and
// IPU, connected as in the paper's node diagram.
//
// Clock and control go to all sub-blocks. The Message Handler takes the
// configuration and the broadcast data, and drives the node's output (sh_out, a stage of the
// output chain). The Memory Handler and the SRAM hold the node's address
// table and pick the words the node listens to; the IPU accumulates those
// words and runs the node's one instruction at epoch end.
//
// Timing within an epoch: a broadcast word is numbered by the Message
// Handler (1 clock), matched combinationally by the Memory Handler and added
// by the IPU at the next edge, so it is in the accumulator 2 clocks after it
// is on bcast. At epoch_end the result is latched; at the next epoch_start it
// enters the output chain.
// The four-block structure follows the paper; the signals between the blocks
// are this design's.
module nv1_node
  import nv1_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  node_id_t  node_idx,
  input  ctrl_t     ctrl,
  input  cfg_t      cfg,
  input  data_t     sh_in,
  output data_t     sh_out,
  input  data_t     bcast,
  input  logic      bcast_valid,
  output data_t     res,
  output logic [COUNT_W-1:0] n_matched
);

  logic                 in_valid, match;
  data_t                in_data;
  node_id_t             in_slot;
  logic                 tbl_we, sram_we;
  logic [TABLE_AW-1:0]  tbl_addr, sram_addr;
  node_id_t             tbl_wdata, sram_wdata, sram_rdata;
  logic [COUNT_W-1:0]   count;
  opcode_e              opcode;
  logic [7:0]           imm;
  logic                 epoch_start, epoch_end;

  // control goes to every sub-block, as in the node diagram
  assign epoch_start = ctrl.epoch_start;
  assign epoch_end   = ctrl.epoch_end;

  nv1_msg_handler u_msg (
    .clk, .rst_n, .node_idx, .ctrl, .cfg,
    .sh_in, .sh_out, .res,
    .bcast, .bcast_valid,
    .in_valid, .in_data, .in_slot,
    .tbl_we, .tbl_addr, .tbl_wdata, .count, .opcode, .imm
  );

  nv1_mem_handler u_mem (
    .clk, .rst_n, .epoch_start, .count,
    .tbl_we, .tbl_addr, .tbl_wdata,
    .in_valid, .in_slot, .match, .n_matched,
    .sram_we, .sram_addr, .sram_wdata, .sram_rdata
  );

  nv1_sram #(.DEPTH(TABLE_DEPTH), .WIDTH(NODE_ID_W)) u_sram (
    .clk, .we(sram_we), .addr(sram_addr), .wdata(sram_wdata), .rdata(sram_rdata)
  );

  nv1_ipu u_ipu (
    .clk, .rst_n, .clear(epoch_start), .in_valid(match), .in_data,
    .finalize(epoch_end), .opcode, .imm, .res
  );

endmodule
