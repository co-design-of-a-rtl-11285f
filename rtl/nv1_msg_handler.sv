// nv1_msg_handler -- a node's Message Handler: the node's interface to the
// array, its configuration registers and its run-time control.
//
// Configuration: a write on the cfg bus whose node field equals this node's
// index is decoded here. Table writes are handed to the Memory Handler (and
// so to the SRAM); the entry count, the opcode and the immediate are kept in
// registers here.
//
// Communication: the node's output travels on a shift chain. At epoch_start
// the node loads its IPU result into its chain register (sh_out); on each
// shift the register takes the word of its upstream neighbour (sh_in). The
// chain's end is the chip output, so the results leave the chip in node
// order, one word per shift. The same stream comes back to every node on the
// broadcast input (bcast, bcast_valid); the Message Handler numbers the valid
// words of an epoch 0, 1, 2, ... (the slot, i.e. the sender's node ID) and
// passes word and slot, registered, to the Memory Handler and the IPU.
//
// Timing: one clock from bcast to in_valid/in_data/in_slot. epoch_start
// clears the slot counter and any word in flight. The other sub-blocks take
// epoch_start and epoch_end from ctrl themselves.
// The paper gives the Message Handler's duties (bus communication, control,
// decoding the programming, starting the node); the shift chain, the
// slot numbering and the cfg write format are this design's choices.
module nv1_msg_handler
  import nv1_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  node_id_t             node_idx,   // this node's index, for cfg decode
  input  ctrl_t                ctrl,
  input  cfg_t                 cfg,
  // output shift chain
  input  data_t                sh_in,
  output data_t                sh_out,
  input  data_t                res,        // IPU result
  // broadcast stream
  input  data_t                bcast,
  input  logic                 bcast_valid,
  output logic                 in_valid,
  output data_t                in_data,
  output node_id_t             in_slot,
  // configuration
  output logic                 tbl_we,
  output logic [TABLE_AW-1:0]  tbl_addr,
  output node_id_t             tbl_wdata,
  output logic [COUNT_W-1:0]   count,
  output opcode_e              opcode,
  output logic [7:0]           imm
);

  logic     cfg_hit;
  node_id_t slot_cnt;

  assign cfg_hit     = cfg.we && (cfg.node == node_idx);
  assign tbl_we      = cfg_hit && (cfg.sel == CFG_TABLE);
  assign tbl_addr    = cfg.addr;
  assign tbl_wdata   = cfg.data;

  // configuration registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count  <= '0;
      opcode <= OP_SUM;
      imm    <= '0;
    end else if (cfg_hit) begin
      if (cfg.sel == CFG_COUNT) count <= cfg.data[COUNT_W-1:0];
      if (cfg.sel == CFG_OP) begin
        opcode <= opcode_e'(cfg.data[1:0]);
        imm    <= cfg.data[15:8];
      end
    end
  end

  // output chain register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                sh_out <= '0;
    else if (ctrl.epoch_start) sh_out <= res;
    else if (ctrl.shift)       sh_out <= sh_in;
  end

  // numbering of the broadcast words
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_cnt <= '0;
      in_valid <= 1'b0;
      in_data  <= '0;
      in_slot  <= '0;
    end else if (ctrl.epoch_start) begin
      slot_cnt <= '0;
      in_valid <= 1'b0;
    end else begin
      in_valid <= bcast_valid;
      if (bcast_valid) begin
        in_data  <= bcast;
        in_slot  <= slot_cnt;
        slot_cnt <= slot_cnt + 1'b1;
      end
    end
  end

endmodule
