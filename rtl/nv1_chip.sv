// nv1_chip -- the NV-1 die: an array of N_NODES nodes (3200 on the prototype)
// with the chip-level I/O that lets several dies work as one array.
//
// Every node runs one instruction per epoch on the outputs of the nodes in its
// address table. Node outputs leave through one shift chain: node 0 is at the
// chip output (data_out), node N_NODES-1 takes chain_in, which comes from the
// data_out of the next chip in a chain of chips (or from a host, which can so
// append input words after the last node). Each shift moves the chain by one
// word, so an epoch's stream is the results of all nodes in ID order followed
// by the host's words. That stream, taken from the first chip's data_out and
// data_out_valid, is fed back to the bcast inputs of every chip; the nodes
// number the valid words and keep the ones their tables name. No address bus
// exists at run time: a word's sender is known by its place in the stream.
//
// Programming: cfg writes are addressed by global node ID. Each chip subtracts
// its chip_base, so only the chip whose range chip_base .. chip_base+N_NODES-1
// holds the ID has a node with a matching local index.
//
// Timing: ctrl, cfg and bcast are registered once at the pins. An epoch is:
// pulse ctrl.epoch_start; assert ctrl.shift for as many clocks as the stream
// has words (in any pattern); wait END_GAP clocks after the last shift; pulse
// ctrl.epoch_end. data_out_valid is high for the clock in which data_out holds
// a word being shifted out, one clock after ctrl.shift at the pins. With
// data_out looped straight back to bcast_in, a word is accumulated 3 clocks
// after its shift at the pins.
// rst_n also disables the assertions below, which lint reports as a
// synchronous use of an asynchronous reset; the logic uses it only
// asynchronously.
// From the paper: the node count, the 16-bit node IDs and 256-entry tables,
// chaining of chips and the absence of a run-time address bus. The chain,
// the broadcast return path, the control pins and the cfg bus are this
// design's own.
module nv1_chip
  import nv1_pkg::*;
#(
  parameter int unsigned N_NODES = CHIP_NODES
) (
  input  logic     clk,
  input  logic     rst_n,
  input  node_id_t chip_base,     // global ID of node 0 of this chip (strap)
  input  ctrl_t    ctrl,
  input  cfg_t     cfg,
  input  data_t    chain_in,      // from the next chip's data_out, or a host
  input  data_t    bcast_in,      // system stream (first chip's data_out)
  input  logic     bcast_valid,   // ... and its data_out_valid
  output data_t    data_out,
  output logic     data_out_valid
);

  ctrl_t    ctrl_q;
  cfg_t     cfg_q;
  data_t    bcast_q;
  logic     bcast_valid_q;
  node_id_t cfg_local;

  assign cfg_local = cfg.node - chip_base;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl_q        <= '0;
      cfg_q         <= '0;
      bcast_q       <= '0;
      bcast_valid_q <= 1'b0;
    end else begin
      ctrl_q        <= ctrl;
      cfg_q         <= cfg;
      cfg_q.node    <= cfg_local;   // no node matches an ID outside the chip
      bcast_q       <= bcast_in;
      bcast_valid_q <= bcast_valid;
    end
  end

  data_t chain [N_NODES+1];   // chain[i] = output of node i, chain[N] = chain_in

  assign chain[N_NODES] = chain_in;

  for (genvar i = 0; i < N_NODES; i++) begin : g_node
    nv1_node u_node (
      .clk, .rst_n,
      .node_idx    (node_id_t'(i)),
      .ctrl        (ctrl_q),
      .cfg         (cfg_q),
      .sh_in       (chain[i+1]),
      .sh_out      (chain[i]),
      .bcast       (bcast_q),
      .bcast_valid (bcast_valid_q),
      .res         (),
      .n_matched   ()
    );
  end

  assign data_out       = chain[0];
  assign data_out_valid = ctrl_q.shift;

  // Rules of the control pins. An epoch's start, shifts and end are separate
  // clocks, and the end follows the last shift by at least END_GAP clocks so
  // that the last word has reached every accumulator.
  int unsigned since_shift;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          since_shift <= END_GAP;
    else if (ctrl.shift) since_shift <= 0;
    else if (since_shift < END_GAP) since_shift <= since_shift + 1;
  end

  a_ctrl_onehot: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({ctrl.epoch_start, ctrl.shift, ctrl.epoch_end}))
    else $error("nv1_chip: epoch_start, shift and epoch_end in the same clock");
  a_end_gap: assert property (@(posedge clk) disable iff (!rst_n)
    ctrl.epoch_end |-> since_shift >= END_GAP)
    else $error("nv1_chip: epoch_end less than END_GAP clocks after a shift");

endmodule
