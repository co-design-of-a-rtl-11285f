// nv1_mem_handler -- a node's Memory Handler: local matching of incoming words
// against the node's address table.
//
// No address travels with a data word. During an epoch the words arrive in
// the order of their sender's node ID, and the Message Handler numbers them
// (in_slot). The address table in the SRAM holds the IDs of the senders this
// node listens to, sorted in ascending order, in entries 0 .. count-1. The
// Memory Handler keeps a pointer to the next entry it expects and always has
// that entry read out of the SRAM: when the slot number of the incoming word
// equals it, the word is accepted (match = 1) and the pointer moves on. So a
// node does one SRAM read per clock, whatever the table size.
//
// Interface and timing: epoch_start (one clock) resets the pointer and starts
// the read of entry 0; the first word may come one clock later. match is
// combinational from in_valid/in_slot and the SRAM output. Table writes
// (tbl_we) take the SRAM port and must happen outside an epoch.
// rst_n also disables the assertions below, which lint reports as a
// synchronous use of an asynchronous reset; the logic uses it only
// asynchronously.
// The paper gives the table (256 x 16-bit sender IDs) and the principle of
// local address matching; the sorted table and the pointer scheme are this
// design's own way of matching with one read per clock.
module nv1_mem_handler
  import nv1_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 epoch_start,
  input  logic [COUNT_W-1:0]   count,      // valid table entries
  // table writes from the Message Handler
  input  logic                 tbl_we,
  input  logic [TABLE_AW-1:0]  tbl_addr,
  input  node_id_t             tbl_wdata,
  // numbered word from the Message Handler
  input  logic                 in_valid,
  input  node_id_t             in_slot,
  output logic                 match,
  output logic [COUNT_W-1:0]   n_matched,  // words accepted this epoch
  // SRAM port
  output logic                 sram_we,
  output logic [TABLE_AW-1:0]  sram_addr,
  output node_id_t             sram_wdata,
  input  node_id_t             sram_rdata
);

  logic [COUNT_W-1:0] ptr, ptr_next;

  assign match = in_valid && (ptr < count) && (sram_rdata == in_slot);

  always_comb begin
    if (epoch_start)  ptr_next = '0;
    else if (match)   ptr_next = ptr + 1'b1;
    else              ptr_next = ptr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else        ptr <= ptr_next;
  end

  // the SRAM always reads the entry the pointer will hold next clock
  assign sram_we    = tbl_we;
  assign sram_addr  = tbl_we ? tbl_addr : ptr_next[TABLE_AW-1:0];
  assign sram_wdata = tbl_wdata;
  assign n_matched  = ptr;

  // the table must list senders in ascending order: a listed sender whose
  // slot has passed is never accepted
  a_in_order: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && (ptr < count)) |-> (sram_rdata >= in_slot))
    else $error("nv1_mem_handler: address table not sorted, entry %0d skipped", ptr);
  a_no_write_in_stream: assert property (@(posedge clk) disable iff (!rst_n)
    !(tbl_we && in_valid))
    else $error("nv1_mem_handler: table write while words arrive");

endmodule
