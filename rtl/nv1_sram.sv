// nv1_sram -- a node's address-table memory (the SRAM block of a node).
//
// Single-port synchronous RAM, DEPTH words of WIDTH bits; in silicon this is a
// small SRAM array next to the node logic. Written as an array so that it is
// mapped to a memory by synthesis.
//
// Interface: one access per clock. With we = 1, wdata is written to addr at
// the clock edge and rdata keeps its previous value. With we = 0, rdata shows
// mem[addr] one clock after addr is presented (registered read).
// Size (256 x 16) follows the paper; the port list and the read timing are
// this design's choice.
module nv1_sram #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned WIDTH = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
    else    rdata     <= mem[addr];
  end

endmodule
