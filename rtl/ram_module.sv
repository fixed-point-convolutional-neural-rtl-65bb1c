// ram_module: the small working memory that holds the weights of the layer
// being computed, one complete 3x3 set (nine DW-bit weights, 9*DW bits) per
// address, so a whole set is fetched in a single clock.
//
// Interface: simple dual port, one write port (filled by the RAM controller
// before each layer) and one read port. Timing: synchronous read, rdata is
// valid one clock after raddr. Packing nine weights per word follows the
// paper; the depth (256 sets, the largest layer) is derived from the network.
module ram_module
  import lwdd_pkg::*;
#(
  parameter int unsigned DEPTH = WRAM_WORDS,
  parameter int unsigned AW    = WRAM_AW
)(
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  vec9_t         wdata,
  input  logic [AW-1:0] raddr,
  output vec9_t         rdata
);
  vec9_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
