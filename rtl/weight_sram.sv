// weight_sram: the weight SRAM, which holds the weights of the whole network
// as the host-precomputed MZI phase values, one 12-bit value per weight
// element (the paper notes the phases take as much room as the weights).
//
// A row is one row of an M x M weight tile, M values of W_BITS bits; tile t
// of a layer occupies M consecutive rows. The default depth gives the paper's
// 300 MB with 12-bit values packed (M * 12 / 8 bytes a row). One port feeds
// the weight buffer, one serves the DMA engine (loads from the host, copies
// to and from the activation SRAM). Synchronous: read data the cycle after
// the enable. As for the activation SRAM, the paper's 64 KB sub-array banking
// is physical and not modelled.
module weight_sram
  import adept_pkg::*;
#(
  parameter int unsigned M     = M_DEF,
  parameter int unsigned DEPTH = (300 * 1024 * 1024) / (M_DEF * W_BITS / 8),
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                     clk,
  // weight-buffer read port
  input  logic                     wb_re,
  input  logic [AW-1:0]            wb_raddr,
  output logic [M-1:0][W_BITS-1:0] wb_rdata,
  // DMA port
  input  logic                     dm_re,
  input  logic [AW-1:0]            dm_raddr,
  output logic [M-1:0][W_BITS-1:0] dm_rdata,
  input  logic                     dm_we,
  input  logic [AW-1:0]            dm_waddr,
  input  logic [M-1:0][W_BITS-1:0] dm_wdata
);

  logic [M-1:0][W_BITS-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wb_re) wb_rdata <= mem[wb_raddr];
    if (dm_re) dm_rdata <= mem[dm_raddr];
    if (dm_we) mem[dm_waddr] <= dm_wdata;
  end

endmodule
