// act_sram: the activation SRAM, which holds the input and output activations
// of the layers (the output of one layer is the input of the next).
//
// Following the paper, it is read and written one vector of M elements at a
// time, with dedicated read and write ports for the photo-core side (GEMM
// input read, accumulated output write) and for the digital vector unit, and
// it exchanges data with the host and DRAM through a DMA port. The default
// depth gives the paper's 100 MB with 32-bit elements (M * 4 bytes a row).
//
// This model is one array with synchronous ports: read data appear the cycle
// after the read enable; writes take effect at the clock edge. The paper
// builds the memory from 64 KB sub-arrays at 833 MHz read in turn every
// 100 ps; that banking is physical and is not modelled: each port here gives
// one vector per cycle. Writes to the same row in the same cycle are an
// error (assertion); the DMA port then loses.
module act_sram
  import adept_pkg::*;
#(
  parameter int unsigned M     = M_DEF,
  parameter int unsigned DEPTH = (100 * 1024 * 1024) / (M_DEF * DW / 8),
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // photo-core side
  input  logic                 pc_re,
  input  logic [AW-1:0]        pc_raddr,
  output logic [M-1:0][DW-1:0] pc_rdata,
  input  logic                 pc_we,
  input  logic [AW-1:0]        pc_waddr,
  input  logic [M-1:0][DW-1:0] pc_wdata,
  // digital vector unit side
  input  logic                 vu_re,
  input  logic [AW-1:0]        vu_raddr,
  output logic [M-1:0][DW-1:0] vu_rdata,
  input  logic                 vu_we,
  input  logic [AW-1:0]        vu_waddr,
  input  logic [M-1:0][DW-1:0] vu_wdata,
  // DMA side
  input  logic                 dm_re,
  input  logic [AW-1:0]        dm_raddr,
  output logic [M-1:0][DW-1:0] dm_rdata,
  input  logic                 dm_we,
  input  logic [AW-1:0]        dm_waddr,
  input  logic [M-1:0][DW-1:0] dm_wdata
);

  logic [M-1:0][DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (pc_re) pc_rdata <= mem[pc_raddr];
    if (vu_re) vu_rdata <= mem[vu_raddr];
    if (dm_re) dm_rdata <= mem[dm_raddr];
    if (dm_we) mem[dm_waddr] <= dm_wdata;
    if (vu_we) mem[vu_waddr] <= vu_wdata;
    if (pc_we) mem[pc_waddr] <= pc_wdata;
  end

  a_no_write_clash: assert property (@(posedge clk) disable iff (!rst_n)
    !((pc_we && vu_we && pc_waddr == vu_waddr) ||
      (pc_we && dm_we && pc_waddr == dm_waddr) ||
      (vu_we && dm_we && vu_waddr == dm_waddr)));

endmodule
