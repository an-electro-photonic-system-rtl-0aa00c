// adept_top: the ADEPT electro-photonic DNN accelerator, one photo-core
// configuration (the paper's main system: a single 128 x 128 photo-core at a
// 10 GHz clock, one 128-lane vectorized processing unit, 300 MB weight SRAM,
// 100 MB activation SRAM).
//
// Data path of a layer: weight tiles go weight SRAM -> weight buffer ->
// weight DACs -> MZI mesh (photo_core); input vectors go activation SRAM ->
// photo_core -> ADCs -> partial-sum accumulator -> activation SRAM; finished
// output vectors go on to the vector unit (vpu), which applies the layer's
// non-GEMM operations and writes its results back to the activation SRAM
// for the next layer. The DMA engine moves rows between the host stream and
// the SRAMs, also while the rest is busy.
//
// The host drives the accelerator through four ports, standing in for the
// PCI-e link, which is not part of this RTL: an instruction-memory and
// register-file load port for the vector unit, a GEMM command, a vector-unit
// command (in follow mode it runs behind the GEMM, vector by vector) and a
// DMA command with its row streams. The photonic unit is a behavioural model
// (photo_core); the die-to-die link between the photonic and the electronic
// chiplet is taken as a direct connection. All blocks share one clock, the
// 10 GHz system clock of the paper; rst_n is an active-low asynchronous reset.
//
// Two busy flags are not used (lint reports them): the weight buffer's
// prog_busy, because the GEMM controller tracks programming through
// prog_done, and the DMA engine's busy, because the DMA's overlap counter
// needs only whether the GEMM or vector unit is busy.
module adept_top
  import adept_pkg::*;
#(
  parameter int unsigned M          = M_DEF,
  parameter int unsigned ZETA       = ZETA_DEF,
  parameter int unsigned N_WAY      = 5,
  parameter int unsigned RF_DEPTH   = RF_DEPTH_DEF,
  parameter int unsigned IMEM_DEPTH = 256,
  parameter int unsigned ACC_DEPTH  = 1024,
  parameter int unsigned PC_LAT     = 3,
  parameter int unsigned ACT_DEPTH  = (100 * 1024 * 1024) / (M_DEF * DW / 8),
  parameter int unsigned W_DEPTH    = (300 * 1024 * 1024) / (M_DEF * W_BITS / 8),
  localparam int unsigned AAW       = $clog2(ACT_DEPTH),
  localparam int unsigned WAW       = $clog2(W_DEPTH),
  localparam int unsigned RAW_W     = $clog2(RF_DEPTH),
  localparam int unsigned IAW       = $clog2(IMEM_DEPTH),
  localparam int unsigned LW        = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned IW        = (ACC_DEPTH > 1) ? $clog2(ACC_DEPTH) : 1,
  localparam int unsigned TAG_W     = AAW + 2 + IW
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // vector-unit program and constants
  input  logic                 im_we,
  input  logic [IAW-1:0]       im_addr,
  input  instr_t               im_data,
  input  logic                 rf_we,
  input  logic                 rf_bcast,
  input  logic [LW-1:0]        rf_lane,
  input  logic [RAW_W-1:0]     rf_addr,
  input  word_t                rf_data,
  // GEMM command
  input  logic                 gemm_valid,
  output logic                 gemm_ready,
  input  logic [15:0]          gemm_mt,
  input  logic [15:0]          gemm_kt,
  input  logic [AAW:0]         gemm_nvec,
  input  logic [AAW-1:0]       gemm_in_base,
  input  logic [AAW-1:0]       gemm_out_base,
  input  logic [WAW-1:0]       gemm_w_base,
  output logic                 gemm_done,
  // vector-unit command
  input  logic                 vpu_valid,
  output logic                 vpu_ready,
  input  logic [IAW-1:0]       vpu_kbase,
  input  logic [IAW:0]         vpu_klen,
  input  logic [AAW-1:0]       vpu_in_base,
  input  logic [AAW-1:0]       vpu_out_base,
  input  logic [AAW:0]         vpu_nvec,
  input  logic                 vpu_follow,
  output logic                 vpu_done,
  // DMA command and host streams
  input  logic                 dma_valid,
  output logic                 dma_ready,
  input  logic [2:0]           dma_op,
  input  logic [WAW-1:0]       dma_src,
  input  logic [WAW-1:0]       dma_dst,
  input  logic [WAW:0]         dma_rows,
  output logic                 dma_done,
  input  logic                 h2d_valid,
  output logic                 h2d_ready,
  input  logic [M-1:0][DW-1:0] h2d_data,
  output logic                 d2h_valid,
  input  logic                 d2h_ready,
  output logic [M-1:0][DW-1:0] d2h_data,
  // status
  output logic [31:0]          st_tiles,       // weight tiles programmed
  output logic [31:0]          st_tile_wait,   // core idle cycles waiting for a tile load
  output logic [31:0]          st_prog,        // cycles spent programming MZIs
  output logic [31:0]          st_gemm_vecs,   // vectors sent through the photo-core
  output logic [31:0]          st_vpu_issued,  // vector-unit instructions issued
  output logic [31:0]          st_vpu_dep,     // vector-unit dependency stall cycles
  output logic [31:0]          st_vpu_wait,    // vector-unit cycles waiting for the GEMM
  output logic [31:0]          st_dma_rows,    // rows moved by DMA
  output logic [31:0]          st_dma_overlap  // of which while computing
);

  localparam int unsigned NDAC = (M * M + ZETA - 1) / ZETA;
  localparam int unsigned SLW  = (ZETA > 1) ? $clog2(ZETA) : 1;

  // ------------------------------------------------------------- nets
  logic                     pc_re, pc_we, vu_re, vu_we, dm_re, dm_we;
  logic [AAW-1:0]           pc_raddr, pc_waddr, vu_raddr, vu_waddr, dm_raddr, dm_waddr;
  logic [M-1:0][DW-1:0]     pc_rdata, pc_wdata, vu_rdata, vu_wdata, dm_rdata, dm_wdata;

  logic                     ws_re, wdm_re, wdm_we;
  logic [WAW-1:0]           ws_raddr, wdm_raddr, wdm_waddr;
  logic [M-1:0][W_BITS-1:0] ws_rdata, wdm_rdata, wdm_wdata;

  logic                     ld_valid;
  logic [LW-1:0]            ld_row;
  logic                     prog_start, prog_busy, prog_done, prog_valid;
  logic [SLW-1:0]           prog_slot;
  logic [NDAC-1:0][W_BITS-1:0] prog_data;

  logic                     core_in_valid, core_out_valid;
  logic [TAG_W-1:0]         core_in_tag, core_out_tag;
  logic [M-1:0][ADC_BITS-1:0] core_out_code;

  logic                     acc_clr;
  logic [AAW:0]             acc_n_done;
  logic                     gemm_busy, vpu_busy, dma_busy;

  // ---------------------------------------------------------- memories
  act_sram #(.M(M), .DEPTH(ACT_DEPTH)) u_act_sram (
    .clk, .rst_n,
    .pc_re, .pc_raddr, .pc_rdata, .pc_we, .pc_waddr, .pc_wdata,
    .vu_re, .vu_raddr, .vu_rdata, .vu_we, .vu_waddr, .vu_wdata,
    .dm_re, .dm_raddr, .dm_rdata, .dm_we, .dm_waddr, .dm_wdata
  );

  weight_sram #(.M(M), .DEPTH(W_DEPTH)) u_weight_sram (
    .clk,
    .wb_re (ws_re),  .wb_raddr (ws_raddr), .wb_rdata (ws_rdata),
    .dm_re (wdm_re), .dm_raddr (wdm_raddr), .dm_rdata (wdm_rdata),
    .dm_we (wdm_we), .dm_waddr (wdm_waddr), .dm_wdata (wdm_wdata)
  );

  // --------------------------------------------------- GEMM data path
  gemm_controller #(
    .M(M), .ACC_DEPTH(ACC_DEPTH), .AAW(AAW), .WAW(WAW), .TAG_W(TAG_W)
  ) u_gemm (
    .clk, .rst_n,
    .cmd_valid (gemm_valid), .cmd_ready (gemm_ready),
    .cmd_mt (gemm_mt), .cmd_kt (gemm_kt), .cmd_nvec (gemm_nvec),
    .cmd_in_base (gemm_in_base), .cmd_out_base (gemm_out_base),
    .cmd_w_base (gemm_w_base),
    .ws_re, .ws_raddr,
    .wb_ld_valid (ld_valid), .wb_ld_row (ld_row),
    .prog_start, .prog_done,
    .as_re (pc_re), .as_raddr (pc_raddr),
    .pc_in_valid (core_in_valid), .pc_in_tag (core_in_tag),
    .acc_clr, .acc_n_done,
    .busy (gemm_busy), .done (gemm_done),
    .n_tiles (st_tiles), .n_wait (st_tile_wait), .n_prog (st_prog),
    .n_vecs (st_gemm_vecs)
  );

  weight_buffer #(.M(M), .ZETA(ZETA)) u_wbuf (
    .clk, .rst_n,
    .ld_valid, .ld_row, .ld_data (ws_rdata),
    .prog_start, .prog_busy, .prog_done, .prog_valid, .prog_slot, .prog_data
  );

  photo_core #(.M(M), .ZETA(ZETA), .PC_LAT(PC_LAT), .TAG_W(TAG_W)) u_core (
    .clk, .rst_n,
    .prog_valid, .prog_slot, .prog_data,
    .in_valid (core_in_valid), .in_vec (pc_rdata), .in_tag (core_in_tag),
    .out_valid (core_out_valid), .out_code (core_out_code), .out_tag (core_out_tag)
  );

  // tag layout of gemm_controller: {waddr, last, first, idx}
  psum_accumulator #(.M(M), .ACC_DEPTH(ACC_DEPTH), .AAW(AAW)) u_acc (
    .clk, .rst_n,
    .clr      (acc_clr),
    .in_valid (core_out_valid),
    .in_code  (core_out_code),
    .in_idx   (core_out_tag[IW-1:0]),
    .in_first (core_out_tag[IW]),
    .in_last  (core_out_tag[IW+1]),
    .in_waddr (core_out_tag[IW+2 +: AAW]),
    .wr_en    (pc_we), .wr_addr (pc_waddr), .wr_data (pc_wdata),
    .n_done   (acc_n_done)
  );

  // ------------------------------------------------ vector unit
  vpu #(
    .M(M), .N_WAY(N_WAY), .RF_DEPTH(RF_DEPTH), .IMEM_DEPTH(IMEM_DEPTH), .AAW(AAW)
  ) u_vpu (
    .clk, .rst_n,
    .im_we, .im_addr, .im_data,
    .h_we (rf_we), .h_bcast (rf_bcast), .h_lane (rf_lane), .h_addr (rf_addr),
    .h_data (rf_data),
    .cmd_valid (vpu_valid), .cmd_ready (vpu_ready),
    .cmd_kbase (vpu_kbase), .cmd_klen (vpu_klen),
    .cmd_in_base (vpu_in_base), .cmd_out_base (vpu_out_base),
    .cmd_nvec (vpu_nvec), .cmd_follow (vpu_follow),
    .gemm_cnt (acc_n_done),
    .rd_en (vu_re), .rd_addr (vu_raddr), .rd_data (vu_rdata),
    .wr_en (vu_we), .wr_addr (vu_waddr), .wr_data (vu_wdata),
    .busy (vpu_busy), .done (vpu_done),
    .n_issued (st_vpu_issued), .n_dep_stall (st_vpu_dep), .n_gemm_wait (st_vpu_wait)
  );

  // ------------------------------------------------------------ DMA
  dma_engine #(.M(M), .AAW(AAW), .WAW(WAW)) u_dma (
    .clk, .rst_n,
    .cmd_valid (dma_valid), .cmd_ready (dma_ready), .cmd_op (dma_op),
    .cmd_src (dma_src), .cmd_dst (dma_dst), .cmd_rows (dma_rows),
    .h2d_valid, .h2d_ready, .h2d_data, .d2h_valid, .d2h_ready, .d2h_data,
    .a_re (dm_re), .a_raddr (dm_raddr), .a_rdata (dm_rdata),
    .a_we (dm_we), .a_waddr (dm_waddr), .a_wdata (dm_wdata),
    .w_re (wdm_re), .w_raddr (wdm_raddr), .w_rdata (wdm_rdata),
    .w_we (wdm_we), .w_waddr (wdm_waddr), .w_wdata (wdm_wdata),
    .overlap_in (gemm_busy || vpu_busy),
    .busy (dma_busy), .done (dma_done),
    .n_rows (st_dma_rows), .n_overlap (st_dma_overlap)
  );

endmodule
