// vpu: vectorized processing unit of the digital electronic ASIC, which runs
// the non-GEMM operations of a network (activations such as ReLU, GELU or
// sigmoid, normalisations, bias additions, softmax steps).
//
// As in the paper, the unit has as many lanes as the photo-core has optical
// channels (M), so element i of every activation vector is handled by lane i;
// all lanes run the same operation at the same time. One scheduler
// (vpu_scheduler) drives all lanes (vpu_lane). The unit reads and writes
// whole M-element vectors through its own read and write port of the
// activation SRAM (the paper's separate ASIC ports).
//
// Interface: instruction-memory and register-file load ports for the host, a
// command port (kernel, input/output base rows, vector count, follow mode),
// gemm_cnt from the partial-sum accumulator for follow mode, the two SRAM
// ports (read data one cycle after rd_en), and status counters. Each lane's
// register file is loaded on its own (h_lane) or all at once (h_bcast).
//
// Each lane's res_valid output is left unused (lint reports it): the lanes run
// in lock step with the scheduler, whose wr_en already marks the cycle in
// which every lane's result is valid.
module vpu
  import adept_pkg::*;
#(
  parameter int unsigned M          = M_DEF,
  parameter int unsigned N_WAY      = 5,
  parameter int unsigned RF_DEPTH   = RF_DEPTH_DEF,
  parameter int unsigned IMEM_DEPTH = 256,
  parameter int unsigned AAW        = 18,
  localparam int unsigned RAW_W     = $clog2(RF_DEPTH),
  localparam int unsigned IAW       = $clog2(IMEM_DEPTH),
  localparam int unsigned LW        = (M > 1) ? $clog2(M) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   im_we,
  input  logic [IAW-1:0]         im_addr,
  input  instr_t                 im_data,
  input  logic                   h_we,
  input  logic                   h_bcast,
  input  logic [LW-1:0]          h_lane,
  input  logic [RAW_W-1:0]       h_addr,
  input  word_t                  h_data,
  input  logic                   cmd_valid,
  output logic                   cmd_ready,
  input  logic [IAW-1:0]         cmd_kbase,
  input  logic [IAW:0]           cmd_klen,
  input  logic [AAW-1:0]         cmd_in_base,
  input  logic [AAW-1:0]         cmd_out_base,
  input  logic [AAW:0]           cmd_nvec,
  input  logic                   cmd_follow,
  input  logic [AAW:0]           gemm_cnt,
  output logic                   rd_en,
  output logic [AAW-1:0]         rd_addr,
  input  logic [M-1:0][DW-1:0]   rd_data,
  output logic                   wr_en,
  output logic [AAW-1:0]         wr_addr,
  output logic [M-1:0][DW-1:0]   wr_data,
  output logic                   busy,
  output logic                   done,
  output logic [31:0]            n_issued,
  output logic [31:0]            n_dep_stall,
  output logic [31:0]            n_gemm_wait
);

  logic [RAW_W-1:0] ra, rb, wb_rf_addr;
  logic             ex_valid, wb_rf_we;
  op_e              ex_op, ex_ua, ex_ub;
  src_e             ex_sa, ex_sb;

  vpu_scheduler #(
    .N_WAY(N_WAY), .RF_DEPTH(RF_DEPTH), .IMEM_DEPTH(IMEM_DEPTH), .AAW(AAW)
  ) u_sched (
    .clk, .rst_n,
    .im_we, .im_addr, .im_data,
    .cmd_valid, .cmd_ready, .cmd_kbase, .cmd_klen, .cmd_in_base,
    .cmd_out_base, .cmd_nvec, .cmd_follow, .gemm_cnt,
    .rd_en, .rd_addr, .wr_en, .wr_addr,
    .ra, .rb, .ex_valid, .ex_op, .ex_sa, .ex_ua, .ex_sb, .ex_ub,
    .wb_rf_we, .wb_rf_addr,
    .busy, .done, .n_issued, .n_dep_stall, .n_gemm_wait
  );

  for (genvar i = 0; i < M; i++) begin : g_lane
    logic  lane_v;
    word_t lane_y;
    vpu_lane #(.N_WAY(N_WAY), .RF_DEPTH(RF_DEPTH)) u_lane (
      .clk, .rst_n,
      .ra, .rb,
      .ex_valid, .ex_op, .ex_sa, .ex_ua, .ex_sb, .ex_ub,
      .sram_elem (word_t'(rd_data[i])),
      .wb_rf_we, .wb_rf_addr,
      .h_we      (h_we && (h_bcast || h_lane == LW'(i))),
      .h_addr, .h_data,
      .res_valid (lane_v),
      .res       (lane_y)
    );
    assign wr_data[i] = lane_y;
  end

endmodule
