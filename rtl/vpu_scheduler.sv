// vpu_scheduler: the scheduler of the vectorized processing unit.
//
// The paper says only that the lanes' operand multiplexers are controlled by
// a scheduler that decides when each arithmetic operation is used, that
// non-GEMM work is pipelined across the units as long as data dependencies
// are kept, and that an output vector of the GEMM goes to the digital unit
// as soon as it is complete. This module is this design's way of doing that.
//
// A command runs a kernel, a list of micro-instructions (adept_pkg::instr_t)
// held in a small instruction memory written by the host, once for each of
// nvec vectors: vector v is read from activation-SRAM row in_base + v and
// results marked wr_sram go to row out_base + v. One instruction issues per
// cycle on all lanes. Issue stalls while
//   * a source unit still has an operation in flight whose result would not
//     yet be on that unit's output when the instruction executes, or
//   * a source register-file word still has a write-back pending;
// so independent steps of different vectors overlap in different units
// (for instance the exponential of one element while the max unit works on
// the previous one). In follow mode (cmd.follow) the first instruction of
// vector v waits until the GEMM side has reported more than v finished output
// vectors (gemm_cnt), which pipelines the non-GEMM work behind the GEMM.
//
// Timing: issue cycle (RF read address, SRAM read request), execute cycle
// (ex_* to the lanes, SRAM data arrives), result N_WAY + 1 cycles after
// execute, when wb_* write it back. done pulses for one cycle after the last
// write-back of a command.
//
// Lint notes that rst_n is used both as an asynchronous reset and in an
// assertion's disable condition (sampled on the clock); that is the normal
// way to turn an assertion off during reset and is not a circuit path. In
// follow mode the command must be issued after the GEMM it follows, because
// gemm_cnt restarts when a GEMM starts.
module vpu_scheduler
  import adept_pkg::*;
#(
  parameter int unsigned N_WAY      = 5,
  parameter int unsigned RF_DEPTH   = RF_DEPTH_DEF,
  parameter int unsigned IMEM_DEPTH = 256,
  parameter int unsigned AAW        = 18,   // activation SRAM row address width
  localparam int unsigned RAW_W     = $clog2(RF_DEPTH),
  localparam int unsigned IAW       = $clog2(IMEM_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  // instruction memory load
  input  logic             im_we,
  input  logic [IAW-1:0]   im_addr,
  input  instr_t           im_data,
  // command
  input  logic             cmd_valid,
  output logic             cmd_ready,
  input  logic [IAW-1:0]   cmd_kbase,
  input  logic [IAW:0]     cmd_klen,      // >= 1
  input  logic [AAW-1:0]   cmd_in_base,
  input  logic [AAW-1:0]   cmd_out_base,
  input  logic [AAW:0]     cmd_nvec,      // >= 1
  input  logic             cmd_follow,
  input  logic [AAW:0]     gemm_cnt,      // finished GEMM output vectors
  // activation SRAM
  output logic             rd_en,
  output logic [AAW-1:0]   rd_addr,
  output logic             wr_en,
  output logic [AAW-1:0]   wr_addr,
  // lane control
  output logic [RAW_W-1:0] ra,
  output logic [RAW_W-1:0] rb,
  output logic             ex_valid,
  output op_e              ex_op,
  output src_e             ex_sa,
  output op_e              ex_ua,
  output src_e             ex_sb,
  output op_e              ex_ub,
  output logic             wb_rf_we,
  output logic [RAW_W-1:0] wb_rf_addr,
  // status
  output logic             busy,
  output logic             done,
  output logic [31:0]      n_issued,
  output logic [31:0]      n_dep_stall,
  output logic [31:0]      n_gemm_wait
);

  localparam int unsigned DL = N_WAY + 1;   // execute -> write-back distance

  instr_t imem [IMEM_DEPTH];
  always_ff @(posedge clk) if (im_we) imem[im_addr] <= im_data;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [IAW-1:0] kbase;
  logic [IAW:0]   klen, j;
  logic [AAW-1:0] in_base, out_base;
  logic [AAW:0]   nvec, v;
  logic           follow;

  // in-flight operation record (execute stage and delay line)
  typedef struct packed {
    logic             valid;
    op_e              op;
    logic             wr_rf;
    logic [RAW_W-1:0] rd;
    logic             wr_sram;
    logic [AAW-1:0]   waddr;
  } fl_t;

  fl_t ex_q;
  fl_t dl [DL];    // dl[DL-1] is the write-back stage

  instr_t ins;
  assign ins = imem[kbase + j[IAW-1:0]];

  // ------------------------------------------------------- hazard check
  logic dep_stall;
  always_comb begin
    dep_stall = 1'b0;
    // unit outputs: result of an op in ex is visible N_WAY+1 cycles later;
    // of one in dl[k], DL-1-k cycles later. Needed by the execute cycle.
    if (ex_q.valid && ((ins.sa == SRC_UNIT && ins.ua == ex_q.op) ||
                       (ins.sb == SRC_UNIT && ins.ub == ex_q.op)))
      dep_stall = 1'b1;
    for (int k = 0; k < DL - 2; k++)
      if (dl[k].valid && ((ins.sa == SRC_UNIT && ins.ua == dl[k].op) ||
                          (ins.sb == SRC_UNIT && ins.ub == dl[k].op)))
        dep_stall = 1'b1;
    // register file: read in the issue cycle, so the write must be done
    if (ex_q.valid && ex_q.wr_rf &&
        ((ins.sa == SRC_RF && RAW_W'(ins.ra) == ex_q.rd) ||
         (ins.sb == SRC_RF && RAW_W'(ins.rb) == ex_q.rd)))
      dep_stall = 1'b1;
    for (int k = 0; k < DL; k++)
      if (dl[k].valid && dl[k].wr_rf &&
          ((ins.sa == SRC_RF && RAW_W'(ins.ra) == dl[k].rd) ||
           (ins.sb == SRC_RF && RAW_W'(ins.rb) == dl[k].rd)))
        dep_stall = 1'b1;
  end

  logic gemm_wait, issue;
  assign gemm_wait = follow && (j == '0) && (gemm_cnt <= v);
  assign issue     = (state == S_RUN) && !dep_stall && !gemm_wait;

  logic pipe_empty;
  always_comb begin
    pipe_empty = !ex_q.valid;
    for (int k = 0; k < DL; k++) if (dl[k].valid) pipe_empty = 1'b0;
  end

  assign cmd_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);
  assign rd_en     = issue && (ins.sa == SRC_SRAM || ins.sb == SRC_SRAM);
  assign rd_addr   = in_base + v[AAW-1:0];
  assign ra        = RAW_W'(ins.ra);
  assign rb        = RAW_W'(ins.rb);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      kbase       <= '0;
      klen        <= '0;
      j           <= '0;
      in_base     <= '0;
      out_base    <= '0;
      nvec        <= '0;
      v           <= '0;
      follow      <= 1'b0;
      done        <= 1'b0;
      n_issued    <= '0;
      n_dep_stall <= '0;
      n_gemm_wait <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (cmd_valid) begin
          state    <= S_RUN;
          kbase    <= cmd_kbase;
          klen     <= cmd_klen;
          in_base  <= cmd_in_base;
          out_base <= cmd_out_base;
          nvec     <= cmd_nvec;
          follow   <= cmd_follow;
          j        <= '0;
          v        <= '0;
        end
        S_RUN: begin
          if (dep_stall)      n_dep_stall <= n_dep_stall + 1;
          else if (gemm_wait) n_gemm_wait <= n_gemm_wait + 1;
          if (issue) begin
            n_issued <= n_issued + 1;
            if (j == klen - 1'b1) begin
              j <= '0;
              v <= v + 1'b1;
              if (v == nvec - 1'b1) state <= S_DRAIN;
            end else begin
              j <= j + 1'b1;
            end
          end
        end
        S_DRAIN: if (pipe_empty) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // execute stage and write-back delay line
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ex_q  <= '0;
      ex_sa <= SRC_ZERO;
      ex_sb <= SRC_ZERO;
      ex_ua <= OP_MUL;
      ex_ub <= OP_MUL;
      for (int k = 0; k < DL; k++) dl[k] <= '0;
    end else begin
      ex_q.valid   <= issue;
      ex_q.op      <= ins.op;
      ex_q.wr_rf   <= ins.wr_rf;
      ex_q.rd      <= RAW_W'(ins.rd);
      ex_q.wr_sram <= ins.wr_sram;
      ex_q.waddr   <= out_base + v[AAW-1:0];
      ex_sa        <= ins.sa;
      ex_sb        <= ins.sb;
      ex_ua        <= ins.ua;
      ex_ub        <= ins.ub;
      dl[0]        <= ex_q;
      for (int k = 1; k < DL; k++) dl[k] <= dl[k-1];
    end
  end

  assign ex_valid   = ex_q.valid;
  assign ex_op      = ex_q.op;
  assign wb_rf_we   = dl[DL-1].valid && dl[DL-1].wr_rf;
  assign wb_rf_addr = dl[DL-1].rd;
  assign wr_en      = dl[DL-1].valid && dl[DL-1].wr_sram;
  assign wr_addr    = dl[DL-1].waddr;

  // a command must give at least one instruction and one vector
  a_cmd_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd_ready) |-> (cmd_klen != 0 && cmd_nvec != 0));

endmodule
