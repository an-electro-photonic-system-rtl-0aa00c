// tb_vpu_scheduler: self-checking test of vpu_scheduler's issue timing.
//
// Kernels are loaded into the instruction memory and run; the testbench
// records the cycle of every execute-stage operation and write-back and
// checks them against gaps worked out by hand from the pipeline:
//   * independent instructions execute in consecutive cycles;
//   * an instruction reading a unit's output executes N_WAY + 1 cycles after
//     the producer (the producer's result is then on the unit output);
//   * an instruction reading a register written by the previous one
//     executes N_WAY + 3 cycles after it (write-back N_WAY + 1 cycles after
//     execute, and the write must be done before the
//     synchronous read of the issue cycle);
//   * write-back comes N_WAY + 1 cycles after execute, SRAM rows are
//     out_base + v;
//   * in follow mode vector v is not read before gemm_cnt > v.
module tb_vpu_scheduler;
  import adept_pkg::*;

  localparam int unsigned N_WAY = 4;
  localparam int unsigned AAW   = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic           im_we, cmd_valid, cmd_ready, cmd_follow;
  logic [7:0]     im_addr, cmd_kbase;
  instr_t         im_data;
  logic [8:0]     cmd_klen;
  logic [AAW-1:0] cmd_in_base, cmd_out_base, rd_addr, wr_addr;
  logic [AAW:0]   cmd_nvec, gemm_cnt;
  logic           rd_en, wr_en, ex_valid, wb_rf_we, busy, done;
  logic [5:0]     ra, rb, wb_rf_addr;
  op_e            ex_op, ex_ua, ex_ub;
  src_e           ex_sa, ex_sb;
  logic [31:0]    n_issued, n_dep_stall, n_gemm_wait;

  vpu_scheduler #(.N_WAY(N_WAY), .RF_DEPTH(64), .IMEM_DEPTH(256), .AAW(AAW)) dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  longint ex_t[$], wb_t[$], rd_t[$];
  int     wr_a[$], rd_a[$];
  always @(posedge clk) if (rst_n) begin
    if (ex_valid) ex_t.push_back(cycle);
    if (wb_rf_we || wr_en) wb_t.push_back(cycle);
    if (wr_en) wr_a.push_back(int'(wr_addr));
    if (rd_en) begin rd_t.push_back(cycle); rd_a.push_back(int'(rd_addr)); end
  end

  task automatic chk(input string what, input longint got, input longint e);
    checks++;
    if (got != e) begin failures++; $display("FAIL: %s: %0d expected %0d", what, got, e); end
  endtask

  function automatic instr_t mk(op_e op, src_e sa, op_e ua, int a, src_e sb, op_e ub, int b,
                                bit wrf, int rd, bit ws);
    instr_t i;
    i.op = op; i.sa = sa; i.ua = ua; i.ra = RF_AW'(a); i.sb = sb; i.ub = ub; i.rb = RF_AW'(b);
    i.wr_rf = wrf; i.rd = RF_AW'(rd); i.wr_sram = ws;
    return i;
  endfunction

  task automatic load(input int addr, input instr_t i);
    @(negedge clk); im_we = 1; im_addr = 8'(addr); im_data = i;
    @(negedge clk); im_we = 0;
  endtask

  task automatic start(input int kb, input int kl, input int nv, input bit fol);
    ex_t.delete(); wb_t.delete(); wr_a.delete(); rd_t.delete(); rd_a.delete();
    @(negedge clk);
    cmd_valid = 1; cmd_kbase = 8'(kb); cmd_klen = 9'(kl); cmd_nvec = (AAW+1)'(nv);
    cmd_in_base = 8'd16; cmd_out_base = 8'd64; cmd_follow = fol;
    @(negedge clk); cmd_valid = 0;
    while (!done) @(negedge clk);
  endtask

  initial begin
    im_we = 0; cmd_valid = 0; gemm_cnt = 0; im_addr = 0; im_data = '0;
    cmd_kbase = 0; cmd_klen = 1; cmd_in_base = 0; cmd_out_base = 0; cmd_nvec = 1; cmd_follow = 0;
    repeat (2) @(posedge clk); rst_n = 1;

    // kernel A @0: i0 exp(sram); i1 max(unit exp, rf0) -> sram; i2 add(sram, zero)
    load(0, mk(OP_EXP, SRC_SRAM, OP_MUL, 0, SRC_ZERO, OP_MUL, 0, 0, 0, 0));
    load(1, mk(OP_MAX, SRC_UNIT, OP_EXP, 0, SRC_RF, OP_MUL, 0, 0, 0, 1));
    load(2, mk(OP_ADD, SRC_SRAM, OP_MUL, 0, SRC_ZERO, OP_MUL, 0, 0, 0, 0));
    start(0, 3, 2, 0);
    // vector 0: i0 at e, i1 at e+N+1 (unit dep), i2 at e+N+2;
    // vector 1: i0 at e+N+3 (exp unit free: no dependency), i1 waits for it
    chk("A: ops executed", ex_t.size(), 6);
    if (ex_t.size() == 6) begin
      chk("A: unit dependency gap", ex_t[1] - ex_t[0], N_WAY + 1);
      chk("A: independent next", ex_t[2] - ex_t[1], 1);
      chk("A: next vector", ex_t[3] - ex_t[2], 1);
      chk("A: unit dependency gap v1", ex_t[4] - ex_t[3], N_WAY + 1);
    end
    chk("A: sram writes", wr_a.size(), 2);
    if (wr_a.size() == 2) begin
      chk("A: write row v0", wr_a[0], 64);
      chk("A: write row v1", wr_a[1], 65);
    end
    chk("A: sram reads", rd_a.size(), 4);
    if (rd_a.size() == 4) begin
      chk("A: read row v0", rd_a[0], 16);
      chk("A: read row v1", rd_a[3], 17);
    end
    chk("A: dep stall cycles", n_dep_stall, 2 * N_WAY);

    // kernel B @8: i0 mul(rf1, rf2) -> rf3; i1 add(rf3, zero) -> sram
    load(8, mk(OP_MUL, SRC_RF, OP_MUL, 1, SRC_RF, OP_MUL, 2, 1, 3, 0));
    load(9, mk(OP_ADD, SRC_RF, OP_MUL, 3, SRC_ZERO, OP_MUL, 0, 0, 0, 1));
    start(8, 2, 1, 0);
    chk("B: ops executed", ex_t.size(), 2);
    chk("B: write-backs", wb_t.size(), 2);
    if (ex_t.size() == 2 && wb_t.size() == 2) begin
      chk("B: rf dependency gap", ex_t[1] - ex_t[0], N_WAY + 3);
      chk("B: write-back latency", wb_t[0] - ex_t[0], N_WAY + 1);
    end

    // follow mode: kernel C @12 one op reading sram, 3 vectors, gemm_cnt late
    load(12, mk(OP_MAX, SRC_SRAM, OP_MUL, 0, SRC_ZERO, OP_MUL, 0, 0, 0, 1));
    ex_t.delete(); rd_t.delete(); rd_a.delete(); wr_a.delete();
    gemm_cnt = 0;
    @(negedge clk);
    cmd_valid = 1; cmd_kbase = 12; cmd_klen = 1; cmd_nvec = 3; cmd_follow = 1;
    cmd_in_base = 8'd16; cmd_out_base = 8'd64;
    @(negedge clk); cmd_valid = 0;
    repeat (10) @(negedge clk);
    chk("C: nothing read before gemm output", rd_t.size(), 0);
    gemm_cnt = 1;
    repeat (10) @(negedge clk);
    chk("C: only vector 0 read", rd_t.size(), 1);
    gemm_cnt = 3;
    while (!done) @(negedge clk);
    chk("C: all vectors read", rd_t.size(), 3);
    chk("C: gemm wait counted", (n_gemm_wait >= 19) ? 1 : 0, 1);
    if (rd_a.size() == 3) chk("C: last row", rd_a[2], 18);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
