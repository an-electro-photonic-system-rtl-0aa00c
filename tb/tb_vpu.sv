// tb_vpu: self-checking test of the vectorized processing unit (scheduler and
// lanes together) with a small activation-memory model.
//
// Two kernels built from the unit's operations are run over several random
// vectors, as a compiler would map non-GEMM layers onto the lanes:
//   bias + ReLU:  y = max(x * s + t, 0)            (3 instructions)
//   sigmoid:      y = 1 / (1 + exp(-x))            (4 instructions)
// The scale, bias, -1 and 1 are register-file constants, loaded per lane with
// different values per lane. The expected outputs are computed with real
// arithmetic ($exp) and compared within a small tolerance.
module tb_vpu;
  import adept_pkg::*;

  localparam int unsigned M     = 4;
  localparam int unsigned AAW   = 8;
  localparam int unsigned NV    = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 im_we, h_we, h_bcast, cmd_valid, cmd_ready, cmd_follow;
  logic [7:0]           im_addr, cmd_kbase;
  instr_t               im_data;
  logic [1:0]           h_lane;
  logic [5:0]           h_addr;
  word_t                h_data;
  logic [8:0]           cmd_klen;
  logic [AAW-1:0]       cmd_in_base, cmd_out_base, rd_addr, wr_addr;
  logic [AAW:0]         cmd_nvec, gemm_cnt;
  logic                 rd_en, wr_en, busy, done;
  logic [M-1:0][DW-1:0] rd_data, wr_data;
  logic [31:0]          n_issued, n_dep_stall, n_gemm_wait;

  vpu #(.M(M), .N_WAY(5), .RF_DEPTH(64), .IMEM_DEPTH(256), .AAW(AAW)) dut (.*);

  logic [M-1:0][DW-1:0] mem [256];
  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  int checks = 0, failures = 0;

  function automatic word_t fx(real r);
    return word_t'($rtoi(r * 65536.0));
  endfunction

  function automatic instr_t mk(op_e op, src_e sa, op_e ua, int a, src_e sb, op_e ub, int b,
                                bit ws);
    instr_t i;
    i.op = op; i.sa = sa; i.ua = ua; i.ra = RF_AW'(a); i.sb = sb; i.ub = ub; i.rb = RF_AW'(b);
    i.wr_rf = 0; i.rd = '0; i.wr_sram = ws;
    return i;
  endfunction

  task automatic load(input int addr, input instr_t i);
    @(negedge clk); im_we = 1; im_addr = 8'(addr); im_data = i;
    @(negedge clk); im_we = 0;
  endtask

  task automatic rf(input int lane, input bit bc, input int addr, input real v);
    @(negedge clk); h_we = 1; h_bcast = bc; h_lane = 2'(lane); h_addr = 6'(addr); h_data = fx(v);
    @(negedge clk); h_we = 0;
  endtask

  task automatic run(input int kb, input int kl, input int ib, input int ob);
    @(negedge clk);
    cmd_valid = 1; cmd_kbase = 8'(kb); cmd_klen = 9'(kl); cmd_nvec = NV;
    cmd_in_base = 8'(ib); cmd_out_base = 8'(ob); cmd_follow = 0;
    @(negedge clk); cmd_valid = 0;
    while (!done) @(negedge clk);
  endtask

  real x [NV][M];
  real scale [M], bias [M];

  initial begin
    im_we = 0; h_we = 0; h_bcast = 0; cmd_valid = 0; gemm_cnt = 0; im_addr = 0; im_data = '0;
    h_lane = 0; h_addr = 0; h_data = 0; cmd_kbase = 0; cmd_klen = 1; cmd_in_base = 0;
    cmd_out_base = 0; cmd_nvec = 1; cmd_follow = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // inputs in rows 10..15, multiples of 1/256 in [-6, 6)
    for (int v = 0; v < NV; v++)
      for (int i = 0; i < M; i++) begin
        x[v][i] = real'($signed($urandom_range(0, 3071)) - 1536) / 256.0;
        mem[10 + v][i] = fx(x[v][i]);
      end
    for (int i = 0; i < M; i++) begin
      scale[i] = 0.5 * (i + 1);
      bias[i]  = -1.0 + 0.75 * i;
      rf(i, 0, 1, scale[i]);
      rf(i, 0, 2, bias[i]);
    end
    rf(0, 1, 3, -1.0);
    rf(0, 1, 4, 1.0);
    // bias + ReLU at 0..2
    load(0, mk(OP_MUL, SRC_SRAM, OP_MUL, 0, SRC_RF, OP_MUL, 1, 0));
    load(1, mk(OP_ADD, SRC_UNIT, OP_MUL, 0, SRC_RF, OP_MUL, 2, 0));
    load(2, mk(OP_MAX, SRC_UNIT, OP_ADD, 0, SRC_ZERO, OP_MUL, 0, 1));
    // sigmoid at 4..7
    load(4, mk(OP_MUL, SRC_SRAM, OP_MUL, 0, SRC_RF, OP_MUL, 3, 0));
    load(5, mk(OP_EXP, SRC_UNIT, OP_MUL, 0, SRC_ZERO, OP_MUL, 0, 0));
    load(6, mk(OP_ADD, SRC_UNIT, OP_EXP, 0, SRC_RF, OP_MUL, 4, 0));
    load(7, mk(OP_DIV, SRC_RF, OP_MUL, 4, SRC_UNIT, OP_ADD, 0, 1));

    run(0, 3, 10, 40);
    for (int v = 0; v < NV; v++)
      for (int i = 0; i < M; i++) begin
        real e, g;
        e = x[v][i] * scale[i] + bias[i];
        if (e < 0) e = 0;
        g = real'($signed(mem[40 + v][i])) / 65536.0;
        checks++;
        if (g - e > 2.0 / 65536 || e - g > 2.0 / 65536) begin
          failures++; $display("FAIL: relu v%0d lane%0d got %f expected %f", v, i, g, e);
        end
      end
    run(4, 4, 10, 60);
    for (int v = 0; v < NV; v++)
      for (int i = 0; i < M; i++) begin
        real e, g;
        e = 1.0 / (1.0 + $exp(-x[v][i]));
        g = real'($signed(mem[60 + v][i])) / 65536.0;
        checks++;
        if (g - e > 5e-4 || e - g > 5e-4) begin
          failures++; $display("FAIL: sigmoid v%0d lane%0d got %f expected %f", v, i, g, e);
        end
      end
    checks++;
    if (n_issued != 32'(NV * 7)) begin
      failures++; $display("FAIL: issued %0d instructions, expected %0d", n_issued, NV * 7);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
