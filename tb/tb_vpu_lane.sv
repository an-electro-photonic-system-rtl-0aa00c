// tb_vpu_lane: self-checking test of one vpu_lane.
//
// The testbench plays the scheduler: it loads constants into the register
// file, then issues single operations with operands taken from the SRAM
// element, the register file, zero, and the last result of another unit, and
// writes results back to the register file and reads them again. Every
// operation uses exactly representable values, so the expected results are
// plain arithmetic on reals. The result must appear N_WAY + 1 cycles after
// the execute cycle.
module tb_vpu_lane;
  import adept_pkg::*;

  localparam int unsigned N_WAY = 3;
  localparam int unsigned RF_D  = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [5:0] ra, rb, wb_rf_addr, h_addr;
  logic       ex_valid, wb_rf_we, h_we;
  op_e        ex_op, ex_ua, ex_ub;
  src_e       ex_sa, ex_sb;
  word_t      sram_elem, h_data, res;
  logic       res_valid;

  vpu_lane #(.N_WAY(N_WAY), .RF_DEPTH(RF_D)) dut (.*);

  int checks = 0, failures = 0;

  function automatic word_t fx(real r);
    return word_t'($rtoi(r * 65536.0));
  endfunction

  task automatic idle();
    ex_valid = 0; wb_rf_we = 0; h_we = 0;
  endtask

  // issue one op: RF addresses in the issue cycle, ex_* in the next one;
  // returns the result, checking its cycle
  task automatic run(input op_e op, input src_e sa, input op_e ua, input int a_rf,
                     input src_e sb, input op_e ub, input int b_rf, input word_t sv,
                     output word_t r);
    int wait_c;
    @(negedge clk); ra = 6'(a_rf); rb = 6'(b_rf);
    @(negedge clk);
    ex_valid = 1; ex_op = op; ex_sa = sa; ex_ua = ua; ex_sb = sb; ex_ub = ub; sram_elem = sv;
    @(negedge clk); ex_valid = 0;
    wait_c = 1;
    while (!res_valid && wait_c < 20) begin @(negedge clk); wait_c++; end
    checks++;
    if (wait_c != N_WAY + 1) begin
      failures++; $display("FAIL: result after %0d cycles, expected %0d", wait_c, N_WAY + 1);
    end
    r = res;
  endtask

  task automatic expect_eq(input string what, input word_t got, input real e);
    checks++;
    if (got !== fx(e)) begin
      failures++;
      $display("FAIL: %s got %f expected %f", what, real'(got) / 65536.0, e);
    end
  endtask

  word_t r;
  initial begin
    idle(); ra = 0; rb = 0; h_addr = 0; h_data = 0; wb_rf_addr = 0; sram_elem = 0;
    ex_op = OP_ADD; ex_ua = OP_ADD; ex_ub = OP_ADD; ex_sa = SRC_ZERO; ex_sb = SRC_ZERO;
    repeat (2) @(posedge clk); rst_n = 1;
    // constants: rf[1] = 2.5, rf[2] = -0.75, rf[3] = 4.0
    @(negedge clk); h_we = 1; h_addr = 1; h_data = fx(2.5);
    @(negedge clk); h_addr = 2; h_data = fx(-0.75);
    @(negedge clk); h_addr = 3; h_data = fx(4.0);
    @(negedge clk); h_we = 0;

    run(OP_MUL, SRC_SRAM, OP_MUL, 0, SRC_RF, OP_MUL, 1, fx(1.5), r);   // 1.5 * 2.5
    expect_eq("mul sram*rf", r, 3.75);
    run(OP_ADD, SRC_RF, OP_MUL, 2, SRC_UNIT, OP_MUL, 0, 0, r);         // -0.75 + last mul
    expect_eq("add rf+unit(mul)", r, 3.0);
    run(OP_MAX, SRC_SRAM, OP_MUL, 0, SRC_ZERO, OP_MUL, 0, fx(-6.0), r); // relu(-6)
    expect_eq("max relu", r, 0.0);
    run(OP_DIV, SRC_UNIT, OP_ADD, 0, SRC_RF, OP_MUL, 3, 0, r);         // last add / 4
    expect_eq("div unit(add)/rf", r, 0.75);
    run(OP_SQRT, SRC_RF, OP_MUL, 3, SRC_ZERO, OP_MUL, 0, 0, r);        // sqrt 4
    expect_eq("sqrt rf", r, 2.0);
    run(OP_EXP, SRC_ZERO, OP_MUL, 0, SRC_ZERO, OP_MUL, 0, 0, r);       // e^0
    expect_eq("exp 0", r, 1.0);
    // write-back: the add below goes to rf[5], then is read back
    @(negedge clk); ra = 6'(1); rb = 6'(3);
    @(negedge clk); ex_valid = 1; ex_op = OP_ADD; ex_sa = SRC_RF; ex_sb = SRC_RF;
    @(negedge clk); ex_valid = 0;
    repeat (N_WAY) @(negedge clk);
    wb_rf_we = 1; wb_rf_addr = 5;
    @(negedge clk); wb_rf_we = 0;
    run(OP_MUL, SRC_RF, OP_MUL, 5, SRC_RF, OP_MUL, 1, 0, r);           // 6.5 * 2.5
    expect_eq("write-back then read", r, 16.25);
    // host write has priority over write-back
    @(negedge clk); h_we = 1; h_addr = 7; h_data = fx(9.0); wb_rf_we = 1; wb_rf_addr = 7;
    @(negedge clk); h_we = 0; wb_rf_we = 0;
    run(OP_ADD, SRC_RF, OP_MUL, 7, SRC_ZERO, OP_MUL, 0, 0, r);
    expect_eq("host write priority", r, 9.0);
    // one operand picked from each unit in turn
    run(OP_ADD, SRC_UNIT, OP_SQRT, 0, SRC_UNIT, OP_DIV, 0, 0, r);      // 2.0 + 0.75
    expect_eq("unit(sqrt)+unit(div)", r, 2.75);
    run(OP_ADD, SRC_UNIT, OP_EXP, 0, SRC_UNIT, OP_MAX, 0, 0, r);       // 1.0 + 0.0
    expect_eq("unit(exp)+unit(max)", r, 1.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
