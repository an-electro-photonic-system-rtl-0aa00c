// tb_psum_accumulator: self-checking test of psum_accumulator.
//
// Random ADC codes are fed in the order the GEMM controller uses: for each
// K tile k = 0 .. KT-1, vectors n = 0 .. NV-1, one per cycle with random gaps,
// buffer index n, first on k = 0, last on k = KT-1. The testbench keeps the
// integer sums itself; every finished row must be written one cycle after its
// last code, to its own address, as sat(sum * 2^OUT_SHIFT), and n_done must
// count the rows. Large codes with many tiles check the saturation; clr must
// bring n_done back to zero.
module tb_psum_accumulator;
  import adept_pkg::*;

  localparam int M = 4, ACC_DEPTH = 8, AAW = 10, IW = 3, OUT_SHIFT = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                       clr, in_valid, in_first, in_last, wr_en;
  logic [M-1:0][ADC_BITS-1:0] in_code;
  logic [IW-1:0]              in_idx;
  logic [AAW-1:0]             in_waddr, wr_addr;
  logic [M-1:0][DW-1:0]       wr_data;
  logic [AAW:0]               n_done;

  psum_accumulator #(.M(M), .ACC_DEPTH(ACC_DEPTH), .OUT_SHIFT(OUT_SHIFT), .AAW(AAW)) dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct { longint t; int a; longint s [M]; } exp_t;
  exp_t q[$];

  always @(posedge clk) if (rst_n && wr_en) begin
    exp_t e;
    checks++;
    if (q.size() == 0) begin failures++; $display("FAIL: unexpected write"); end
    else begin
      e = q.pop_front();
      if (cycle - e.t != 1) begin failures++; $display("FAIL: write latency"); end
      checks++;
      if (int'(wr_addr) != e.a) begin failures++; $display("FAIL: addr %0d exp %0d", wr_addr, e.a); end
      for (int i = 0; i < M; i++) begin
        longint v;
        v = e.s[i] <<< OUT_SHIFT;
        if (v > 64'sd2147483647) v = 64'sd2147483647;
        if (v < -64'sd2147483648) v = -64'sd2147483648;
        checks++;
        if ($signed(wr_data[i]) != int'(v)) begin
          failures++; $display("FAIL: lane %0d got %0d expected %0d", i, $signed(wr_data[i]), v);
        end
      end
    end
  end

  task automatic gemm(input int kt, input int nv, input int base, input bit big);
    longint acc [ACC_DEPTH][M];
    for (int k = 0; k < kt; k++)
      for (int n = 0; n < nv; n++) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_idx = IW'(n); in_first = (k == 0); in_last = (k == kt - 1);
        in_waddr = AAW'(base + n);
        for (int i = 0; i < M; i++) begin
          int c;
          c = big ? 127 - int'($urandom_range(0, 1)) * 255 : int'($urandom_range(0, 255)) - 128;
          if (big && i == 0) c = 127;
          in_code[i] = ADC_BITS'(c);
          acc[n][i] = (k == 0 ? 0 : acc[n][i]) + c;
        end
        if (k == kt - 1) begin
          exp_t e;
          e.t = cycle; e.a = base + n;
          for (int i = 0; i < M; i++) e.s[i] = acc[n][i];
          q.push_back(e);
        end
      end
    @(negedge clk); in_valid = 0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    clr = 0; in_valid = 0; in_code = '0; in_idx = 0; in_first = 0; in_last = 0; in_waddr = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    gemm(3, 5, 100, 0);
    checks++;
    if (n_done != 5) begin failures++; $display("FAIL: n_done %0d", n_done); end
    gemm(1, 8, 200, 0);
    checks++;
    if (n_done != 13) begin failures++; $display("FAIL: n_done %0d", n_done); end
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    checks++;
    if (n_done != 0) begin failures++; $display("FAIL: clr"); end
    gemm(300, 2, 300, 1);   // 300 * 127 * 2^16 saturates
    gemm(4, 8, 400, 0);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL: missing writes"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
