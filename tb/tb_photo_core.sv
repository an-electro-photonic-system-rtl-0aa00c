// tb_photo_core: self-checking test of the photo_core behavioural model.
//
// An 8 x 8 core with ZETA = 10 (7 weight DACs) is programmed with random
// 12-bit weights through the DAC sample stream, then random input vectors
// stream through it one per cycle. The expected ADC codes are worked out
// here: input code = clamp(floor(x / 2^IN_SHIFT)) to 10 bits, exact integer
// dot product, rounding shift by ADC_SHIFT, clamp to 8 bits. Each output must
// come PC_LAT cycles after its input with its tag. A second tile is then
// programmed and checked the same way.
module tb_photo_core;
  import adept_pkg::*;

  localparam int M = 8, ZETA = 10, NDAC = 7, PC_LAT = 3;
  localparam int IN_SHIFT = 7, ADC_SHIFT = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                        prog_valid, in_valid, out_valid;
  logic [3:0]                  prog_slot;
  logic [NDAC-1:0][W_BITS-1:0] prog_data;
  logic [M-1:0][DW-1:0]        in_vec;
  logic [31:0]                 in_tag, out_tag;
  logic [M-1:0][ADC_BITS-1:0]  out_code;

  photo_core #(.M(M), .ZETA(ZETA), .PC_LAT(PC_LAT), .TAG_W(32)) dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int w [M*M];
  typedef struct { longint t; int tag; int e [M]; } exp_t;
  exp_t q[$];

  function automatic int code_in(word_t x);
    longint s;
    s = longint'(x) >>> IN_SHIFT;
    if (s > 511) s = 511;
    if (s < -512) s = -512;
    return int'(s);
  endfunction

  task automatic program_tile();
    for (int i = 0; i < M*M; i++) w[i] = $urandom_range(0, 4095) - 2048;
    for (int s = 0; s < ZETA; s++) begin
      @(negedge clk);
      prog_valid = 1; prog_slot = 4'(s);
      for (int d = 0; d < NDAC; d++)
        prog_data[d] = (d*ZETA + s < M*M) ? W_BITS'(w[d*ZETA + s]) : '0;
    end
    @(negedge clk); prog_valid = 0;
  endtask

  task automatic stream(input int n);
    for (int v = 0; v < n; v++) begin
      exp_t e;
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      for (int c = 0; c < M; c++)
        in_vec[c] = (v % 3 == 0) ? $urandom : ($signed($urandom_range(0, 131071)) - 65536);
      in_tag = $urandom;
      if (in_valid) begin
        e.t = cycle; e.tag = int'(in_tag);
        for (int r = 0; r < M; r++) begin
          longint acc;
          acc = 0;
          for (int c = 0; c < M; c++) acc += longint'(w[r*M + c]) * longint'(code_in(in_vec[c]));
          acc = (acc + (64'sd1 <<< (ADC_SHIFT - 1))) >>> ADC_SHIFT;
          if (acc > 127) acc = 127;
          if (acc < -128) acc = -128;
          e.e[r] = int'(acc);
        end
        q.push_back(e);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (PC_LAT + 2) @(negedge clk);
  endtask

  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t e;
    if (q.size() == 0) begin failures++; $display("FAIL: unexpected output"); end
    else begin
      e = q.pop_front();
      checks++;
      if (cycle - e.t != PC_LAT) begin
        failures++; $display("FAIL: latency %0d expected %0d", cycle - e.t, PC_LAT);
      end
      checks++;
      if (int'(out_tag) != e.tag) begin failures++; $display("FAIL: tag"); end
      for (int r = 0; r < M; r++) begin
        checks++;
        if (int'($signed(out_code[r])) != e.e[r]) begin
          failures++;
          $display("FAIL: row %0d got %0d expected %0d", r, $signed(out_code[r]), e.e[r]);
        end
      end
    end
  end

  initial begin
    prog_valid = 0; in_valid = 0; prog_slot = 0; prog_data = '0; in_vec = '0; in_tag = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    program_tile();
    stream(40);
    program_tile();
    stream(40);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL: missing outputs"); end
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
