// tb_weight_buffer: self-checking test of weight_buffer.
//
// An 8 x 8 tile of random 12-bit weights is loaded row by row (rows in a
// shuffled order), then programmed: the testbench collects the DAC sample
// stream and checks that DAC d in slot s carries flat weight d*ZETA + s
// (zero past the tile), that the slots run 0 .. ZETA-1 in ZETA consecutive
// cycles, that prog_done comes with the last slot and that prog_busy covers
// the whole programming. A second tile is loaded after prog_done and checked.
module tb_weight_buffer;
  import adept_pkg::*;

  localparam int M = 8, ZETA = 10, NDAC = 7;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                        ld_valid, prog_start, prog_busy, prog_done, prog_valid;
  logic [2:0]                  ld_row;
  logic [M-1:0][W_BITS-1:0]    ld_data;
  logic [3:0]                  prog_slot;
  logic [NDAC-1:0][W_BITS-1:0] prog_data;

  weight_buffer #(.M(M), .ZETA(ZETA)) dut (.*);

  int checks = 0, failures = 0;
  logic [W_BITS-1:0] w [M*M];

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic tile();
    int order [M];
    int nvalid, first_c, last_c, c;
    for (int r = 0; r < M; r++) order[r] = r;
    order.shuffle();
    for (int i = 0; i < M*M; i++) w[i] = W_BITS'($urandom);
    foreach (order[k]) begin
      @(negedge clk);
      ld_valid = 1; ld_row = 3'(order[k]);
      for (int col = 0; col < M; col++) ld_data[col] = w[order[k]*M + col];
    end
    @(negedge clk); ld_valid = 0;
    prog_start = 1;
    @(negedge clk); prog_start = 0;
    nvalid = 0; c = 0; first_c = -1; last_c = -1;
    chk("busy after start", prog_busy);
    while (c < 40) begin
      if (prog_valid) begin
        if (first_c < 0) first_c = c;
        chk($sformatf("slot order %0d", nvalid), prog_slot == 4'(nvalid));
        for (int d = 0; d < NDAC; d++)
          chk($sformatf("dac %0d slot %0d", d, prog_slot),
              prog_data[d] == ((d*ZETA + int'(prog_slot) < M*M) ? w[d*ZETA + int'(prog_slot)] : '0));
        chk("busy while programming", prog_busy);
        if (prog_done) last_c = c;
        nvalid++;
      end else if (nvalid > 0) begin
        break;
      end
      @(negedge clk); c++;
    end
    chk("ZETA samples", nvalid == ZETA);
    chk("done with the last slot", last_c == first_c + ZETA - 1);
    chk("idle after programming", !prog_busy);
  endtask

  initial begin
    ld_valid = 0; prog_start = 0; ld_row = 0; ld_data = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    tile();
    tile();
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
