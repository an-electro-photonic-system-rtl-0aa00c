// tb_weight_sram: self-checking test of weight_sram at a reduced depth.
//
// The DMA port fills every row with random 12-bit weights, then random reads
// on both ports and random DMA writes run together. A reference array follows
// the writes; each read must return, one cycle later, the row as it was
// before that cycle's write.
module tb_weight_sram;
  import adept_pkg::*;

  localparam int M = 4, DEPTH = 32, AW = 5;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                     wb_re, dm_re, dm_we;
  logic [AW-1:0]            wb_raddr, dm_raddr, dm_waddr;
  logic [M-1:0][W_BITS-1:0] wb_rdata, dm_rdata, dm_wdata;

  weight_sram #(.M(M), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [M-1:0][W_BITS-1:0] ref_m [DEPTH];

  initial begin
    wb_re = 0; dm_re = 0; dm_we = 0; wb_raddr = 0; dm_raddr = 0; dm_waddr = 0; dm_wdata = '0;
    repeat (2) @(posedge clk);
    for (int r = 0; r < DEPTH; r++) begin
      @(negedge clk); dm_we = 1; dm_waddr = AW'(r);
      for (int i = 0; i < M; i++) dm_wdata[i] = W_BITS'($urandom);
      ref_m[r] = dm_wdata;
    end
    @(negedge clk); dm_we = 0;
    for (int n = 0; n < 2000; n++) begin
      logic [M-1:0][W_BITS-1:0] e_wb, e_dm;
      bit r_wb, r_dm;
      @(negedge clk);
      r_wb = $urandom_range(0, 1); r_dm = $urandom_range(0, 1);
      wb_re = r_wb; dm_re = r_dm;
      wb_raddr = AW'($urandom); dm_raddr = AW'($urandom);
      e_wb = ref_m[wb_raddr]; e_dm = ref_m[dm_raddr];
      dm_we = $urandom_range(0, 1); dm_waddr = AW'($urandom);
      for (int i = 0; i < M; i++) dm_wdata[i] = W_BITS'($urandom);
      if (dm_we) ref_m[dm_waddr] = dm_wdata;
      @(negedge clk);
      wb_re = 0; dm_re = 0; dm_we = 0;
      if (r_wb) begin checks++; if (wb_rdata !== e_wb) begin failures++; $display("FAIL: wb read"); end end
      if (r_dm) begin checks++; if (dm_rdata !== e_dm) begin failures++; $display("FAIL: dm read"); end end
    end
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
