// tb_act_sram: self-checking test of act_sram at a reduced depth.
//
// Random reads and writes go to all three ports (photo core, vector unit,
// DMA) every cycle; writes from different ports in the same cycle always go
// to different rows. A reference array in the testbench follows the writes;
// each read must return, one cycle later, the row as it was before that
// cycle's writes (read-before-write).
module tb_act_sram;
  import adept_pkg::*;

  localparam int M = 4, DEPTH = 32, AW = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 pc_re, pc_we, vu_re, vu_we, dm_re, dm_we;
  logic [AW-1:0]        pc_raddr, pc_waddr, vu_raddr, vu_waddr, dm_raddr, dm_waddr;
  logic [M-1:0][DW-1:0] pc_rdata, pc_wdata, vu_rdata, vu_wdata, dm_rdata, dm_wdata;

  act_sram #(.M(M), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [M-1:0][DW-1:0] ref_m [DEPTH];
  bit                   known [DEPTH];

  initial begin
    pc_re = 0; pc_we = 0; vu_re = 0; vu_we = 0; dm_re = 0; dm_we = 0;
    pc_raddr = 0; pc_waddr = 0; vu_raddr = 0; vu_waddr = 0; dm_raddr = 0; dm_waddr = 0;
    pc_wdata = '0; vu_wdata = '0; dm_wdata = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // fill every row through the DMA port first
    for (int r = 0; r < DEPTH; r++) begin
      @(negedge clk); dm_we = 1; dm_waddr = AW'(r);
      for (int i = 0; i < M; i++) dm_wdata[i] = $urandom;
      ref_m[r] = dm_wdata; known[r] = 1;
    end
    @(negedge clk); dm_we = 0;
    for (int n = 0; n < 2000; n++) begin
      logic [M-1:0][DW-1:0] e_pc, e_vu, e_dm;
      bit r_pc, r_vu, r_dm;
      int a [3];
      @(negedge clk);
      r_pc = $urandom_range(0, 1); r_vu = $urandom_range(0, 1); r_dm = $urandom_range(0, 1);
      pc_re = r_pc; vu_re = r_vu; dm_re = r_dm;
      pc_raddr = AW'($urandom); vu_raddr = AW'($urandom); dm_raddr = AW'($urandom);
      e_pc = ref_m[pc_raddr]; e_vu = ref_m[vu_raddr]; e_dm = ref_m[dm_raddr];
      a[0] = $urandom_range(0, DEPTH - 1);
      a[1] = (a[0] + 1 + $urandom_range(0, 9)) % DEPTH;
      a[2] = (a[0] + 11 + $urandom_range(0, 9)) % DEPTH;
      pc_we = $urandom_range(0, 1); vu_we = $urandom_range(0, 1); dm_we = $urandom_range(0, 1);
      pc_waddr = AW'(a[0]); vu_waddr = AW'(a[1]); dm_waddr = AW'(a[2]);
      for (int i = 0; i < M; i++) begin
        pc_wdata[i] = $urandom; vu_wdata[i] = $urandom; dm_wdata[i] = $urandom;
      end
      if (pc_we) ref_m[a[0]] = pc_wdata;
      if (vu_we) ref_m[a[1]] = vu_wdata;
      if (dm_we) ref_m[a[2]] = dm_wdata;
      @(negedge clk);
      pc_re = 0; vu_re = 0; dm_re = 0; pc_we = 0; vu_we = 0; dm_we = 0;
      if (r_pc) begin checks++; if (pc_rdata !== e_pc) begin failures++; $display("FAIL: pc read"); end end
      if (r_vu) begin checks++; if (vu_rdata !== e_vu) begin failures++; $display("FAIL: vu read"); end end
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
