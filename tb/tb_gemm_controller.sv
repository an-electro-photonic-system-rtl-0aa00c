// tb_gemm_controller: self-checking test of gemm_controller driving the real
// weight buffer, photo-core model and partial-sum accumulator.
//
// The activation and weight SRAMs are arrays in the testbench with a
// one-cycle read. Random weights and inputs are placed in the layout the
// controller expects:
//   input  row  in_base  + k*nvec + n     (K tile k, vector n)
//   output row  out_base + i*nvec + n     (M tile i)
//   weights     w_base + (i*kt + k)*M + r, one tile row r per SRAM row
// The expected output is computed here from the same conversions the core
// uses (10-bit input codes, 8-bit ADC codes per tile, codes summed over the
// K tiles, result in Q16.16). Checked: every output element, the number of
// tiles, programming cycles and vectors, that a GEMM with more vectors than
// the accumulator holds is split into chunks correctly, and that a GEMM with
// one vector per tile, where loading the next tile takes longer than using
// the current one, makes the core wait (n_wait grows).
module tb_gemm_controller;
  import adept_pkg::*;

  localparam int M = 4, ZETA = 4, NDAC = 4, ACC_DEPTH = 4, AAW = 8, WAW = 8, IW = 2;
  localparam int TAG_W = AAW + 2 + IW, PC_LAT = 3;
  localparam int IN_SHIFT = 7, ADC_SHIFT = 15;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                        cmd_valid, cmd_ready, ws_re, wb_ld_valid, prog_start, prog_done;
  logic [15:0]                 cmd_mt, cmd_kt;
  logic [AAW:0]                cmd_nvec, acc_n_done;
  logic [AAW-1:0]              cmd_in_base, cmd_out_base, as_raddr, acc_waddr;
  logic [WAW-1:0]              cmd_w_base, ws_raddr;
  logic [1:0]                  wb_ld_row;
  logic                        as_re, pc_in_valid, acc_clr, busy, done, acc_we;
  logic [TAG_W-1:0]            pc_in_tag, pc_out_tag;
  logic [31:0]                 n_tiles, n_wait, n_prog, n_vecs;
  logic                        prog_busy, prog_valid, pc_out_valid;
  logic [1:0]                  prog_slot;
  logic [NDAC-1:0][W_BITS-1:0] prog_data;
  logic [M-1:0][W_BITS-1:0]    ws_rdata;
  logic [M-1:0][DW-1:0]        as_rdata, acc_wdata;
  logic [M-1:0][ADC_BITS-1:0]  pc_out_code;

  gemm_controller #(.M(M), .ACC_DEPTH(ACC_DEPTH), .AAW(AAW), .WAW(WAW), .TAG_W(TAG_W)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_mt, .cmd_kt, .cmd_nvec, .cmd_in_base,
    .cmd_out_base, .cmd_w_base, .ws_re, .ws_raddr, .wb_ld_valid, .wb_ld_row, .prog_start,
    .prog_done, .as_re, .as_raddr, .pc_in_valid, .pc_in_tag, .acc_clr, .acc_n_done, .busy,
    .done, .n_tiles, .n_wait, .n_prog, .n_vecs
  );

  weight_buffer #(.M(M), .ZETA(ZETA)) u_wbuf (
    .clk, .rst_n, .ld_valid(wb_ld_valid), .ld_row(wb_ld_row), .ld_data(ws_rdata),
    .prog_start, .prog_busy, .prog_done, .prog_valid, .prog_slot, .prog_data
  );

  photo_core #(.M(M), .ZETA(ZETA), .PC_LAT(PC_LAT), .TAG_W(TAG_W)) u_core (
    .clk, .rst_n, .prog_valid, .prog_slot, .prog_data,
    .in_valid(pc_in_valid), .in_vec(as_rdata), .in_tag(pc_in_tag),
    .out_valid(pc_out_valid), .out_code(pc_out_code), .out_tag(pc_out_tag)
  );

  psum_accumulator #(.M(M), .ACC_DEPTH(ACC_DEPTH), .AAW(AAW)) u_acc (
    .clk, .rst_n, .clr(acc_clr), .in_valid(pc_out_valid), .in_code(pc_out_code),
    .in_idx(pc_out_tag[IW-1:0]), .in_first(pc_out_tag[IW]), .in_last(pc_out_tag[IW+1]),
    .in_waddr(pc_out_tag[IW+2 +: AAW]),
    .wr_en(acc_we), .wr_addr(acc_waddr), .wr_data(acc_wdata), .n_done(acc_n_done)
  );

  logic [M-1:0][DW-1:0]     amem [2**AAW];
  logic [M-1:0][W_BITS-1:0] wmem [2**WAW];
  always_ff @(posedge clk) begin
    if (as_re) as_rdata <= amem[as_raddr];
    if (ws_re) ws_rdata <= wmem[ws_raddr];
    if (acc_we) amem[acc_waddr] <= acc_wdata;
  end

  int checks = 0, failures = 0;

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int code_in(word_t x);
    int s;
    s = x >>> IN_SHIFT;
    if (s > 511) s = 511;
    if (s < -512) s = -512;
    return s;
  endfunction

  function automatic int adc(longint acc);
    longint r;
    r = (acc + (64'sd1 <<< (ADC_SHIFT - 1))) >>> ADC_SHIFT;
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return int'(r);
  endfunction

  task automatic gemm(input int mt, input int kt, input int nv, input int ib, input int ob,
                      input int wb);
    int exp_y [64][M];
    for (int k = 0; k < kt; k++)
      for (int n = 0; n < nv; n++)
        for (int c = 0; c < M; c++)
          amem[ib + k*nv + n][c] = $signed($urandom_range(0, 262143)) - 131072;
    for (int t = 0; t < mt*kt*M; t++)
      for (int c = 0; c < M; c++) wmem[wb + t][c] = W_BITS'($urandom);
    for (int i = 0; i < mt; i++)
      for (int n = 0; n < nv; n++)
        for (int r = 0; r < M; r++) begin
          int s;
          s = 0;
          for (int k = 0; k < kt; k++) begin
            longint a;
            a = 0;
            for (int c = 0; c < M; c++)
              a += longint'($signed(wmem[wb + (i*kt + k)*M + r][c])) *
                   longint'(code_in(amem[ib + k*nv + n][c]));
            s += adc(a);
          end
          exp_y[i*nv + n][r] = s;
        end
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_mt = 16'(mt); cmd_kt = 16'(kt); cmd_nvec = (AAW+1)'(nv);
    cmd_in_base = AAW'(ib); cmd_out_base = AAW'(ob); cmd_w_base = WAW'(wb);
    @(negedge clk); cmd_valid = 0;
    while (!done) @(negedge clk);
    for (int j = 0; j < mt*nv; j++)
      for (int r = 0; r < M; r++)
        chk($sformatf("y[%0d][%0d] = %0d, expected %0d", j, r,
                      $signed(amem[ob + j][r]) >>> 16, exp_y[j][r]),
            $signed(amem[ob + j][r]) == (exp_y[j][r] <<< 16));
  endtask

  int t0, p0, v0, w0;
  initial begin
    cmd_valid = 0; cmd_mt = 1; cmd_kt = 1; cmd_nvec = 1; cmd_in_base = 0; cmd_out_base = 0;
    cmd_w_base = 0;
    repeat (2) @(posedge clk); rst_n = 1;

    // 2 x 3 tiles, 6 vectors: two accumulator chunks (4 + 2)
    gemm(2, 3, 6, 0, 100, 0);
    chk("tiles", n_tiles == 6 * 2);          // one pass per chunk
    chk("programming cycles", n_prog == 12 * (ZETA + 2));   // handshake + register + ZETA slots
    chk("vectors", n_vecs == 2 * 3 * 6);
    w0 = int'(n_wait);

    // long tiles: 4 vectors per tile, loading (M rows) is hidden
    t0 = int'(n_tiles); p0 = int'(n_prog); v0 = int'(n_vecs);
    gemm(1, 2, 4, 30, 120, 100);
    chk("tiles 2", n_tiles - t0 == 2);
    chk("vectors 2", n_vecs - v0 == 8);

    // one vector per tile: the core waits for each next tile to land
    w0 = int'(n_wait);
    gemm(3, 3, 1, 50, 140, 150);
    chk("tiles 3", n_tiles - t0 == 2 + 9);
    chk("core waited for tile loads", int'(n_wait) > w0);
    $display("n_wait after short tiles: %0d (was %0d)", n_wait, w0);

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
