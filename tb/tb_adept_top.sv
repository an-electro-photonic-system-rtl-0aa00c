// tb_adept_top: end-to-end self-checking test of adept_top at a reduced size
// (M = 4, ZETA = 4, small memories), running one DNN layer the way the host
// would:
//   1. DMA host -> weight SRAM: MT x KT tiles of random 12-bit weights;
//   2. DMA host -> activation SRAM: KT * NV input rows;
//   3. vector-unit program: y = max(x * 0.5, 0) (a multiply whose result the
//      max reads straight from the unit: a dependency stall per vector);
//   4. the GEMM, the vector unit in follow mode (it starts on each output row
//      as soon as the accumulator has written it) and an unrelated DMA
//      transfer are started together;
//   5. DMA activation SRAM -> host of the results, with random back-pressure.
// The results are compared with a model computed here from the same
// conversions (10-bit input codes, 8-bit ADC codes per tile summed over the K
// tiles, Q16.16). The layer is run twice: once with many vectors per tile
// (more than the accumulator holds, so split into chunks) and once with one
// vector per tile, where the core must wait for tile loads.
// Every mechanism must be seen at least once or the test fails: tile
// programming, waiting for a tile load, accumulation over K tiles, chunking,
// the vector unit starting before the GEMM is done, the vector unit waiting
// for the GEMM, dependency stalls, and DMA rows moved while computing.
module tb_adept_top;
  import adept_pkg::*;

  localparam int M = 4, ZETA = 4, N_WAY = 5, RF_DEPTH = 64, IMEM_DEPTH = 16, ACC_DEPTH = 4;
  localparam int ACT_DEPTH = 256, W_DEPTH = 256;
  localparam int AAW = $clog2(ACT_DEPTH), WAW = $clog2(W_DEPTH), RAW_W = $clog2(RF_DEPTH);
  localparam int IAW = $clog2(IMEM_DEPTH), LW = $clog2(M);
  localparam int IN_SHIFT = FRAC - (IN_BITS - 1);
  localparam int ADC_SHIFT = (IN_BITS - 1) + (W_BITS - 1) + $clog2(M) - (ADC_BITS - 1);
  localparam int MT1 = 2, KT1 = 3, NV1 = 6;   // first layer
  localparam int MT2 = 2, KT2 = 2, NV2 = 1;   // second layer
  localparam int NMAX = 32;                   // more than any MT*NV or KT*NV used

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 im_we, rf_we, rf_bcast;
  logic [IAW-1:0]       im_addr;
  instr_t               im_data;
  logic [LW-1:0]        rf_lane;
  logic [RAW_W-1:0]     rf_addr;
  word_t                rf_data;
  logic                 gemm_valid, gemm_ready, gemm_done;
  logic [15:0]          gemm_mt, gemm_kt;
  logic [AAW:0]         gemm_nvec, vpu_nvec;
  logic [AAW-1:0]       gemm_in_base, gemm_out_base, vpu_in_base, vpu_out_base;
  logic [WAW-1:0]       gemm_w_base, dma_src, dma_dst;
  logic                 vpu_valid, vpu_ready, vpu_follow, vpu_done;
  logic [IAW-1:0]       vpu_kbase;
  logic [IAW:0]         vpu_klen;
  logic                 dma_valid, dma_ready, dma_done;
  logic [2:0]           dma_op;
  logic [WAW:0]         dma_rows;
  logic                 h2d_valid, h2d_ready, d2h_valid, d2h_ready;
  logic [M-1:0][DW-1:0] h2d_data, d2h_data;
  logic [31:0]          st_tiles, st_tile_wait, st_prog, st_gemm_vecs, st_vpu_issued;
  logic [31:0]          st_vpu_dep, st_vpu_wait, st_dma_rows, st_dma_overlap;

  adept_top #(
    .M(M), .ZETA(ZETA), .N_WAY(N_WAY), .RF_DEPTH(RF_DEPTH), .IMEM_DEPTH(IMEM_DEPTH),
    .ACC_DEPTH(ACC_DEPTH), .ACT_DEPTH(ACT_DEPTH), .W_DEPTH(W_DEPTH)
  ) dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------- host side
  logic [M-1:0][DW-1:0] host_in [$], host_out [$];
  always @(negedge clk) begin
    if (rst_n) begin
      d2h_ready <= ($urandom_range(0, 3) != 0);
      h2d_valid <= (host_in.size() > 0) && ($urandom_range(0, 3) != 0);
      if (host_in.size() > 0) h2d_data <= host_in[0];
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (h2d_valid && h2d_ready) void'(host_in.pop_front());
    if (d2h_valid && d2h_ready) host_out.push_back(d2h_data);
  end

  task automatic dma_start(input int op, input int src, input int dst, input int rows);
    @(negedge clk);
    while (!dma_ready) @(negedge clk);
    dma_valid = 1; dma_op = 3'(op); dma_src = WAW'(src); dma_dst = WAW'(dst);
    dma_rows = (WAW+1)'(rows);
    @(negedge clk); dma_valid = 0;
  endtask

  task automatic dma_wait();
    while (!dma_ready) @(negedge clk);
  endtask

  // ------------------------------------------------------------ model
  function automatic int code_in(word_t x);
    longint s;
    s = longint'(x) >>> IN_SHIFT;
    if (s > 511) s = 511;
    if (s < -512) s = -512;
    return int'(s);
  endfunction

  function automatic int adc(longint acc);
    longint r;
    r = (acc + (64'sd1 <<< (ADC_SHIFT - 1))) >>> ADC_SHIFT;
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return int'(r);
  endfunction

  int wt [NMAX*M][M];          // weight rows as loaded
  word_t xin [NMAX][M];        // input rows as loaded

  // issued-before-GEMM-done: the vector unit worked in parallel with the GEMM
  int overlap_issue = 0;

  task automatic layer(input int mt, input int kt, input int nv, input int ib, input int ob,
                       input int vb, input int wb);
    word_t ey [NMAX][M];
    int issued_at_done;
    bit gd;
    // weights and inputs through the DMA
    for (int t = 0; t < mt*kt*M; t++) begin
      logic [M-1:0][DW-1:0] row;
      for (int c = 0; c < M; c++) begin
        wt[t][c] = $urandom_range(0, 4095) - 2048;
        row[c] = {$urandom_range(0, 1048575), 12'(wt[t][c])};   // high bits ignored
      end
      host_in.push_back(row);
    end
    dma_start(2, 0, wb, mt*kt*M);
    dma_wait();
    for (int r = 0; r < kt*nv; r++) begin
      logic [M-1:0][DW-1:0] row;
      for (int c = 0; c < M; c++) begin
        xin[r][c] = (r % 4 == 3) ? word_t'($urandom)
                                 : word_t'($signed($urandom_range(0, 131071)) - 65536);
        row[c] = xin[r][c];
      end
      host_in.push_back(row);
    end
    dma_start(0, 0, ib, kt*nv);
    dma_wait();
    // expected result
    for (int i = 0; i < mt; i++)
      for (int n = 0; n < nv; n++)
        for (int r = 0; r < M; r++) begin
          longint s;
          s = 0;
          for (int k = 0; k < kt; k++) begin
            longint a;
            a = 0;
            for (int c = 0; c < M; c++)
              a += longint'(wt[(i*kt + k)*M + r][c]) * longint'(code_in(xin[k*nv + n][c]));
            s += adc(a);
          end
          s = s <<< 16;
          if (s > 64'sd2147483647) s = 64'sd2147483647;
          if (s < -64'sd2147483648) s = -64'sd2147483648;
          s = s >>> 1;                       // * 0.5 (exact in Q16.16 here)
          ey[i*nv + n][r] = (s < 0) ? 0 : word_t'(s);
        end
    // GEMM, vector unit (follow mode) and an unrelated DMA copy together
    @(negedge clk);
    gemm_valid = 1; gemm_mt = 16'(mt); gemm_kt = 16'(kt); gemm_nvec = (AAW+1)'(nv);
    gemm_in_base = AAW'(ib); gemm_out_base = AAW'(ob); gemm_w_base = WAW'(wb);
    vpu_valid = 1; vpu_kbase = '0; vpu_klen = (IAW+1)'(2); vpu_nvec = (AAW+1)'(mt*nv);
    vpu_in_base = AAW'(ob); vpu_out_base = AAW'(vb); vpu_follow = 1;
    @(negedge clk); gemm_valid = 0; vpu_valid = 0;
    dma_start(5, wb, ACT_DEPTH - 8, 8);      // weight rows -> spare activation rows
    gd = 0;
    issued_at_done = -1;
    while (!(gd && vpu_ready && dma_ready)) begin
      if (gemm_done) begin gd = 1; issued_at_done = int'(st_vpu_issued); end
      @(negedge clk);
      if (cycle > 64'd2000000) break;
    end
    if (issued_at_done > 0) overlap_issue++;
    // results back to the host
    host_out.delete();
    dma_start(1, vb, 0, mt*nv);
    dma_wait();
    chk("result rows returned", host_out.size() == mt*nv);
    for (int j = 0; j < mt*nv && j < host_out.size(); j++)
      for (int r = 0; r < M; r++)
        chk($sformatf("y[%0d][%0d] got %0d expected %0d", j, r, $signed(host_out[j][r]),
                      ey[j][r]),
            $signed(host_out[j][r]) == ey[j][r]);
  endtask

  function automatic instr_t mk(op_e op, src_e sa, op_e ua, int a, src_e sb, op_e ub, int b,
                                bit ws);
    instr_t i;
    i.op = op; i.sa = sa; i.ua = ua; i.ra = RF_AW'(a); i.sb = sb; i.ub = ub; i.rb = RF_AW'(b);
    i.wr_rf = 0; i.rd = '0; i.wr_sram = ws;
    return i;
  endfunction

  int tiles0, wait0, vecs0;
  initial begin
    im_we = 0; rf_we = 0; rf_bcast = 0; im_addr = 0; im_data = '0; rf_lane = 0; rf_addr = 0;
    rf_data = 0; gemm_valid = 0; gemm_mt = 1; gemm_kt = 1; gemm_nvec = 1; gemm_in_base = 0;
    gemm_out_base = 0; gemm_w_base = 0; vpu_valid = 0; vpu_kbase = 0; vpu_klen = 1;
    vpu_nvec = 1; vpu_in_base = 0; vpu_out_base = 0; vpu_follow = 0; dma_valid = 0;
    dma_op = 0; dma_src = 0; dma_dst = 0; dma_rows = 1; h2d_valid = 0; h2d_data = '0;
    d2h_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // program: i0 = sram * rf[1] (0.5); i1 = max(unit mul, 0) -> sram
    @(negedge clk); rf_we = 1; rf_bcast = 1; rf_addr = 1; rf_data = 32'sh0000_8000;
    @(negedge clk); rf_we = 0;
    @(negedge clk); im_we = 1; im_addr = 0;
    im_data = mk(OP_MUL, SRC_SRAM, OP_MUL, 0, SRC_RF, OP_MUL, 1, 0);
    @(negedge clk); im_addr = 1;
    im_data = mk(OP_MAX, SRC_UNIT, OP_MUL, 0, SRC_ZERO, OP_MUL, 0, 1);
    @(negedge clk); im_we = 0;

    layer(MT1, KT1, NV1, 0, 40, 80, 0);
    chk("tiles layer 1", st_tiles == 32'(MT1 * KT1 * ((NV1 + ACC_DEPTH - 1) / ACC_DEPTH)));
    chk("vectors layer 1", st_gemm_vecs == 32'(MT1 * KT1 * NV1));
    tiles0 = int'(st_tiles); wait0 = int'(st_tile_wait); vecs0 = int'(st_gemm_vecs);
    layer(MT2, KT2, NV2, 120, 140, 160, 100);
    chk("tiles layer 2", st_tiles - 32'(tiles0) == 32'(MT2 * KT2));
    chk("vpu instructions", st_vpu_issued == 32'(2 * (MT1 * NV1 + MT2 * NV2)));
    chk("dma rows", st_dma_rows == 32'((MT1*KT1 + MT2*KT2) * M + KT1*NV1 + KT2*NV2 + 16 +
                                       MT1*NV1 + MT2*NV2));

    $display("mechanisms: tiles=%0d prog_cycles=%0d tile_wait=%0d vpu_dep=%0d vpu_wait=%0d",
             st_tiles, st_prog, st_tile_wait, st_vpu_dep, st_vpu_wait);
    $display("            vpu_before_gemm_done=%0d dma_overlap=%0d", overlap_issue,
             st_dma_overlap);
    chk("mechanism: MZI programming", st_prog >= st_tiles * ZETA && st_tiles > 0);
    chk("mechanism: core waited for a tile load", st_tile_wait > 0);
    chk("mechanism: accumulation over K tiles", KT1 > 1);
    chk("mechanism: vectors split into accumulator chunks", NV1 > ACC_DEPTH);
    chk("mechanism: vector unit started before the GEMM finished", overlap_issue == 2);
    chk("mechanism: vector unit waited for GEMM rows", st_vpu_wait > 0);
    chk("mechanism: dependency stalls", st_vpu_dep > 0);
    chk("mechanism: DMA overlapped with compute", st_dma_overlap > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
