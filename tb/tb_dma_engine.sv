// tb_dma_engine: self-checking test of dma_engine with memory models.
//
// The two on-chip SRAMs are modelled here as arrays with a one-cycle read.
// All six transfers run in turn: host to activation memory and host to weight
// memory with random gaps on the host stream, activation and weight memory to
// host with random back-pressure, and the two on-chip copies. After each
// transfer the destination is compared with what the testbench expects
// (weights keep the low 12 bits of a word; weights copied to the activation
// memory are sign-extended). n_rows must count every row and n_overlap the
// rows moved while overlap_in was high, which the testbench toggles randomly.
module tb_dma_engine;
  import adept_pkg::*;

  localparam int M = 4, AAW = 6, WAW = 7;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                     cmd_valid, cmd_ready, h2d_valid, h2d_ready, d2h_valid, d2h_ready;
  logic [2:0]               cmd_op;
  logic [WAW-1:0]           cmd_src, cmd_dst;
  logic [WAW:0]             cmd_rows;
  logic [M-1:0][DW-1:0]     h2d_data, d2h_data, a_rdata, a_wdata;
  logic                     a_re, a_we, w_re, w_we, overlap_in, busy, done;
  logic [AAW-1:0]           a_raddr, a_waddr;
  logic [WAW-1:0]           w_raddr, w_waddr;
  logic [M-1:0][W_BITS-1:0] w_rdata, w_wdata;
  logic [31:0]              n_rows, n_overlap;

  dma_engine #(.M(M), .AAW(AAW), .WAW(WAW)) dut (.*);

  logic [M-1:0][DW-1:0]     amem [2**AAW];
  logic [M-1:0][W_BITS-1:0] wmem [2**WAW];
  always_ff @(posedge clk) begin
    if (a_re) a_rdata <= amem[a_raddr];
    if (w_re) w_rdata <= wmem[w_raddr];
    if (a_we) amem[a_waddr] <= a_wdata;
    if (w_we) wmem[w_waddr] <= w_wdata;
  end

  int checks = 0, failures = 0, rows = 0, ovl = 0;

  // a row is moved in a cycle where the host hands one over, a memory row is
  // written, or the host takes one
  always @(posedge clk) if (rst_n) begin
    if ((h2d_valid && h2d_ready) || (a_we && !h2d_valid) || (w_we && !h2d_valid) ||
        (d2h_valid && d2h_ready)) begin
      rows++;
      if (overlap_in) ovl++;
    end
  end

  logic [M-1:0][DW-1:0] host_in [$], host_out [$];

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one transfer; the host side is driven at the negative edge: a random
  // gap pattern on h2d_valid and random back-pressure on d2h_ready
  task automatic xfer(input int op, input int src, input int dst, input int n);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_op = 3'(op); cmd_src = WAW'(src); cmd_dst = WAW'(dst);
    cmd_rows = (WAW+1)'(n);
    @(negedge clk); cmd_valid = 0;
    forever begin
      overlap_in = $urandom_range(0, 1);
      d2h_ready  = ($urandom_range(0, 2) != 0);
      h2d_valid  = (host_in.size() > 0) && ($urandom_range(0, 2) != 0);
      if (host_in.size() > 0) h2d_data = host_in[0];
      @(posedge clk);
      if (h2d_valid && h2d_ready) void'(host_in.pop_front());
      if (d2h_valid && d2h_ready) host_out.push_back(d2h_data);
      @(negedge clk);
      if (done) break;
    end
    h2d_valid = 0;
  endtask

  function automatic logic [M-1:0][DW-1:0] rnd_row();
    logic [M-1:0][DW-1:0] r;
    for (int i = 0; i < M; i++) r[i] = $urandom;
    return r;
  endfunction

  logic [M-1:0][DW-1:0] src_rows [$];
  initial begin
    cmd_valid = 0; cmd_op = 0; cmd_src = 0; cmd_dst = 0; cmd_rows = 1;
    h2d_valid = 0; h2d_data = '0; overlap_in = 0; d2h_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;

    // host -> activation rows 5..14
    for (int r = 0; r < 10; r++) begin
      src_rows.push_back(rnd_row()); host_in.push_back(src_rows[r]);
    end
    xfer(0, 0, 5, 10);
    for (int r = 0; r < 10; r++) chk($sformatf("H2A row %0d", r), amem[5 + r] === src_rows[r]);
    chk("H2A host stream drained", host_in.size() == 0);

    // activation rows 5..14 -> host
    host_out.delete();
    xfer(1, 5, 0, 10);
    chk("A2H row count", host_out.size() == 10);
    for (int r = 0; r < 10 && r < host_out.size(); r++)
      chk($sformatf("A2H row %0d", r), host_out[r] === src_rows[r]);

    // host -> weight rows 20..26
    src_rows.delete();
    for (int r = 0; r < 7; r++) begin
      src_rows.push_back(rnd_row()); host_in.push_back(src_rows[r]);
    end
    xfer(2, 0, 20, 7);
    for (int r = 0; r < 7; r++)
      for (int i = 0; i < M; i++)
        chk($sformatf("H2W row %0d el %0d", r, i),
            wmem[20 + r][i] === src_rows[r][i][W_BITS-1:0]);

    // weight rows 20..26 -> host, sign-extended
    host_out.delete();
    xfer(3, 20, 0, 7);
    chk("W2H row count", host_out.size() == 7);
    for (int r = 0; r < 7 && r < host_out.size(); r++)
      for (int i = 0; i < M; i++)
        chk($sformatf("W2H row %0d el %0d", r, i),
            $signed(host_out[r][i]) == int'($signed(src_rows[r][i][W_BITS-1:0])));

    // weight rows 20..26 -> activation rows 30..36 -> weight rows 60..66
    xfer(5, 20, 30, 7);
    for (int r = 0; r < 7; r++)
      for (int i = 0; i < M; i++)
        chk($sformatf("W2A row %0d el %0d", r, i),
            $signed(amem[30 + r][i]) == int'($signed(src_rows[r][i][W_BITS-1:0])));
    xfer(4, 30, 60, 7);
    for (int r = 0; r < 7; r++)
      chk($sformatf("A2W row %0d", r), wmem[60 + r] === wmem[20 + r]);

    // a single-row transfer
    src_rows[0] = rnd_row();
    host_in.push_back(src_rows[0]);
    xfer(0, 0, 63, 1);
    chk("single row", amem[63] === src_rows[0]);

    chk("n_rows matches the rows seen", n_rows == 32'(rows));
    chk("n_rows total", n_rows == 49);
    chk("n_overlap matches", n_overlap == 32'(ovl));
    chk("some overlap seen", ovl > 0);
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
