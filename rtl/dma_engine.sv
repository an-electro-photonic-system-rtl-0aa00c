// dma_engine: direct-memory-access engine of the accelerator.
//
// The paper has the two SRAMs exchange data with each other by DMA and with
// the host and DRAM over PCI-e, and relies on loading the next batch's inputs
// from DRAM while the current batch is computed (the host works out when; the
// hardware only has to move the rows concurrently with inference). This
// engine moves whole rows, one command at a time:
//   DMA_H2A  host stream -> activation SRAM
//   DMA_A2H  activation SRAM -> host stream
//   DMA_H2W  host stream -> weight SRAM
//   DMA_W2H  weight SRAM -> host stream
//   DMA_A2W  activation SRAM -> weight SRAM
//   DMA_W2A  weight SRAM -> activation SRAM
// The host stream carries activation-sized rows (M 32-bit elements); a weight
// row is M 12-bit values, taken from / returned in the low bits of each
// element (sign-extended on the way out). These formats and the command set
// are this design's choices.
//
// Timing: host writes take one row per accepted h2d beat; SRAM reads take two
// cycles a row (read, then data) plus any wait for d2h_ready. The stream ports
// are valid/ready handshakes (data held while valid && !ready). n_overlap
// counts rows moved while overlap_in is high (the rest of the accelerator
// busy), which shows transfers hidden behind computation.
module dma_engine
  import adept_pkg::*;
#(
  parameter int unsigned M   = M_DEF,
  parameter int unsigned AAW = 18,
  parameter int unsigned WAW = 21
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // command
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  logic [2:0]               cmd_op,
  input  logic [WAW-1:0]           cmd_src,
  input  logic [WAW-1:0]           cmd_dst,
  input  logic [WAW:0]             cmd_rows,    // >= 1
  // host / PCI-e side
  input  logic                     h2d_valid,
  output logic                     h2d_ready,
  input  logic [M-1:0][DW-1:0]     h2d_data,
  output logic                     d2h_valid,
  input  logic                     d2h_ready,
  output logic [M-1:0][DW-1:0]     d2h_data,
  // activation SRAM DMA port
  output logic                     a_re,
  output logic [AAW-1:0]           a_raddr,
  input  logic [M-1:0][DW-1:0]     a_rdata,
  output logic                     a_we,
  output logic [AAW-1:0]           a_waddr,
  output logic [M-1:0][DW-1:0]     a_wdata,
  // weight SRAM DMA port
  output logic                     w_re,
  output logic [WAW-1:0]           w_raddr,
  input  logic [M-1:0][W_BITS-1:0] w_rdata,
  output logic                     w_we,
  output logic [WAW-1:0]           w_waddr,
  output logic [M-1:0][W_BITS-1:0] w_wdata,
  // status
  input  logic                     overlap_in,
  output logic                     busy,
  output logic                     done,
  output logic [31:0]              n_rows,
  output logic [31:0]              n_overlap
);

  localparam logic [2:0] DMA_H2A = 3'd0, DMA_A2H = 3'd1, DMA_H2W = 3'd2,
                         DMA_W2H = 3'd3, DMA_A2W = 3'd4, DMA_W2A = 3'd5;

  typedef enum logic [1:0] {D_IDLE, D_READ, D_DATA, D_SEND} dstate_e;
  dstate_e st;

  logic [2:0]           op;
  logic [WAW-1:0]       src, dst;
  logic [WAW:0]         left;
  logic [M-1:0][DW-1:0] hold;

  logic src_host, src_act, dst_host, dst_act;
  assign src_host = (op == DMA_H2A) || (op == DMA_H2W);
  assign src_act  = (op == DMA_A2H) || (op == DMA_A2W);
  assign dst_host = (op == DMA_A2H) || (op == DMA_W2H);
  assign dst_act  = (op == DMA_H2A) || (op == DMA_W2A);

  function automatic logic [M-1:0][W_BITS-1:0] to_w(input logic [M-1:0][DW-1:0] r);
    logic [M-1:0][W_BITS-1:0] o;
    for (int c = 0; c < M; c++) o[c] = r[c][W_BITS-1:0];
    return o;
  endfunction

  function automatic logic [M-1:0][DW-1:0] from_w(input logic [M-1:0][W_BITS-1:0] r);
    logic [M-1:0][DW-1:0] o;
    for (int c = 0; c < M; c++) o[c] = DW'($signed(r[c]));
    return o;
  endfunction

  assign cmd_ready = (st == D_IDLE);
  assign busy      = (st != D_IDLE);

  // a row arriving from the host is written straight through
  logic h_take;
  assign h_take    = (st == D_READ) && src_host && h2d_valid;
  assign h2d_ready = (st == D_READ) && src_host;

  assign a_re    = (st == D_READ) && src_act;
  assign a_raddr = AAW'(src);
  assign w_re    = (st == D_READ) && !src_host && !src_act;
  assign w_raddr = src;

  // the row being written this cycle
  logic [M-1:0][DW-1:0] row;
  logic                 row_v;
  always_comb begin
    row   = h_take ? h2d_data : hold;
    row_v = h_take || ((st == D_SEND) && !dst_host);
  end

  assign a_we    = row_v && dst_act;
  assign a_waddr = AAW'(dst);
  assign a_wdata = row;
  assign w_we    = row_v && !dst_act;
  assign w_waddr = dst;
  assign w_wdata = to_w(row);

  assign d2h_valid = (st == D_SEND) && dst_host;
  assign d2h_data  = hold;

  logic row_end;
  assign row_end = h_take || ((st == D_SEND) && (!dst_host || d2h_ready));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= D_IDLE;
      op        <= '0;
      src       <= '0;
      dst       <= '0;
      left      <= '0;
      hold      <= '0;
      done      <= 1'b0;
      n_rows    <= '0;
      n_overlap <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        D_IDLE: if (cmd_valid) begin
          op   <= cmd_op;
          src  <= cmd_src;
          dst  <= cmd_dst;
          left <= cmd_rows;
          st   <= D_READ;
        end
        D_READ: if (!src_host) st <= D_DATA;
        D_DATA: begin
          hold <= src_act ? a_rdata : from_w(w_rdata);
          st   <= D_SEND;
        end
        default: ;
      endcase
      if (row_end) begin
        n_rows <= n_rows + 1;
        if (overlap_in) n_overlap <= n_overlap + 1;
        src  <= src + 1'b1;
        dst  <= dst + 1'b1;
        left <= left - 1'b1;
        if (left == 1) begin
          st   <= D_IDLE;
          done <= 1'b1;
        end else begin
          st <= D_READ;
        end
      end
    end
  end

endmodule
