// psum_accumulator: digital accumulation of the photo-core's partial results.
//
// A weight matrix wider than the M x M core is cut into tiles along its
// input dimension K; each tile yields, per input vector, a partial output
// vector from the ADCs. The paper accumulates these partial results digitally
// and stores the final vectors in the activation SRAM, from where each goes
// on to the digital vector unit as soon as it is complete.
//
// This design keeps the running sums in a local buffer of ACC_DEPTH vectors
// of 32-bit sums (its size and the buffer itself are this design's choice;
// the GEMM controller cuts the batch into chunks of at most ACC_DEPTH
// vectors). Each incoming vector carries a tag: idx (position in the chunk),
// first (first K tile: start a new sum), last (last K tile: the sum is final)
// and waddr (activation-SRAM row of the final vector). A final sum is scaled
// to the lane format (<<< OUT_SHIFT, saturating) and written the next cycle;
// n_done then counts it. n_done is cleared by clr.
module psum_accumulator
  import adept_pkg::*;
#(
  parameter int unsigned M         = M_DEF,
  parameter int unsigned ACC_DEPTH = 1024,
  parameter int unsigned OUT_SHIFT = 16,
  parameter int unsigned AAW       = 18,
  localparam int unsigned IW       = (ACC_DEPTH > 1) ? $clog2(ACC_DEPTH) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clr,
  input  logic                       in_valid,
  input  logic [M-1:0][ADC_BITS-1:0] in_code,
  input  logic [IW-1:0]              in_idx,
  input  logic                       in_first,
  input  logic                       in_last,
  input  logic [AAW-1:0]             in_waddr,
  output logic                       wr_en,
  output logic [AAW-1:0]             wr_addr,
  output logic [M-1:0][DW-1:0]       wr_data,
  output logic [AAW:0]               n_done
);

  logic [M-1:0][DW-1:0] abuf [ACC_DEPTH];

  logic [M-1:0][DW-1:0] sum;
  always_comb begin
    for (int i = 0; i < M; i++) begin
      logic signed [DW-1:0] prev;
      prev   = in_first ? '0 : $signed(abuf[in_idx][i]);
      sum[i] = fx_add(prev, DW'($signed(in_code[i])));
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && !in_last) abuf[in_idx] <= sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_en   <= 1'b0;
      wr_addr <= '0;
      wr_data <= '0;
      n_done  <= '0;
    end else begin
      wr_en <= in_valid && in_last;
      if (in_valid && in_last) begin
        wr_addr <= in_waddr;
        for (int i = 0; i < M; i++)
          wr_data[i] <= sat_word(64'($signed(sum[i])) <<< OUT_SHIFT);
      end
      if (clr)             n_done <= '0;
      else if (wr_en)      n_done <= n_done + 1'b1;
    end
  end

endmodule
