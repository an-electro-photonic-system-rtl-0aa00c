// weight_buffer: the per-photo-core weight buffer between the weight SRAM and
// the MZI mesh.
//
// The paper places it there because moving a whole M x M tile from the SRAM
// at once would need a huge SRAM bandwidth, while moving it a row at a time
// straight into the mesh would leave the core idle between tiles. So the next
// tile is written into this buffer row by row (ld_*, one row of M weights per
// cycle) while the photo-core still computes with the current tile, and is
// then programmed into the mesh in 10 ns.
//
// Programming follows the paper's data-converter budget: ceil(M*M/ZETA)
// weight DACs, each able to set ZETA = 100 MZIs within the 10 ns settling
// time at 10 GS/s. A prog_start pulse makes the buffer send, in each of ZETA
// cycles (slot s = 0 .. ZETA-1), weight d*ZETA + s to DAC d (zero past the
// end of the tile). prog_busy is high from the cycle after prog_start to the
// end; prog_done pulses with the last slot. The buffer may be reloaded from
// the cycle after prog_done; loading while programming is an error.
module weight_buffer
  import adept_pkg::*;
#(
  parameter int unsigned M    = M_DEF,
  parameter int unsigned ZETA = ZETA_DEF,
  localparam int unsigned NDAC = (M * M + ZETA - 1) / ZETA,
  localparam int unsigned SLW  = (ZETA > 1) ? $clog2(ZETA) : 1,
  localparam int unsigned RW   = (M > 1) ? $clog2(M) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // row load from the weight SRAM
  input  logic                        ld_valid,
  input  logic [RW-1:0]               ld_row,
  input  logic [M-1:0][W_BITS-1:0]    ld_data,
  // programming of the photo-core
  input  logic                        prog_start,
  output logic                        prog_busy,
  output logic                        prog_done,
  output logic                        prog_valid,
  output logic [SLW-1:0]              prog_slot,
  output logic [NDAC-1:0][W_BITS-1:0] prog_data
);

  logic [W_BITS-1:0] wbuf [M*M];

  always_ff @(posedge clk) begin
    if (ld_valid)
      for (int c = 0; c < M; c++) wbuf[int'(ld_row) * M + c] <= ld_data[c];
  end

  logic [SLW-1:0] slot;
  logic           run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run        <= 1'b0;
      slot       <= '0;
      prog_valid <= 1'b0;
      prog_slot  <= '0;
      prog_done  <= 1'b0;
      prog_data  <= '0;
    end else begin
      prog_valid <= run;
      prog_slot  <= slot;
      prog_done  <= run && (slot == SLW'(ZETA - 1));
      for (int d = 0; d < NDAC; d++)
        prog_data[d] <= (d * ZETA + int'(slot) < M * M) ? wbuf[d * ZETA + int'(slot)] : '0;
      if (prog_start && !run) begin
        run  <= 1'b1;
        slot <= '0;
      end else if (run) begin
        if (slot == SLW'(ZETA - 1)) run <= 1'b0;
        else                        slot <= slot + 1'b1;
      end
    end
  end

  assign prog_busy = run || prog_valid;

  a_no_load_while_programming: assert property (@(posedge clk) disable iff (!rst_n)
    !(ld_valid && prog_busy));

endmodule
