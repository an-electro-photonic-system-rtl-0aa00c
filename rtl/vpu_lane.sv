// vpu_lane: one digital lane of the vectorized processing unit.
//
// A lane holds the six 32-bit arithmetic units the paper lists (multiply,
// add, divide, max, square root, exponential), an operand multiplexer in front
// of each unit, and a 64 KB register file (16384 words) for constants loaded
// up front and for intermediate results. Each operand multiplexer chooses, as
// in the paper, between the lane's element of the vector read from the
// activation SRAM, the last result of any arithmetic unit, or a register-file
// word (or zero, this design's addition for one-operand functions).
//
// All lanes of a unit receive the same control from the scheduler; only the
// data differ. Timing, two stages: in the issue cycle the scheduler presents
// the register-file read addresses (ra/rb), which are read synchronously; in
// the following execute cycle it presents ex_* and the SRAM element, and the
// chosen unit starts. The unit's result appears on res/res_valid
// N_WAY + 1 cycles later, when the scheduler may write it back to the
// register file (wb_rf_we/wb_rf_addr) or to the SRAM. The host write port
// (h_we) loads constants and has priority over write-back. A unit output
// chosen as operand is that unit's most recent result; the scheduler
// guarantees it is the one intended.
module vpu_lane
  import adept_pkg::*;
#(
  parameter int unsigned N_WAY    = 5,
  parameter int unsigned RF_DEPTH = RF_DEPTH_DEF,
  localparam int unsigned AW      = $clog2(RF_DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // issue stage
  input  logic [AW-1:0] ra,
  input  logic [AW-1:0] rb,
  // execute stage
  input  logic          ex_valid,
  input  op_e           ex_op,
  input  src_e          ex_sa,
  input  op_e           ex_ua,
  input  src_e          ex_sb,
  input  op_e           ex_ub,
  input  word_t         sram_elem,
  // write-back
  input  logic          wb_rf_we,
  input  logic [AW-1:0] wb_rf_addr,
  // host load of constants
  input  logic          h_we,
  input  logic [AW-1:0] h_addr,
  input  word_t         h_data,
  // result of the unit completing this cycle
  output logic          res_valid,
  output word_t         res
);

  word_t rf [RF_DEPTH];
  word_t rda, rdb;

  always_ff @(posedge clk) begin
    rda <= rf[ra];
    rdb <= rf[rb];
    if (h_we)          rf[h_addr]     <= h_data;
    else if (wb_rf_we) rf[wb_rf_addr] <= res;
  end

  word_t unit_y [N_UNITS];
  logic  unit_v [N_UNITS];

  function automatic word_t pick(input src_e s, input op_e u, input word_t rfv,
                                 input word_t sv, input word_t uy [N_UNITS]);
    case (s)
      SRC_SRAM: return sv;
      SRC_UNIT: return uy[u];
      SRC_RF:   return rfv;
      default:  return '0;
    endcase
  endfunction

  word_t opa, opb;
  always_comb begin
    opa = pick(ex_sa, ex_ua, rda, sram_elem, unit_y);
    opb = pick(ex_sb, ex_ub, rdb, sram_elem, unit_y);
  end

  for (genvar u = 0; u < N_UNITS; u++) begin : g_unit
    arith_unit #(.OP(op_e'(u)), .N_WAY(N_WAY)) u_unit (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (ex_valid && (ex_op == op_e'(u))),
      .a        (opa),
      .b        (opb),
      .out_valid(unit_v[u]),
      .y        (unit_y[u])
    );
  end

  always_comb begin
    res_valid = 1'b0;
    res       = '0;
    for (int u = 0; u < N_UNITS; u++) begin
      if (unit_v[u]) begin
        res_valid = 1'b1;
        res       = unit_y[u];
      end
    end
  end

endmodule
