// arith_unit: one 32-bit arithmetic unit of a digital lane (multiply, add,
// divide, max, square root or exponential, chosen by OP).
//
// The paper's lanes must keep up with a photo-core clocked far faster than
// digital logic closes timing, so each operation is built from N_WAY logical
// copies that each run at 1/N_WAY of the clock, the copies offset by one
// cycle from each other. Here this is done in one clock domain: a free-running
// slot counter names the copy whose turn it is. In its turn a copy (1) puts
// the result of the operands it captured N_WAY cycles earlier on the output
// register and (2) captures the new operands, if any. Between its turns a
// copy's operands stay still, so its arithmetic is an N_WAY-cycle multicycle
// path. The unit thus accepts one operation every cycle and returns each
// result on out_valid/y exactly N_WAY + 1 cycles after in_valid (N_WAY cycles
// of arithmetic plus the output register), in issue order.
//
// Interface: in_valid/a/b, out_valid/y (y holds its value between results).
// Arithmetic is Q16.16 fixed point with saturation (adept_pkg), a choice of
// this design; N_WAY = 5 follows from the 10 GHz photo-core clock and the
// paper's 2 GHz limit for digital logic.
module arith_unit
  import adept_pkg::*;
#(
  parameter op_e         OP    = OP_ADD,
  parameter int unsigned N_WAY = 5
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  word_t a,
  input  word_t b,
  output logic  out_valid,
  output word_t y
);

  localparam int unsigned SW = (N_WAY > 1) ? $clog2(N_WAY) : 1;

  logic [SW-1:0] slot;
  word_t         opa  [N_WAY];
  word_t         opb  [N_WAY];
  logic          busy [N_WAY];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) slot <= '0;
    else        slot <= (slot == SW'(N_WAY - 1)) ? '0 : slot + 1'b1;
  end

  for (genvar i = 0; i < N_WAY; i++) begin : g_copy
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        busy[i] <= 1'b0;
        opa[i]  <= '0;
        opb[i]  <= '0;
      end else if (slot == SW'(i)) begin
        busy[i] <= in_valid;
        if (in_valid) begin
          opa[i] <= a;
          opb[i] <= b;
        end
      end
    end
  end

  // Result of the copy whose turn it is (its operands are N_WAY cycles old).
  word_t res_now;
  logic  busy_now;
  always_comb begin
    res_now  = '0;
    busy_now = 1'b0;
    for (int i = 0; i < N_WAY; i++) begin
      if (slot == SW'(i)) begin
        res_now  = fx_apply(OP, opa[i], opb[i]);
        busy_now = busy[i];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= busy_now;
      if (busy_now) y <= res_now;
    end
  end

endmodule
