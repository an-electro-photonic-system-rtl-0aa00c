// adept_pkg: constants, types and fixed-point arithmetic shared by the ADEPT
// electro-photonic accelerator RTL.
//
// Sizes that follow the paper: a 128 x 128 photo-core (M), 10-bit input DACs,
// 12-bit weight DACs, 8-bit output ADCs, 32-bit arithmetic units in the
// digital lanes, 64 KB register files, one weight DAC per 100 weights (ZETA)
// and a 10 GHz system clock, so the 10 ns MZI programming time is 100 cycles.
//
// Choices of this design (the paper leaves them open): the 32-bit lane
// arithmetic is signed fixed point with 16 fractional bits (Q16.16) and
// saturates instead of wrapping; activations are stored as one such 32-bit
// word per element; the micro-instruction format of the vector unit below.
package adept_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned M_DEF      = 128;  // photo-core is M x M, lanes per VPU
  localparam int unsigned IN_BITS    = 10;   // input DAC resolution
  localparam int unsigned W_BITS     = 12;   // weight DAC resolution
  localparam int unsigned ADC_BITS   = 8;    // output ADC resolution
  localparam int unsigned DW         = 32;   // lane word width
  localparam int unsigned FRAC       = 16;   // fractional bits of a lane word
  localparam int unsigned ZETA_DEF   = 100;  // weights programmed per weight DAC
  localparam int unsigned RF_BYTES   = 65536;
  localparam int unsigned RF_DEPTH_DEF = RF_BYTES / (DW / 8);  // 16384 words
  localparam int unsigned RF_AW      = $clog2(RF_DEPTH_DEF);

  typedef logic signed [DW-1:0] word_t;

  localparam word_t WORD_MAX = 32'sh7FFF_FFFF;
  localparam word_t WORD_MIN = 32'sh8000_0000;
  localparam word_t FX_ONE   = 32'sh0001_0000;

  // ---------------------------------------------------- vector unit ISA
  // The six arithmetic units of a lane, also used as unit index.
  typedef enum logic [2:0] {
    OP_MUL  = 3'd0,
    OP_ADD  = 3'd1,
    OP_DIV  = 3'd2,
    OP_MAX  = 3'd3,
    OP_SQRT = 3'd4,
    OP_EXP  = 3'd5
  } op_e;
  localparam int unsigned N_UNITS = 6;

  // Operand source of a unit input: the three choices named by the paper
  // (activation SRAM, output of an arithmetic unit, register file) plus zero.
  typedef enum logic [1:0] {
    SRC_SRAM = 2'd0,
    SRC_UNIT = 2'd1,
    SRC_RF   = 2'd2,
    SRC_ZERO = 2'd3
  } src_e;

  // One micro-instruction: issue one operation on every lane.
  typedef struct packed {
    op_e               op;      // which unit runs
    src_e              sa;      // operand A source
    op_e               ua;      // unit whose last result is A (sa == SRC_UNIT)
    logic [RF_AW-1:0]  ra;      // register-file address of A (sa == SRC_RF)
    src_e              sb;      // operand B source
    op_e               ub;
    logic [RF_AW-1:0]  rb;
    logic              wr_rf;   // write the result to the register file
    logic [RF_AW-1:0]  rd;      // register-file destination
    logic              wr_sram; // write the result vector to the activation SRAM
  } instr_t;

  // ------------------------------------------------ fixed-point helpers
  function automatic word_t sat_word(input logic signed [63:0] v);
    if (v > 64'sd2147483647)       return WORD_MAX;
    else if (v < -64'sd2147483648) return WORD_MIN;
    else                           return word_t'(v);
  endfunction

  function automatic word_t fx_add(input word_t a, input word_t b);
    logic signed [63:0] s;
    s = 64'(a) + 64'(b);
    return sat_word(s);
  endfunction

  function automatic word_t fx_mul(input word_t a, input word_t b);
    logic signed [63:0] p;
    p = (64'(a) * 64'(b)) >>> FRAC;
    return sat_word(p);
  endfunction

  // a / b; division by zero saturates towards the sign of a.
  function automatic word_t fx_div(input word_t a, input word_t b);
    logic signed [63:0] n, q;
    if (b == 0) return (a < 0) ? WORD_MIN : WORD_MAX;
    n = 64'(a) <<< FRAC;
    q = n / 64'(b);
    return sat_word(q);
  endfunction

  function automatic word_t fx_max(input word_t a, input word_t b);
    return (a > b) ? a : b;
  endfunction

  // sqrt(a) for a > 0, else 0: integer square root of a * 2^16, bit by bit.
  function automatic word_t fx_sqrt(input word_t a);
    logic [47:0] x, res, bitv;
    if (a <= 0) return '0;
    x    = 48'(a) << FRAC;
    res  = '0;
    bitv = 48'd1 << 46;
    for (int i = 0; i < 24; i++) begin
      if (x >= res + bitv) begin
        x   = x - (res + bitv);
        res = (res >> 1) + bitv;
      end else begin
        res = res >> 1;
      end
      bitv = bitv >> 2;
    end
    return word_t'(res);
  endfunction

  // e^a = 2^(a * log2 e). The integer part of the exponent is a shift, the
  // fraction f in [0,1) goes through a degree-5 polynomial of 2^f
  // (coefficients (ln 2)^k / k! in Q16.16). Saturates above, flushes to zero
  // below.
  function automatic word_t fx_exp(input word_t a);
    localparam word_t LOG2E = 32'sd94548;              // 1.4426950 * 2^16
    localparam word_t C1 = 32'sd45426, C2 = 32'sd15743, C3 = 32'sd3638,
                      C4 = 32'sd630,   C5 = 32'sd87;
    word_t y, f, p;
    logic signed [15:0] ip;
    y  = fx_mul(a, LOG2E);
    ip = y[31:16];                                     // floor of exponent
    f  = {16'd0, y[15:0]};
    p  = C5;
    p  = fx_add(C4, fx_mul(p, f));
    p  = fx_add(C3, fx_mul(p, f));
    p  = fx_add(C2, fx_mul(p, f));
    p  = fx_add(C1, fx_mul(p, f));
    p  = fx_add(FX_ONE, fx_mul(p, f));                 // 2^f in [1,2)
    if (ip >= 16'sd15)       return WORD_MAX;
    else if (ip < -16'sd17)  return '0;
    else if (ip >= 0)        return p <<< ip;
    else                     return p >>> (-ip);
  endfunction

  function automatic word_t fx_apply(input op_e op, input word_t a, input word_t b);
    case (op)
      OP_MUL:  return fx_mul(a, b);
      OP_ADD:  return fx_add(a, b);
      OP_DIV:  return fx_div(a, b);
      OP_MAX:  return fx_max(a, b);
      OP_SQRT: return fx_sqrt(a);
      OP_EXP:  return fx_exp(a);
      default: return '0;
    endcase
  endfunction

endpackage
