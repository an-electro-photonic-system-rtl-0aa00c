// photo_core: BEHAVIOURAL MODEL (not synthesizable hardware; the real part is
// an analog silicon-photonic circuit) of the analog photonic computing unit:
// input DACs and Mach-Zehnder modulators, the M x M MZI mesh, coherent
// detectors and output ADCs.
//
// What it models, from the paper: a weight-stationary matrix-vector product
// y = W x of an M x M weight tile with one M-element input vector per cycle;
// 10-bit input conversion, 12-bit weights and 8-bit output conversion; weight
// programming through ceil(M*M/ZETA) weight DACs, each setting ZETA MZIs one
// after another, so programming takes ZETA cycles (100 cycles = 10 ns at the
// 10 GHz clock), during which the core cannot compute. The mesh itself holds
// phases (the host decomposes each tile by SVD into U, Sigma, V^T and then
// into phases); the model holds the 12-bit weight codes those phases stand for
// and multiplies with them directly, without optical noise.
//
// Conversions, a choice of this design: an input word (Q16.16) becomes the
// 10-bit code sat(x >>> IN_SHIFT), so inputs in [-1, 1) use the full code
// range; the ADC returns sat(round(sum >>> ADC_SHIFT)) in ADC_BITS bits.
// With the defaults the ADC full scale equals the largest possible dot
// product, so one ADC step is one unit of (weight/2^11) * (input code/2^9).
//
// Interface: prog_valid/prog_slot/prog_data come from the weight buffer, one
// sample per weight DAC per cycle; DAC d in slot s sets flat weight index
// d*ZETA + s (row-major, index r*M + c multiplies input c into output r).
// in_valid/in_vec/in_tag: an input vector; out_valid/out_code/out_tag follow
// PC_LAT cycles later (the tag is carried unchanged for the controller).
module photo_core
  import adept_pkg::*;
#(
  parameter int unsigned M         = M_DEF,
  parameter int unsigned ZETA      = ZETA_DEF,
  parameter int unsigned IN_SHIFT  = FRAC - (IN_BITS - 1),
  parameter int unsigned ADC_SHIFT = (IN_BITS - 1) + (W_BITS - 1) + $clog2(M) - (ADC_BITS - 1),
  parameter int unsigned PC_LAT    = 3,
  parameter int unsigned TAG_W     = 32,
  localparam int unsigned NDAC     = (M * M + ZETA - 1) / ZETA,
  localparam int unsigned SLW      = (ZETA > 1) ? $clog2(ZETA) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // weight programming (from the weight DACs)
  input  logic                        prog_valid,
  input  logic [SLW-1:0]              prog_slot,
  input  logic [NDAC-1:0][W_BITS-1:0] prog_data,
  // input vector
  input  logic                        in_valid,
  input  logic [M-1:0][DW-1:0]        in_vec,
  input  logic [TAG_W-1:0]            in_tag,
  // output vector after the ADCs
  output logic                        out_valid,
  output logic [M-1:0][ADC_BITS-1:0]  out_code,
  output logic [TAG_W-1:0]            out_tag
);

  function automatic logic signed [IN_BITS-1:0] dac_code(input word_t x);
    word_t s;
    s = x >>> IN_SHIFT;
    if (s > word_t'(2**(IN_BITS-1) - 1))  return IN_BITS'(2**(IN_BITS-1) - 1);
    if (s < -word_t'(2**(IN_BITS-1)))     return IN_BITS'(-(2**(IN_BITS-1)));
    return s[IN_BITS-1:0];
  endfunction

  function automatic logic [ADC_BITS-1:0] adc_code(input logic signed [63:0] acc);
    logic signed [63:0] r;
    r = (acc + (64'sd1 <<< (ADC_SHIFT - 1))) >>> ADC_SHIFT;
    if (r > 64'(2**(ADC_BITS-1) - 1)) return ADC_BITS'(2**(ADC_BITS-1) - 1);
    if (r < -64'(2**(ADC_BITS-1)))                  return ADC_BITS'(-(2**(ADC_BITS-1)));
    return r[ADC_BITS-1:0];
  endfunction

  // input DACs
  logic signed [IN_BITS-1:0] xin [M];
  always_comb begin
    for (int c = 0; c < M; c++) xin[c] = dac_code(word_t'(in_vec[c]));
  end

  // one block per output row: the row's weights and its detector/ADC; the
  // optical product is evaluated when a vector enters
  logic [ADC_BITS-1:0] row_code [M];
  for (genvar r = 0; r < M; r++) begin : g_row
    logic signed [W_BITS-1:0] w [M];

    // weight programming: DAC d writes MZI d*ZETA + slot, flat index r*M + c
    always_ff @(posedge clk) begin
      if (prog_valid) begin
        for (int c = 0; c < M; c++) begin
          if (int'(prog_slot) == (r * M + c) % ZETA)
            w[c] <= prog_data[(r * M + c) / ZETA];
        end
      end
    end

    logic signed [63:0] acc;
    always_comb begin
      acc = '0;
      for (int c = 0; c < M; c++) acc += 64'(w[c]) * 64'(xin[c]);
    end

    always_ff @(posedge clk) begin
      if (in_valid) row_code[r] <= adc_code(acc);
    end
  end

  // the remaining PC_LAT - 1 cycles of latency
  logic [M-1:0][ADC_BITS-1:0] pipe_code [PC_LAT];
  logic [TAG_W-1:0]           pipe_tag  [PC_LAT];
  logic                       pipe_v    [PC_LAT];

  always_comb begin
    for (int r = 0; r < M; r++) pipe_code[0][r] = row_code[r];
  end

  always_ff @(posedge clk) begin
    pipe_tag[0] <= in_tag;
    for (int s = 1; s < PC_LAT; s++) begin
      pipe_code[s] <= pipe_code[s-1];
      pipe_tag[s]  <= pipe_tag[s-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < PC_LAT; s++) pipe_v[s] <= 1'b0;
    end else begin
      pipe_v[0] <= in_valid;
      for (int s = 1; s < PC_LAT; s++) pipe_v[s] <= pipe_v[s-1];
    end
  end

  assign out_valid = pipe_v[PC_LAT-1];
  assign out_code  = pipe_code[PC_LAT-1];
  assign out_tag   = pipe_tag[PC_LAT-1];

  // the core is inoperable while its MZIs are being programmed
  a_no_input_while_programming: assert property (@(posedge clk) disable iff (!rst_n)
    !(prog_valid && in_valid));

endmodule
