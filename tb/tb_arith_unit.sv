// tb_arith_unit: self-checking test of arith_unit, one instance per operation.
//
// Random Q16.16 operands go into every unit on most cycles (with gaps). The
// expected results are computed here in floating point (real): products,
// sums and quotients with saturation, sqrt with $sqrt and e^x with $exp; the
// unit must match within one LSB, or a relative 2e-4 for the exponential.
// The test also checks the latency: every result must leave exactly
// N_WAY + 1 cycles after its operands went in, one result per cycle.
module tb_arith_unit;
  import adept_pkg::*;

  localparam int unsigned N_WAY = 5;
  localparam int unsigned NOPS  = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  in_valid;
  word_t a, b;
  logic  ov [NOPS];
  word_t y  [NOPS];

  for (genvar u = 0; u < NOPS; u++) begin : g_dut
    arith_unit #(.OP(op_e'(u)), .N_WAY(N_WAY)) dut (
      .clk, .rst_n, .in_valid, .a, .b, .out_valid(ov[u]), .y(y[u])
    );
  end

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic real to_r(word_t w);
    return real'(w) / 65536.0;
  endfunction

  function automatic real sat_r(real v);
    if (v > 32767.99998) return 32767.99998;
    if (v < -32768.0)    return -32768.0;
    return v;
  endfunction

  // expected value in real units, and allowed error in LSBs
  function automatic real expect_r(int u, word_t x, word_t z);
    real ra, rb;
    ra = to_r(x); rb = to_r(z);
    case (u)
      0: return sat_r(ra * rb);
      1: return sat_r(ra + rb);
      2: return (z == 0) ? ((x < 0) ? -32768.0 : 32767.99998) : sat_r(ra / rb);
      3: return (ra > rb) ? ra : rb;
      4: return (ra <= 0.0) ? 0.0 : $sqrt(ra);
      default: return sat_r($exp(ra));
    endcase
  endfunction

  typedef struct { longint t; word_t a; word_t b; } rec_t;
  rec_t q[$];

  initial begin
    in_valid = 0; a = 0; b = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 9) != 0);
      case ($urandom_range(0, 3))
        0: begin a = $urandom; b = $urandom; end                       // full range
        1: begin a = $signed($urandom_range(0, 20'hFFFFF)) - 32'sd524288;  // |x| < 8
                 b = $signed($urandom_range(0, 20'hFFFFF)) - 32'sd524288; end
        2: begin a = $signed($urandom_range(0, 32'h000A_FFFF)) - 32'sh0005_0000; // exp range
                 b = $urandom_range(0, 3) == 0 ? 0 : $signed($urandom_range(1, 32'h0003_0000)); end
        default: begin a = $urandom_range(0, 32'h7FFF_FFFF); b = -$signed($urandom_range(1, 1000)); end
      endcase
      if (in_valid) q.push_back('{cycle, a, b});
    end
    @(negedge clk) in_valid = 0;
    repeat (20) @(posedge clk);
    if (q.size() != 0) begin
      failures++;
      $display("FAIL: %0d results never came out", q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // check results
  always @(posedge clk) if (rst_n) begin
    if (ov[0]) begin
      rec_t r;
      if (q.size() == 0) begin
        failures++; $display("FAIL: result with nothing in flight");
      end else begin
        r = q.pop_front();
        checks++;
        // out_valid is registered at this edge's previous cycle: the
        // operands entered N_WAY + 1 edges before the one that raised it
        if (cycle - r.t != longint'(N_WAY + 1)) begin
          failures++;
          $display("FAIL: latency %0d, expected %0d", cycle - r.t, N_WAY + 1);
        end
        for (int u = 0; u < NOPS; u++) begin
          real e, got, tol;
          e   = expect_r(u, r.a, r.b);
          got = to_r(y[u]);
          tol = (u == 5) ? (2.0e-4 * ((e < 0) ? -e : e) + 4.0 / 65536.0) : (1.01 / 65536.0);
          if (!ov[u]) begin
            failures++; $display("FAIL: unit %0d not valid with the others", u);
          end
          checks++;
          if ((got - e) > tol || (e - got) > tol) begin
            failures++;
            if (failures < 20)
              $display("FAIL: op %0d a=%h b=%h got %f expected %f", u, r.a, r.b, got, e);
          end
        end
      end
    end
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
