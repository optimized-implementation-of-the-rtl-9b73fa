// fp_mul: pipelined IEEE-754 binary floating-point multiplier, y = a * b.
//
// The multiplier of the stencil datapath (colour matrix products and the
// final scaling by the hopping parameter). EW and MW set the format; the
// defaults give single precision.
//
// Pipeline, latency 2 cycles, a new operand pair every cycle, no stall:
//   cycle 1  sign, biased exponent sum and full significand product
//   cycle 2  normalise by at most one bit, round to nearest even, pack
// Simplifications chosen for this design: subnormal inputs and results are
// flushed to zero; overflow gives infinity; inf * 0 and NaN operands give
// the canonical quiet NaN.
module fp_mul #(
  parameter int unsigned EW = 8,
  parameter int unsigned MW = 23
) (
  input  logic             clk,
  input  logic [EW+MW:0]   a,
  input  logic [EW+MW:0]   b,
  output logic [EW+MW:0]   y
);
  localparam int unsigned N    = MW + 1;
  localparam int unsigned EMAX = (1 << EW) - 1;
  localparam int unsigned BIAS = (1 << (EW - 1)) - 1;

  typedef logic [EW+MW:0] word_t;

  // ---------------------------------------------------------------- stage 1
  logic                  sign_c, zero_c, spec_c;
  word_t                 spec_res_c;
  logic signed [EW+1:0]  e_c;

  always_comb begin
    logic a_zero, b_zero, a_spec, b_spec, a_nan, b_nan;
    a_zero = (a[EW+MW-1:MW] == '0);
    b_zero = (b[EW+MW-1:MW] == '0);
    a_spec = (a[EW+MW-1:MW] == EW'(EMAX));
    b_spec = (b[EW+MW-1:MW] == EW'(EMAX));
    a_nan  = a_spec && (a[MW-1:0] != '0);
    b_nan  = b_spec && (b[MW-1:0] != '0);
    sign_c = a[EW+MW] ^ b[EW+MW];
    spec_c = a_spec || b_spec;
    zero_c = a_zero || b_zero;
    if (a_nan || b_nan || (a_spec && b_zero) || (b_spec && a_zero))
      spec_res_c = {1'b0, {EW{1'b1}}, 1'b1, {(MW-1){1'b0}}};
    else
      spec_res_c = {sign_c, {EW{1'b1}}, {MW{1'b0}}};
    e_c = $signed({2'b00, a[EW+MW-1:MW]}) + $signed({2'b00, b[EW+MW-1:MW]})
          - $signed((EW+2)'(BIAS));
  end

  logic                  r1_sign, r1_zero, r1_spec;
  word_t                 r1_spec_res;
  logic signed [EW+1:0]  r1_e;
  logic [2*N-1:0]        r1_p;

  always_ff @(posedge clk) begin
    r1_sign     <= sign_c;
    r1_zero     <= zero_c;
    r1_spec     <= spec_c;
    r1_spec_res <= spec_res_c;
    r1_e        <= e_c;
    r1_p        <= {1'b1, a[MW-1:0]} * {1'b1, b[MW-1:0]};
  end

  // ---------------------------------------------------------------- stage 2
  word_t y_c;

  always_comb begin
    logic signed [EW+1:0] e;
    logic [MW-1:0]        keep;
    logic                 g, s;
    logic [MW:0]          rnd;
    e = r1_e;
    if (r1_p[2*N-1]) begin
      keep = r1_p[2*N-2:N];
      g    = r1_p[N-1];
      s    = |r1_p[N-2:0];
      e    = e + 1;
    end else begin
      keep = r1_p[2*N-3:N-1];
      g    = r1_p[N-2];
      s    = |r1_p[N-3:0];
    end
    rnd = {1'b0, keep} + {{MW{1'b0}}, g & (s | keep[0])};
    if (rnd[MW]) e = e + 1;          // fraction overflowed to 1.000...
    if (r1_spec)
      y_c = r1_spec_res;
    else if (r1_zero || e <= 0)
      y_c = {r1_sign, {(EW+MW){1'b0}}};
    else if (e >= $signed((EW+2)'(EMAX)))
      y_c = {r1_sign, {EW{1'b1}}, {MW{1'b0}}};
    else
      y_c = {r1_sign, e[EW-1:0], rnd[MW-1:0]};
  end

  always_ff @(posedge clk) y <= y_c;

endmodule
