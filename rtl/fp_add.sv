// fp_add: pipelined IEEE-754 binary floating-point adder, y = a + b.
//
// The stencil datapath is built from dedicated floating-point units; this
// is its adder (subtraction is addition with the sign bit of b flipped,
// which costs nothing). The format is set by EW (exponent bits) and MW
// (fraction bits); the defaults give single precision, the data type of the
// benchmarked configuration.
//
// Pipeline, latency 2 cycles, a new operand pair every cycle, no stall:
//   cycle 1  unpack, order the operands by magnitude, align the smaller
//            significand by the exponent difference keeping guard, round
//            and sticky bits
//   cycle 2  add or subtract, normalise (carry or leading zeros), round to
//            nearest even, pack
// Simplifications chosen for this design: subnormal inputs and results are
// flushed to zero, an exact zero sum is +0, infinities propagate and
// inf - inf or any NaN operand gives the canonical quiet NaN.
module fp_add #(
  parameter int unsigned EW = 8,
  parameter int unsigned MW = 23
) (
  input  logic             clk,
  input  logic [EW+MW:0]   a,
  input  logic [EW+MW:0]   b,
  output logic [EW+MW:0]   y
);
  localparam int unsigned N    = MW + 1;      // significand with hidden bit
  localparam int unsigned W    = N + 3;       // plus guard, round, sticky
  localparam int unsigned EMAX = (1 << EW) - 1;
  localparam int unsigned LZW  = $clog2(W + 1);

  typedef logic [EW+MW:0] word_t;

  // ---------------------------------------------------------------- stage 1
  logic           a_zero, b_zero, a_spec, b_spec, a_nan, b_nan;
  logic           swap;
  word_t          big, sml;
  logic [EW-1:0]  d;
  logic [W-1:0]   mb_al, ma_ext;
  word_t          spec_res;
  logic           is_spec;

  logic [2*W-1:0] wide;

  always_comb begin
    a_zero = (a[EW+MW-1:MW] == '0);
    b_zero = (b[EW+MW-1:MW] == '0);
    a_spec = (a[EW+MW-1:MW] == EW'(EMAX));
    b_spec = (b[EW+MW-1:MW] == EW'(EMAX));
    a_nan  = a_spec && (a[MW-1:0] != '0);
    b_nan  = b_spec && (b[MW-1:0] != '0);
    swap   = (b[EW+MW-1:0] > a[EW+MW-1:0]);
    big    = swap ? b : a;
    sml    = swap ? a : b;
    d      = big[EW+MW-1:MW] - sml[EW+MW-1:MW];
    ma_ext = {1'b1, big[MW-1:0], 3'b000};
    // align the smaller significand; bits shifted out go to sticky
    mb_al  = '0;
    wide   = {1'b1, sml[MW-1:0], 3'b000, {W{1'b0}}} >> d;
    if (sml[EW+MW-1:MW] != '0) begin
      if (d >= EW'(W)) mb_al = {{(W-1){1'b0}}, 1'b1};
      else             mb_al = {wide[2*W-1:W+1], wide[W] | (|wide[W-1:0])};
    end
    // special operands
    is_spec  = a_spec || b_spec;
    spec_res = '0;
    if (a_nan || b_nan || (a_spec && b_spec && (a[EW+MW] != b[EW+MW])))
      spec_res = {1'b0, {EW{1'b1}}, 1'b1, {(MW-1){1'b0}}};
    else if (a_spec) spec_res = a;
    else             spec_res = b;
    if (a_zero && b_zero && !is_spec) begin
      is_spec  = 1'b1;
      spec_res = {a[EW+MW] & b[EW+MW], {(EW+MW){1'b0}}};
    end
  end

  logic           r1_spec, r1_sub, r1_sign;
  word_t          r1_spec_res;
  logic [EW-1:0]  r1_exp;
  logic [W-1:0]   r1_ma, r1_mb;

  always_ff @(posedge clk) begin
    r1_spec     <= is_spec;
    r1_spec_res <= spec_res;
    r1_sign     <= big[EW+MW];
    r1_sub      <= a[EW+MW] ^ b[EW+MW];
    r1_exp      <= big[EW+MW-1:MW];
    // a zero 'big' only happens with both operands zero (handled as
    // special); a zero 'sml' contributes nothing
    r1_ma       <= ma_ext;
    r1_mb       <= mb_al;
  end

  // ---------------------------------------------------------------- stage 2
  function automatic logic [LZW-1:0] lzc(logic [W-1:0] v);
    for (int i = W - 1; i >= 0; i--)
      if (v[i]) return LZW'(W - 1 - i);
    return LZW'(W);
  endfunction

  word_t y_c;

  always_comb begin
    logic [W:0]       sum;
    logic [W-1:0]     nrm;
    logic [LZW-1:0]   lz;
    logic signed [EW+1:0] e;
    logic [N-1:0]     keep;
    logic             g, s;
    logic [N:0]       rnd;

    sum = r1_sub ? ({1'b0, r1_ma} - {1'b0, r1_mb}) : ({1'b0, r1_ma} + {1'b0, r1_mb});
    e   = $signed({2'b00, r1_exp});
    lz  = '0;
    if (sum[W]) begin
      nrm = {sum[W:2], sum[1] | sum[0]};
      e   = e + 1;
    end else begin
      lz  = lzc(sum[W-1:0]);
      nrm = sum[W-1:0] << lz;
      e   = e - $signed({{(EW+2-LZW){1'b0}}, lz});
    end
    keep = nrm[W-1:3];
    g    = nrm[2];
    s    = nrm[1] | nrm[0];
    rnd  = {1'b0, keep} + {{N{1'b0}}, g & (s | keep[0])};
    if (rnd[N]) begin
      e   = e + 1;
      rnd = rnd >> 1;
    end
    if (r1_spec)
      y_c = r1_spec_res;
    else if (sum == '0 || e <= 0)
      y_c = {(sum == '0) ? 1'b0 : r1_sign, {(EW+MW){1'b0}}};
    else if (e >= $signed((EW+2)'(EMAX)))
      y_c = {r1_sign, {EW{1'b1}}, {MW{1'b0}}};
    else
      y_c = {r1_sign, e[EW-1:0], rnd[MW-1:0]};
  end

  always_ff @(posedge clk) y <= y_c;

endmodule
