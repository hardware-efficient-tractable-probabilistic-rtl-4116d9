// fp16_mul: combinational IEEE 754 binary16 multiplier for the probabilistic-circuit datapath.
//
// Product nodes and weighted edges of the circuit both reduce to one binary16 multiply. The
// two 11-bit significands are multiplied exactly (22 bits), normalised by at most one place,
// and rounded to nearest, ties to even. Exponents are added with the bias removed.
//
// Number handling, a choice of this design where the source only names the float16 format:
//   - flush to zero: a subnormal input counts as zero, and a rounded result below 2^-14 is
//     returned as +/-0 with `underflow` raised. This is the event that makes a deep circuit
//     collapse to zero and that the nth-root weight transformation is meant to avoid;
//   - a result above the largest finite value becomes infinity with `overflow` raised;
//   - infinity times zero, or a NaN input, gives the quiet NaN 0x7E00.
//
// Interface: a, b in; y, underflow, overflow out. No clock: the caller registers the result.
module fp16_mul
  import fp16_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t y,
  output logic  underflow,
  output logic  overflow
);

  logic        sa, sb, sy;
  logic [4:0]  ea, eb;
  logic [9:0]  fa, fb;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic [21:0] prod;
  logic [9:0]  frac;
  logic        guard, sticky, round_up;
  logic [10:0] frac_rnd;
  logic signed [7:0] exp_unb;   // biased exponent of the result, may leave 1..30

  always_comb begin
    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    sy     = sa ^ sb;
    a_zero = (ea == 5'd0);                       // zero or subnormal: flushed
    b_zero = (eb == 5'd0);
    a_inf  = (ea == 5'd31) && (fa == 10'd0);
    b_inf  = (eb == 5'd31) && (fb == 10'd0);
    a_nan  = (ea == 5'd31) && (fa != 10'd0);
    b_nan  = (eb == 5'd31) && (fb != 10'd0);

    prod    = {1'b1, fa} * {1'b1, fb};
    exp_unb = 8'(signed'({3'b000, ea})) + 8'(signed'({3'b000, eb})) - 8'sd15;
    if (prod[21]) begin
      frac    = prod[20:11];
      guard   = prod[10];
      sticky  = |prod[9:0];
      exp_unb = exp_unb + 8'sd1;
    end else begin
      frac    = prod[19:10];
      guard   = prod[9];
      sticky  = |prod[8:0];
    end
    round_up = guard & (sticky | frac[0]);
    frac_rnd = {1'b0, frac} + {10'd0, round_up};
    if (frac_rnd[10]) begin
      exp_unb = exp_unb + 8'sd1;                 // 1.11..1 rounded up to 10.0
    end

    underflow = 1'b0;
    overflow  = 1'b0;
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) begin
      y = FP16_QNAN;
    end else if (a_inf || b_inf) begin
      y = {sy, 15'h7C00};
    end else if (a_zero || b_zero) begin
      y = {sy, 15'd0};
    end else if (exp_unb >= 8'sd31) begin
      y        = {sy, 15'h7C00};
      overflow = 1'b1;
    end else if (exp_unb <= 8'sd0) begin
      y         = {sy, 15'd0};
      underflow = 1'b1;
    end else begin
      y = {sy, exp_unb[4:0], frac_rnd[9:0]};
    end
  end

endmodule
