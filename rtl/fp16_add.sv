// fp16_add: combinational IEEE 754 binary16 adder for non-negative operands.
//
// Every value inside a probabilistic circuit (indicator, weight, node output) is a probability
// and never negative, so the sum nodes need only add magnitudes; sign handling and
// cancellation are left out, the simplest unit that does the job (a choice of this design).
// The operands are ordered by magnitude, the smaller significand is shifted right by the
// exponent difference keeping guard, round and sticky bits, the two are added, the sum is
// renormalised by at most one place and rounded to nearest, ties to even.
//
// Number handling follows fp16_mul: subnormal inputs count as zero (flush to zero), a sum
// beyond the largest finite value becomes +infinity with `overflow` raised, a NaN input or a
// sign bit set on an input gives the quiet NaN 0x7E00. A sum of non-negative normal numbers
// cannot underflow.
//
// Interface: a, b in; y, overflow out. No clock.
module fp16_add
  import fp16_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t y,
  output logic  overflow
);

  fp16_t       op_big, op_small;
  logic [4:0]  eb, es, ediff;
  logic        big_zero, small_zero, big_inf, any_nan, any_neg;
  logic [13:0] mb, ms;          // 1.f followed by guard, round, sticky
  logic [13:0] ms_sh;
  logic [14:0] sum;
  logic [5:0]  exp_r;
  logic [9:0]  frac;
  logic        guard, rest, round_up;
  logic [10:0] frac_rnd;

  always_comb begin
    any_neg = a[15] || b[15];
    any_nan = ((a[14:10] == 5'd31) && (a[9:0] != 10'd0)) ||
              ((b[14:10] == 5'd31) && (b[9:0] != 10'd0));
    if (a[14:0] >= b[14:0]) begin
      op_big   = a;
      op_small = b;
    end else begin
      op_big   = b;
      op_small = a;
    end
    eb         = op_big[14:10];
    es         = op_small[14:10];
    big_zero   = (eb == 5'd0);
    small_zero = (es == 5'd0);
    big_inf    = (eb == 5'd31);
    ediff      = eb - es;

    mb = {1'b1, op_big[9:0], 3'b000};
    ms = {1'b1, op_small[9:0], 3'b000};
    // Right shift keeping a sticky bit of everything shifted out.
    ms_sh = ms;
    for (int i = 0; i < 15; i++) begin
      if (i < 32'(ediff)) begin
        ms_sh = {1'b0, ms_sh[13:2], ms_sh[1] | ms_sh[0]};
      end
    end
    if (ediff > 5'd14) begin
      ms_sh = {13'd0, 1'b1};                     // only the sticky bit is left
    end

    sum   = {1'b0, mb} + {1'b0, ms_sh};
    exp_r = {1'b0, eb};
    if (sum[14]) begin
      sum   = {1'b0, sum[14:2], sum[1] | sum[0]};
      exp_r = exp_r + 6'd1;
    end
    frac     = sum[12:3];
    guard    = sum[2];
    rest     = sum[1] | sum[0];
    round_up = guard & (rest | frac[0]);
    frac_rnd = {1'b0, frac} + {10'd0, round_up};
    if (frac_rnd[10]) begin
      exp_r = exp_r + 6'd1;
    end

    overflow = 1'b0;
    if (any_nan || any_neg) begin
      y = FP16_QNAN;
    end else if (big_inf) begin
      y = FP16_POS_INF;
    end else if (big_zero) begin
      y = FP16_ZERO;                             // both operands zero or subnormal
    end else if (small_zero) begin
      y = op_big;
    end else if (exp_r >= 6'd31) begin
      y        = FP16_POS_INF;
      overflow = 1'b1;
    end else begin
      y = {1'b0, exp_r[4:0], frac_rnd[9:0]};
    end
  end

endmodule
