// fp16_mul_tb: self-checking test of the binary16 multiplier.
//
// Directed cases (exact products, rounding ties, the flush-to-zero boundary at 2^-14,
// overflow, infinity and NaN) are followed by random operand pairs biased towards the
// probability range. Each result word and both flags are compared bit for bit with the
// real-number reference of fp16_ref_pkg. One operand pair is applied per clock cycle.
module fp16_mul_tb;
  import fp16_ref_pkg::*;

  logic        clk = 1'b0;
  logic [15:0] a, b, y;
  logic        underflow, overflow;
  int          checks = 0, failures = 0;
  int          n_uf = 0, n_of = 0;

  fp16_mul dut (.a(a), .b(b), .y(y), .underflow(underflow), .overflow(overflow));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input logic [15:0] ta, input logic [15:0] tb);
    ref_result_t r;
    a = ta;
    b = tb;
    @(posedge clk);
    #1;
    r = fp16_ref_pkg::mul(ta, tb);
    checks++;
    if (y !== r.y || underflow !== r.underflow || overflow !== r.overflow) begin
      failures++;
      if (failures < 20)
        $display("MISMATCH %h * %h: got %h uf=%b of=%b, expected %h uf=%b of=%b",
                 ta, tb, y, underflow, overflow, r.y, r.underflow, r.overflow);
    end
    if (r.underflow) n_uf++;
    if (r.overflow)  n_of++;
  endtask

  function automatic logic [15:0] rand_prob();
    // exponent mostly in the probability range, sometimes anywhere
    logic [4:0] e;
    if ($urandom_range(0, 3) != 0) e = 5'($urandom_range(1, 15));
    else                           e = 5'($urandom_range(0, 31));
    return {1'($urandom_range(0, 7) == 0), e, 10'($urandom)};
  endfunction

  initial begin
    a = '0;
    b = '0;
    @(posedge clk);
    apply(16'h3C00, 16'h3C00);   // 1 * 1
    apply(16'h3800, 16'h3800);   // 0.5 * 0.5 = 0.25
    apply(16'h3733, 16'h3B33);   // 0.45 * 0.9
    apply(16'h4000, 16'h3E00);   // 2 * 1.5 = 3
    apply(16'h3C01, 16'h3C01);   // rounding of (1+2^-10)^2
    apply(16'h3FFF, 16'h3FFF);   // carry out of rounding
    apply(16'h2000, 16'h2000);   // 2^-7 * 2^-7 = 2^-14: smallest normal
    apply(16'h1FFF, 16'h2000);   // just below 2^-14 before rounding
    apply(16'h1C00, 16'h1C00);   // 2^-8 * 2^-8 = 2^-16: flushed
    apply(16'h0001, 16'h3C00);   // subnormal input reads as zero
    apply(16'h7BFF, 16'h4000);   // overflow
    apply(16'h7C00, 16'h3C00);   // inf * 1
    apply(16'h7C00, 16'h0000);   // inf * 0 = NaN
    apply(16'h7E01, 16'h3C00);   // NaN in
    apply(16'hBC00, 16'h3800);   // -1 * 0.5
    for (int i = 0; i < 30000; i++) apply(rand_prob(), rand_prob());
    if (n_uf == 0 || n_of == 0) begin
      failures++;
      $display("underflow or overflow case never reached");
    end
    $display("underflows=%0d overflows=%0d", n_uf, n_of);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
