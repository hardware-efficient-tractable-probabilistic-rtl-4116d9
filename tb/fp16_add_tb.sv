// fp16_add_tb: self-checking test of the binary16 adder for non-negative operands.
//
// Directed cases (exact sums, ties to even, carry out of rounding, large exponent gaps, zero
// and subnormal operands, overflow, infinity and NaN) are followed by random non-negative
// operand pairs with close and distant exponents. Result word and overflow flag are compared
// bit for bit with the real-number reference of fp16_ref_pkg, one pair per clock cycle.
module fp16_add_tb;
  import fp16_ref_pkg::*;

  logic        clk = 1'b0;
  logic [15:0] a, b, y;
  logic        overflow;
  int          checks = 0, failures = 0;
  int          n_of = 0;

  fp16_add dut (.a(a), .b(b), .y(y), .overflow(overflow));

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
    r = fp16_ref_pkg::add(ta, tb);
    checks++;
    if (y !== r.y || overflow !== r.overflow) begin
      failures++;
      if (failures < 20)
        $display("MISMATCH %h + %h: got %h of=%b, expected %h of=%b",
                 ta, tb, y, overflow, r.y, r.overflow);
    end
    if (r.overflow) n_of++;
  endtask

  initial begin
    logic [15:0] ra, rb;
    a = '0;
    b = '0;
    @(posedge clk);
    apply(16'h3C00, 16'h3C00);   // 1 + 1
    apply(16'h3733, 16'h3866);   // 0.45 + 0.55
    apply(16'h3B33, 16'h2E66);   // 0.9 + 0.1
    apply(16'h3C00, 16'h1400);   // 1 + 2^-10: exact
    apply(16'h3C00, 16'h1000);   // 1 + 2^-11: tie, stays even
    apply(16'h3C01, 16'h1000);   // 1+2^-10 + 2^-11: tie, rounds up
    apply(16'h3C00, 16'h1001);   // just above the tie
    apply(16'h3BFF, 16'h1000);   // carry out of rounding
    apply(16'h3C00, 16'h0400);   // exponent gap of 14
    apply(16'h7800, 16'h0400);   // exponent gap of 29: sticky only
    apply(16'h0000, 16'h3555);   // zero operand
    apply(16'h0200, 16'h3555);   // subnormal reads as zero
    apply(16'h0200, 16'h0001);   // two subnormals
    apply(16'h7BFF, 16'h7BFF);   // overflow
    apply(16'h7C00, 16'h3C00);   // inf
    apply(16'h7D00, 16'h3C00);   // NaN in
    apply(16'hBC00, 16'h3C00);   // negative operand is rejected
    for (int i = 0; i < 30000; i++) begin
      ra = {1'b0, 5'($urandom_range(0, 31)), 10'($urandom)};
      if ($urandom_range(0, 1) == 0)
        rb = {1'b0, 5'(int'(ra[14:10]) - int'($urandom_range(0, 3))), 10'($urandom)};
      else
        rb = {1'b0, 5'($urandom_range(0, 31)), 10'($urandom)};
      apply(ra, rb);
    end
    if (n_of == 0) begin
      failures++;
      $display("overflow case never reached");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
