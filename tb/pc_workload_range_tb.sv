// pc_workload_range_tb: the number range of the benchmark circuits on the binary16 multiplier.
//
// The graphs of the benchmark circuits are not available, but their extreme case is known: the
// smallest output P_min, produced along one active path with one weight per variable, and the
// root index n chosen for a binary16 target. This testbench rebuilds that path as a chain of
// V binary16 multiplications through fp16_mul, with every weight set to P_min^(1/V) so that
// the product is P_min, and runs it three ways:
//   plain      weights theta: the chain must underflow to zero, the failure rooting avoids;
//   root n     weights theta^(1/n): the chain must stay a normal number, never flagging
//              underflow, and n * ln(result) must recover ln(P_min) to within the rounding of
//              V binary16 products;
//   root n-1   must underflow, which shows that the published n is the smallest that works
//              for this path (for DNA the margin to 2^-14 is only 2%).
// Every product is also checked bit for bit against the real-number reference.
//
//   workload    V    P_min       n
//   BNetFlix   100   1.33e-53   13
//   DNA        180   4.6e-271   65
//   CIFAR-10    19   1.72e-59   14
// One multiplication is issued per clock cycle.
module pc_workload_range_tb;
  import fp16_ref_pkg::*;

  logic        clk = 1'b0;
  logic [15:0] a, b, y;
  logic        underflow, overflow;
  int          checks = 0, failures = 0;
  int          n_plain_underflow = 0, n_rooted_ok = 0, n_minimal = 0;

  fp16_mul dut (.a(a), .b(b), .y(y), .underflow(underflow), .overflow(overflow));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // multiply the chain out; returns the final word and whether any product underflowed
  task automatic run_chain(input int vars, input real log10_pmin, input int root,
                           output logic [15:0] result, output logic any_uf);
    real         lw;
    logic [15:0] w, acc;
    ref_result_t r;
    lw     = log10_pmin / real'(vars) / real'(root);   // log10 of one rooted weight
    r      = from_real($pow(10.0, lw));
    w      = r.y;
    acc    = 16'h3C00;                                  // 1.0
    any_uf = 1'b0;
    for (int i = 0; i < vars; i++) begin
      a = acc;
      b = w;
      @(posedge clk);
      #1;
      r = fp16_ref_pkg::mul(acc, w);
      checks++;
      if (y !== r.y || underflow !== r.underflow || overflow !== r.overflow) begin
        failures++;
        $display("MISMATCH %h * %h: got %h, expected %h", acc, w, y, r.y);
      end
      any_uf = any_uf | underflow;
      acc    = y;
    end
    result = acc;
  endtask

  task automatic run_workload(input string name, input int vars, input real log10_pmin,
                              input int n);
    logic [15:0] res;
    logic        uf;
    real         rec, tol;
    // plain weights
    run_chain(vars, log10_pmin, 1, res, uf);
    checks++;
    if (res[14:0] != 15'd0 || !uf) begin
      failures++;
      $display("%s plain: expected underflow to zero, got %h", name, res);
    end else n_plain_underflow++;
    // rooted with the published index
    run_chain(vars, log10_pmin, n, res, uf);
    checks++;
    if (res[14:10] == 5'd0 || uf) begin
      failures++;
      $display("%s root %0d: underflowed (%h)", name, n, res);
    end else begin
      rec = real'(n) * $log10(to_real(res));
      // each product adds at most 2^-11 relative error; n multiplies it in the log domain
      tol = real'(n) * real'(vars + 1) * 0.000489 / 2.302585 + 0.01;
      checks++;
      if (rec - log10_pmin > tol || log10_pmin - rec > tol) begin
        failures++;
        $display("%s root %0d: recovered log10 %f, expected %f", name, n, rec, log10_pmin);
      end else n_rooted_ok++;
      $display("%s: root %0d result %h = %g, recovered log10 P = %f (P_min %f)",
               name, n, res, to_real(res), rec, log10_pmin);
    end
    // one root less must not be enough: the published n is the smallest that works
    run_chain(vars, log10_pmin, n - 1, res, uf);
    checks++;
    if (!uf) begin
      failures++;
      $display("%s root %0d: expected underflow, got %h", name, n - 1, res);
    end else n_minimal++;
    $display("%s: root %0d result %h underflow=%b", name, n - 1, res, uf);
  endtask

  initial begin
    a = 16'h0;
    b = 16'h0;
    @(posedge clk);
    run_workload("BNetFlix", 100, $log10(1.33) - 53.0, 13);
    run_workload("DNA",      180, $log10(4.6) - 271.0, 65);
    run_workload("CIFAR-10",  19, $log10(1.72) - 59.0, 14);
    checks++;
    if (n_plain_underflow != 3 || n_rooted_ok != 3 || n_minimal != 3) begin
      failures++;
      $display("plain underflows %0d of 3, rooted recoveries %0d of 3",
               n_plain_underflow, n_rooted_ok);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
