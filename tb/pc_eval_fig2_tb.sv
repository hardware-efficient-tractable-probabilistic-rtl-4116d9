// pc_eval_fig2_tb: end-to-end test of the pipelined binary16 circuit evaluator.
//
// A random stream of evidence is fed, with idle cycles in between, under five weight sets:
//   plain     the example probabilities rounded to binary16;
//   root n    each probability replaced by theta^(1/n), n = 2..4 (the nth-root transform);
//   down 4    every plain weight divided by 4: a complete-evidence result must be the plain
//             one divided by 4^3 exactly (three variables);
//   down 64   divided by 64: the results fall below 2^-14 and are flushed (underflow);
//   up 64     multiplied by 64: some results exceed the binary16 range (overflow).
// Each evidence variable is observed positive, observed negative, left unobserved (both
// indicators set) or, rarely, given no indicator at all.
//
// Checks, for every result: bit-exact value and flags against a node-by-node model built on
// the real-number reference arithmetic; arrival exactly 4 cycles after acceptance; for complete
// evidence under plain and rooted weights, that the result raised to the power n is within
// rounding of the joint probability P(k, t, g) of the network, and for unobserved T or G that
// the plain result equals the marginal. A reset with results in flight must discard them. Each
// of these mechanisms is counted and must occur at least once.
module pc_eval_fig2_tb;
  import fp16_pkg::*;
  import fp16_ref_pkg::*;

  typedef enum int {W_PLAIN, W_ROOT, W_DOWN4, W_DOWN64, W_UP64} wmode_e;

  typedef struct {
    logic [15:0] y;
    logic        uf, of;
    longint      cycle;
    wmode_e      mode;
    int          root_n;
    real         exact;      // probability of the evidence, or -1 if not checked
    logic [15:0] plain_y;    // result under plain weights, for the scaling check
    logic        complete;
  } exp_t;

  logic         clk = 1'b0;
  logic         rst_n = 1'b0;
  logic         in_valid = 1'b0;
  pc_evidence_t evidence = '0;
  pc_weights_t  weights = '0;
  logic         out_valid, out_underflow, out_overflow;
  fp16_t        out_value;

  int     checks = 0, failures = 0;
  longint cycle = 0;
  exp_t   q[$];

  // mechanism counters
  int n_complete = 0, n_marginal = 0, n_empty = 0, n_back_to_back = 0, n_bubble = 0;
  int n_root = 0, n_scaled_exact = 0, n_underflow = 0, n_overflow = 0, n_reset_flush = 0;

  // the example network
  real pk  = 0.45;
  real pt_k[2] = '{0.9, 0.3};   // P(+t | +k), P(+t | -k)
  real pg_k[2] = '{0.2, 0.6};   // P(+g | +k), P(+g | -k)

  pc_eval_fig2 dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] h(input real x);
    ref_result_t r = from_real(x);
    return r.y;
  endfunction

  function automatic pc_weights_t make_weights(input real scale, input int n);
    pc_weights_t w;
    real e = 1.0 / real'(n);
    w.k_pos    = h(scale * $pow(pk, e));
    w.k_neg    = h(scale * $pow(1.0 - pk, e));
    w.t_pos_kp = h(scale * $pow(pt_k[0], e));
    w.t_neg_kp = h(scale * $pow(1.0 - pt_k[0], e));
    w.t_pos_kn = h(scale * $pow(pt_k[1], e));
    w.t_neg_kn = h(scale * $pow(1.0 - pt_k[1], e));
    w.g_pos_kp = h(scale * $pow(pg_k[0], e));
    w.g_neg_kp = h(scale * $pow(1.0 - pg_k[0], e));
    w.g_pos_kn = h(scale * $pow(pg_k[1], e));
    w.g_neg_kn = h(scale * $pow(1.0 - pg_k[1], e));
    return w;
  endfunction

  function automatic logic [15:0] sel(input logic ind, input logic [15:0] w);
    return ind ? w : 16'h0000;
  endfunction

  // node-by-node reference of the circuit
  function automatic ref_result_t model(input pc_evidence_t ev, input pc_weights_t w);
    ref_result_t s1, s2, s3, s4, p1, p2, r1, r2, root;
    logic uf, of;
    s1 = add(sel(ev.t_pos, w.t_pos_kp), sel(ev.t_neg, w.t_neg_kp));
    s2 = add(sel(ev.g_pos, w.g_pos_kp), sel(ev.g_neg, w.g_neg_kp));
    s3 = add(sel(ev.t_pos, w.t_pos_kn), sel(ev.t_neg, w.t_neg_kn));
    s4 = add(sel(ev.g_pos, w.g_pos_kn), sel(ev.g_neg, w.g_neg_kn));
    of = s1.overflow | s2.overflow | s3.overflow | s4.overflow;
    p1 = mul(s1.y, s2.y);
    p2 = mul(s3.y, s4.y);
    uf = (ev.k_pos & p1.underflow) | (ev.k_neg & p2.underflow);
    of = of | (ev.k_pos & p1.overflow) | (ev.k_neg & p2.overflow);
    r1 = mul(w.k_pos, sel(ev.k_pos, p1.y));
    r2 = mul(w.k_neg, sel(ev.k_neg, p2.y));
    uf = uf | r1.underflow | r2.underflow;
    of = of | r1.overflow | r2.overflow;
    root = add(r1.y, r2.y);
    root.underflow = uf;
    root.overflow  = of | root.overflow;
    return root;
  endfunction

  // probability of the evidence in the network (indicators summed over)
  function automatic real exact_prob(input pc_evidence_t ev);
    real tot = 0.0;
    for (int k = 0; k < 2; k++) begin
      real pkv = (k == 0) ? pk : 1.0 - pk;
      real st  = (ev.t_pos ? pt_k[k] : 0.0) + (ev.t_neg ? 1.0 - pt_k[k] : 0.0);
      real sg  = (ev.g_pos ? pg_k[k] : 0.0) + (ev.g_neg ? 1.0 - pg_k[k] : 0.0);
      logic ik = (k == 0) ? ev.k_pos : ev.k_neg;
      if (ik) tot += pkv * st * sg;
    end
    return tot;
  endfunction

  function automatic pc_evidence_t rand_evidence();
    logic [1:0] v[3];
    for (int i = 0; i < 3; i++) begin
      case ($urandom_range(0, 15))
        0:             v[i] = 2'b00;            // no value allowed
        1, 2, 3:       v[i] = 2'b11;            // unobserved
        default:       v[i] = ($urandom_range(0, 1) == 1) ? 2'b10 : 2'b01;
      endcase
    end
    return '{k_pos: v[0][1], k_neg: v[0][0], t_pos: v[1][1], t_neg: v[1][0],
             g_pos: v[2][1], g_neg: v[2][0]};
  endfunction

  function automatic logic is_complete(input pc_evidence_t ev);
    return (ev.k_pos ^ ev.k_neg) && (ev.t_pos ^ ev.t_neg) && (ev.g_pos ^ ev.g_neg);
  endfunction

  // drive one stream of `count` cycles under one weight set
  task automatic run_phase(input wmode_e mode, input int n, input int count);
    pc_weights_t w, wp;
    logic prev_valid = 1'b0;
    wp = make_weights(1.0, 1);
    case (mode)
      W_PLAIN:  w = wp;
      W_ROOT:   w = make_weights(1.0, n);
      W_DOWN4:  w = make_weights(0.25, 1);
      W_DOWN64: w = make_weights(1.0 / 64.0, 1);
      default:  w = make_weights(64.0, 1);
    endcase
    for (int i = 0; i < count; i++) begin
      logic v = ($urandom_range(0, 3) != 0);
      @(negedge clk);
      in_valid = v;
      weights  = w;
      evidence = rand_evidence();
      if (v) begin
        exp_t e;
        ref_result_t r  = model(evidence, w);
        ref_result_t rp = model(evidence, wp);
        e.y = r.y; e.uf = r.underflow; e.of = r.overflow;
        e.cycle    = cycle;
        e.mode     = mode;
        e.root_n   = (mode == W_ROOT) ? n : 1;
        e.exact    = exact_prob(evidence);
        e.plain_y  = rp.y;
        e.complete = is_complete(evidence);
        q.push_back(e);
        if (e.complete) n_complete++;
        else if (e.exact == 0.0) n_empty++;
        else n_marginal++;
        if (prev_valid) n_back_to_back++;
      end else begin
        n_bubble++;
      end
      prev_valid = v;
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (PC_LATENCY + 2) @(negedge clk);
  endtask

  // result checker
  always @(posedge clk) begin : result_check
    if (rst_n && out_valid) begin
      exp_t e;
      if (q.size() == 0) begin
        failures++;
        $display("unexpected result %h", out_value);
      end else begin
        e = q.pop_front();
        checks++;
        if (out_value !== e.y || out_underflow !== e.uf || out_overflow !== e.of) begin
          failures++;
          if (failures < 20)
            $display("MISMATCH mode=%0d got %h uf=%b of=%b expected %h uf=%b of=%b",
                     e.mode, out_value, out_underflow, out_overflow, e.y, e.uf, e.of);
        end
        checks++;
        if (cycle - e.cycle != longint'(PC_LATENCY)) begin
          failures++;
          $display("latency %0d, expected %0d", cycle - e.cycle, PC_LATENCY);
        end
        if (out_underflow) n_underflow++;
        if (out_overflow)  n_overflow++;
        // the value against the network, after undoing the root
        if ((e.mode == W_PLAIN || e.mode == W_ROOT) && (e.complete || e.mode == W_PLAIN)) begin
          real got, tol;
          got = $pow(to_real(out_value), real'(e.root_n));
          tol = (e.exact * real'(8 * e.root_n) / 2048.0) + 1.0e-9;
          checks++;
          if (got - e.exact > tol || e.exact - got > tol) begin
            failures++;
            $display("value %g^%0d = %g, network gives %g", to_real(out_value), e.root_n,
                     got, e.exact);
          end
          if (e.mode == W_ROOT && e.complete) n_root++;
        end
        // exact c^3 scaling of a complete-evidence result
        if (e.mode == W_DOWN4 && e.complete) begin
          checks++;
          if (out_value[9:0] !== e.plain_y[9:0] ||
              int'(out_value[14:10]) != int'(e.plain_y[14:10]) - 6) begin
            failures++;
            $display("scaling: %h is not %h / 64", out_value, e.plain_y);
          end else n_scaled_exact++;
        end
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_phase(W_PLAIN, 1, 400);
    for (int n = 2; n <= 4; n++) run_phase(W_ROOT, n, 300);
    run_phase(W_DOWN4, 1, 300);
    run_phase(W_DOWN64, 1, 300);
    run_phase(W_UP64, 1, 300);

    // reset with results in flight: they must be dropped
    @(negedge clk);
    in_valid = 1'b1;
    weights  = make_weights(1.0, 1);
    evidence = '1;
    @(negedge clk);
    @(negedge clk);
    in_valid = 1'b0;
    rst_n    = 1'b0;
    @(negedge clk);
    checks++;
    if (dut.st1_q.valid || dut.st2_q.valid || dut.st3_q.valid || out_valid) begin
      failures++;
      $display("reset left results in flight");
    end else n_reset_flush++;
    rst_n = 1'b1;
    repeat (PC_LATENCY + 2) @(negedge clk);
    checks++;
    if (q.size() != 0) begin
      failures++;
      $display("%0d results never arrived", q.size());
    end

    $display("complete=%0d marginal=%0d empty=%0d back_to_back=%0d bubbles=%0d",
             n_complete, n_marginal, n_empty, n_back_to_back, n_bubble);
    $display("rooted=%0d exact_scaling=%0d underflow=%0d overflow=%0d reset_flush=%0d",
             n_root, n_scaled_exact, n_underflow, n_overflow, n_reset_flush);
    if (n_complete == 0 || n_marginal == 0 || n_empty == 0 || n_back_to_back == 0 ||
        n_bubble == 0 || n_root == 0 || n_scaled_exact == 0 || n_underflow == 0 ||
        n_overflow == 0 || n_reset_flush == 0) begin
      failures++;
      $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
