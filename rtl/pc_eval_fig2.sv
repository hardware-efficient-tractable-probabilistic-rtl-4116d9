// pc_eval_fig2: pipelined binary16 evaluator of the example deterministic probabilistic circuit.
//
// The circuit is the compiled form of a three-variable Bayesian network (K -> T, K -> G):
//
//   root = w_k+ * ([+k] * S_T|+k * S_G|+k)  +  w_k- * ([-k] * S_T|-k * S_G|-k)
//   S_T|+k = w_t+|+k [+t] + w_t-|+k [-t]      (likewise S_T|-k, S_G|+k, S_G|-k)
//
// where [x] is the evidence indicator of value x. Its graph, its ten weights and the
// indicator leaves are those of the source's example; how they are laid onto hardware is this
// design's choice: one operator per node, a register after each level, so that a new piece of
// evidence is accepted every cycle.
//
//   stage 1  the four inner sum nodes; an edge weight times an indicator is a select
//            (weight or zero), the sum is one fp16_add per node
//   stage 2  the two product nodes: one fp16_mul each, gated by the K indicator
//   stage 3  the two weighted edges into the root: one fp16_mul each
//   stage 4  the root sum node: one fp16_add
//
// The weights are an input so that the host can load either the plain probabilities or the
// nth-root transformed set theta^(1/n). With complete evidence exactly one term of the circuit
// is active, so the rooted circuit returns F^(1/n) of the plain one (to rounding); the host
// recovers F by raising the result to the power n, outside this block, in higher precision.
// Scaling every weight by c scales a complete-evidence result by c^3 (three variables).
//
// Interface: in_valid with evidence and weights, sampled on the rising clock edge; out_valid
// and out_value PC_LATENCY = 4 cycles later. No back-pressure: one result per accepted input.
// out_underflow flags that a product inside the circuit was flushed to zero below 2^-14, so
// the result is 0 or too small; out_overflow that a value saturated to infinity. rst_n is a
// synchronous, active-low reset that clears the valid pipeline and the data registers.
module pc_eval_fig2
  import fp16_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  pc_evidence_t evidence,
  input  pc_weights_t  weights,
  output logic         out_valid,
  output fp16_t        out_value,
  output logic         out_underflow,
  output logic         out_overflow
);

  // ---------------------------------------------------------------- stage 1: inner sums
  typedef struct packed {
    logic  valid;
    logic  k_pos, k_neg;
    fp16_t w_k_pos, w_k_neg;
    fp16_t s_t_kp, s_g_kp, s_t_kn, s_g_kn;
    logic  ovf;
  } st1_t;

  typedef struct packed {
    logic  valid;
    fp16_t w_k_pos, w_k_neg;
    fp16_t p_kp, p_kn;
    logic  ufl, ovf;
  } st2_t;

  typedef struct packed {
    logic  valid;
    fp16_t r_kp, r_kn;
    logic  ufl, ovf;
  } st3_t;

  st1_t st1_q, st1_d;
  st2_t st2_q, st2_d;
  st3_t st3_q, st3_d;

  function automatic fp16_t gate(input logic ind, input fp16_t w);
    return ind ? w : FP16_ZERO;
  endfunction

  fp16_t s_t_kp, s_g_kp, s_t_kn, s_g_kn;
  logic  o_t_kp, o_g_kp, o_t_kn, o_g_kn;

  fp16_add u_sum_t_kp (.a(gate(evidence.t_pos, weights.t_pos_kp)),
                       .b(gate(evidence.t_neg, weights.t_neg_kp)),
                       .y(s_t_kp), .overflow(o_t_kp));
  fp16_add u_sum_g_kp (.a(gate(evidence.g_pos, weights.g_pos_kp)),
                       .b(gate(evidence.g_neg, weights.g_neg_kp)),
                       .y(s_g_kp), .overflow(o_g_kp));
  fp16_add u_sum_t_kn (.a(gate(evidence.t_pos, weights.t_pos_kn)),
                       .b(gate(evidence.t_neg, weights.t_neg_kn)),
                       .y(s_t_kn), .overflow(o_t_kn));
  fp16_add u_sum_g_kn (.a(gate(evidence.g_pos, weights.g_pos_kn)),
                       .b(gate(evidence.g_neg, weights.g_neg_kn)),
                       .y(s_g_kn), .overflow(o_g_kn));

  always_comb begin
    st1_d.valid   = in_valid;
    st1_d.k_pos   = evidence.k_pos;
    st1_d.k_neg   = evidence.k_neg;
    st1_d.w_k_pos = weights.k_pos;
    st1_d.w_k_neg = weights.k_neg;
    st1_d.s_t_kp  = s_t_kp;
    st1_d.s_g_kp  = s_g_kp;
    st1_d.s_t_kn  = s_t_kn;
    st1_d.s_g_kn  = s_g_kn;
    st1_d.ovf     = o_t_kp | o_g_kp | o_t_kn | o_g_kn;
  end

  // ---------------------------------------------------------------- stage 2: product nodes
  fp16_t p_kp, p_kn;
  logic  u_p_kp, u_p_kn, o_p_kp, o_p_kn;

  fp16_mul u_prod_kp (.a(st1_q.s_t_kp), .b(st1_q.s_g_kp),
                      .y(p_kp), .underflow(u_p_kp), .overflow(o_p_kp));
  fp16_mul u_prod_kn (.a(st1_q.s_t_kn), .b(st1_q.s_g_kn),
                      .y(p_kn), .underflow(u_p_kn), .overflow(o_p_kn));

  always_comb begin
    st2_d.valid   = st1_q.valid;
    st2_d.w_k_pos = st1_q.w_k_pos;
    st2_d.w_k_neg = st1_q.w_k_neg;
    // The K indicator is the third child of each product node: multiplying by 1 or 0.
    st2_d.p_kp    = gate(st1_q.k_pos, p_kp);
    st2_d.p_kn    = gate(st1_q.k_neg, p_kn);
    st2_d.ufl     = (st1_q.k_pos & u_p_kp) | (st1_q.k_neg & u_p_kn);
    st2_d.ovf     = st1_q.ovf | (st1_q.k_pos & o_p_kp) | (st1_q.k_neg & o_p_kn);
  end

  // ---------------------------------------------------------------- stage 3: weighted edges
  fp16_t r_kp, r_kn;
  logic  u_r_kp, u_r_kn, o_r_kp, o_r_kn;

  fp16_mul u_edge_kp (.a(st2_q.w_k_pos), .b(st2_q.p_kp),
                      .y(r_kp), .underflow(u_r_kp), .overflow(o_r_kp));
  fp16_mul u_edge_kn (.a(st2_q.w_k_neg), .b(st2_q.p_kn),
                      .y(r_kn), .underflow(u_r_kn), .overflow(o_r_kn));

  always_comb begin
    st3_d.valid = st2_q.valid;
    st3_d.r_kp  = r_kp;
    st3_d.r_kn  = r_kn;
    st3_d.ufl   = st2_q.ufl | u_r_kp | u_r_kn;
    st3_d.ovf   = st2_q.ovf | o_r_kp | o_r_kn;
  end

  // ---------------------------------------------------------------- stage 4: root sum
  fp16_t root;
  logic  o_root;

  fp16_add u_root (.a(st3_q.r_kp), .b(st3_q.r_kn), .y(root), .overflow(o_root));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st1_q         <= '0;
      st2_q         <= '0;
      st3_q         <= '0;
      out_valid     <= 1'b0;
      out_value     <= FP16_ZERO;
      out_underflow <= 1'b0;
      out_overflow  <= 1'b0;
    end else begin
      st1_q         <= st1_d;
      st2_q         <= st2_d;
      st3_q         <= st3_d;
      out_valid     <= st3_q.valid;
      out_value     <= root;
      out_underflow <= st3_q.ufl;
      out_overflow  <= st3_q.ovf | o_root;
    end
  end

  // Probabilities and weights are never negative: the adders do not handle a sign.
  a_weights_non_negative: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> !(weights.k_pos[15]    | weights.k_neg[15]    |
                   weights.t_pos_kp[15] | weights.t_neg_kp[15] |
                   weights.t_pos_kn[15] | weights.t_neg_kn[15] |
                   weights.g_pos_kp[15] | weights.g_neg_kp[15] |
                   weights.g_pos_kn[15] | weights.g_neg_kn[15]))
    else $error("pc_eval_fig2: negative weight");

endmodule
