// fp16_pkg: types and constants shared by the half-precision probabilistic-circuit datapath.
//
// Values are IEEE 754 binary16 words (1 sign, 5 exponent, 10 fraction bits, bias 15). The
// datapath flushes every result whose magnitude falls below the smallest normal number,
// 2^-14 ~ 6.10e-5, to zero: that is the underflow threshold the circuit is sized against.
// Subnormal inputs are read as zero for the same reason. This follows the underflow threshold
// quoted for float16 targets; the flush-to-zero policy itself is a choice of this design.
//
// The package also holds the ten weights of the three-variable example circuit (a
// Bayesian network K -> T, K -> G compiled into a deterministic circuit), rounded to
// binary16, and the pipeline depth of the evaluator.
package fp16_pkg;

  typedef logic [15:0] fp16_t;

  localparam fp16_t FP16_ZERO     = 16'h0000;
  localparam fp16_t FP16_ONE      = 16'h3C00;
  localparam fp16_t FP16_POS_INF  = 16'h7C00;
  localparam fp16_t FP16_QNAN     = 16'h7E00;

  // Evidence for the three binary variables: one indicator per value. Complete evidence sets
  // exactly one indicator of each pair; a variable left unobserved has both set.
  typedef struct packed {
    logic k_pos;
    logic k_neg;
    logic t_pos;
    logic t_neg;
    logic g_pos;
    logic g_neg;
  } pc_evidence_t;

  // Edge weights of the circuit. w_k_* weight the root sum; the others weight the four
  // inner sums: T given +k, T given -k, G given +k, G given -k.
  typedef struct packed {
    fp16_t k_pos;      // P(+k)
    fp16_t k_neg;      // P(-k)
    fp16_t t_pos_kp;   // P(+t | +k)
    fp16_t t_neg_kp;   // P(-t | +k)
    fp16_t t_pos_kn;   // P(+t | -k)
    fp16_t t_neg_kn;   // P(-t | -k)
    fp16_t g_pos_kp;   // P(+g | +k)
    fp16_t g_neg_kp;   // P(-g | +k)
    fp16_t g_pos_kn;   // P(+g | -k)
    fp16_t g_neg_kn;   // P(-g | -k)
  } pc_weights_t;

  // The probabilities of the example network rounded to nearest binary16 (root index n = 1,
  // i.e. untransformed). A rooted weight set replaces each theta by theta^(1/n).
  localparam pc_weights_t PC_FIG2_WEIGHTS = '{
    k_pos:    16'h3733,   // 0.45
    k_neg:    16'h3866,   // 0.55
    t_pos_kp: 16'h3B33,   // 0.9
    t_neg_kp: 16'h2E66,   // 0.1
    t_pos_kn: 16'h34CD,   // 0.3
    t_neg_kn: 16'h399A,   // 0.7
    g_pos_kp: 16'h3266,   // 0.2
    g_neg_kp: 16'h3A66,   // 0.8
    g_pos_kn: 16'h38CD,   // 0.6
    g_neg_kn: 16'h3666    // 0.4
  };

  // Register stages from an accepted input to its result.
  localparam int PC_LATENCY = 4;

endpackage
