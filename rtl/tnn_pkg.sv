// tnn_pkg: constants and types shared by the temporal-neural-network column.
//
// Time is not stored as a number anywhere in this design: one unit-time clock
// cycle is one time unit, and a spike volley is processed inside a gamma cycle
// of GAMMA unit cycles. Weights and spike times are 3 bits (WMAX = 7), a spike
// is carried as a pulse of WMAX+1 = 8 unit cycles, and GAMMA = 15 (7 cycles of
// encoding, 7 of readout, 1 for the STDP update). These numbers follow the
// paper. The 9-bit probability encoding and the reward enum names are this
// design's own choices (the 2-bit reward codes themselves follow the paper).
package tnn_pkg;

  localparam int unsigned WMAX    = 7;                 // maximum synaptic weight
  localparam int unsigned W_BITS  = $clog2(WMAX + 1);  // weight counter width (3)
  localparam int unsigned PULSE_W = WMAX + 1;          // spike pulse width (8)
  localparam int unsigned GAMMA   = 15;                // unit cycles per gamma cycle
  localparam int unsigned PH_BITS = $clog2(GAMMA);     // width of the gamma phase

  typedef logic [W_BITS-1:0] weight_t;

  // Bernoulli probability: P(1) = mu / 256, mu = 0..256 (256 means "always").
  localparam int unsigned PROB_BITS = 9;
  typedef logic [PROB_BITS-1:0] prob_t;

  // Learning probabilities of the STDP rule (Table I of the rule set).
  typedef struct packed {
    prob_t capture;
    prob_t backoff;
    prob_t search;
    prob_t min;
  } stdp_mu_t;

  // One set of Bernoulli random bits for one synapse's STDP logic.
  // f[k] is the BRV for F(w) at w = k (k = 1..WMAX-1); f[0] and f[WMAX] unused (0).
  typedef struct packed {
    logic            capture;
    logic            backoff;
    logic            search;
    logic            min;
    logic [WMAX:0]   f;
  } brv_t;

  // Global reward signal {R1,R0}: -1 = 11, 0 = 00, +1 = 01, unsupervised STDP = 10.
  typedef enum logic [1:0] {
    RW_ZERO  = 2'b00,
    RW_POS   = 2'b01,
    RW_UNSUP = 2'b10,
    RW_NEG   = 2'b11
  } reward_e;

  // Probability numerator (out of 256) of the stabilization function
  // F(w) = (w/WMAX) * (1 - w/WMAX), rounded to the nearest integer.
  function automatic int unsigned f_prob(input int unsigned w);
    int unsigned num, den;
    num = 256 * w * (WMAX - w);
    den = WMAX * WMAX;
    return (num + den / 2) / den;
  endfunction

endpackage
