// tnn_column: a P x Q temporal-neural-network column with online learning
// (top of the design).
//
// Q excitatory SRM0 neurons share the same P inputs (the receptive field)
// through a P x Q crossbar of synapses; every synapse stores its own 3-bit
// weight and learns it locally with STDP, or R-STDP when a global reward is
// given. A 1-winner-take-all stage passes only the first neuron's spike, and
// that post-inhibition spike is what each neuron's STDP logic sees as its
// output spike. A single column is a complete TNN that infers and learns in
// the same gamma cycle.
//
// Operation per gamma cycle of 15 unit cycles (`phase` 0..14):
//   * The volley arrives on x: input i spikes at time t_i in 0..7 by raising
//     x[i] for 8 unit cycles from phase t_i; an input that does not spike
//     stays low. Phase 0 is the first cycle after gamma_end.
//   * Synapses ramp their responses into the neuron bodies; a neuron whose
//     potential reaches theta fires; WTA lets the first one through on y.
//   * In the gamma_end cycle (phase 14) every synapse's STDP logic decides
//     inc/dec; at the closing clock edge weights are updated and all
//     potentials, latches and pulses are reset for the next volley.
// `reward` selects unsupervised STDP (10) or R-STDP with reward +1 (01),
// -1 (11) or 0 (00) and must be valid in the gamma_end cycle. `mu` holds the
// learning probabilities (numerator over 256). `weights` exposes the crossbar
// for observation; it is valid when the inputs are low and at gamma_end.
//
// The organisation, sizes, timing numbers and learning rules follow the
// paper; the random-bit lane assignment (neuron j, input i uses lane
// (i+j) mod P of the generator), the reset state and the observation port
// are this design's choices.
module tnn_column
  import tnn_pkg::*;
#(
  parameter int unsigned P      = 1024,
  parameter int unsigned Q      = 16,
  parameter int unsigned ACC_W  = $clog2(P) + 1,
  parameter int unsigned INIT_W = 0,
  parameter logic [31:0] SEED   = 32'h2545_F491
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [P-1:0]       x,          // input volley (spike pulses)
  input  logic [ACC_W-1:0]   theta,      // firing threshold, 1..P
  input  reward_e            reward,     // 2-bit reward / mode
  input  stdp_mu_t           mu,         // learning probabilities
  output logic [Q-1:0]       y,          // column output after WTA
  output logic [Q-1:0]       y_pre,      // neuron outputs before WTA
  output logic [PH_BITS-1:0] phase,      // unit cycle within the gamma cycle
  output logic               gamma_clk,
  output logic               gamma_end,
  output weight_t            weights [Q][P]
);

  brv_t brv [P];

  gamma_ctrl u_gamma (
    .clk, .rst, .phase, .gamma_clk, .gamma_end
  );

  brv_gen #(.LANES(P), .SEED(SEED)) u_brv (
    .clk, .rst, .mu, .brv
  );

  for (genvar j = 0; j < Q; j++) begin : g_neuron
    brv_t brv_n [P];
    for (genvar i = 0; i < P; i++) begin : g_lane
      assign brv_n[i] = brv[(i + j) % P];
    end

    neuron #(.P(P), .ACC_W(ACC_W), .INIT_W(INIT_W)) u_neuron (
      .clk, .rst, .gamma_end,
      .x, .z(y[j]), .theta, .reward, .brv(brv_n),
      .y(y_pre[j]), .weights(weights[j])
    );
  end

  wta #(.Q(Q)) u_wta (
    .clk, .rst, .gamma_end,
    .z_in(y_pre), .z_out(y)
  );

endmodule
