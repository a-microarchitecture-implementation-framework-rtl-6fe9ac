// neuron: SRM0 neuron with ramp-no-leak (RNL) response and per-synapse STDP.
//
// P synapses (weight counter FSMs) read their weights out as thermometer
// codes while their input pulses are high; the neuron body adds these
// responses cycle by cycle and fires an 8-cycle pulse on `y` when the
// potential reaches theta. Each synapse has its own STDP/R-STDP logic, which
// compares the synapse's input spike with the neuron's output spike `z` and,
// at the end of the gamma cycle, increments or decrements the weight.
//
// `z` is an input rather than `y` itself: in a column it is this neuron's
// output after winner-take-all inhibition, which is the spike the neuron is
// allowed to emit. A stand-alone neuron connects y to z.
//
// Interface timing: inputs x are pulses of 8 unit cycles starting at the spike
// time (0..7) of each synapse, inside the gamma cycle framed by gamma_end.
// y responds in the same cycle as the threshold crossing. `weights` is valid
// when the inputs are low and in the gamma_end cycle.
//
// The structure (synapses, per-synapse STDP, one body) follows the paper;
// the separate z input is this design's choice.
module neuron
  import tnn_pkg::*;
#(
  parameter int unsigned P      = 16,
  parameter int unsigned ACC_W  = $clog2(P) + 1,
  parameter int unsigned INIT_W = 0
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             gamma_end,
  input  logic [P-1:0]     x,        // input spike pulses
  input  logic             z,        // output spike used for STDP (after WTA)
  input  logic [ACC_W-1:0] theta,
  input  reward_e          reward,
  input  brv_t             brv [P],  // Bernoulli bits, one set per synapse
  output logic             y,        // output spike pulse (before WTA)
  output weight_t          weights [P]
);

  logic [P-1:0] resp;

  for (genvar i = 0; i < P; i++) begin : g_syn
    logic inc, dec;

    synapse #(.INIT_W(INIT_W)) u_syn (
      .clk, .rst, .gamma_end,
      .x(x[i]), .inc, .dec,
      .resp(resp[i]), .weight(weights[i])
    );

    stdp_logic u_stdp (
      .clk, .rst, .gamma_end,
      .x(x[i]), .z, .w(weights[i]), .brv(brv[i]), .reward,
      .inc, .dec
    );
  end

  logic [ACC_W-1:0] vmem_unused;

  neuron_body #(.P(P), .ACC_W(ACC_W)) u_body (
    .clk, .rst, .gamma_end,
    .resp, .theta,
    .spike(y), .vmem(vmem_unused)
  );

endmodule
