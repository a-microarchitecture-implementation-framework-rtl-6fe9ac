// brv_gen: network of pseudo-random generators producing the Bernoulli random
// variables (BRVs) used by the STDP logic.
//
// Each of the LANES lanes holds a 32-bit xorshift generator (a linear
// feedback shift generator over GF(2): state ^= state<<13; ^= >>17; ^= <<5),
// seeded with a distinct non-zero constant and stepped once per unit cycle.
// Three bytes of the state are compared with the probability numerators:
//   byte 0 -> B(mu_capture), B(mu_backoff), B(mu_search)
//   byte 1 -> B(mu_min)
//   byte 2 -> F_1 .. F_{WMAX-1}, with P(F_w) = w(WMAX-w)/WMAX^2
// B(mu) = 1 when byte < mu, so P(B = 1) = mu/256 and mu = 256 gives 1.
// The three capture/backoff/search bits of a lane share one byte because a
// synapse uses at most one of them in a gamma cycle (its STDP cases are
// mutually exclusive); likewise only one F_w is selected by a synapse's
// weight, so F_1..F_6 share a byte. Each bit thus has the right probability
// where it is used.
//
// Timing: the outputs are combinational from the registered state and change
// every unit cycle; the STDP logic uses them in the gamma_end cycle.
//
// The paper says only that BRVs come from an "LFSR network". The generator
// type, its width, the seeding, the byte sharing and the 9-bit probability
// encoding are this design's own choices.
module brv_gen
  import tnn_pkg::*;
#(
  parameter int unsigned LANES = 4,
  parameter logic [31:0] SEED  = 32'h2545_F491
) (
  input  logic      clk,
  input  logic      rst,
  input  stdp_mu_t  mu,
  output brv_t      brv [LANES]
);

  logic [31:0] state [LANES];

  function automatic logic [31:0] xs32(input logic [31:0] s);
    logic [31:0] t;
    t = s ^ (s << 13);
    t = t ^ (t >> 17);
    t = t ^ (t << 5);
    return t;
  endfunction

  function automatic logic [31:0] lane_seed(input int unsigned lane);
    logic [31:0] s;
    s = SEED ^ (32'(lane) * 32'h9E37_79B9);
    if (s == '0) s = 32'h1;
    return s;
  endfunction

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [7:0] r_case, r_min, r_f;

    always_ff @(posedge clk) begin
      if (rst) state[l] <= lane_seed(l);
      else     state[l] <= xs32(state[l]);
    end

    assign r_case = state[l][7:0];
    assign r_min  = state[l][15:8];
    assign r_f    = state[l][23:16];

    always_comb begin
      brv[l].capture = ({1'b0, r_case} < mu.capture);
      brv[l].backoff = ({1'b0, r_case} < mu.backoff);
      brv[l].search  = ({1'b0, r_case} < mu.search);
      brv[l].min     = ({1'b0, r_min}  < mu.min);
      brv[l].f       = '0;
      for (int w = 1; w < int'(WMAX); w++)
        brv[l].f[w] = ({1'b0, r_f} < PROB_BITS'(f_prob(w)));
    end
  end

endmodule
