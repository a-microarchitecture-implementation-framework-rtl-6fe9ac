// stdp_logic: per-synapse STDP and R-STDP weight-update logic.
//
// Three parts, after the paper's partitioning:
//  1. Case generation. Set/reset latches (here flip-flops, set by the pulse,
//     cleared at the gamma-cycle end) remember that the input x and the
//     neuron's output z have spiked. A temporal "x <= z" comparator needs no
//     binary comparison: it is blocked once z has arrived while x has not, so
//     x passes only if it arrived no later than z. From these:
//        case1 = (x<=z) & x & z      case2 = !(x<=z) & x & z
//        case3 = (x<=z) & (x ^ z)    case4 = !(x<=z) & (x ^ z)
//     (case 5, neither spiked, is the absence of all four).
//  2. Stabilization function: an 8-to-1 mux, selected by the 3-bit weight,
//     picks the Bernoulli bit F_w of F(w) = (w/7)(1 - w/7); F_0 = F_7 = 0.
//  3. Inc/dec: max(F(w), B(mu_min)) is F OR B(mu_min). Unsupervised STDP:
//        case1 -> +B(capture)*max   case2 -> -B(backoff)*max
//        case3 -> +B(search)        case4 -> -B(backoff)*max
//     R-STDP with the global 2-bit reward {R1,R0}:
//        +1 (01): as STDP but case 3 makes no update
//        -1 (11): only cases 1 and 3; case 1 decrements instead of incrementing
//         0 (00): only case 3
//        10     : unsupervised STDP
//
// Timing: x and z are the raw pulses. Their current-cycle values are ORed with
// the latches, so a spike is seen in the cycle it arrives. inc/dec are
// combinational and meant to be used in the gamma_end cycle, where the
// synapse applies them at the closing clock edge; the latches clear on that
// same edge.
//
// Follows the paper: the case equations, the temporal comparator, the mux for
// F, the OR for max, the case-to-update mapping and the reward codes. This
// design's choices: a spike arriving in the same unit cycle as z counts as
// x <= z, and the case-1 decrement under reward -1 is gated by the same
// B(mu_capture)*max(F, B(mu_min)) term as the case-1 increment (the paper says
// only that it is decremented instead).
module stdp_logic
  import tnn_pkg::*;
(
  input  logic    clk,
  input  logic    rst,
  input  logic    gamma_end,  // clears the latches at its closing edge
  input  logic    x,          // input spike pulse of this synapse
  input  logic    z,          // output spike pulse of the post-synaptic neuron (after WTA)
  input  weight_t w,          // current weight
  input  brv_t    brv,        // Bernoulli random bits
  input  reward_e reward,     // global reward / mode
  output logic    inc,
  output logic    dec
);

  logic x_q, z_q, blk_q;     // latches: x seen, z seen, comparator blocked
  logic xs, zs, le;
  logic case1, case2, case3, case4;
  logic f_sel, fmax;

  // ---- case generation ----
  assign xs = x_q | x;
  assign zs = z_q | z;
  assign le = xs & ~blk_q;   // x arrived and z did not arrive strictly earlier

  always_ff @(posedge clk) begin
    if (rst || gamma_end) begin
      x_q   <= 1'b0;
      z_q   <= 1'b0;
      blk_q <= 1'b0;
    end else begin
      x_q   <= xs;
      z_q   <= zs;
      blk_q <= blk_q | (zs & ~xs);
    end
  end

  assign case1 =  le & xs & zs;
  assign case2 = ~le & xs & zs;
  assign case3 =  le & (xs ^ zs);
  assign case4 = ~le & (xs ^ zs);

  // ---- stabilization function: 8-to-1 mux on the weight ----
  always_comb begin
    f_sel = 1'b0;
    if (w != '0 && w != weight_t'(WMAX)) f_sel = brv.f[w];
  end
  assign fmax = f_sel | brv.min;

  // ---- inc/dec with R-STDP modifications ----
  always_comb begin
    inc = 1'b0;
    dec = 1'b0;
    unique case (reward)
      RW_UNSUP: begin
        inc = (case1 & brv.capture & fmax) | (case3 & brv.search);
        dec = ((case2 | case4) & brv.backoff & fmax);
      end
      RW_POS: begin
        inc = (case1 & brv.capture & fmax);
        dec = ((case2 | case4) & brv.backoff & fmax);
      end
      RW_NEG: begin
        inc = (case3 & brv.search);
        dec = (case1 & brv.capture & fmax);
      end
      RW_ZERO: begin
        inc = (case3 & brv.search);
      end
      default: ;
    endcase
  end

endmodule
