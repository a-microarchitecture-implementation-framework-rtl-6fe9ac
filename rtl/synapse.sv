// synapse: weight counter FSM with built-in ramp-no-leak readout.
//
// The synaptic weight is kept in a W_BITS binary counter, and the same
// counter produces the neuron's response function, so no separate weight
// memory exists. The counter has three modes:
//   * readout  - while the input pulse x is high the counter decrements every
//                unit cycle, wrapping from 0 to WMAX. `resp` is 1 in each cycle
//                before the wrap and 0 afterwards, so a weight w gives exactly w
//                ones: the weight read out as a serial thermometer code, i.e.
//                the RNL response ramps up by one per cycle until it reaches w.
//                A pulse of WMAX+1 cycles decrements the counter WMAX+1 times,
//                which leaves it at its original value.
//   * increment / decrement - at the end of the gamma cycle (gamma_end high)
//                the STDP inputs inc/dec move the weight by one, saturating at
//                WMAX and 0.
//
// Timing: `resp` is combinational from x and the counter (same cycle).
// `weight` is the stored weight; while a pulse is in progress the counter
// holds a shifted value, so `weight` gives the restored value only when x is
// low or in the final cycle of the pulse, which is the case at gamma_end.
// The latest pulse of a volley (spike time 7) has its last, restoring cycle at
// the gamma_end cycle; the restore decrement and the STDP step are then merged
// into one update.
//
// Follows the paper: counter width, wrap-around readout, saturating
// increment/decrement, pulse width WMAX+1. This design's choices: a one-bit
// `wrapped` flag that remembers the wrap within the current gamma cycle (the
// paper does not say how "before the wrap" is detected), the reset weight
// INIT_W, and the merged restore/update at gamma_end.
module synapse
  import tnn_pkg::*;
#(
  parameter int unsigned INIT_W = 0
) (
  input  logic    clk,
  input  logic    rst,
  input  logic    x,          // input spike pulse
  input  logic    gamma_end,  // last unit cycle of the gamma cycle
  input  logic    inc,        // STDP increment (sampled at gamma_end)
  input  logic    dec,        // STDP decrement (sampled at gamma_end)
  output logic    resp,       // thermometer-coded response to the neuron body
  output weight_t weight      // stored weight (valid when x low or at gamma_end)
);

  weight_t cnt, cnt_dn;
  logic    wrapped;

  // Wrap-around decrement: 0 -> WMAX.
  assign cnt_dn = (cnt == '0) ? weight_t'(WMAX) : cnt - 1'b1;

  assign resp   = x && !wrapped && (cnt != '0);
  assign weight = x ? cnt_dn : cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt     <= weight_t'(INIT_W);
      wrapped <= 1'b0;
    end else if (gamma_end) begin
      wrapped <= 1'b0;
      if (inc && !dec && weight != weight_t'(WMAX)) cnt <= weight + 1'b1;
      else if (dec && !inc && weight != '0)         cnt <= weight - 1'b1;
      else                                          cnt <= weight;
    end else if (x) begin
      cnt <= cnt_dn;
      if (cnt == '0) wrapped <= 1'b1;
    end
  end

endmodule
