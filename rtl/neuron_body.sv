// neuron_body: membrane-potential accumulator with threshold detection and
// output pulse generation.
//
// Every unit cycle the P thermometer-coded synaptic responses are counted
// (a parallel counter) and added to the membrane-potential register of
// ACC_W = log2(P)+1 bits. The register is loaded with -theta (two's
// complement) at the start of every gamma cycle, so the potential has reached
// the threshold exactly when the sum's top (sign) bit turns 0: no comparator is
// needed. In that same cycle the output spike starts, and a 3-bit counter
// stretches it into a pulse of PULSE_W = 8 unit cycles.
//
// The paper builds the counter and adder as one tree of full adders
// (Parhami's accumulative parallel counter: P-1 inputs into a log2(P)-bit
// count, added to the register with the remaining input as carry-in). Here the
// same sum is written arithmetically and the adder tree is left to synthesis.
//
// Timing: `spike` is combinational in the crossing cycle and then registered
// for the next 7 cycles. theta must be 1..P (the register cannot hold -theta
// otherwise). A neuron fires at most once per gamma cycle: after the crossing
// the register holds its value, which also keeps the ACC_W-bit sum from
// overflowing. The pulse is cut off at the end of the gamma cycle so that it
// cannot spill into the next volley. Holding the register, cutting the pulse
// and the synchronous reset are this design's choices; the register width,
// the -theta preload, the sign-bit threshold test and the 3-bit pulse counter
// follow the paper.
module neuron_body
  import tnn_pkg::*;
#(
  parameter int unsigned P     = 16,
  parameter int unsigned ACC_W = $clog2(P) + 1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             gamma_end,
  input  logic [P-1:0]     resp,   // thermometer-coded responses of the synapses
  input  logic [ACC_W-1:0] theta,  // firing threshold, 1..P
  output logic             spike,  // axon: 8-cycle output pulse
  output logic [ACC_W-1:0] vmem    // register value (potential - theta)
);

  logic [ACC_W-1:0] count, sum;
  logic [2:0]       pcnt;     // remaining pulse cycles after the first
  logic             fired;
  logic             fire_now;

  always_comb begin
    count = '0;
    for (int i = 0; i < int'(P); i++) count = count + ACC_W'(resp[i]);
  end

  assign sum      = vmem + count;
  assign fire_now = !fired && !sum[ACC_W-1];
  assign spike    = fire_now || (pcnt != '0);

  always_ff @(posedge clk) begin
    if (rst || gamma_end) begin
      vmem  <= -theta;
      fired <= 1'b0;
      pcnt  <= '0;
    end else begin
      if (!fired) vmem <= sum;
      if (fire_now) begin
        fired <= 1'b1;
        pcnt  <= 3'(PULSE_W - 1);
      end else if (pcnt != '0) begin
        pcnt <= pcnt - 1'b1;
      end
    end
  end

endmodule
