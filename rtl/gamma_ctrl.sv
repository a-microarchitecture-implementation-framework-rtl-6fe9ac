// gamma_ctrl: gamma-cycle sequencer.
//
// The unit-time clock is the only clock of the design. This block counts unit
// cycles 0..GAMMA-1 and so frames the gamma (computational) cycle: `phase` is
// the unit-cycle index inside the current gamma cycle, `gamma_end` is high in
// its last unit cycle, and the rising edge that closes that cycle is where the
// STDP weight update and all per-gamma resets take place (the onset of the next
// gamma cycle). `gamma_clk` reproduces the gamma clock waveform, high for the
// first PULSE_W unit cycles and low for the rest.
//
// GAMMA = 15 and the 8-cycle high phase follow the paper. The synchronous,
// active-high reset, which starts a gamma cycle at phase 0, is this design's
// choice.
module gamma_ctrl
  import tnn_pkg::*;
#(
  parameter int unsigned GAMMA_LEN = GAMMA
) (
  input  logic               clk,
  input  logic               rst,
  output logic [PH_BITS-1:0] phase,
  output logic               gamma_clk,
  output logic               gamma_end
);

  always_ff @(posedge clk) begin
    if (rst)            phase <= '0;
    else if (gamma_end) phase <= '0;
    else                phase <= phase + 1'b1;
  end

  assign gamma_end = (phase == PH_BITS'(GAMMA_LEN - 1));
  assign gamma_clk = (phase < PH_BITS'(PULSE_W));

endmodule
