// tb_neuron_body: checks the membrane-potential accumulator and output pulse.
// Each gamma cycle drives random response vectors (with a random density) for
// 14 cycles and a random threshold 1..16. The reference sums the popcounts
// cycle by cycle; the neuron must fire in the first cycle in which the running
// sum reaches theta, hold its output high for 8 cycles (cut at the gamma end),
// and fire at most once. Gamma cycles with and without a spike, and pulses
// cut by the gamma end, must all occur.
module tb_neuron_body;
  import tnn_pkg::*;

  localparam int P = 16;
  localparam int AW = $clog2(P) + 1;

  logic clk = 1'b0, rst = 1'b1, gamma_end = 1'b0;
  logic [P-1:0] resp = '0;
  logic [AW-1:0] theta = AW'(8);
  logic spike;
  logic [AW-1:0] vmem;
  int checks = 0, failures = 0;
  int n_fire = 0, n_nofire = 0, n_cut = 0;
  logic [AW-1:0] theta_prev = AW'(8);

  neuron_body #(.P(P)) dut (.clk, .rst, .gamma_end, .resp, .theta, .spike, .vmem);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int acc, tfire, dens, th;
    logic exp_spk;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    // theta is loaded at each gamma boundary, so gamma cycle g uses the
    // value driven in cycle g-1; the first gamma cycle is not checked
    for (int g = 0; g < 2000; g++) begin
      th = $urandom_range(1, P);
      acc = 0; tfire = -1;
      dens = $urandom_range(0, 6);
      for (int ph = 0; ph < 15; ph++) begin
        for (int i = 0; i < P; i++) resp[i] = ($urandom_range(0, 15) < dens);
        gamma_end = (ph == 14);
        if (gamma_end) theta = AW'(th);      // loaded at the closing edge
        #1;
        if (g > 0) begin
          acc += $countones(resp);
          if (tfire < 0 && acc >= int'(theta_prev)) tfire = ph;
          exp_spk = (tfire >= 0) && (ph - tfire < 8);
          checks++;
          if (spike != exp_spk) begin
            failures++;
            $display("FAIL g%0d ph%0d acc%0d th%0d spike=%0b", g, ph, acc, theta_prev, spike);
          end
        end
        @(negedge clk);
      end
      if (g > 0) begin
        if (tfire < 0) n_nofire++; else n_fire++;
        if (tfire > 7) n_cut++;
      end
      theta_prev = AW'(th);
    end
    checks++;
    if (n_fire == 0 || n_nofire == 0 || n_cut == 0) begin
      failures++;
      $display("FAIL coverage fire=%0d nofire=%0d cut=%0d", n_fire, n_nofire, n_cut);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
