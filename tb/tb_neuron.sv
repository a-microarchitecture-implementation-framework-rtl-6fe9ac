// tb_neuron: checks one SRM0 neuron with 16 synapses and per-synapse STDP.
// The testbench keeps a reference copy of the 16 weights. Each gamma cycle it
// draws a random volley (spike time 0..7 or none per input), a threshold, a
// reward code and random Bernoulli bits per synapse. The reference computes
// the ramp-no-leak potential, sum over inputs of min(w_i, t - t_i + 1), and
// predicts the firing cycle and the 8-cycle output pulse; the output spike is
// fed back as z (sometimes suppressed, as lateral inhibition would). At the
// gamma end it applies the STDP / R-STDP rule to the reference weights and
// compares all 16 weights with the neuron's.
module tb_neuron;
  import tnn_pkg::*;

  localparam int P = 16;
  localparam int AW = $clog2(P) + 1;

  logic clk = 1'b0, rst = 1'b1, gamma_end = 1'b0;
  logic [P-1:0] x = '0;
  logic z_en = 1'b1, z;
  logic [AW-1:0] theta = AW'(P);
  reward_e reward = RW_UNSUP;
  brv_t brv [P];
  logic y;
  weight_t weights [P];
  int checks = 0, failures = 0;
  int n_fire = 0, n_case [5], n_inc = 0, n_dec = 0;

  assign z = y & z_en;

  neuron #(.P(P)) dut (.clk, .rst, .gamma_end, .x, .z, .theta, .reward, .brv, .y, .weights);

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int wref [P], tx [P];
    int acc, tf, tz, cs, d, th;
    logic fm, f, exp_y;
    foreach (n_case[k]) n_case[k] = 0;
    foreach (wref[i]) wref[i] = 0;
    foreach (brv[i]) brv[i] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int g = 0; g < 1500; g++) begin
      for (int i = 0; i < P; i++) tx[i] = ($urandom_range(0, 3) == 0) ? 99 : $urandom_range(0, 7);
      reward = reward_e'($urandom_range(0, 3));
      if (g < 40) reward = RW_ZERO;            // let weights grow first
      z_en = ($urandom_range(0, 4) != 0);
      th = int'(theta);
      acc = 0; tf = -1;
      for (int ph = 0; ph < 15; ph++) begin
        for (int i = 0; i < P; i++) x[i] = (ph >= tx[i] && ph < tx[i] + 8);
        gamma_end = (ph == 14);
        if (gamma_end) foreach (brv[i]) brv[i] = brv_t'($urandom());
        for (int i = 0; i < P; i++) if (x[i] && ph - tx[i] < wref[i]) acc++;
        if (tf < 0 && acc >= th) tf = ph;
        exp_y = (tf >= 0) && (ph - tf < 8);
        #1;
        checks++;
        if (y != exp_y) begin
          failures++;
          $display("FAIL g%0d ph%0d y=%0b exp=%0b acc=%0d th=%0d", g, ph, y, exp_y, acc, th);
        end
        if (gamma_end) begin
          // expected STDP updates, then the new threshold for the next cycle
          tz = (tf >= 0 && z_en) ? tf : 99;
          for (int i = 0; i < P; i++) begin
            if (tx[i] < 99 && tz < 99) cs = (tx[i] <= tz) ? 1 : 2;
            else if (tx[i] < 99)       cs = 3;
            else if (tz < 99)          cs = 4;
            else                       cs = 0;
            n_case[cs]++;
            f  = (wref[i] == 0 || wref[i] == 7) ? 1'b0 : brv[i].f[wref[i]];
            fm = f | brv[i].min;
            d = 0;
            case (reward)
              RW_UNSUP: begin
                if ((cs == 1 && brv[i].capture && fm) || (cs == 3 && brv[i].search)) d = 1;
                if ((cs == 2 || cs == 4) && brv[i].backoff && fm) d = -1;
              end
              RW_POS: begin
                if (cs == 1 && brv[i].capture && fm) d = 1;
                if ((cs == 2 || cs == 4) && brv[i].backoff && fm) d = -1;
              end
              RW_NEG: begin
                if (cs == 3 && brv[i].search) d = 1;
                if (cs == 1 && brv[i].capture && fm) d = -1;
              end
              default: if (cs == 3 && brv[i].search) d = 1;
            endcase
            if (d > 0 && wref[i] < 7) begin wref[i]++; n_inc++; end
            if (d < 0 && wref[i] > 0) begin wref[i]--; n_dec++; end
          end
          if (tf >= 0) n_fire++;
          theta = AW'($urandom_range(4, P));
        end
        @(negedge clk);
      end
      x = '0; gamma_end = 1'b0;
      #1;
      for (int i = 0; i < P; i++) begin
        checks++;
        if (int'(weights[i]) != wref[i]) begin
          failures++;
          $display("FAIL g%0d w[%0d]=%0d exp %0d", g, i, weights[i], wref[i]);
        end
      end
    end
    checks++;
    if (n_fire == 0 || n_inc == 0 || n_dec == 0 || n_case[1] == 0 || n_case[2] == 0 ||
        n_case[3] == 0 || n_case[4] == 0) begin
      failures++;
      $display("FAIL coverage fire=%0d inc=%0d dec=%0d cases=%0d/%0d/%0d/%0d", n_fire, n_inc,
               n_dec, n_case[1], n_case[2], n_case[3], n_case[4]);
    end
    $display("output spikes in %0d of 1500 gamma cycles", n_fire);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
