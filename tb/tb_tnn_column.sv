// tb_tnn_column: end-to-end check of the TNN column at a reduced size of 16 inputs x 4 neurons.
//
// The testbench holds a reference model of the whole column: the Q x P weight
// matrix, the ramp-no-leak potentials, the 1-WTA selection and the STDP /
// R-STDP rules. Each gamma cycle it drives a random volley (each input spikes
// at a time 0..7 as an 8-cycle pulse, or not at all; some volleys are empty),
// a random threshold and a random reward code, and checks every unit cycle
// that the neuron outputs before inhibition (y_pre) and after it (y) match the
// model, and after the gamma end that all weights match.
//
// Phase 1 sets every learning probability to 1 (mu = 256), so the Bernoulli
// bits are all 1 and the expected update is exact. Phase 2 uses probabilities
// below 1: the random bits are then the column's own, so each weight may only
// move by the exact update or stay, and the reference follows the column.
// The testbench counts how often each mechanism happened (firing, empty gamma
// cycles, inhibition, ties, each STDP case taking effect, each reward code,
// saturation at 7 and at 0, the restore of a spike at time 7 merged with an
// update, and updates skipped by chance) and fails if any of them never happened.
module tb_tnn_column;
  import tnn_pkg::*;

  localparam int P = 16;
  localparam int Q = 4;
  localparam int AW = $clog2(P) + 1;
  localparam int NG_DET = 1500;
  localparam int NG_RND = 800;

  logic clk = 1'b0, rst = 1'b1;
  logic [P-1:0] x = '0;
  logic [AW-1:0] theta;
  reward_e reward = RW_ZERO;
  stdp_mu_t mu;
  logic [Q-1:0] y, y_pre;
  logic [PH_BITS-1:0] phase;
  logic gamma_clk, gamma_end;
  weight_t weights [Q][P];
  int checks = 0, failures = 0;

  // mechanism counters
  int n_fire = 0, n_empty = 0, n_inhib = 0, n_tie = 0, n_sat_hi = 0, n_sat_lo = 0;
  int n_t7 = 0, n_skip = 0;
  int n_case [5];
  int n_rw [4];

  tnn_column #(.P(P), .Q(Q)) dut (
    .clk, .rst, .x, .theta, .reward, .mu, .y, .y_pre, .phase, .gamma_clk, .gamma_end, .weights
  );

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int wref [Q][P];
  int tx [P];

  initial begin
    int acc [Q];
    int tf [Q];
    int th, tmin, win, nmin, nfired, cs, d, tz, wnew;
    logic f, fm;
    logic [Q-1:0] e_pre, e_y;
    bit stochastic;
    foreach (n_case[k]) n_case[k] = 0;
    foreach (n_rw[k]) n_rw[k] = 0;
    foreach (wref[j, i]) wref[j][i] = 0;
    theta = AW'(P / 4 + 1);
    mu = '{capture: 9'd256, backoff: 9'd256, search: 9'd256, min: 9'd256};
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int g = 0; g < NG_DET + NG_RND; g++) begin
      stochastic = (g >= NG_DET);
      if (stochastic)
        mu = '{capture: 9'd160, backoff: 9'd120, search: 9'd100, min: 9'd60};
      for (int i = 0; i < P; i++)
        tx[i] = ($urandom_range(0, 3) == 0 || g % 13 == 12) ? 99 : $urandom_range(0, 7);
      if (g % 13 == 12) n_empty++;
      if (g < 3) reward = RW_ZERO;           // grow weights from zero first
      else reward = reward_e'($urandom_range(0, 3));
      n_rw[int'(reward)]++;
      th = int'(theta);
      foreach (acc[j]) begin acc[j] = 0; tf[j] = -1; end
      // reference firing times and WTA winner for this volley
      for (int ph = 0; ph < 15; ph++)
        for (int j = 0; j < Q; j++) begin
          for (int i = 0; i < P; i++)
            if (tx[i] < 99 && ph >= tx[i] && ph - tx[i] < wref[j][i]) acc[j]++;
          if (tf[j] < 0 && acc[j] >= th) tf[j] = ph;
        end
      tmin = 99; win = -1; nmin = 0; nfired = 0;
      for (int j = 0; j < Q; j++)
        if (tf[j] >= 0) begin
          nfired++;
          if (tf[j] < tmin) begin tmin = tf[j]; win = j; end
        end
      for (int j = 0; j < Q; j++) if (tf[j] == tmin) nmin++;
      if (nfired > 0) n_fire++;
      if (nfired > 1) n_inhib++;
      if (nmin > 1) n_tie++;
      // drive the volley and compare the outputs every unit cycle
      for (int ph = 0; ph < 15; ph++) begin
        for (int i = 0; i < P; i++) x[i] = (ph >= tx[i] && ph < tx[i] + 8);
        #1;
        for (int j = 0; j < Q; j++) e_pre[j] = (tf[j] >= 0 && ph >= tf[j] && ph - tf[j] < 8);
        e_y = '0;
        if (win >= 0) e_y[win] = e_pre[win];
        checks++;
        if (int'(phase) != ph || gamma_end != (ph == 14)) begin
          failures++;
          $display("FAIL g%0d ph%0d phase=%0d gamma_end=%0b", g, ph, phase, gamma_end);
        end
        checks++;
        if (y_pre != e_pre || y != e_y) begin
          failures++;
          if (failures < 20)
            $display("FAIL g%0d ph%0d y_pre=%b exp %b y=%b exp %b", g, ph, y_pre, e_pre, y, e_y);
        end
        if (ph == 14) theta = AW'($urandom_range(P / 8 + 1, P / 2 + 1));
        @(negedge clk);
      end
      x = '0;
      #1;
      // reference STDP / R-STDP update, all Bernoulli bits 1 in phase 1
      for (int j = 0; j < Q; j++) begin
        tz = (j == win) ? tf[j] : 99;
        for (int i = 0; i < P; i++) begin
          if (tx[i] < 99 && tz < 99) cs = (tx[i] <= tz) ? 1 : 2;
          else if (tx[i] < 99)       cs = 3;
          else if (tz < 99)          cs = 4;
          else                       cs = 0;
          d = 0;
          case (reward)
            RW_UNSUP: d = (cs == 1 || cs == 3) ? 1 : (cs == 2 || cs == 4) ? -1 : 0;
            RW_POS:   d = (cs == 1) ? 1 : (cs == 2 || cs == 4) ? -1 : 0;
            RW_NEG:   d = (cs == 3) ? 1 : (cs == 1) ? -1 : 0;
            default:  d = (cs == 3) ? 1 : 0;
          endcase
          wnew = wref[j][i] + d;
          if (wnew > 7) begin wnew = 7; n_sat_hi++; end
          if (wnew < 0) begin wnew = 0; n_sat_lo++; end
          checks++;
          if (!stochastic) begin
            if (int'(weights[j][i]) != wnew) begin
              failures++;
              if (failures < 20)
                $display("FAIL g%0d w[%0d][%0d]=%0d exp %0d (was %0d case %0d)", g, j, i,
                         weights[j][i], wnew, wref[j][i], cs);
            end
          end else begin
            if (int'(weights[j][i]) != wnew && int'(weights[j][i]) != wref[j][i]) begin
              failures++;
              if (failures < 20)
                $display("FAIL g%0d w[%0d][%0d]=%0d allowed %0d or %0d", g, j, i,
                         weights[j][i], wref[j][i], wnew);
            end
            if (wnew != wref[j][i] && int'(weights[j][i]) == wref[j][i]) n_skip++;
            wnew = int'(weights[j][i]);
          end
          if (wnew != wref[j][i]) begin
            n_case[cs]++;
            if (tx[i] == 7) n_t7++;
          end
          wref[j][i] = wnew;
        end
      end
    end
    $display("fire=%0d empty=%0d inhibit=%0d tie=%0d case1=%0d case2=%0d case3=%0d case4=%0d",
             n_fire, n_empty, n_inhib, n_tie, n_case[1], n_case[2], n_case[3], n_case[4]);
    $display("reward 00=%0d 01=%0d 10=%0d 11=%0d sat_hi=%0d sat_lo=%0d t7=%0d skipped=%0d",
             n_rw[0], n_rw[1], n_rw[2], n_rw[3], n_sat_hi, n_sat_lo, n_t7, n_skip);
    if (1) begin
      checks++;
      if (n_fire == 0 || n_empty == 0 || n_inhib == 0 || n_tie == 0 || n_case[1] == 0 ||
          n_case[2] == 0 || n_case[3] == 0 || n_case[4] == 0 || n_rw[0] == 0 ||
          n_rw[1] == 0 || n_rw[2] == 0 || n_rw[3] == 0 || n_sat_hi == 0 || n_sat_lo == 0 ||
          n_t7 == 0 || n_skip == 0) begin
        failures++;
        $display("FAIL a mechanism never happened");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
