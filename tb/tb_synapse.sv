// tb_synapse: checks the weight counter FSM.
// Each gamma cycle (15 unit cycles, driven by the testbench) applies one input
// pulse of 8 cycles at a random spike time 0..7 (or none) and a random STDP
// request at the last cycle. A reference weight kept in the testbench gives
// the expected response: exactly w ones in the first w cycles of the pulse.
// After each gamma cycle the stored weight must equal the reference updated
// by +1/-1 with saturation at 7 and 0; the restore of a pulse that ends in the
// last cycle (spike time 7) is covered as well.
module tb_synapse;
  import tnn_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  logic x = 1'b0, gamma_end = 1'b0, inc = 1'b0, dec = 1'b0;
  logic resp;
  weight_t weight;
  int checks = 0, failures = 0;
  int wref = 0;
  int n_sat_hi = 0, n_sat_lo = 0, n_t7 = 0;

  synapse dut (.clk, .rst, .x, .gamma_end, .inc, .dec, .resp, .weight);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t, ones, op;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int g = 0; g < 600; g++) begin
      t  = $urandom_range(0, 8);          // 8 = no spike
      op = $urandom_range(0, 3);          // 0 none, 1 inc, 2 dec, 3 both
      ones = 0;
      if (t == 7) n_t7++;
      for (int ph = 0; ph < 15; ph++) begin
        x         = (t < 8) && ph >= t && ph < t + 8;
        gamma_end = (ph == 14);
        inc       = gamma_end && (op == 1 || op == 3);
        dec       = gamma_end && (op == 2 || op == 3);
        #1;
        checks++;
        if (resp != (x && (ph - t) < wref)) begin
          failures++;
          $display("FAIL g%0d ph%0d t%0d w%0d resp=%0b", g, ph, t, wref, resp);
        end
        ones += int'(resp);
        @(negedge clk);
      end
      checks++;
      if (ones != ((t < 8) ? wref : 0)) begin
        failures++;
        $display("FAIL g%0d ones %0d w %0d", g, ones, wref);
      end
      if (op == 1) begin
        if (wref == 7) n_sat_hi++;
        else wref++;
      end else if (op == 2) begin
        if (wref == 0) n_sat_lo++;
        else wref--;
      end
      x = 1'b0; gamma_end = 1'b0; inc = 1'b0; dec = 1'b0;
      #1;
      checks++;
      if (int'(weight) != wref) begin
        failures++;
        $display("FAIL g%0d weight %0d expected %0d", g, weight, wref);
      end
    end
    checks++;
    if (n_sat_hi == 0 || n_sat_lo == 0 || n_t7 == 0) begin
      failures++;
      $display("FAIL coverage sat_hi=%0d sat_lo=%0d t7=%0d", n_sat_hi, n_sat_lo, n_t7);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
