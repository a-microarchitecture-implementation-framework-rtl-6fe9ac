// tb_stdp_logic: checks the per-synapse STDP / R-STDP logic.
// Every gamma cycle picks a random input spike time and output spike time
// (0..7 or none, as 8-cycle pulses), a random weight, random Bernoulli bits
// and one of the four reward codes. The testbench works out the STDP case
// from the two spike times (x <= z when x arrives no later than z) and the
// expected inc/dec from the rule table, and compares them with the block's
// outputs in the gamma_end cycle (the only cycle in which the synapse samples
// them). Coverage of all four cases and of "no spike at all" under all four
// reward codes is required.
module tb_stdp_logic;
  import tnn_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  logic gamma_end = 1'b0, x = 1'b0, z = 1'b0;
  weight_t w = '0;
  brv_t brv = '0;
  reward_e reward = RW_UNSUP;
  logic inc, dec;
  int checks = 0, failures = 0;
  int cover_cnt [4][5];   // [reward][case 1..4, 0 = none]

  stdp_logic dut (.clk, .rst, .gamma_end, .x, .z, .w, .brv, .reward, .inc, .dec);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tx, tz, cs, rw;
    logic fm, f, e_inc, e_dec;
    foreach (cover_cnt[a, b]) cover_cnt[a][b] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int g = 0; g < 3000; g++) begin
      tx = $urandom_range(0, 8);   // 8 = no spike
      tz = $urandom_range(0, 8);
      rw = $urandom_range(0, 3);
      reward = reward_e'(rw);
      w = weight_t'($urandom_range(0, 7));
      for (int ph = 0; ph < 15; ph++) begin
        x = (tx < 8) && ph >= tx && ph < tx + 8;
        z = (tz < 8) && ph >= tz && ph < tz + 8;
        gamma_end = (ph == 14);
        if (gamma_end) brv = brv_t'($urandom());
        #1;
        if (gamma_end) begin
          // reference case
          if (tx < 8 && tz < 8) cs = (tx <= tz) ? 1 : 2;
          else if (tx < 8)      cs = 3;
          else if (tz < 8)      cs = 4;
          else                  cs = 0;
          f  = (w == 0 || w == 7) ? 1'b0 : brv.f[w];
          fm = f | brv.min;
          e_inc = 1'b0; e_dec = 1'b0;
          case (reward)
            RW_UNSUP: begin
              e_inc = (cs == 1 && brv.capture && fm) || (cs == 3 && brv.search);
              e_dec = ((cs == 2 || cs == 4) && brv.backoff && fm);
            end
            RW_POS: begin
              e_inc = (cs == 1 && brv.capture && fm);
              e_dec = ((cs == 2 || cs == 4) && brv.backoff && fm);
            end
            RW_NEG: begin
              e_inc = (cs == 3 && brv.search);
              e_dec = (cs == 1 && brv.capture && fm);
            end
            default: begin
              e_inc = (cs == 3 && brv.search);
            end
          endcase
          cover_cnt[rw][cs]++;
          checks++;
          if (inc !== e_inc || dec !== e_dec) begin
            failures++;
            $display("FAIL g%0d tx%0d tz%0d rw%0d w%0d brv=%h inc=%0b/%0b dec=%0b/%0b",
                     g, tx, tz, rw, w, brv, inc, e_inc, dec, e_dec);
          end
        end
        @(negedge clk);
      end
    end
    for (int r = 0; r < 4; r++)
      for (int c = 0; c < 5; c++) begin
        checks++;
        if (cover_cnt[r][c] == 0) begin
          failures++;
          $display("FAIL no coverage reward %0d case %0d", r, c);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
