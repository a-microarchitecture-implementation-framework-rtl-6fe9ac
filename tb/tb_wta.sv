// tb_wta: checks 1-winner-take-all inhibition.
// Each gamma cycle gives every neuron a random output pulse (start 0..14 or
// none, 8 cycles, cut at the gamma end). The reference winner is the neuron
// with the earliest start, lowest index on ties; only its pulse may pass,
// complete, and nothing else. Ties and gamma cycles without spikes must occur.
module tb_wta;
  localparam int Q = 6;

  logic clk = 1'b0, rst = 1'b1, gamma_end = 1'b0;
  logic [Q-1:0] z_in = '0, z_out;
  int checks = 0, failures = 0;
  int n_tie = 0, n_none = 0, n_block = 0;

  wta #(.Q(Q)) dut (.clk, .rst, .gamma_end, .z_in, .z_out);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ts [Q];
    int tmin, win, nmin, nspk;
    logic [Q-1:0] exp_out;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int g = 0; g < 3000; g++) begin
      tmin = 99; win = -1; nmin = 0; nspk = 0;
      for (int j = 0; j < Q; j++) begin
        ts[j] = ($urandom_range(0, 3) == 0 || g % 10 == 0) ? 99 : $urandom_range(0, 9);
        if (ts[j] < 99) nspk++;
        if (ts[j] < tmin) begin tmin = ts[j]; win = j; end
      end
      for (int j = 0; j < Q; j++) if (ts[j] == tmin && tmin < 99) nmin++;
      if (win < 0) n_none++;
      if (nmin > 1) n_tie++;
      if (nspk > 1) n_block++;
      for (int ph = 0; ph < 15; ph++) begin
        for (int j = 0; j < Q; j++) z_in[j] = (ph >= ts[j] && ph < ts[j] + 8);
        gamma_end = (ph == 14);
        exp_out = '0;
        if (win >= 0) exp_out[win] = z_in[win];
        #1;
        checks++;
        if (z_out != exp_out) begin
          failures++;
          $display("FAIL g%0d ph%0d z_in=%b z_out=%b exp=%b", g, ph, z_in, z_out, exp_out);
        end
        @(negedge clk);
      end
    end
    checks++;
    if (n_tie == 0 || n_none == 0 || n_block == 0) begin
      failures++;
      $display("FAIL coverage tie=%0d none=%0d block=%0d", n_tie, n_none, n_block);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
