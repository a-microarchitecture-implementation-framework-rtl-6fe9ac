// tb_brv_gen: checks the Bernoulli random-bit generator network.
// The testbench keeps its own xorshift32 model of every lane (same seeds,
// same update) and predicts each output bit exactly from the programmed
// probabilities. It also checks the statistics over many cycles: mu = 0 never
// gives a 1, mu = 256 always does, mu = 64 gives about 25 %, and the F_w bits
// occur at about w(7-w)/49; and it checks that two lanes differ.
module tb_brv_gen;
  import tnn_pkg::*;

  localparam int L = 4;
  localparam logic [31:0] SEED = 32'h2545_F491;
  localparam int N = 20000;

  logic clk = 1'b0, rst = 1'b1;
  stdp_mu_t mu;
  brv_t brv [L];
  int checks = 0, failures = 0;

  brv_gen #(.LANES(L), .SEED(SEED)) dut (.clk, .rst, .mu, .brv);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] step(input logic [31:0] s);
    logic [31:0] t;
    t = s ^ (s << 13);
    t = t ^ (t >> 17);
    return t ^ (t << 5);
  endfunction

  initial begin
    logic [31:0] m [L];
    int n_cap, n_search, n_backoff, n_min, n_f [8], n_diff;
    int exp_f;
    n_cap = 0; n_search = 0; n_backoff = 0; n_min = 0; n_diff = 0;
    foreach (n_f[k]) n_f[k] = 0;
    mu.capture = 9'd64;    // 25 %
    mu.backoff = 9'd0;     // never
    mu.search  = 9'd256;   // always
    mu.min     = 9'd128;   // 50 %
    for (int l = 0; l < L; l++) begin
      m[l] = SEED ^ (32'(l) * 32'h9E37_79B9);
      if (m[l] == 0) m[l] = 1;
    end
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int c = 0; c < N; c++) begin
      @(negedge clk);
      for (int l = 0; l < L; l++) m[l] = step(m[l]);
      for (int l = 0; l < L; l++) begin
        checks++;
        if (brv[l].capture != (m[l][7:0] < 64) || brv[l].min != (m[l][15:8] < 128) ||
            brv[l].backoff != 1'b0 || brv[l].search != 1'b1 ||
            brv[l].f[0] != 1'b0 || brv[l].f[7] != 1'b0 ||
            brv[l].f[3] != (m[l][23:16] < 63) || brv[l].f[1] != (m[l][23:16] < 31)) begin
          failures++;
          if (failures < 10) $display("FAIL cycle %0d lane %0d brv=%h", c, l, brv[l]);
        end
      end
      n_cap     += int'(brv[0].capture);
      n_search  += int'(brv[0].search);
      n_backoff += int'(brv[0].backoff);
      n_min     += int'(brv[0].min);
      for (int k = 0; k < 8; k++) n_f[k] += int'(brv[1].f[k]);
      n_diff    += int'(brv[0] != brv[1]);
    end
    checks++;
    if (n_cap < N * 23 / 100 || n_cap > N * 27 / 100) begin
      failures++; $display("FAIL capture rate %0d/%0d", n_cap, N);
    end
    checks++;
    if (n_search != N || n_backoff != 0) begin
      failures++; $display("FAIL search %0d backoff %0d", n_search, n_backoff);
    end
    checks++;
    if (n_min < N * 48 / 100 || n_min > N * 52 / 100) begin
      failures++; $display("FAIL min rate %0d/%0d", n_min, N);
    end
    for (int k = 1; k < 7; k++) begin
      exp_f = N * k * (7 - k) / 49;
      checks++;
      if (n_f[k] < exp_f - N / 50 || n_f[k] > exp_f + N / 50) begin
        failures++; $display("FAIL F%0d rate %0d expected %0d", k, n_f[k], exp_f);
      end
    end
    checks++;
    if (n_diff < N / 2) begin
      failures++; $display("FAIL lanes 0 and 1 too similar (%0d)", n_diff);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
