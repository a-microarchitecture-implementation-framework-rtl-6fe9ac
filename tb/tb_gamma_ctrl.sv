// tb_gamma_ctrl: checks the gamma-cycle sequencer.
// Expected behaviour is computed from a free-running cycle count: phase must
// equal (cycle mod 15), gamma_end must be high exactly once every 15 cycles
// (the gamma period), and gamma_clk must be high for the first 8 phases.
module tb_gamma_ctrl;
  import tnn_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  logic [PH_BITS-1:0] phase;
  logic gamma_clk, gamma_end;
  int checks = 0, failures = 0;
  int last_end = -1;

  gamma_ctrl dut (.clk, .rst, .phase, .gamma_clk, .gamma_end);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    for (int c = 0; c < 15 * 20; c++) begin
      @(negedge clk);
      checks++;
      if (int'(phase) != c % 15) begin
        failures++;
        $display("FAIL cycle %0d phase %0d", c, phase);
      end
      checks++;
      if (gamma_end != (c % 15 == 14)) begin
        failures++;
        $display("FAIL cycle %0d gamma_end %0b", c, gamma_end);
      end
      checks++;
      if (gamma_clk != (c % 15 < 8)) begin
        failures++;
        $display("FAIL cycle %0d gamma_clk %0b", c, gamma_clk);
      end
      if (gamma_end) begin
        if (last_end >= 0) begin
          checks++;
          if (c - last_end != 15) begin
            failures++;
            $display("FAIL gamma period %0d", c - last_end);
          end
        end
        last_end = c;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
