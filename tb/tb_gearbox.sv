// Self-checking testbench of gearbox (128 -> 108 lane width converter).
// Random 128-sample beats are written with an input duty cycle that keeps
// the average input rate below one output beat per cycle (4 of 5 cycles,
// 102.4 < 108 samples per cycle), as in the receiver where the ADC rate is
// matched to the processing rate. The concatenated output stream must equal
// the concatenated input stream sample for sample, and overflow must stay
// low. A second phase feeds every cycle and checks that overflow is raised.
module tb_gearbox;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst, in_valid, out_valid, overflow;
  logic signed [15:0] din [128], dout [108];
  gearbox dut (.*);

  int q_in [$];
  int n_out = 0;
  bit phase2 = 0;
  always @(posedge clk) if (!rst && out_valid && !phase2) begin
    for (int i = 0; i < 108; i++) begin
      int e;
      e = q_in.pop_front();
      checks++;
      if (dout[i] != 16'(e)) begin
        failures++;
        if (failures < 5) $display("FAIL sample %0d: got %0d expected %0d", n_out * 108 + i, dout[i], e);
      end
    end
    n_out++;
  end

  initial begin
    rst = 1; in_valid = 0;
    for (int i = 0; i < 128; i++) din[i] = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int c = 0; c < 500; c++) begin
      in_valid = (c % 5 != 4);
      if (in_valid)
        for (int i = 0; i < 128; i++) begin
          din[i] = 16'($urandom_range(0, 65535));
          q_in.push_back(int'(din[i]));
        end
      @(negedge clk);
      if (overflow) begin failures++; $display("FAIL overflow at cycle %0d", c); end
    end
    in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (n_out < 450) begin failures++; $display("FAIL only %0d output beats", n_out); end
    // overload: continuous input must eventually flag overflow
    phase2 = 1;
    rst = 1; @(negedge clk); rst = 0;
    begin
      bit seen = 0;
      for (int c = 0; c < 100; c++) begin
        in_valid = 1;
        @(negedge clk);
        if (overflow) seen = 1;
      end
      in_valid = 0;
      checks++;
      if (!seen) begin failures++; $display("FAIL overflow never raised under overload"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
