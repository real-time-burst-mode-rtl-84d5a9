// Self-checking testbench of overlap_add. Random 108-sample beats are fed
// with gaps; each 144-sample output must be the last 36 samples of the
// previous input beat followed by the current beat, one cycle after the
// input, and out_valid must follow in_valid by exactly one cycle.
module tb_overlap_add;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst, in_valid, out_valid;
  logic signed [15:0] din [108], dout [144];
  overlap_add dut (.*);

  logic signed [15:0] prev [108], cur [108];
  initial begin
    rst = 1; in_valid = 0;
    for (int i = 0; i < 108; i++) begin din[i] = '0; prev[i] = '0; end
    repeat (3) @(negedge clk);
    rst = 0;
    // first beat primes the history
    for (int i = 0; i < 108; i++) din[i] = 16'($urandom);
    in_valid = 1; @(negedge clk); in_valid = 0;
    prev = din;
    for (int b = 0; b < 40; b++) begin
      for (int i = 0; i < 108; i++) din[i] = 16'($urandom);
      cur = din;
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL beat %0d: no out_valid", b); end
      for (int i = 0; i < 144; i++) begin
        logic signed [15:0] e;
        e = (i < 36) ? prev[72 + i] : cur[i - 36];
        checks++;
        if (dout[i] != e) begin failures++; if (failures < 5) $display("FAIL beat %0d lane %0d", b, i); end
      end
      prev = cur;
      repeat (b % 3) begin
        @(negedge clk);
        checks++;
        if (out_valid) begin failures++; $display("FAIL spurious out_valid"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
