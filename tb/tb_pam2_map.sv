// Self-checking testbench of pam2_map: each bit must become +AMP (1) or
// -AMP (0) one cycle later, and every symbol must be 0 while `en` is low.
module tb_pam2_map;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst, in_valid, en, out_valid;
  logic [95:0] bits;
  logic signed [15:0] sym [96];
  pam2_map dut (.*);

  initial begin
    rst = 1; in_valid = 0; en = 0; bits = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 50; t++) begin
      bits = {$urandom, $urandom, $urandom};
      en = (t % 7 != 3);
      in_valid = 1;
      @(negedge clk);
      checks++;
      if (!out_valid) begin failures++; $display("FAIL no out_valid"); end
      for (int i = 0; i < 96; i++) begin
        int e;
        e = !en ? 0 : (bits[i] ? 8192 : -8192);
        checks++;
        if (sym[i] != 16'(e)) begin failures++; if (failures < 5) $display("FAIL t=%0d i=%0d got %0d", t, i, sym[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
