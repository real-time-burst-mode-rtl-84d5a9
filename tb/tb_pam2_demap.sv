// Self-checking testbench of pam2_demap: lanes 32..127 of random complex
// beats are sliced at zero on the real part (1 when > 0) one cycle later;
// the 32 overlap lanes and the imaginary parts must not matter.
module tb_pam2_demap;
  import bmdsp_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst, in_valid, out_valid;
  cplx_t z [128];
  logic [95:0] bits;
  pam2_demap dut (.*);

  initial begin
    rst = 1; in_valid = 0;
    for (int i = 0; i < 128; i++) z[i] = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 50; t++) begin
      for (int i = 0; i < 128; i++) begin
        z[i].re = 16'($urandom);
        z[i].im = 16'($urandom);
        if (i % 17 == 0) z[i].re = '0;
      end
      in_valid = 1;
      @(negedge clk);
      checks++;
      if (!out_valid) begin failures++; $display("FAIL no out_valid"); end
      for (int i = 0; i < 96; i++) begin
        checks++;
        if (bits[i] != (z[32 + i].re > 0)) begin failures++; if (failures < 5) $display("FAIL t=%0d i=%0d", t, i); end
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
