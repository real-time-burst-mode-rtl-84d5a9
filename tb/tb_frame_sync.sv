// Self-checking testbench of frame_sync. A stream of 96-symbol beats of
// random +-A symbols carries one Preamble B ([Pn, Pn, -Pn]) starting at a
// random symbol offset. The expected position is worked out from where the
// preamble was placed: the first two-beat window that holds the whole
// preamble must report p1 = its offset inside the window and
// pos = floor(1.125 * p1), 61 cycles (+1 result register) after the
// window's second beat (counting the sampling edge as cycle 1). Windows before arming must not report. Several
// offsets are tried, including 0 and 96 (the extremes that fit).
module tb_frame_sync;
  import bmdsp_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst, clear, arm, in_valid, found, out_valid;
  logic signed [15:0] x [96];
  logic [7:0] p1, pos;
  logic signed [23:0] peak;

  frame_sync dut (.*);

  localparam int A = 300;
  int sym [];

  task automatic run(input int off);
    int nbeats, t_in, t_found, exp_beat;
    int got_p1, got_pos;
    nbeats = 8;
    sym = new[nbeats * 96];
    for (int i = 0; i < nbeats * 96; i++) sym[i] = $urandom_range(0, 1) ? A : -A;
    // preamble placed at absolute symbol 2*96 + off
    for (int j = 0; j < 96; j++) sym[192 + off + j] = A * ((j < 64) ? pn_sym(j % 32) : -pn_sym(j % 32));
    // window (beat n-1, beat n) holds it fully when 96*(n-1) <= 192+off and 192+off+96 <= 96*(n+1)
    exp_beat = -1;
    for (int n = 1; n < nbeats; n++)
      if (96 * (n - 1) <= 192 + off && 192 + off + 96 <= 96 * (n + 1) && exp_beat < 0) exp_beat = n;
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0; arm = 1;
    @(negedge clk) arm = 0;
    t_found = -1; t_in = -1;
    fork
      begin
        for (int b = 0; b < nbeats; b++) begin
          for (int i = 0; i < 96; i++) x[i] = 16'(sym[b * 96 + i]);
          in_valid = 1;
          if (b == exp_beat) t_in = $time;
          @(negedge clk);
          in_valid = 0;
          @(negedge clk);
        end
      end
      begin
        repeat (200) begin
          @(posedge clk); #1;
          if (found && t_found < 0) begin t_found = $time; got_p1 = p1; got_pos = pos; end
        end
      end
    join
    checks += 3;
    if (t_found < 0) begin failures++; $display("FAIL off=%0d: not found", off); end
    else begin
      int e1 = 192 + off - 96 * (exp_beat - 1);
      if (got_p1 != e1) begin failures++; $display("FAIL off=%0d: p1 %0d expected %0d", off, got_p1, e1); end
      if (got_pos != (e1 * 9) / 8) begin failures++; $display("FAIL off=%0d: pos %0d", off, got_pos); end
      // the valid beat is sampled 5 ns after t_in; found is seen 1 ns after its edge
      if ((t_found - t_in - 6) / 10 + 1 != LAT_SYNC) begin
        failures++; $display("FAIL off=%0d: latency %0d", off, (t_found - t_in - 6) / 10 + 1);
      end
    end
  endtask

  initial begin
    rst = 1; clear = 0; arm = 0; in_valid = 0;
    for (int i = 0; i < 96; i++) x[i] = '0;
    repeat (120) @(negedge clk);
    rst = 0;
    // not armed: random data with a preamble must not report
    begin
      int f = 0;
      for (int b = 0; b < 6; b++) begin
        for (int i = 0; i < 96; i++) x[i] = 16'((b == 2 && i < 32) ? A * pn_sym(i) : ($urandom_range(0, 1) ? A : -A));
        in_valid = 1; @(negedge clk); in_valid = 0; @(negedge clk);
      end
      repeat (100) begin @(negedge clk); if (found) f++; end
      checks++;
      if (f != 0) begin failures++; $display("FAIL: reported while not armed"); end
    end
    run(0);
    run(96);
    run(37);
    for (int r = 0; r < 3; r++) run($urandom_range(0, 95));
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
