// End-to-end testbench of bmdsp_top at its default sizes.
//
// The DAC output is looped back to the ADC input through a model of the
// link: an integer delay of LINK_DELAY samples (so the burst starts at an
// arbitrary position inside a receive beat), a gain of 4 and a small
// uniform noise. Two bursts are sent, each with 11 preamble beats and 1354
// random payload beats (129,984 bits); the receiver is cleared between them.
// Every received 96-bit beat is compared with the transmitted payload beat
// of the same index. The test counts each mechanism of the design: burst
// detection with SPO hand-off, frame synchronisation, the MMSE tap load,
// DD-LMS updates, FIFO rate alignment (cycles where the 128-lane buses are
// idle) and the re-arming of the receiver for the second burst; a mechanism
// that never happens is a failure. The payload bit error count must be 0.
module tb_bmdsp_top;
  import bmdsp_pkg::*;
  localparam int LINK_DELAY = 45;
  localparam int NBURST = 2;
  localparam int PAY = 1354;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst, tx_start, tx_bits_req, tx_busy, dac_valid, rx_clear, adc_valid;
  logic [SYM_PER_BEAT-1:0] tx_bits, rx_bits;
  logic signed [DW-1:0] dac [ADC_LANES], adc [ADC_LANES];
  logic rx_bits_valid, tx_fifo_overflow, rx_fifo_overflow, rx_detected, rx_sync_found;
  logic signed [15:0] rx_tau0;
  logic [7:0] rx_sync_pos;
  logic rx_w_loaded, rx_lms_update;
  logic [39:0] rx_lms_err_pwr;
  logic signed [19:0] rx_tau_acq, rx_tau_data;

  bmdsp_top dut (.*);

  // ---------------- link model: sample delay, gain, noise
  logic signed [DW-1:0] prev_dac [ADC_LANES];
  always_ff @(posedge clk) begin
    adc_valid <= dac_valid;
    if (dac_valid) begin
      for (int i = 0; i < ADC_LANES; i++) begin
        logic signed [DW-1:0] s;
        s = (i < LINK_DELAY) ? prev_dac[ADC_LANES - LINK_DELAY + i] : dac[i - LINK_DELAY];
        adc[i] <= DW'(4 * s + $signed($urandom_range(0, 8)) - 4);
      end
      prev_dac <= dac;
    end
  end

  // ---------------- payload source and scoreboard
  logic [SYM_PER_BEAT-1:0] sent [NBURST][PAY];
  int n_sent [NBURST], n_rcv [NBURST];
  int burst_tx = 0, burst_rx = 0;
  int bit_err = 0, beats_cmp = 0;
  int n_det = 0, n_sync = 0, n_wload = 0, n_lms = 0, n_gap = 0;

  always_ff @(posedge clk) begin
    if (!rst) begin
      if (tx_bits_req) begin
        sent[burst_tx][n_sent[burst_tx]] <= tx_bits;
        n_sent[burst_tx] <= n_sent[burst_tx] + 1;
      end
      tx_bits <= {$urandom, $urandom, $urandom};
      if (rx_bits_valid && n_rcv[burst_rx] < PAY) begin
        bit_err   <= bit_err + $countones(rx_bits ^ sent[burst_rx][n_rcv[burst_rx]]);
        beats_cmp <= beats_cmp + 1;
        n_rcv[burst_rx] <= n_rcv[burst_rx] + 1;
      end
      if (rx_detected)   n_det++;
      if (rx_sync_found) n_sync++;
      if (rx_w_loaded)   n_wload++;
      if (rx_lms_update) n_lms++;
      if (tx_busy && !dac_valid) n_gap++;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    rst = 1; tx_start = 0; rx_clear = 0; tx_bits = '0;
    for (int b = 0; b < NBURST; b++) begin n_sent[b] = 0; n_rcv[b] = 0; end
    for (int i = 0; i < ADC_LANES; i++) prev_dac[i] = '0;
    repeat (300) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int b = 0; b < NBURST; b++) begin
      int t0;
      repeat (50) @(negedge clk);
      burst_tx = b;
      burst_rx = b;
      tx_start = 1;
      @(negedge clk) tx_start = 0;
      t0 = 0;
      while (n_rcv[b] < PAY && t0 < 3000) begin
        @(negedge clk);
        t0++;
      end
      $display("burst %0d: sent %0d beats, received %0d, bit errors so far %0d, sync pos %0d, tau0 %0d",
               b, n_sent[b], n_rcv[b], bit_err, rx_sync_pos, rx_tau0);
      check(n_rcv[b] == PAY, "all payload beats received");
      while (tx_busy) @(negedge clk);
      repeat (400) @(negedge clk);
      rx_clear = 1;
      @(negedge clk) rx_clear = 0;
    end
    check(bit_err == 0, $sformatf("payload bit errors %0d over %0d beats", bit_err, beats_cmp));
    check(n_det == NBURST, $sformatf("burst detection count %0d", n_det));
    check(n_sync == NBURST, $sformatf("frame synchronisation count %0d", n_sync));
    check(n_wload == NBURST, $sformatf("MMSE tap loads %0d", n_wload));
    check(n_lms > 0, $sformatf("DD-LMS updates %0d", n_lms));
    check(n_gap > 0, $sformatf("FIFO rate-alignment idle cycles %0d", n_gap));
    check(!tx_fifo_overflow && !rx_fifo_overflow, "no FIFO overflow");
    $display("mechanisms: detect=%0d sync=%0d mmse_load=%0d lms_updates=%0d fifo_idle=%0d rearm=%0d",
             n_det, n_sync, n_wload, n_lms, n_gap, NBURST - 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (9000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
