// Self-checking testbench of fft_core: a 144-point forward transform
// (4 radix-2 + 2 radix-3 layers), a 128-point inverse transform and an
// 8-point forward transform are fed random beats; each output beat is
// compared with a direct DFT computed in real arithmetic, scaled as the core
// scales (DFT/16, IDFT, DFT/8), and the pipeline latency is checked against
// 53, 46 and 18 cycles.
module tb_fft_core;
  localparam real PI = 3.14159265358979323846;
  import bmdsp_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NA = 144, NB = 128, NC = 8;
  cplx_t xa [NA], ya [NA], xb [NB], yb [NB], xc [NC], yc [NC];
  logic va, vb, vc, voa, vob, voc;

  fft_core #(.N2(4), .N3(2), .INVERSE(0)) u_a (.clk, .in_valid(va), .x(xa), .out_valid(voa), .y(ya));
  fft_core #(.N2(7), .N3(0), .INVERSE(1)) u_b (.clk, .in_valid(vb), .x(xb), .out_valid(vob), .y(yb));
  fft_core #(.N2(3), .N3(0), .INVERSE(0)) u_c (.clk, .in_valid(vc), .x(xc), .out_valid(voc), .y(yc));

  task automatic check_dft(input int n, input cplx_t xin [], input cplx_t yout [], input real scale, input bit inv, input int tol);
    real er, ei, ang;
    int bad = 0;
    for (int k = 0; k < n; k++) begin
      er = 0; ei = 0;
      for (int m = 0; m < n; m++) begin
        ang = (inv ? 2.0 : -2.0) * PI * real'((k * m) % n) / real'(n);
        er += real'(xin[m].re) * $cos(ang) - real'(xin[m].im) * $sin(ang);
        ei += real'(xin[m].re) * $sin(ang) + real'(xin[m].im) * $cos(ang);
      end
      er *= scale; ei *= scale;
      if ((er - real'(yout[k].re)) ** 2 + (ei - real'(yout[k].im)) ** 2 > real'(tol * tol)) begin bad++; if (bad < 3) $display("  k=%0d exp %f %f got %0d %0d", k, er, ei, yout[k].re, yout[k].im); end
    end
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL N=%0d inv=%0d: %0d bins out of tolerance", n, inv, bad);
    end
  endtask

  initial begin
    cplx_t sa [], sb [], sc [], oa [], ob [], oc [];
    int t0, ta, tb_, tc;
    sa = new[NA]; sb = new[NB]; sc = new[NC]; oa = new[NA]; ob = new[NB]; oc = new[NC];
    for (int rep = 0; rep < 3; rep++) begin
      va = 0; vb = 0; vc = 0;
      for (int i = 0; i < NA; i++) begin
        xa[i].re = DW'($signed($urandom_range(0, 4000)) - 2000);
        xa[i].im = (rep == 0) ? '0 : DW'($signed($urandom_range(0, 4000)) - 2000);
        sa[i] = xa[i];
      end
      for (int i = 0; i < NB; i++) begin
        xb[i].re = DW'($signed($urandom_range(0, 400)) - 200);
        xb[i].im = DW'($signed($urandom_range(0, 400)) - 200);
        sb[i] = xb[i];
      end
      for (int i = 0; i < NC; i++) begin
        xc[i].re = DW'($signed($urandom_range(0, 4000)) - 2000);
        xc[i].im = DW'($signed($urandom_range(0, 4000)) - 2000);
        sc[i] = xc[i];
      end
      @(negedge clk); va = 1; vb = 1; vc = 1; t0 = 0; ta = -1; tb_ = -1; tc = -1;
      @(negedge clk); va = 0; vb = 0; vc = 0;
      for (int c = 1; c < 80; c++) begin
        if (voa) begin ta = c; for (int i = 0; i < NA; i++) oa[i] = ya[i]; end
        if (vob) begin tb_ = c; for (int i = 0; i < NB; i++) ob[i] = yb[i]; end
        if (voc) begin tc = c; for (int i = 0; i < NC; i++) oc[i] = yc[i]; end
        @(negedge clk);
      end
      checks += 3;
      if (ta != 53) begin failures++; $display("FAIL 144-FFT latency %0d", ta); end
      if (tb_ != 46) begin failures++; $display("FAIL 128-IFFT latency %0d", tb_); end
      if (tc != 18) begin failures++; $display("FAIL 8-FFT latency %0d", tc); end
      check_dft(NA, sa, oa, 1.0 / 16.0, 0, 16);
      check_dft(NB, sb, ob, 1.0 / 128.0, 1, 4);
      check_dft(NC, sc, oc, 1.0 / 8.0, 0, 4);
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
