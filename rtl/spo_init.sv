// Feed-forward initial sampling-phase-offset (SPO) estimation on Preamble A,
// with the "judge" that hands the estimate to the timing-recovery loop.
//
// For every beat of the 144-point spectrum X (after RRC) it forms
// P = X(K) * conj(X(N-K)), K = N/(2*sps) = 64, and
//   tau0 = sps/(2*pi) * arg(P)
// (paper Eq. 1). arg() is a CORDIC returning turns, and the multiplication by
// sps = 1.125 then gives tau0 in samples, here as signed Q4.12. The estimate
// path is padded to LAT_DET + DLY cycles so that it lines up with the frame
// detector's decision delayed by DLY = 13 cycles (paper: "a delay of 13 clock
// cycles is added after the frame detection"). On the first detection after
// `clear` (or reset) the judge latches the estimate, pulses `tau0_valid`
// once and stays locked; `locked` re-arms only on `clear`. The product is
// scaled down by PSHIFT bits before the CORDIC (this design's choice).
module spo_init
  import bmdsp_pkg::*;
#(
  parameter int N       = 144,
  parameter int K       = 64,
  parameter int LAT_DET = 29,
  parameter int DLY     = 13,
  parameter int PSHIFT  = 8
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               clear,
  input  cplx_t              x [N],
  input  logic               detect,      // from frame_detect, LAT_DET after x
  output logic               tau0_valid,
  output logic signed [15:0] tau0,        // Q4.12 samples
  output logic               locked
);
  localparam int EST_LAT = LAT_DET + DLY;   // 42

  cplx_t xk, xnk;
  logic signed [DW*2:0] pr, pi_;
  logic signed [23:0] pr_q, pi_q;
  logic signed [15:0] ang;
  logic signed [31:0] tau_full;
  logic signed [15:0] tau_c, tau_est;
  logic det_d;

  // X(K) * conj(X(N-K))
  always_ff @(posedge clk) begin
    xk  <= x[K];
    xnk <= x[N-K];
  end
  always_comb begin
    pr  = (2*DW+1)'(xk.re * xnk.re) + (2*DW+1)'(xk.im * xnk.im);
    pi_ = (2*DW+1)'(xk.im * xnk.re) - (2*DW+1)'(xk.re * xnk.im);
  end
  always_ff @(posedge clk) begin
    pr_q <= 24'(pr >>> PSHIFT);
    pi_q <= 24'(pi_ >>> PSHIFT);
  end

  cordic_atan #(.IW(24), .AW(16), .ITER(16)) u_atan (
    .clk(clk), .x(pr_q), .y(pi_q), .angle(ang));

  // tau0 [Q12 samples] = 1.125 * angle [Q16 turns] / 16 = angle * 9 / 128
  always_comb begin
    tau_full = 32'(ang) * 32'sd9;
    tau_c    = 16'(tau_full >>> 7);
  end

  // 3 register stages above; pad to EST_LAT
  delay_line #(.W(16), .LAT(EST_LAT - 3)) u_pad (.clk(clk), .d(tau_c), .q(tau_est));
  delay_line #(.W(1),  .LAT(DLY))         u_dly (.clk(clk), .d(detect), .q(det_d));

  // judge
  always_ff @(posedge clk) begin
    if (rst || clear) begin
      locked     <= 1'b0;
      tau0_valid <= 1'b0;
      tau0       <= '0;
    end else begin
      tau0_valid <= 1'b0;
      if (det_d && !locked) begin
        locked     <= 1'b1;
        tau0_valid <= 1'b1;
        tau0       <= tau_est;
      end
    end
  end
endmodule
