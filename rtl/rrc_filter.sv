// Frequency-domain root-raised-cosine filter on one beat of N bins.
//
// Bin k (signed frequency kk = k for k < N/2, k - N otherwise) sits at
// f = kk/N * SPS in units of the symbol rate, with SPS = SPS_NUM/SPS_DEN
// (1.125 in the paper). Its gain is the RRC amplitude response with roll-off
// ALPHA_PCT/100 (0.1 in the paper): 1 for |f| <= (1-a)/2,
// sqrt((1 + cos(pi/a * (|f| - (1-a)/2)))/2) up to (1+a)/2, 0 above. The gains
// are Q2.14 constants computed at elaboration; every bin gets one real
// multiplier. Latency LAT_RRC = 2 cycles (input and product registers).
module rrc_filter
  import bmdsp_pkg::*;
#(
  parameter int N         = 144,
  parameter int SPS_NUM   = 9,
  parameter int SPS_DEN   = 8,
  parameter int ALPHA_PCT = 10
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  cplx_t x [N],
  output logic  out_valid,
  output cplx_t y [N]
);
  function automatic coef_t gain(int k);
    real f, a, f1, f2, g;
    coef_t c;
    a  = real'(ALPHA_PCT) / 100.0;
    f  = real'((k < N / 2) ? k : k - N) / real'(N) * real'(SPS_NUM) / real'(SPS_DEN);
    if (f < 0.0) f = -f;
    f1 = (1.0 - a) / 2.0;
    f2 = (1.0 + a) / 2.0;
    if (f <= f1)      g = 1.0;
    else if (f <= f2) g = $sqrt((1.0 + $cos(3.14159265358979323846 / a * (f - f1))) / 2.0);
    else              g = 0.0;
    c.re = CW'($rtoi($floor(g * CONE + 0.5)));
    c.im = '0;
    return c;
  endfunction

  // all gains as one packed constant, so no real arithmetic reaches the logic
  function automatic logic [N*CW-1:0] mk_gains();
    logic [N*CW-1:0] r;
    coef_t c;
    for (int k = 0; k < N; k++) begin
      c = gain(k);
      r[k*CW +: CW] = c.re;
    end
    return r;
  endfunction
  localparam logic [N*CW-1:0] GAINS = mk_gains();

  cplx_t x_q [N];
  logic  v_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      v_q       <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v_q       <= in_valid;
      out_valid <= v_q;
    end
    x_q <= x;
    for (int k = 0; k < N; k++) y[k] <= cmul(x_q[k], '{re: GAINS[k*CW +: CW], im: '0});
  end
endmodule
