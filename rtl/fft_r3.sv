// Radix-3 butterfly of the pipelined 144-point FFT (one "3 FFT" box).
//
// Follows the paper's three-path structure: path 2 and path 3 are first
// multiplied by the twiddles A1 = W^k and A2 = W^2k; then s = b + c and
// d = b - c; out1 = a + s; the two other outputs are
//   out1 + A3*s -/+ A4'*d,  with A3 = cos(2*pi/3) - 1 and A4' = j*sin(2*pi/3).
// The paper prints A4 = j sin(2*pi/3) and twiddles e^{+j2pi k/N}; this block
// uses the sign pair that gives the standard forward DFT
// (X1 = a + b e^{-j2pi/3} + c e^{-j4pi/3}) and the conjugate pair for the
// inverse transform (INVERSE = 1). No scaling: outputs grow by up to 3x.
// Latency LAT = 14 cycles as in the paper (five register stages of datapath,
// the rest plain delay).
module fft_r3
  import bmdsp_pkg::*;
#(
  parameter int LAT     = 14,
  parameter bit INVERSE = 1'b0
) (
  input  logic  clk,
  input  cplx_t in1,
  input  cplx_t in2,
  input  cplx_t in3,
  input  coef_t a1,
  input  coef_t a2,
  output cplx_t out1,
  output cplx_t out2,
  output cplx_t out3
);
  localparam int XW = DW + 3;
  localparam logic signed [CW-1:0] A3 = CW'(-(3 * CONE) / 2);      // cos(2pi/3) - 1 = -1.5
  localparam logic signed [CW-1:0] S60 = CW'(14189);               // sin(2pi/3) in Q2.14

  cplx_t a0, b0, c0, a1q, b1q, c1q;
  logic signed [XW-1:0] a2r, a2i, sr, si, dr, di;
  logic signed [XW-1:0] y0r, y0i, msr, msi, mdr, mdi;
  cplx_t o1, o2, o3;
  logic signed [XW+CW-1:0] psr, psi, pdr, pdi;

  always_comb begin
    psr = sr * A3;
    psi = si * A3;
    pdr = dr * S60;
    pdi = di * S60;
  end

  always_ff @(posedge clk) begin
    a0 <= in1; b0 <= in2; c0 <= in3;
    // twiddle multipliers
    a1q <= a0;
    b1q <= cmul(b0, a1);
    c1q <= cmul(c0, a2);
    // first adder pair
    a2r <= XW'(a1q.re); a2i <= XW'(a1q.im);
    sr <= XW'(b1q.re) + XW'(c1q.re);
    si <= XW'(b1q.im) + XW'(c1q.im);
    dr <= XW'(b1q.re) - XW'(c1q.re);
    di <= XW'(b1q.im) - XW'(c1q.im);
    // out1 and the constant multipliers A3, A4
    y0r <= a2r + sr;
    y0i <= a2i + si;
    msr <= XW'(psr >>> CFRAC);
    msi <= XW'(psi >>> CFRAC);
    // -j*sin60*d (forward) : re = sin60*d.im, im = -sin60*d.re
    mdr <= XW'(pdi >>> CFRAC);
    mdi <= -XW'(pdr >>> CFRAC);
  end

  always_ff @(posedge clk) begin
    o1.re <= DW'(y0r);
    o1.im <= DW'(y0i);
    if (!INVERSE) begin
      o2.re <= DW'(y0r + msr + mdr);  o2.im <= DW'(y0i + msi + mdi);
      o3.re <= DW'(y0r + msr - mdr);  o3.im <= DW'(y0i + msi - mdi);
    end else begin
      o2.re <= DW'(y0r + msr - mdr);  o2.im <= DW'(y0i + msi - mdi);
      o3.re <= DW'(y0r + msr + mdr);  o3.im <= DW'(y0i + msi + mdi);
    end
  end

  delay_line #(.W(3*$bits(cplx_t)), .LAT(LAT-5)) u_pad (
    .clk(clk), .d({o1, o2, o3}), .q({out1, out2, out3}));
endmodule
