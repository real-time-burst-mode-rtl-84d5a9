// Radix-2 butterfly of the pipelined FFT (one "2 FFT" box).
//
// out1 = (in1 + A1*in2) >> SHIFT, out2 = (in1 - A1*in2) >> SHIFT, with A1 a
// Q2.14 twiddle factor. As in the paper's radix-2 structure, the in2 path
// holds a fixed-coefficient multiplier and the in1 path is delayed to match;
// the paper's figure prints the pipeline as 2+2 (or 2+3) delays before the
// multiplier/adder, 1 after the multiplier and 1 after the adder: 7 cycles in
// all, and 4 cycles in the first layer where A1 = 1 and the multiplier is
// dropped (TRIVIAL = 1). Here the datapath registers once after the input,
// once after the multiplier and once after the add/subtract; the remaining
// cycles of LAT are plain delay so that the block has the paper's latency.
// SHIFT = 1 halves each output (scaling by 1/N over a radix-2 FFT).
module fft_r2
  import bmdsp_pkg::*;
#(
  parameter int LAT     = 7,
  parameter bit TRIVIAL = 1'b0,
  parameter int SHIFT   = 1
) (
  input  logic  clk,
  input  cplx_t in1,
  input  cplx_t in2,
  input  coef_t a1,
  output cplx_t out1,
  output cplx_t out2
);
  cplx_t a_q, b_q, a_m, b_m;
  cplx_t s_q, d_q;
  logic signed [DW:0] sr, si, dr, di;

  always_ff @(posedge clk) begin
    a_q <= in1;
    b_q <= in2;
    a_m <= a_q;
    b_m <= TRIVIAL ? b_q : cmul(b_q, a1);
  end

  // round half up before the scaling shift
  localparam logic signed [DW:0] RND = (SHIFT > 0) ? (DW+1)'(1 << (SHIFT - 1)) : '0;

  always_comb begin
    sr = (DW+1)'(a_m.re) + (DW+1)'(b_m.re) + RND;
    si = (DW+1)'(a_m.im) + (DW+1)'(b_m.im) + RND;
    dr = (DW+1)'(a_m.re) - (DW+1)'(b_m.re) + RND;
    di = (DW+1)'(a_m.im) - (DW+1)'(b_m.im) + RND;
  end

  always_ff @(posedge clk) begin
    s_q.re <= DW'(sr >>> SHIFT);
    s_q.im <= DW'(si >>> SHIFT);
    d_q.re <= DW'(dr >>> SHIFT);
    d_q.im <= DW'(di >>> SHIFT);
  end

  delay_line #(.W(2*$bits(cplx_t)), .LAT(LAT-3)) u_pad (
    .clk(clk), .d({s_q, d_q}), .q({out1, out2}));
endmodule
