// Fixed-latency signed divider, standing in for the pipelined divider IP the
// paper uses (39 cycles in the timing loop, 59 cycles in the MMSE estimator).
// q = (num * 2^FRAC) / den, truncated toward zero and saturated to QW bits;
// a zero denominator gives 0. The quotient is formed combinationally and then
// carried through LAT-1 registers plus the output register, so results appear
// exactly LAT cycles after the operands, one new result per cycle.
module pipe_div #(
  parameter int NW   = 32,
  parameter int DVW  = 32,
  parameter int QW   = 24,
  parameter int FRAC = 16,
  parameter int LAT  = 39
) (
  input  logic                  clk,
  input  logic signed [NW-1:0]  num,
  input  logic signed [DVW-1:0] den,
  output logic signed [QW-1:0]  q
);
  localparam int XW = NW + FRAC + 1;
  localparam logic signed [XW-1:0] QMAX = XW'((64'sd1 <<< (QW - 1)) - 1);
  localparam logic signed [XW-1:0] QMIN = -XW'(64'sd1 <<< (QW - 1));

  logic signed [XW-1:0] n_ext, d_ext, quo;
  logic signed [QW-1:0] q_c;

  always_comb begin
    n_ext = XW'(num) <<< FRAC;
    d_ext = XW'(den);
    quo   = (d_ext == 0) ? '0 : n_ext / d_ext;
    if (quo > QMAX)      q_c = QMAX[QW-1:0];
    else if (quo < QMIN) q_c = QMIN[QW-1:0];
    else                 q_c = quo[QW-1:0];
  end

  delay_line #(.W(QW), .LAT(LAT)) u_pipe (.clk(clk), .d(q_c), .q(q));
endmodule
