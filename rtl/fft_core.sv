// Fully parallel, pipelined FFT / IFFT of N = 2^N2 * 3^N3 points.
//
// One beat of N complex samples enters per clock (when in_valid) and one
// transformed beat leaves LAT cycles later. The transform is built as in the
// paper's Fig. 5: N2 radix-2 layers of N/2 butterflies followed by N3 radix-3
// layers of N/3 butterflies (decimation in time). 128 points = 7 radix-2
// layers (4 + 6*7 = 46 cycles); 144 points = 4 radix-2 + 2 radix-3 layers
// (4 + 3*7 + 2*14 = 53 cycles); 8 points = 3 radix-2 layers (18 cycles).
// The input is wired in mixed-radix digit-reversed order, so both ports are
// in natural order. In layer s with radix R, sub-transforms of size L (the
// product of the earlier radices) are merged into size L*R:
//   out[b*L*R + q*L + k] = sum_p W_{L*R}^{p*k} W_R^{p*q} in[b*L*R + p*L + k].
// Scaling: every radix-2 layer divides by 2 (SHIFT2 = 1), radix-3 layers do
// not scale (SHIFT3 is fixed at 0), so the 128-point transform is DFT/128 (the
// inverse is the exact IDFT) and the 144-point transform is DFT/16.
// The twiddles are computed at elaboration from cos/sin, standing in for the
// fixed-coefficient multipliers the paper uses.
module fft_core
  import bmdsp_pkg::*;
#(
  parameter int N2      = 7,
  parameter int N3      = 0,
  parameter bit INVERSE = 1'b0,
  parameter int SHIFT2  = 1
) (
  input  logic  clk,
  input  logic  in_valid,
  input  cplx_t x [(2**N2)*(3**N3)],
  output logic  out_valid,
  output cplx_t y [(2**N2)*(3**N3)]
);
  localparam int N  = (2**N2) * (3**N3);
  localparam int NS = N2 + N3;
  localparam int LAT = (N2 > 0 ? 4 + 7 * (N2 - 1) : 0) + 14 * N3;

  function automatic int radix(int s);
    return (s < N2) ? 2 : 3;
  endfunction

  function automatic int span(int s);   // L: size of the sub-transforms entering layer s
    int l = 1;
    for (int i = 0; i < s; i++) l *= radix(i);
    return l;
  endfunction

  // position of input sample n in the digit-reversed layout
  function automatic int dr_pos(int n);
    int pos = 0, size = N, m = n;
    for (int s = NS - 1; s >= 0; s--) begin
      size = size / radix(s);
      pos += (m % radix(s)) * size;
      m = m / radix(s);
    end
    return pos;
  endfunction

  cplx_t stg [NS+1][N];

  for (genvar n = 0; n < N; n++) begin : g_in
    assign stg[0][dr_pos(n)] = x[n];
  end

  for (genvar s = 0; s < NS; s++) begin : g_layer
    localparam int R = radix(s);
    localparam int L = span(s);
    for (genvar g = 0; g < N / R; g++) begin : g_bf
      localparam int B    = g / L;
      localparam int K    = g % L;
      localparam int BASE = B * L * R + K;
      if (R == 2) begin : g_r2
        fft_r2 #(.LAT(s == 0 ? 4 : 7), .TRIVIAL(s == 0), .SHIFT(SHIFT2)) u_bf (
          .clk (clk),
          .in1 (stg[s][BASE]),
          .in2 (stg[s][BASE + L]),
          .a1  (twiddle(K, 2 * L, INVERSE)),
          .out1(stg[s+1][BASE]),
          .out2(stg[s+1][BASE + L]));
      end else begin : g_r3
        fft_r3 #(.LAT(14), .INVERSE(INVERSE)) u_bf (
          .clk (clk),
          .in1 (stg[s][BASE]),
          .in2 (stg[s][BASE + L]),
          .in3 (stg[s][BASE + 2 * L]),
          .a1  (twiddle(K, 3 * L, INVERSE)),
          .a2  (twiddle(2 * K, 3 * L, INVERSE)),
          .out1(stg[s+1][BASE]),
          .out2(stg[s+1][BASE + L]),
          .out3(stg[s+1][BASE + 2 * L]));
      end
    end
  end

  assign y = stg[NS];

  delay_line #(.W(1), .LAT(LAT)) u_vld (.clk(clk), .d(in_valid), .q(out_valid));
endmodule
