// Frame (burst) detection on Preamble A.
//
// Preamble A is the alternating pattern 0101..., a tone at half the baud rate
// that lands on bin K = N/(2*sps) (and its mirror N-K) of the 144-point FFT.
// For every beat the block computes the power re^2 + im^2 of bins
// 0..NSRCH-1 (the non-mirrored half of the real signal's spectrum: 72 bins)
// and finds the strongest one with a binary comparison tree of 7 layers
// (72, 36, 18, 9, 5, 3, 2 -> 1), one register per layer. The burst is
// declared present when the winner lies within K +- TOL and its power is at
// least PMIN. The paper fixes the tree and its total latency (29 cycles,
// with margin); the tolerance and the power floor are this design's choices
// (the paper says only "frequency points around N/(2*sps)").
// Latency LAT = 29 cycles from `x` to `out_valid` / `detect`.
module frame_detect
  import bmdsp_pkg::*;
#(
  parameter int N     = 144,
  parameter int NSRCH = 72,
  parameter int K     = 64,
  parameter int TOL   = 1,
  parameter int LAT   = 29,
  parameter longint PMIN = 1000000
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  cplx_t       x [N],
  output logic        out_valid,
  output logic        detect,
  output logic [7:0]  peak_bin,
  output logic [32:0] peak_pwr
);
  typedef struct packed {
    logic [32:0] pwr;
    logic [7:0]  idx;
  } cand_t;

  function automatic int lvl_cnt(int l);
    int c = NSRCH;
    for (int i = 0; i < l; i++) c = (c + 1) / 2;
    return c;
  endfunction

  function automatic int n_levels();
    int l = 0;
    while (lvl_cnt(l) > 1) l++;
    return l;
  endfunction

  localparam int NL = n_levels();   // 7 for 72 bins

  cand_t tree [NL+1][NSRCH];
  logic  vld  [NL+1];

  // level 0: bin powers (registered)
  always_ff @(posedge clk) begin
    for (int k = 0; k < NSRCH; k++) begin
      tree[0][k].pwr <= 33'(x[k].re * x[k].re) + 33'(x[k].im * x[k].im);
      tree[0][k].idx <= 8'(k);
    end
    vld[0] <= rst ? 1'b0 : in_valid;
  end

  for (genvar l = 0; l < NL; l++) begin : g_lvl
    localparam int CIN  = lvl_cnt(l);
    localparam int COUT = lvl_cnt(l + 1);
    always_ff @(posedge clk) begin
      for (int i = 0; i < COUT; i++) begin
        if (2 * i + 1 < CIN)
          tree[l+1][i] <= (tree[l][2*i+1].pwr > tree[l][2*i].pwr) ? tree[l][2*i+1] : tree[l][2*i];
        else
          tree[l+1][i] <= tree[l][2*i];
      end
      vld[l+1] <= rst ? 1'b0 : vld[l];
    end
    for (genvar i = COUT; i < NSRCH; i++) begin : g_unused
      assign tree[l+1][i] = '0;
    end
  end

  logic det_c;
  assign det_c = (int'(tree[NL][0].idx) >= K - TOL) && (int'(tree[NL][0].idx) <= K + TOL) &&
                 (tree[NL][0].pwr >= 33'(PMIN));

  // pad to the paper's 29 cycles: 1 (power) + NL (tree) + rest
  delay_line #(.W(1 + 1 + 8 + 33), .LAT(LAT - 1 - NL)) u_pad (
    .clk(clk),
    .d({vld[NL], det_c & vld[NL], tree[NL][0].idx, tree[NL][0].pwr}),
    .q({out_valid, detect, peak_bin, peak_pwr}));
endmodule
