// Frame synchronisation on Preamble B at 1 sample per symbol.
//
// Preamble B is [Pn, Pn, -Pn] with Pn a 32-symbol +-1 sequence. Two
// successive 96-symbol beats are joined into a 192-symbol window. Stage 1
// forms the 161 sliding cross-correlations r(i) = sum_j Pn(j) x(i+j),
// i = 0..160, with adders and subtractors only (Pn is +-1); 18 cycles.
// Stage 2 places r in three 225-entry columns, shifted by 0, 32 and 64 with
// zeros elsewhere, and combines them with the preamble signs so that the
// three partial peaks add: c(j) = -r(j) + r(j-32) + r(j-64); 6 cycles.
// Only j = 64..160 (a whole preamble inside the window) is kept, and only
// when each of the three terms is at least 1/8 of the sum; otherwise c(j)
// is 0. This qualification is this design's choice: with a plain sum, a
// window holding two of the three Pn copies would also pass a fixed
// threshold and report the wrong window.
// Stage 3 is a binary tree of comparators (225 -> 113 -> ... -> 1, 8 layers)
// that keeps the larger value and its index; padded to 37 cycles, so a
// window's result appears LAT = 61 cycles after its second beat. A peak at
// j marks Preamble B starting at p1 = j - 64 in the window; the position at
// 1.125 samples per symbol is p = floor(p1 * 9 / 8).
// The search is armed by `arm` (frame detected) and reports the first window
// whose peak reaches both THRESH and 11/32 of the window's sum of |x|
// (`found` pulse), then disarms until `clear`. The threshold rule is this
// design's choice: the paper only shows the peak standing far above the
// other correlation values. The adaptive part makes it independent of the
// received amplitude.
module frame_sync
  import bmdsp_pkg::*;
#(
  parameter int NL     = 96,
  parameter int NX     = 161,
  parameter int THRESH = 3000
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               clear,
  input  logic               arm,
  input  logic               in_valid,
  input  logic signed [15:0] x [NL],
  output logic               found,
  output logic [7:0]         p1,
  output logic [7:0]         pos,
  output logic signed [23:0] peak,
  output logic               out_valid    // one per window, LAT after its 2nd beat
);
  localparam int NW = 2 * NL;          // 192
  localparam int NC = NX + 2 * PN_LEN; // 225

  typedef logic signed [PN_LEN-1:0] pn_t;
  function automatic pn_t pn_bits();
    pn_t b;
    for (int j = 0; j < PN_LEN; j++) b[j] = (pn_sym(j) > 0);
    return b;
  endfunction
  localparam pn_t PN = pn_bits();

  // window: previous beat then current beat
  logic signed [15:0] prev [NL];
  always_ff @(posedge clk) if (in_valid) prev <= x;

  // stage 1: sliding cross-correlations
  logic signed [21:0] r_c [NX], r_q [NX], r_d [NX];
  logic v1, v1d;
  always_comb begin
    for (int i = 0; i < NX; i++) begin
      logic signed [21:0] acc;
      acc = '0;
      for (int j = 0; j < PN_LEN; j++) begin
        logic signed [15:0] s;
        s = (i + j < NL) ? prev[i + j] : x[i + j - NL];
        acc = PN[j] ? acc + 22'(s) : acc - 22'(s);
      end
      r_c[i] = acc;
    end
  end
  always_ff @(posedge clk) begin
    r_q <= r_c;
    v1  <= rst ? 1'b0 : in_valid;
  end
  // pad stage 1 to 18 cycles
  logic signed [21:0] r_pipe [17][NX];
  logic v_pipe [17];
  always_ff @(posedge clk) begin
    r_pipe[0] <= r_q;
    v_pipe[0] <= rst ? 1'b0 : v1;
    for (int s = 1; s < 17; s++) begin
      r_pipe[s] <= r_pipe[s-1];
      v_pipe[s] <= rst ? 1'b0 : v_pipe[s-1];
    end
  end
  assign r_d = r_pipe[16];
  assign v1d = v_pipe[16];

  // stage 2: combine with [1, 1, -1] (6 cycles)
  logic signed [23:0] c_q [NC];
  logic v2;
  always_ff @(posedge clk) begin
    for (int j = 0; j < NC; j++) begin
      logic signed [23:0] a, b, c, sum;
      a = (j < NX) ? 24'(r_d[j]) : '0;
      b = (j >= PN_LEN && j - PN_LEN < NX) ? 24'(r_d[j - PN_LEN]) : '0;
      c = (j >= 2 * PN_LEN) ? 24'(r_d[j - 2 * PN_LEN]) : '0;
      // only j = 64..160 can hold a whole preamble in the window; each of
      // the three partial correlations must carry at least 1/8 of the sum
      // so a window holding only part of the preamble does not qualify
      sum = c + b - a;
      if (j >= 2 * PN_LEN && j < NX && (c <<< 3) >= sum && (b <<< 3) >= sum && ((-a) <<< 3) >= sum)
        c_q[j] <= sum;
      else
        c_q[j] <= '0;
    end
    v2 <= rst ? 1'b0 : v1d;
  end

  typedef struct packed {
    logic signed [23:0] val;
    logic [7:0]         idx;
  } cand_t;

  // pad stage 2 to 6 cycles
  cand_t s2p [5][NC];
  logic  v2p [5];
  always_ff @(posedge clk) begin
    for (int j = 0; j < NC; j++) s2p[0][j] <= '{val: c_q[j], idx: 8'(j)};
    v2p[0] <= rst ? 1'b0 : v2;
    for (int s = 1; s < 5; s++) begin
      s2p[s] <= s2p[s-1];
      v2p[s] <= rst ? 1'b0 : v2p[s-1];
    end
  end

  // stage 3: binary max tree, 8 layers, padded to 37 cycles
  function automatic int lvl_cnt(int l);
    int c = NC;
    for (int i = 0; i < l; i++) c = (c + 1) / 2;
    return c;
  endfunction
  localparam int NLV = 8;

  cand_t tree [NLV+1][NC];
  logic  tv [NLV+1];
  assign tree[0] = s2p[4];
  assign tv[0]   = v2p[4];
  // all layers in one process: each layer reads only the previous layer's
  // registers, entries beyond a layer's count stay unused
  always_ff @(posedge clk) begin
    for (int l = 0; l < NLV; l++) begin
      for (int i = 0; i < lvl_cnt(l + 1); i++)
        tree[l+1][i] <= (2 * i + 1 < lvl_cnt(l) && tree[l][2*i+1].val > tree[l][2*i].val) ?
                        tree[l][2*i+1] : tree[l][2*i];
      tv[l+1] <= rst ? 1'b0 : tv[l];
    end
  end

  cand_t best;
  logic  bv;
  delay_line #(.W($bits(cand_t) + 1), .LAT(37 - NLV)) u_s3pad (
    .clk(clk), .d({tree[NLV][0], tv[NLV]}), .q({best, bv}));

  // window magnitude sum(|x|) over the 192 symbols, aligned with `best`;
  // the adaptive threshold is 1/3 of it (about 64 A for +-A symbols, where
  // the full preamble peak is 96 A)
  logic [23:0] sabs_c, sabs_d;
  always_comb begin
    sabs_c = '0;
    for (int i = 0; i < NL; i++) begin
      sabs_c += (prev[i] < 0) ? 24'(-25'(prev[i])) : 24'(prev[i]);
      sabs_c += (x[i] < 0) ? 24'(-25'(x[i])) : 24'(x[i]);
    end
  end
  delay_line #(.W(24), .LAT(LAT_SYNC - 1)) u_sabs (.clk(clk), .d(sabs_c), .q(sabs_d));
  logic signed [25:0] thr;
  assign thr = 26'((27'(sabs_d) * 27'd11) >>> 5);

  // arm / report
  logic armed;
  logic [7:0] p1_c;
  logic [10:0] p9;
  always_comb begin
    p1_c = (best.idx >= 8'(2 * PN_LEN)) ? best.idx - 8'(2 * PN_LEN) : '0;
    p9   = 11'(p1_c) * 11'd9;
  end
  always_ff @(posedge clk) begin
    if (rst || clear) begin
      armed <= 1'b0;
      found <= 1'b0;
      p1 <= '0; pos <= '0; peak <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= bv;
      found     <= 1'b0;
      if (arm) armed <= 1'b1;
      if (bv) peak <= best.val;
      if (bv && armed && best.val >= 24'(THRESH) && 26'(best.val) >= thr) begin
        found <= 1'b1;
        armed <= 1'b0;
        p1    <= p1_c;
        pos   <= 8'(p9 >> 3);
      end
    end
  end
endmodule
