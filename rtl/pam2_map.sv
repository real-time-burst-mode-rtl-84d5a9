// PAM2 mapper of the transmitter: each of the NB bits of a beat becomes one
// real symbol, +AMP for 1 and -AMP for 0. When `en` is low (no burst) the
// symbols are 0, i.e. the transmitter is silent between bursts. The
// amplitude is this design's choice. Latency: 1 cycle.
module pam2_map #(
  parameter int W   = 16,
  parameter int NB  = 96,
  parameter int AMP = 8192
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                in_valid,
  input  logic                en,
  input  logic [NB-1:0]       bits,
  output logic                out_valid,
  output logic signed [W-1:0] sym [NB]
);
  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= in_valid;
    for (int i = 0; i < NB; i++)
      sym[i] <= !en ? '0 : (bits[i] ? W'(AMP) : -W'(AMP));
  end
endmodule
