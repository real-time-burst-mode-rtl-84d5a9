// Overlap insertion ("Add Overlap"): each output beat is the last OV samples
// of the previous input beat followed by the IN_W samples of the current one,
// so a block transform of IN_W + OV points sees OV samples of history (96+32
// symbols at the transmitter, 108+36 samples at the receiver). The history is
// updated only on valid beats and is zero after reset. Latency: 1 cycle.
module overlap_add #(
  parameter int W    = 16,
  parameter int IN_W = 108,
  parameter int OV   = 36
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                in_valid,
  input  logic signed [W-1:0] din  [IN_W],
  output logic                out_valid,
  output logic signed [W-1:0] dout [IN_W + OV]
);
  logic signed [W-1:0] hist [OV];

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      for (int i = 0; i < OV; i++) hist[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int i = 0; i < OV; i++) hist[i] <= din[IN_W - OV + i];
    end
    for (int i = 0; i < OV; i++)   dout[i]      <= hist[i];
    for (int i = 0; i < IN_W; i++) dout[OV + i] <= din[i];
  end
endmodule
