// Frame adjustment: re-times the 108-lane receive stream to the frame.
//
// Every valid input beat is written to a beat memory of DEPTH entries and
// numbered (beat_idx, wraps). The synchronisation result refers to a pair of
// beats (sync_beat - 1, sync_beat) and to a sample offset sync_pos inside that
// 216-sample window where Preamble B starts. From then on, each valid input
// cycle emits one output beat taken from two consecutive stored beats,
//   out = {mem[rd], mem[rd+1]}[sync_pos +: NL],  rd = sync_beat - 1, +1, ...
// so the output beats begin exactly at Preamble B and continue through
// Preamble C and the payload. The memory covers the latency of the detection
// and synchronisation path (the paper implements such buffers in BRAM); the
// top checks that this latency fits in DEPTH beats. `clear` ends the frame.
// Latency: 1 cycle from a read to out.
module frame_adjust #(
  parameter int W     = 16,
  parameter int NL    = 108,
  parameter int DEPTH = 256
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     clear,
  input  logic                     in_valid,
  input  logic signed [W-1:0]      din [NL],
  output logic [$clog2(DEPTH)-1:0] beat_idx,   // index the next input beat gets
  input  logic                     sync_found,
  input  logic [$clog2(DEPTH)-1:0] sync_beat,
  input  logic [7:0]               sync_pos,
  output logic                     active,
  output logic                     out_valid,
  output logic signed [W-1:0]      dout [NL]
);
  localparam int AW = $clog2(DEPTH);

  logic [NL*W-1:0] mem [DEPTH];
  logic [AW-1:0]   rd;
  logic [7:0]      off;
  logic [2*NL*W-1:0] pair;

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int i = 0; i < NL; i++) mem[beat_idx][i*W +: W] <= din[i];
    end
  end

  assign pair = {mem[rd + AW'(1)], mem[rd]};

  always_ff @(posedge clk) begin
    if (rst) begin
      beat_idx  <= '0;
      active    <= 1'b0;
      out_valid <= 1'b0;
      rd        <= '0;
      off       <= '0;
    end else begin
      if (in_valid) beat_idx <= beat_idx + AW'(1);
      out_valid <= 1'b0;
      if (clear) begin
        active <= 1'b0;
      end else if (sync_found) begin
        active <= 1'b1;
        rd     <= sync_beat - AW'(1);
        off    <= sync_pos;
      end else if (active && in_valid) begin
        out_valid <= 1'b1;
        rd        <= rd + AW'(1);
      end
    end
    for (int i = 0; i < NL; i++) dout[i] <= pair[(int'(off) + i) * W +: W];
  end
endmodule
