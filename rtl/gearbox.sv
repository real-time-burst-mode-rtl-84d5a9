// Parallelism-alignment FIFO ("FIFO" of the transmit and receive flows).
//
// Converts a stream of IN_W-sample beats into OUT_W-sample beats without
// dropping or reordering samples: 128 -> 108 lanes behind the ADC and
// 108 -> 128 lanes in front of the DAC. In the paper the two sides run on
// different clocks (220.32 MHz at 128 lanes, 261.12 MHz at 108 lanes, both
// 28.2 GS/s); this design uses one clock and a valid strobe on each side, so
// the wider side is valid on OUT_W/IN_W of the cycles on average. A sample
// buffer of 2*(IN_W + OUT_W) words is enough for any input pattern whose average
// rate does not exceed one output beat per cycle; `overflow` flags a
// violation. Latency: one cycle from the input beat that completes an output
// beat.
module gearbox #(
  parameter int W     = 16,
  parameter int IN_W  = 128,
  parameter int OUT_W = 108
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                in_valid,
  input  logic signed [W-1:0] din  [IN_W],
  output logic                out_valid,
  output logic signed [W-1:0] dout [OUT_W],
  output logic                overflow
);
  localparam int CAP = 2 * (IN_W + OUT_W);
  localparam int CW_ = $clog2(CAP + 1);

  logic signed [W-1:0] buf_q [CAP], buf_n [CAP];
  logic [CW_-1:0] cnt_q, cnt_n;
  logic emit;

  always_comb begin
    buf_n = buf_q;
    cnt_n = cnt_q;
    emit  = (cnt_q >= CW_'(OUT_W));
    if (emit) begin
      for (int i = 0; i < CAP; i++) buf_n[i] = (i + OUT_W < CAP) ? buf_q[i + OUT_W] : '0;
      cnt_n = cnt_q - CW_'(OUT_W);
    end
    if (in_valid) begin
      for (int i = 0; i < IN_W; i++)
        if (int'(cnt_n) + i < CAP) buf_n[int'(cnt_n) + i] = din[i];
      cnt_n = cnt_n + CW_'(IN_W);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt_q     <= '0;
      out_valid <= 1'b0;
      overflow  <= 1'b0;
      for (int i = 0; i < CAP; i++) buf_q[i] <= '0;
    end else begin
      buf_q     <= buf_n;
      cnt_q     <= (cnt_n > CW_'(CAP)) ? CW_'(CAP) : cnt_n;
      out_valid <= emit;
      if (cnt_n > CW_'(CAP)) overflow <= 1'b1;
    end
    if (emit) for (int i = 0; i < OUT_W; i++) dout[i] <= buf_q[i];
  end
endmodule
