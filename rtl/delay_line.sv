// Fixed-latency register pipeline: q is d delayed by LAT clock cycles
// (LAT = 0 is a plain wire). Used to align the side paths of the DSP
// (the "n-Delay" boxes of the block diagrams) with the main path.
module delay_line #(
  parameter int W   = 1,
  parameter int LAT = 1
) (
  input  logic         clk,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (LAT == 0) begin : g_wire
    assign q = d;
  end else begin : g_pipe
    logic [W-1:0] pipe [LAT];
    always_ff @(posedge clk) begin
      pipe[0] <= d;
      for (int i = 1; i < LAT; i++) pipe[i] <= pipe[i-1];
    end
    assign q = pipe[LAT-1];
  end
endmodule
