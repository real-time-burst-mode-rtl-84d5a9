// PAM2 demapper of the receiver: drops the first OV samples of the NL-sample
// time-domain beat that leaves the final 128-point IFFT (the 32-symbol
// overlap) and slices the real part of the remaining NL-OV symbols at zero:
// bit i = 1 when sample OV+i is positive. Latency: 1 cycle.
module pam2_demap
  import bmdsp_pkg::*;
#(
  parameter int NL = 128,
  parameter int OV = 32
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  input  cplx_t            z [NL],
  output logic             out_valid,
  output logic [NL-OV-1:0] bits
);
  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= in_valid;
    for (int i = 0; i < NL - OV; i++) bits[i] <= (z[OV + i].re > 0);
  end
endmodule
