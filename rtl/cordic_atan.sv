// Angle of a complex number (the "Actan" box of the SPO estimator).
//
// CORDIC in vectoring mode: the vector is first folded into the right half
// plane (adding +-1/2 turn), then ITER micro-rotations drive y to zero while
// the rotation angles atan(2^-i) are summed. The angle is returned in turns,
// signed Q0.AW (-0.5 .. 0.5 turn = -pi .. pi). The iterations are
// combinational and the result is registered: latency 1 cycle.
module cordic_atan #(
  parameter int IW   = 24,
  parameter int AW   = 16,
  parameter int ITER = 16
) (
  input  logic                 clk,
  input  logic signed [IW-1:0] x,
  input  logic signed [IW-1:0] y,
  output logic signed [AW-1:0] angle
);

  function automatic logic signed [AW+1:0] atan_tab(int i);
    return (AW+2)'($rtoi($floor($atan(1.0 / (2.0 ** i)) / (2.0 * 3.14159265358979323846) * (2.0 ** AW) + 0.5)));
  endfunction
  function automatic logic [ITER*(AW+2)-1:0] mk_tab();
    logic [ITER*(AW+2)-1:0] r;
    for (int i = 0; i < ITER; i++) r[i*(AW+2) +: AW+2] = atan_tab(i);
    return r;
  endfunction
  localparam logic [ITER*(AW+2)-1:0] ATAN_TAB = mk_tab();

  logic signed [IW+1:0] xr, yr;
  logic signed [AW+1:0] z;

  always_comb begin
    xr = (IW+2)'(x);
    yr = (IW+2)'(y);
    z  = '0;
    if (x < 0) begin
      xr = -(IW+2)'(x);
      yr = -(IW+2)'(y);
      z  = (y >= 0) ? (AW+2)'(1 << (AW - 1)) : -(AW+2)'(1 << (AW - 1));
    end
    for (int i = 0; i < ITER; i++) begin
      logic signed [IW+1:0] xs, ys;
      xs = xr >>> i;
      ys = yr >>> i;
      if (yr > 0) begin
        xr = xr + ys;
        yr = yr - xs;
        z  = z + $signed(ATAN_TAB[i*(AW+2) +: AW+2]);
      end else begin
        xr = xr - ys;
        yr = yr + xs;
        z  = z - $signed(ATAN_TAB[i*(AW+2) +: AW+2]);
      end
    end
  end

  always_ff @(posedge clk) angle <= AW'(z);
endmodule
