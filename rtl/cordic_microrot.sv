// cordic_microrot -- one CORDIC micro-rotation (shift-and-add stage).
//
// Rotates the vector (x, y) by sigma * atan(2^-SHIFT) without the cos() factor:
//     x_o = x_i - SIGN * (y_i >>> SHIFT)
//     y_o = y_i + SIGN * (x_i >>> SHIFT)
// so the vector also grows by sqrt(1 + 2^-2 SHIFT); that growth is removed later
// by the scale-factor compensation stage. One subtract-or-add per output and two
// constant shifts, no multiplier.
//
// Interface: W-bit two's-complement x_i, y_i in, x_o, y_o out; purely
// combinational, no clock. SHIFT is the micro-rotation index i, SIGN its
// direction (+1 counter-clockwise, -1 clockwise).
//
// The shift-and-add form and the sign pattern (subtract on x, add on y) are
// those of the classic CORDIC iteration. Making i and sigma elaboration-time
// parameters (a fixed-angle rotator never changes them) and truncating the
// shifted value toward minus infinity are this design's choices. The caller
// sizes W so that the vector cannot overflow.
module cordic_microrot #(
  parameter int W     = 24,
  parameter int SHIFT = 0,
  parameter int SIGN  = 1
) (
  input  logic signed [W-1:0] x_i,
  input  logic signed [W-1:0] y_i,
  output logic signed [W-1:0] x_o,
  output logic signed [W-1:0] y_o
);

  logic signed [W-1:0] x_sh, y_sh;

  always_comb begin
    x_sh = x_i >>> SHIFT;
    y_sh = y_i >>> SHIFT;
    if (SIGN >= 0) begin
      x_o = x_i - y_sh;
      y_o = y_i + x_sh;
    end else begin
      x_o = x_i + y_sh;
      y_o = y_i - x_sh;
    end
  end

endmodule
