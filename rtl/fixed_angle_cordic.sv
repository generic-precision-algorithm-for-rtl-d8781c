// fixed_angle_cordic -- unfolded CORDIC rotator for one fixed angle.
//
// Rotates (x_i, y_i) by a constant angle, counter-clockwise or (CLOCKWISE=1)
// clockwise, using only shifts and adds. The angle is approximated by the
// micro-rotation list of dct_cordic_pkg for angle ANGLE at precision PREC; each
// list entry becomes one cordic_microrot stage and the stages are chained
// combinationally (the "unfolded" flow graph: for pi/16 at P = 1e-4 that is five
// stages with shifts 2, 4, 6, 9, 13 and directions + - + - +). The 7pi/16 rotator
// starts with an exact quarter turn, (x, y) -> (-y, x), then runs the pi/16
// list in the opposite direction.
//
// The output is NOT gain compensated: x_o, y_o equal the rotated vector times
// dct_cordic_pkg::cordic_gain(ANGLE, PREC) (about 1.032 for pi/16, 1.127 for
// 3pi/16, 1.414 for pi/4 and 1.584 for 3pi/8).
//
// Timing: one register at the output, so out_valid and the result follow
// in_valid and the operands by one clock. Synchronous active-low reset clears
// out_valid and the data registers.
//
// The list-per-angle structure and the lists follow the paper's decomposition
// tables; the output register, the quarter-turn realisation of 7pi/16 and the
// arithmetic right shifts are this design's choices.
module fixed_angle_cordic
  import dct_cordic_pkg::*;
#(
  parameter int     W         = 24,
  parameter angle_e ANGLE     = ANG_PI16,
  parameter prec_e  PREC      = PREC_1E3,
  parameter bit     CLOCKWISE = 1'b0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] x_i,
  input  logic signed [W-1:0] y_i,
  output logic                out_valid,
  output logic signed [W-1:0] x_o,
  output logic signed [W-1:0] y_o
);

  localparam int  NS      = num_steps(ANGLE, PREC);
  localparam bit  QUARTER = (ANGLE == ANG_7PI16);
  // Overall direction of the list: the 7pi/16 rotator runs pi/16 backwards.
  localparam int  DIR     = (CLOCKWISE ? -1 : 1) * (QUARTER ? -1 : 1);

  logic signed [W-1:0] xs [NS+1];
  logic signed [W-1:0] ys [NS+1];

  // Optional exact quarter turn in the rotator's own direction.
  always_comb begin
    if (!QUARTER) begin
      xs[0] = x_i;
      ys[0] = y_i;
    end else if (!CLOCKWISE) begin
      xs[0] = -y_i;
      ys[0] = x_i;
    end else begin
      xs[0] = y_i;
      ys[0] = -x_i;
    end
  end

  for (genvar k = 0; k < NS; k++) begin : g_step
    cordic_microrot #(
      .W    (W),
      .SHIFT(step_shift(ANGLE, k)),
      .SIGN (DIR * step_sign(ANGLE, k))
    ) u_step (
      .x_i(xs[k]), .y_i(ys[k]), .x_o(xs[k+1]), .y_o(ys[k+1])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      x_o       <= '0;
      y_o       <= '0;
    end else begin
      out_valid <= in_valid;
      x_o       <= xs[NS];
      y_o       <= ys[NS];
    end
  end

endmodule
