// dct1d -- 8-point 1-D DCT built from butterflies and fixed-angle CORDICs.
//
// Computes X(k) = 1/2 C(k) sum_x x(n) cos((2n+1) k pi / 16), C(0) = 1/sqrt(2),
// C(k) = 1 otherwise, for one vector of eight samples per clock. The flow graph
// is the Loeffler-style CORDIC DCT:
//
//   1. dct_butterfly: s(k) = x(k)+x(7-k), d(k) = x(k)-x(7-k) and the even-part
//      butterfly t0 = s0+s3, t1 = s1+s2, t2 = s1-s2, t3 = s0-s3.
//   2. Six shift-and-add rotators (fixed_angle_cordic), all counter-clockwise
//      except the one marked cw:
//        4pi/16  on (t0, t1)  -> (X4, X0)
//        6pi/16  on (t3, t2)  -> (X6, X2)
//        7pi/16  on (d0, d3)  -> (p7, q7)
//        3pi/16  on (d1, d2)  -> (p3b, q3b)   cw
//        3pi/16  on (d0, d3)  -> (p3a, q3a)
//        pi/16   on (d1, d2)  -> (p1, q1)
//   3. scale_comp: every rotator output times 1/(2 G) of its rotator.
//   4. Odd output adders: X1 = q7 + p3b, X7 = p7 + q3b, X3 = p3a - q1,
//      X5 = q3a - p1; every result rounded to an integer.
//
// Number format: x are IN_W-bit signed integers. Inside, values carry FRAC_W
// fraction bits and four integer bits of headroom (W = IN_W + 4 + FRAC_W), which
// covers the butterfly growth (x4) and the largest rotator growth (sqrt(2) G
// <= 2.25). Outputs are OUT_W-bit signed integers; |X(k)| <= 4 max|x|, so
// OUT_W = IN_W + 3 always suffices.
//
// Timing: fully pipelined, one input vector per clock, latency four clocks
// (butterfly, rotators, compensation, output adders), out_valid follows in_valid.
// Synchronous active-low reset clears the pipeline.
//
// The rotation angles, the micro-rotation lists (precision PREC), the adder /
// subtractor kind of each odd output and the three-part structure (butterfly,
// CORDIC rotation, scaling) follow the paper. Which difference pair feeds which
// odd rotator and the direction of each rotator were worked out from the DCT
// matrix. Applying the compensation before the odd adders (the two rotators
// summed into one output have different gains), the fixed-point format and the
// pipeline registers are this design's choices.
module dct1d
  import dct_cordic_pkg::*;
#(
  parameter int    IN_W   = 8,
  parameter int    OUT_W  = 11,
  parameter int    FRAC_W = 12,
  parameter prec_e PREC   = PREC_1E3
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  x [8],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] X [8]
);

  localparam int W  = IN_W + 4 + FRAC_W;
  localparam int CF = 16;
  localparam int C_PI4  = comp_coef(ANG_PI4,   PREC, CF);
  localparam int C_3PI8 = comp_coef(ANG_3PI8,  PREC, CF);
  localparam int C_PI16 = comp_coef(ANG_PI16,  PREC, CF);
  localparam int C_3P16 = comp_coef(ANG_3PI16, PREC, CF);
  // Lane order of the compensation stage: the six rotators' (x, y) pairs.
  localparam int COEF [12] = '{C_PI4, C_PI4, C_3PI8, C_3PI8, C_PI16, C_PI16,
                               C_3P16, C_3P16, C_3P16, C_3P16, C_PI16, C_PI16};

  // ---- stage 1: butterflies ----------------------------------------------
  logic signed [W-1:0] xw [8];
  logic signed [W-1:0] ev [4];
  logic signed [W-1:0] od [4];
  logic                bf_valid;

  always_comb begin
    for (int k = 0; k < 8; k++) xw[k] = W'(x[k]) <<< FRAC_W;
  end

  dct_butterfly #(.W(W)) u_bfly (
    .clk, .rst_n, .in_valid, .x(xw), .out_valid(bf_valid), .ev, .od
  );

  // ---- stage 2: fixed-angle CORDIC rotators --------------------------------
  logic signed [W-1:0] raw [12];
  logic [5:0]          rot_valid;

  fixed_angle_cordic #(.W(W), .ANGLE(ANG_PI4), .PREC(PREC), .CLOCKWISE(1'b0)) u_rot_4pi16 (
    .clk, .rst_n, .in_valid(bf_valid), .x_i(ev[0]), .y_i(ev[1]),
    .out_valid(rot_valid[0]), .x_o(raw[0]), .y_o(raw[1]));

  fixed_angle_cordic #(.W(W), .ANGLE(ANG_3PI8), .PREC(PREC), .CLOCKWISE(1'b0)) u_rot_6pi16 (
    .clk, .rst_n, .in_valid(bf_valid), .x_i(ev[3]), .y_i(ev[2]),
    .out_valid(rot_valid[1]), .x_o(raw[2]), .y_o(raw[3]));

  fixed_angle_cordic #(.W(W), .ANGLE(ANG_7PI16), .PREC(PREC), .CLOCKWISE(1'b0)) u_rot_7pi16 (
    .clk, .rst_n, .in_valid(bf_valid), .x_i(od[0]), .y_i(od[3]),
    .out_valid(rot_valid[2]), .x_o(raw[4]), .y_o(raw[5]));

  fixed_angle_cordic #(.W(W), .ANGLE(ANG_3PI16), .PREC(PREC), .CLOCKWISE(1'b1)) u_rot_3pi16_b (
    .clk, .rst_n, .in_valid(bf_valid), .x_i(od[1]), .y_i(od[2]),
    .out_valid(rot_valid[3]), .x_o(raw[6]), .y_o(raw[7]));

  fixed_angle_cordic #(.W(W), .ANGLE(ANG_3PI16), .PREC(PREC), .CLOCKWISE(1'b0)) u_rot_3pi16_a (
    .clk, .rst_n, .in_valid(bf_valid), .x_i(od[0]), .y_i(od[3]),
    .out_valid(rot_valid[4]), .x_o(raw[8]), .y_o(raw[9]));

  fixed_angle_cordic #(.W(W), .ANGLE(ANG_PI16), .PREC(PREC), .CLOCKWISE(1'b0)) u_rot_pi16 (
    .clk, .rst_n, .in_valid(bf_valid), .x_i(od[1]), .y_i(od[2]),
    .out_valid(rot_valid[5]), .x_o(raw[10]), .y_o(raw[11]));

  // ---- stage 3: scale-factor compensation ----------------------------------
  logic signed [W-1:0] sc [12];
  logic                sc_valid;

  scale_comp #(.N(12), .W(W), .CF(CF), .COEF(COEF)) u_scale (
    .clk, .rst_n, .in_valid(rot_valid[0]), .d_i(raw), .out_valid(sc_valid), .d_o(sc)
  );

  // ---- stage 4: odd output adders and rounding ------------------------------
  logic signed [W-1:0] y [8];

  always_comb begin
    y[0] = sc[1];
    y[4] = sc[0];
    y[2] = sc[3];
    y[6] = sc[2];
    y[1] = sc[5] + sc[6];
    y[7] = sc[4] + sc[7];
    y[3] = sc[8] - sc[11];
    y[5] = sc[9] - sc[10];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      X         <= '{default: '0};
    end else begin
      out_valid <= sc_valid;
      for (int k = 0; k < 8; k++)
        X[k] <= OUT_W'((y[k] + (W'(1) <<< (FRAC_W - 1))) >>> FRAC_W);
    end
  end

  // All six rotators share one pipeline position.
  assert property (@(posedge clk) disable iff (!rst_n) (rot_valid == '0) || (rot_valid == '1));

endmodule
