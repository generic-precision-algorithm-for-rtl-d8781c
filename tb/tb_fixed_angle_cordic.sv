// tb_fixed_angle_cordic -- self-checking test of the unfolded fixed-angle rotator.
//
// Six rotators are instantiated: pi/16 at P = 1e-4 (five stages, shifts
// 2/4/6/9/13), 3pi/8 at both precisions, 7pi/16, a clockwise 3pi/16 and a
// clockwise pi/4. Each gets random vectors; its output must equal
// G * R(angle) * (x, y), with R the exact rotation by the nominal angle and G
// the CORDIC growth prod sqrt(1 + 2^-2i) (the G values below were computed
// separately, outside the design), within the angle error allowed by the
// precision plus a few LSB of shift truncation. The pi/16 rotator is also held
// against the published product of its five micro-rotation matrices,
// [1.013067933963612 -0.2015148886130191; 0.2015148886130191 1.013067933963612].
// out_valid and the result must appear exactly one clock after the input.
module tb_fixed_angle_cordic;
  import dct_cordic_pkg::*;
  localparam int W  = 24;
  localparam int NR = 6;
  localparam real PI = 3.14159265358979323846;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic signed [W-1:0] x, y;
  logic signed [W-1:0] xo [NR];
  logic signed [W-1:0] yo [NR];
  logic [NR-1:0] ov;

  // Nominal angle (signed: clockwise negative), growth G, allowed angle error.
  localparam real ANG [NR] = '{PI/16, 3*PI/8, 3*PI/8, 7*PI/16, -3*PI/16, -PI/4};
  localparam real GN  [NR] = '{1.0329157221951937, 1.5842723278960198, 1.584273130550771,
                               1.032915714499372, 1.126735310851376, 1.4142135623730951};
  localparam real PE  [NR] = '{1.5e-4, 1.0e-3, 2.0e-4, 1.0e-3, 1.0e-3, 1.0e-6};

  fixed_angle_cordic #(.W(W), .ANGLE(ANG_PI16),  .PREC(PREC_1E4), .CLOCKWISE(0)) u0 (.clk, .rst_n, .in_valid, .x_i(x), .y_i(y), .out_valid(ov[0]), .x_o(xo[0]), .y_o(yo[0]));
  fixed_angle_cordic #(.W(W), .ANGLE(ANG_3PI8),  .PREC(PREC_1E3), .CLOCKWISE(0)) u1 (.clk, .rst_n, .in_valid, .x_i(x), .y_i(y), .out_valid(ov[1]), .x_o(xo[1]), .y_o(yo[1]));
  fixed_angle_cordic #(.W(W), .ANGLE(ANG_3PI8),  .PREC(PREC_1E4), .CLOCKWISE(0)) u2 (.clk, .rst_n, .in_valid, .x_i(x), .y_i(y), .out_valid(ov[2]), .x_o(xo[2]), .y_o(yo[2]));
  fixed_angle_cordic #(.W(W), .ANGLE(ANG_7PI16), .PREC(PREC_1E3), .CLOCKWISE(0)) u3 (.clk, .rst_n, .in_valid, .x_i(x), .y_i(y), .out_valid(ov[3]), .x_o(xo[3]), .y_o(yo[3]));
  fixed_angle_cordic #(.W(W), .ANGLE(ANG_3PI16), .PREC(PREC_1E3), .CLOCKWISE(1)) u4 (.clk, .rst_n, .in_valid, .x_i(x), .y_i(y), .out_valid(ov[4]), .x_o(xo[4]), .y_o(yo[4]));
  fixed_angle_cordic #(.W(W), .ANGLE(ANG_PI4),   .PREC(PREC_1E3), .CLOCKWISE(1)) u5 (.clk, .rst_n, .in_valid, .x_i(x), .y_i(y), .out_valid(ov[5]), .x_o(xo[5]), .y_o(yo[5]));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // Compare all rotators' registered outputs against the inputs xi, yi.
  task automatic check_outputs(real xi, real yi);
    real ex, ey, tol;
    for (int r = 0; r < NR; r++) begin
      ex  = GN[r] * (xi * $cos(ANG[r]) - yi * $sin(ANG[r]));
      ey  = GN[r] * (xi * $sin(ANG[r]) + yi * $cos(ANG[r]));
      tol = GN[r] * $sqrt(xi * xi + yi * yi) * PE[r] + 16.0;
      checks++;
      if (!ov[r] || fabs(real'(xo[r]) - ex) > tol || fabs(real'(yo[r]) - ey) > tol) begin
        failures++;
        $display("rotator %0d: in (%0.0f,%0.0f) got (%0d,%0d) expected (%0.1f,%0.1f) tol %0.1f valid %b",
                 r, xi, yi, xo[r], yo[r], ex, ey, tol, ov[r]);
      end
    end
  endtask

  initial begin
    real xi, yi;
    x = '0; y = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    checks++;
    if (ov != '0) begin failures++; $display("out_valid set after reset"); end

    // Published matrix of the pi/16, P = 1e-4 rotator: input (2^18, 0).
    x = W'(1 << 18); y = '0; in_valid = 1'b1;
    @(negedge clk);
    in_valid = 1'b0;
    checks++;
    if (fabs(real'(xo[0]) - 1.013067933963612 * 262144.0) > 8.0 ||
        fabs(real'(yo[0]) - 0.2015148886130191 * 262144.0) > 8.0) begin
      failures++;
      $display("pi/16 matrix column: got (%0d,%0d)", xo[0], yo[0]);
    end
    @(negedge clk);
    checks++;
    if (ov != '0) begin failures++; $display("out_valid not one clock wide"); end

    for (int n = 0; n < 3000; n++) begin
      xi = real'($signed($urandom_range(0, 1 << 20)) - (1 << 19));
      yi = real'($signed($urandom_range(0, 1 << 20)) - (1 << 19));
      x = W'(longint'(xi)); y = W'(longint'(yi)); in_valid = 1'b1;
      @(negedge clk);
      check_outputs(xi, yi);
    end
    in_valid = 1'b0;

    // The micro-rotation lists reach their angles within the stated precision.
    checks++;
    if (fabs(table_angle(ANG_PI16, PREC_1E4) - PI/16) > 1e-4 ||
        fabs(table_angle(ANG_PI16, PREC_1E3) - PI/16) > 1e-3 ||
        fabs(table_angle(ANG_3PI16, PREC_1E3) - 3*PI/16) > 1e-4 ||
        fabs(table_angle(ANG_3PI8, PREC_1E3) - 3*PI/8) > 1e-3 ||
        fabs(table_angle(ANG_PI4, PREC_1E3) - PI/4) > 1e-9 ||
        fabs(table_angle(ANG_7PI16, PREC_1E3) - 7*PI/16) > 1e-3) begin
      failures++;
      $display("micro-rotation list misses its angle");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
