// tb_cordic_microrot -- self-checking test of one CORDIC micro-rotation stage.
//
// Three stages with different shift / direction parameters (i = 0 and sigma = +1,
// i = 3 and sigma = -1, i = 13 and sigma = +1) are driven with random and extreme
// operands. The reference is computed in real arithmetic: the shifted operand is
// floor(v / 2^i) and the results are x - sigma*floor(y/2^i), y + sigma*floor(x/2^i).
// The stage is combinational, so results are checked one step after the inputs
// change.
module tb_cordic_microrot;
  localparam int W = 24;
  int checks = 0, failures = 0;
  logic signed [W-1:0] x, y;
  logic signed [W-1:0] xo [3];
  logic signed [W-1:0] yo [3];
  localparam int SH [3] = '{0, 3, 13};
  localparam int SG [3] = '{1, -1, 1};

  cordic_microrot #(.W(W), .SHIFT(0),  .SIGN(1))  u0 (.x_i(x), .y_i(y), .x_o(xo[0]), .y_o(yo[0]));
  cordic_microrot #(.W(W), .SHIFT(3),  .SIGN(-1)) u1 (.x_i(x), .y_i(y), .x_o(xo[1]), .y_o(yo[1]));
  cordic_microrot #(.W(W), .SHIFT(13), .SIGN(1))  u2 (.x_i(x), .y_i(y), .x_o(xo[2]), .y_o(yo[2]));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_now();
    real ex, ey;
    for (int k = 0; k < 3; k++) begin
      ex = real'(x) - SG[k] * $floor(real'(y) / (2.0 ** SH[k]));
      ey = real'(y) + SG[k] * $floor(real'(x) / (2.0 ** SH[k]));
      checks++;
      if (real'(xo[k]) != ex || real'(yo[k]) != ey) begin
        failures++;
        $display("stage %0d: x=%0d y=%0d got (%0d,%0d) expected (%0.0f,%0.0f)",
                 k, x, y, xo[k], yo[k], ex, ey);
      end
    end
  endtask

  initial begin
    // Extreme operands first (kept within W-2 bits so the stage cannot overflow).
    x = 24'sd1 <<< 21; y = 24'sd0;        #1 check_now();
    x = 24'sd0;        y = -(24'sd1 <<< 21); #1 check_now();
    x = -24'sd1;       y = -24'sd1;       #1 check_now();
    x = 24'sd5;        y = -24'sd9;       #1 check_now();
    for (int n = 0; n < 2000; n++) begin
      x = W'($signed($urandom_range(0, 1 << 22)) - (1 << 21));
      y = W'($signed($urandom_range(0, 1 << 22)) - (1 << 21));
      #1 check_now();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
