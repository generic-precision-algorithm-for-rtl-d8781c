// tb_scale_comp -- self-checking test of the scale-factor compensation stage.
//
// Four lanes with the compensation constants of the four DCT rotator gains
// (round(2^16 / (2 G)) for G = 1.41421, 1.58427, 1.03292, 1.12674, computed here
// from those gains) are fed random values. Each output must equal
// floor(d * C / 2^16 + 1/2), evaluated in real arithmetic, one clock later.
module tb_scale_comp;
  localparam int N  = 4;
  localparam int W  = 24;
  localparam int CF = 16;
  localparam real GAIN [N] = '{1.4142135623730951, 1.5842723278960198,
                               1.032915714499372, 1.126735310851376};
  function automatic int coef(int k);
    return int'($floor(65536.0 / (2.0 * GAIN[k]) + 0.5));
  endfunction
  localparam int COEF [N] = '{coef(0), coef(1), coef(2), coef(3)};

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  logic signed [W-1:0] d_i [N];
  logic signed [W-1:0] d_o [N];
  int prev [N];

  scale_comp #(.N(N), .W(W), .CF(CF), .COEF(COEF)) dut (.clk, .rst_n, .in_valid, .d_i, .out_valid, .d_o);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real e;
    for (int k = 0; k < N; k++) d_i[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      in_valid = 1'b1;
      for (int k = 0; k < N; k++) begin
        d_i[k] = (n == 0) ? W'((1 << 22) - 1) : (n == 1) ? W'(-(1 << 22))
                 : W'($signed($urandom_range(0, 1 << 23)) - (1 << 22));
        prev[k] = int'(d_i[k]);
      end
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!out_valid) begin failures++; $display("out_valid missing"); end
      for (int k = 0; k < N; k++) begin
        e = $floor(real'(prev[k]) * real'(COEF[k]) / 65536.0 + 0.5);
        checks++;
        if (real'(d_o[k]) != e) begin
          failures++;
          $display("lane %0d: in %0d got %0d expected %0.0f", k, prev[k], d_o[k], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
