// tb_dct_butterfly -- self-checking test of the DCT input butterflies.
//
// Random and extreme eight-sample vectors are applied on consecutive clocks.
// Each registered result must be, one clock later, the even-part values
// (x0+x7)+(x3+x4), (x1+x6)+(x2+x5), (x1+x6)-(x2+x5), (x0+x7)-(x3+x4) and the
// odd-part differences x0-x7, x1-x6, x2-x5, x3-x4, computed here in integer
// arithmetic from a copy of the inputs.
module tb_dct_butterfly;
  localparam int W = 16;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  logic signed [W-1:0] x  [8];
  logic signed [W-1:0] ev [4];
  logic signed [W-1:0] od [4];
  int prev [8];
  bit prev_valid = 1'b0;

  dct_butterfly #(.W(W)) dut (.clk, .rst_n, .in_valid, .x, .out_valid, .ev, .od);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_prev();
    int e [4], o [4];
    e[0] = (prev[0] + prev[7]) + (prev[3] + prev[4]);
    e[1] = (prev[1] + prev[6]) + (prev[2] + prev[5]);
    e[2] = (prev[1] + prev[6]) - (prev[2] + prev[5]);
    e[3] = (prev[0] + prev[7]) - (prev[3] + prev[4]);
    for (int k = 0; k < 4; k++) o[k] = prev[k] - prev[7-k];
    checks++;
    if (out_valid !== prev_valid) begin
      failures++; $display("out_valid %b expected %b", out_valid, prev_valid);
    end
    if (prev_valid) begin
      for (int k = 0; k < 4; k++) begin
        checks += 2;
        if (int'(ev[k]) != e[k]) begin failures++; $display("ev[%0d]=%0d expected %0d", k, ev[k], e[k]); end
        if (int'(od[k]) != o[k]) begin failures++; $display("od[%0d]=%0d expected %0d", k, od[k], o[k]); end
      end
    end
  endtask

  initial begin
    for (int k = 0; k < 8; k++) x[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      if (n > 0) check_prev();
      in_valid = (n % 7 != 3);
      for (int k = 0; k < 8; k++) begin
        if (n == 0)      x[k] = 16'sd2047;              // all at the top of the range
        else if (n == 1) x[k] = (k % 2) ? 16'sd2047 : -16'sd2048;
        else             x[k] = W'($signed($urandom_range(0, 4095)) - 2048);
        prev[k] = int'(x[k]);
      end
      prev_valid = in_valid;
    end
    @(negedge clk);
    check_prev();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
