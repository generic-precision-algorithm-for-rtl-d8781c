// tb_dct1d -- self-checking test of the CORDIC-based 8-point 1-D DCT.
//
// Two instances, one per precision (P = 1e-3, the default, and P = 1e-4), get
// the same stream of 8-bit vectors: extreme patterns (all +127, all -128,
// alternating, a single impulse per position) and random vectors, with random
// idle clocks in between. The reference is the DCT definition
// X(k) = 1/2 C(k) sum_n x(n) cos((2n+1) k pi / 16) in real arithmetic. Each
// output must lie within TOL of it and must appear exactly four clocks after its
// input. The largest error of each instance is printed.
module tb_dct1d;
  import dct_cordic_pkg::*;
  localparam int  IN_W  = 8;
  localparam int  OUT_W = 11;
  localparam int  LAT   = 4;
  localparam real TOL   = 1.0;
  localparam real PI    = 3.14159265358979323846;

  int checks = 0, failures = 0, cycle = 0;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [1:0] out_valid;
  logic signed [IN_W-1:0]  x [8];
  logic signed [OUT_W-1:0] X3 [8];
  logic signed [OUT_W-1:0] X4 [8];
  localparam int NV = 4000;
  real exp_mem [NV][8];
  int  tin_mem [NV];
  int  n_sent = 0, n_recv = 0;
  real max_err [2] = '{0.0, 0.0};

  dct1d #(.IN_W(IN_W), .OUT_W(OUT_W), .PREC(PREC_1E3)) dut3 (.clk, .rst_n, .in_valid, .x, .out_valid(out_valid[0]), .X(X3));
  dct1d #(.IN_W(IN_W), .OUT_W(OUT_W), .PREC(PREC_1E4)) dut4 (.clk, .rst_n, .in_valid, .x, .out_valid(out_valid[1]), .X(X4));

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

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

  // Output checker, sampled mid-cycle.
  always @(negedge clk) begin
    real e3, e4;
    if (rst_n && (out_valid != 2'b00)) begin
      checks++;
      if (out_valid != 2'b11 || n_recv >= n_sent) begin
        failures++;
        $display("unexpected output beat (valid %b)", out_valid);
      end else begin
        checks++;
        if (cycle - tin_mem[n_recv] != LAT) begin
          failures++;
          $display("latency %0d, expected %0d", cycle - tin_mem[n_recv], LAT);
        end
        for (int k = 0; k < 8; k++) begin
          checks += 2;
          e3 = fabs(real'(X3[k]) - exp_mem[n_recv][k]);
          e4 = fabs(real'(X4[k]) - exp_mem[n_recv][k]);
          if (e3 > max_err[0]) max_err[0] = e3;
          if (e4 > max_err[1]) max_err[1] = e4;
          if (e3 > TOL || e4 > TOL) begin
            failures++;
            $display("X(%0d): got %0d / %0d expected %0.3f", k, X3[k], X4[k], exp_mem[n_recv][k]);
          end
        end
        n_recv++;
      end
    end
  end

  task automatic send(int v [8]);
    real e;
    for (int k = 0; k < 8; k++) begin
      e = 0.0;
      for (int n = 0; n < 8; n++) e += v[n] * $cos((2 * n + 1) * k * PI / 16.0);
      exp_mem[n_sent][k] = 0.5 * e * ((k == 0) ? $sqrt(0.5) : 1.0);
    end
    for (int n = 0; n < 8; n++) x[n] = IN_W'(v[n]);
    in_valid = 1'b1;
    tin_mem[n_sent] = cycle;
    n_sent++;
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  initial begin
    int v [8];
    for (int n = 0; n < 8; n++) x[n] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 8; n++) v[n] = 127;                send(v);
    for (int n = 0; n < 8; n++) v[n] = -128;               send(v);
    for (int n = 0; n < 8; n++) v[n] = (n % 2) ? 127 : -128; send(v);
    for (int n = 0; n < 8; n++) v[n] = (n < 4) ? 127 : -128; send(v);
    for (int p = 0; p < 8; p++) begin
      for (int n = 0; n < 8; n++) v[n] = (n == p) ? -128 : 0;
      send(v);
    end
    for (int m = 0; m < NV - 20; m++) begin
      for (int n = 0; n < 8; n++) v[n] = $signed($urandom_range(0, 255)) - 128;
      send(v);
      if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 5)) @(negedge clk);
    end
    repeat (LAT + 2) @(negedge clk);
    checks++;
    if (n_recv != n_sent) begin failures++; $display("%0d outputs missing", n_sent - n_recv); end
    $display("largest error: P=1e-3 %0.3f, P=1e-4 %0.3f", max_err[0], max_err[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
