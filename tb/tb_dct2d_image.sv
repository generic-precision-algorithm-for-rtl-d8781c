// tb_dct2d_image -- image-coding workload for the 2-D DCT processor.
//
// A 64x64 8-bit test image (smooth shading, a sharp-edged checker region and
// pseudo-random texture; generated here, since no photograph is available to
// the simulator) is cut into 64 blocks, level shifted by -128 and streamed
// through two processors, one at precision P = 1e-3 and one at P = 1e-4. The
// coefficients are then put through a JPEG-style coding loop in the testbench:
// quantisation with the standard JPEG luminance table scaled for quality
// factors 95, 90, 85, 80 and 75 (the usual IJG scaling), dequantisation, an
// exact inverse DCT, rounding and clipping. The PSNR of the decoded image is
// compared with that of the same loop fed by an exact DCT whose coefficients
// are rounded to integers, as the processor's are.
// Checks: every block comes out, every coefficient is within TOL of the exact
// DCT, PSNR falls as the quality factor falls, and at every quality factor the
// hardware PSNR is within 0.25 dB of the exact-DCT PSNR.
module tb_dct2d_image;
  import dct_cordic_pkg::*;
  localparam int  IMG = 64;
  localparam int  NB  = (IMG / 8) * (IMG / 8);
  localparam real TOL = 3.0;
  localparam real PI  = 3.14159265358979323846;
  localparam int  QTAB [64] = '{
    16, 11, 10, 16, 24, 40, 51, 61,   12, 12, 14, 19, 26, 58, 60, 55,
    14, 13, 16, 24, 40, 57, 69, 56,   14, 17, 22, 29, 51, 87, 80, 62,
    18, 22, 37, 56, 68, 109, 103, 77, 24, 35, 55, 64, 81, 104, 113, 92,
    49, 64, 78, 87, 103, 121, 120, 101, 72, 92, 95, 98, 112, 100, 103, 99};
  localparam int  QF [5] = '{95, 90, 85, 80, 75};

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [1:0] out_valid;
  logic signed [7:0]  in_row [8];
  logic signed [13:0] col3 [8];
  logic signed [13:0] col4 [8];

  int  img [IMG][IMG];
  real cs [8][8];
  real ref_f [NB][8][8];
  int  hw_f [2][NB][8][8];
  int  rd_blk = 0, rd_col = 0;
  real max_err [2] = '{0.0, 0.0};

  dct2d #(.PREC(PREC_1E3)) dut3 (.clk, .rst_n, .in_valid, .in_row, .out_valid(out_valid[0]), .out_col(col3));
  dct2d #(.PREC(PREC_1E4)) dut4 (.clk, .rst_n, .in_valid, .in_row, .out_valid(out_valid[1]), .out_col(col4));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  always @(negedge clk) begin
    if (rst_n && out_valid != 2'b00) begin
      if (out_valid != 2'b11 || rd_blk >= NB) begin
        failures++;
        $display("unexpected output beat");
      end else begin
        for (int u = 0; u < 8; u++) begin
          hw_f[0][rd_blk][u][rd_col] = int'(col3[u]);
          hw_f[1][rd_blk][u][rd_col] = int'(col4[u]);
        end
        rd_col++;
        if (rd_col == 8) begin rd_col = 0; rd_blk++; end
      end
    end
  end

  // Quantise, dequantise, inverse-transform and measure PSNR of the whole image.
  // src 0/1: hardware at P = 1e-3 / 1e-4, src 2: exact DCT rounded to integers.
  function automatic real psnr(int src, int q);
    int  s, qs, lvl, dec;
    real deq [8][8];
    real acc, se;
    se = 0.0;
    s  = (q < 50) ? 5000 / q : 200 - 2 * q;
    for (int b = 0; b < NB; b++) begin
      for (int u = 0; u < 8; u++)
        for (int v = 0; v < 8; v++) begin
          real c;
          qs = (QTAB[u * 8 + v] * s + 50) / 100;
          if (qs < 1) qs = 1;
          c = (src == 2) ? $floor(ref_f[b][u][v] + 0.5) : real'(hw_f[src][b][u][v]);
          lvl = int'($floor(c / qs + 0.5));
          deq[u][v] = real'(lvl * qs);
        end
      for (int y = 0; y < 8; y++)
        for (int x = 0; x < 8; x++) begin
          acc = 0.0;
          for (int u = 0; u < 8; u++)
            for (int v = 0; v < 8; v++)
              acc += cs[u][y] * cs[v][x] * deq[u][v];
          dec = int'($floor(acc + 0.5)) + 128;
          if (dec < 0) dec = 0;
          if (dec > 255) dec = 255;
          se += (dec - img[(b / (IMG / 8)) * 8 + y][(b % (IMG / 8)) * 8 + x]) ** 2;
        end
    end
    if (se == 0.0) return 99.0;
    return 10.0 * $log10(255.0 * 255.0 / (se / (IMG * IMG)));
  endfunction

  initial begin
    real acc, e, p [3][5];
    int  v;
    for (int k = 0; k < 8; k++)
      for (int n = 0; n < 8; n++)
        cs[k][n] = ((k == 0) ? $sqrt(0.5) : 1.0) * 0.5 * $cos((2 * n + 1) * k * PI / 16.0);
    for (int y = 0; y < IMG; y++)
      for (int x = 0; x < IMG; x++) begin
        v = int'(128.0 + 70.0 * $sin(x / 9.0) * $cos(y / 13.0));
        if (x >= 40 && y < 24) v += (((x / 3) + (y / 3)) % 2) ? 40 : -40;
        if (y >= 40) v += $signed($urandom_range(0, 40)) - 20;
        img[y][x] = (v < 0) ? 0 : (v > 255) ? 255 : v;
      end
    for (int b = 0; b < NB; b++)
      for (int u = 0; u < 8; u++)
        for (int w = 0; w < 8; w++) begin
          acc = 0.0;
          for (int y = 0; y < 8; y++)
            for (int x = 0; x < 8; x++)
              acc += cs[u][y] * cs[w][x] * (img[(b / (IMG / 8)) * 8 + y][(b % (IMG / 8)) * 8 + x] - 128);
          ref_f[b][u][w] = acc;
        end

    for (int k = 0; k < 8; k++) in_row[k] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < NB; b++)
      for (int y = 0; y < 8; y++) begin
        for (int x = 0; x < 8; x++)
          in_row[x] = 8'(img[(b / (IMG / 8)) * 8 + y][(b % (IMG / 8)) * 8 + x] - 128);
        in_valid = 1'b1;
        @(negedge clk);
      end
    in_valid = 1'b0;
    repeat (30) @(negedge clk);

    checks++;
    if (rd_blk != NB) begin failures++; $display("%0d of %0d blocks came out", rd_blk, NB); end
    for (int s = 0; s < 2; s++)
      for (int b = 0; b < NB; b++)
        for (int u = 0; u < 8; u++)
          for (int w = 0; w < 8; w++) begin
            e = fabs(real'(hw_f[s][b][u][w]) - ref_f[b][u][w]);
            if (e > max_err[s]) max_err[s] = e;
            checks++;
            if (e > TOL) failures++;
          end
    $display("largest coefficient error: P=1e-3 %0.3f, P=1e-4 %0.3f", max_err[0], max_err[1]);

    for (int i = 0; i < 5; i++) begin
      for (int s = 0; s < 3; s++) p[s][i] = psnr(s, QF[i]);
      $display("Q=%0d  PSNR: P=1e-3 %0.3f dB, P=1e-4 %0.3f dB, exact DCT %0.3f dB",
               QF[i], p[0][i], p[1][i], p[2][i]);
      for (int s = 0; s < 2; s++) begin
        checks++;
        if (fabs(p[s][i] - p[2][i]) > 0.25) begin
          failures++;
          $display("PSNR off by more than 0.25 dB");
        end
        if (i > 0) begin
          checks++;
          if (p[s][i] > p[s][i - 1] + 0.01) begin failures++; $display("PSNR rose as Q fell"); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
