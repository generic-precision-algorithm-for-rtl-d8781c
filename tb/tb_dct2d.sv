// tb_dct2d -- end-to-end test of the 8x8 2-D DCT processor at its default
// parameters (8-bit input, precision P = 1e-3).
//
// Random 8x8 blocks of level-shifted 8-bit pixels (plus a flat block, a full
// scale checkerboard and a smooth ramp) are streamed in row by row: runs of
// blocks back to back, then blocks with random idle clocks between rows. The
// reference is the separable DCT definition evaluated in real arithmetic:
//   F(u,v) = 1/4 C(u) C(v) sum_y sum_x f(y,x) cos((2x+1) v pi/16) cos((2y+1) u pi/16).
// Output beat v of a block must carry F(0..7, v) within TOL, and the first
// column must leave exactly LAT clocks after the clock that carried the last
// row. Mechanisms counted (each must occur): blocks read from each of the two
// transpose banks, a block that follows the previous one without a gap (both
// banks busy at once), and a block with idle clocks inside it.
module tb_dct2d;
  localparam int  NB  = 40;
  localparam int  LAT = 10;
  localparam real TOL = 3.0;
  localparam real PI  = 3.14159265358979323846;

  int checks = 0, failures = 0, cycle = 0;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  logic signed [7:0]  in_row  [8];
  logic signed [13:0] out_col [8];

  int  pix [NB][8][8];
  real ref_f [NB][8][8];
  int  last_row_cycle [NB];
  int  rd_blk = 0, rd_col = 0;
  real max_err = 0.0;
  int  n_bank [2] = '{0, 0};
  int  n_back_to_back = 0, n_gapped = 0;

  dct2d dut (.clk, .rst_n, .in_valid, .in_row, .out_valid, .out_col);

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

  always @(negedge clk) begin
    real e;
    if (rst_n && out_valid) begin
      if (rd_blk >= NB) begin
        failures++; $display("extra output beat");
      end else begin
        if (rd_col == 0) begin
          checks++;
          n_bank[rd_blk % 2]++;
          if (cycle - last_row_cycle[rd_blk] != LAT) begin
            failures++;
            $display("block %0d: latency %0d, expected %0d", rd_blk, cycle - last_row_cycle[rd_blk], LAT);
          end
        end
        for (int u = 0; u < 8; u++) begin
          e = fabs(real'(out_col[u]) - ref_f[rd_blk][u][rd_col]);
          if (e > max_err) max_err = e;
          checks++;
          if (e > TOL) begin
            failures++;
            $display("block %0d F(%0d,%0d): got %0d expected %0.3f", rd_blk, u, rd_col, out_col[u], ref_f[rd_blk][u][rd_col]);
          end
        end
        rd_col++;
        if (rd_col == 8) begin rd_col = 0; rd_blk++; end
      end
    end
  end

  initial begin
    real cs [8][8];
    real acc;
    bit  gapped;
    for (int k = 0; k < 8; k++)
      for (int n = 0; n < 8; n++)
        cs[k][n] = ((k == 0) ? $sqrt(0.5) : 1.0) * 0.5 * $cos((2 * n + 1) * k * PI / 16.0);
    for (int b = 0; b < NB; b++)
      for (int y = 0; y < 8; y++)
        for (int x = 0; x < 8; x++)
          case (b)
            0:       pix[b][y][x] = 127;
            1:       pix[b][y][x] = ((x + y) % 2) ? 127 : -128;
            2:       pix[b][y][x] = 16 * x + 8 * y - 100;
            default: pix[b][y][x] = $signed($urandom_range(0, 255)) - 128;
          endcase
    for (int b = 0; b < NB; b++)
      for (int u = 0; u < 8; u++)
        for (int v = 0; v < 8; v++) begin
          acc = 0.0;
          for (int y = 0; y < 8; y++)
            for (int x = 0; x < 8; x++)
              acc += cs[u][y] * cs[v][x] * pix[b][y][x];
          ref_f[b][u][v] = acc;
        end

    for (int k = 0; k < 8; k++) in_row[k] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < NB; b++) begin
      gapped = (b >= NB / 2) && (b % 2 == 0);
      if (b > 0 && b < NB / 2) n_back_to_back++;
      if (gapped) n_gapped++;
      if (b == NB / 2) begin
        in_valid = 1'b0;
        repeat (3) @(negedge clk);
      end
      for (int y = 0; y < 8; y++) begin
        if (gapped) begin
          in_valid = 1'b0;
          repeat ($urandom_range(0, 3)) @(negedge clk);
        end
        for (int x = 0; x < 8; x++) in_row[x] = 8'(pix[b][y][x]);
        in_valid = 1'b1;
        if (y == 7) last_row_cycle[b] = cycle;
        @(negedge clk);
      end
    end
    in_valid = 1'b0;
    repeat (LAT + 10) @(negedge clk);

    checks++;
    if (rd_blk != NB) begin failures++; $display("%0d of %0d blocks came out", rd_blk, NB); end
    checks++;
    if (n_bank[0] == 0 || n_bank[1] == 0 || n_back_to_back == 0 || n_gapped == 0) begin
      failures++;
      $display("a mechanism never occurred");
    end
    $display("blocks via bank 0: %0d, via bank 1: %0d, back-to-back blocks: %0d, blocks with gaps: %0d",
             n_bank[0], n_bank[1], n_back_to_back, n_gapped);
    $display("largest coefficient error: %0.3f", max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
