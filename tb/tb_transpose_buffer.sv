// tb_transpose_buffer -- self-checking test of the two-bank transpose memory.
//
// Twelve random 8x8 blocks are written row by row: the first six back to back
// (both banks in use at once, the stream never pauses), the rest with random
// gaps between rows. Every output beat must be the next column of the oldest
// block not yet read, and the first column of a block must follow the edge that
// wrote its last row by exactly one clock. The number of blocks read from each
// bank is counted; both banks must have been used.
module tb_transpose_buffer;
  localparam int N = 8;
  localparam int W = 11;
  localparam int NB = 12;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  logic signed [W-1:0] row [N];
  logic signed [W-1:0] col [N];
  int blk [NB][N][N];
  int rd_blk = 0, rd_col = 0, cycle = 0, last_row_cycle [NB];
  int bank_use [2] = '{0, 0};

  transpose_buffer #(.N(N), .W(W)) dut (.clk, .rst_n, .in_valid, .row, .out_valid, .col);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output checker.
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      if (rd_blk >= NB) begin
        failures++; $display("extra output beat");
      end else begin
        if (rd_col == 0) begin
          checks++;
          bank_use[rd_blk % 2]++;
          if (cycle != last_row_cycle[rd_blk] + 1) begin
            failures++;
            $display("block %0d: first column at %0d, last row at %0d", rd_blk, cycle, last_row_cycle[rd_blk]);
          end
        end
        for (int r = 0; r < N; r++) begin
          checks++;
          if (int'(col[r]) != blk[rd_blk][r][rd_col]) begin
            failures++;
            $display("block %0d col %0d row %0d: got %0d expected %0d", rd_blk, rd_col, r, col[r], blk[rd_blk][r][rd_col]);
          end
        end
        rd_col++;
        if (rd_col == N) begin rd_col = 0; rd_blk++; end
      end
    end
  end

  initial begin
    for (int b = 0; b < NB; b++)
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++)
          blk[b][r][c] = $signed($urandom_range(0, (1 << W) - 1)) - (1 << (W - 1));
    for (int k = 0; k < N; k++) row[k] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < NB; b++) begin
      for (int r = 0; r < N; r++) begin
        if (b >= 6) begin
          in_valid = 1'b0;
          repeat ($urandom_range(0, 2)) @(negedge clk);
        end
        in_valid = 1'b1;
        for (int c = 0; c < N; c++) row[c] = W'(blk[b][r][c]);
        @(negedge clk);
        if (r == N - 1) last_row_cycle[b] = cycle;
      end
    end
    in_valid = 1'b0;
    repeat (3 * N) @(negedge clk);
    checks++;
    if (rd_blk != NB || bank_use[0] == 0 || bank_use[1] == 0) begin
      failures++;
      $display("read %0d of %0d blocks, bank use %0d/%0d", rd_blk, NB, bank_use[0], bank_use[1]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
