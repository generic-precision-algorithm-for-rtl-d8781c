// transpose_buffer -- transposition memory between the row and column DCTs.
//
// Takes an N x N block one row per clock and gives it back one column per clock.
// Two N x N register banks are used alternately (ping-pong): while the rows of
// one block are written into one bank, the columns of the previous block are
// read from the other. A bank is marked full when its last row is written and
// free again when its last column is read.
//
// Interface: in_valid with row[0..N-1] (W-bit signed). out_valid with
// col[0..N-1], where col[r] is element r of the current column (row r of the
// block). Blocks are N consecutive valid rows; gaps between rows are allowed.
//
// Timing: the first column of a block appears one clock after its last row is
// written, and the N columns follow on consecutive clocks. A bank is always
// emptied (N clocks) no later than the other bank can be refilled (N rows), so
// there is no back-pressure; an assertion checks that no row ever lands in a
// full bank. Synchronous active-low reset empties both banks.
//
// Only the existence of a transpose stage between the two 1-D DCTs comes from
// the paper; the two-bank organisation and this timing are this design's.
module transpose_buffer #(
  parameter int N = 8,
  parameter int W = 11
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] row [N],
  output logic                out_valid,
  output logic signed [W-1:0] col [N]
);

  localparam int CW = $clog2(N);

  logic signed [W-1:0] mem [2][N][N];
  logic [1:0]          full;
  logic                wr_bank, rd_bank;
  logic [CW-1:0]       wr_row, rd_col;

  always_ff @(posedge clk) begin
    if (in_valid) mem[wr_bank][wr_row] <= row;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full      <= '0;
      wr_bank   <= 1'b0;
      rd_bank   <= 1'b0;
      wr_row    <= '0;
      rd_col    <= '0;
      out_valid <= 1'b0;
      col       <= '{default: '0};
    end else begin
      // Read side: one column per clock from a full bank.
      out_valid <= full[rd_bank];
      if (full[rd_bank]) begin
        for (int r = 0; r < N; r++) col[r] <= mem[rd_bank][r][rd_col];
        rd_col <= rd_col + 1'b1;
        if (rd_col == CW'(N - 1)) begin
          rd_col        <= '0;
          full[rd_bank] <= 1'b0;
          rd_bank       <= ~rd_bank;
        end
      end
      // Write side: one row per valid beat.
      if (in_valid) begin
        wr_row <= wr_row + 1'b1;
        if (wr_row == CW'(N - 1)) begin
          wr_row        <= '0;
          full[wr_bank] <= 1'b1;
          wr_bank       <= ~wr_bank;
        end
      end
    end
  end

  // A row must never be written into a bank still waiting to be read.
  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> !full[wr_bank]);

endmodule
