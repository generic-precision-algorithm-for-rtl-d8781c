// dct_butterfly -- input butterflies of the 8-point DCT.
//
// First stage: sums s(k) = x(k) + x(7-k) and differences d(k) = x(k) - x(7-k),
// k = 0..3. The sums feed a second butterfly for the even coefficients:
//     ev[0] = s0 + s3   (0+7+3+4)      ev[1] = s1 + s2   (1+6+2+5)
//     ev[2] = s1 - s2   (1+6-2-5)      ev[3] = s0 - s3   (0+7-3-4)
// and the differences go out unchanged as the odd-part operands:
//     od[0] = 0-7, od[1] = 1-6, od[2] = 2-5, od[3] = 3-4.
//
// Interface: eight W-bit signed inputs with in_valid; four even and four odd
// W-bit outputs with out_valid, registered (latency one clock). The caller gives
// W two bits of headroom over its operands, so the sums never overflow.
// Synchronous active-low reset clears the registers.
//
// The operations are those of the even/odd decomposition of the 8-point DCT;
// placing both butterfly levels in one pipeline stage is this design's choice.
module dct_butterfly #(
  parameter int W = 24
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] x   [8],
  output logic                out_valid,
  output logic signed [W-1:0] ev  [4],
  output logic signed [W-1:0] od  [4]
);

  logic signed [W-1:0] s [4];
  logic signed [W-1:0] d [4];

  always_comb begin
    for (int k = 0; k < 4; k++) begin
      s[k] = x[k] + x[7-k];
      d[k] = x[k] - x[7-k];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      ev        <= '{default: '0};
      od        <= '{default: '0};
    end else begin
      out_valid <= in_valid;
      ev[0]     <= s[0] + s[3];
      ev[1]     <= s[1] + s[2];
      ev[2]     <= s[1] - s[2];
      ev[3]     <= s[0] - s[3];
      od        <= d;
    end
  end

endmodule
