// scale_comp -- scale-factor compensation stage.
//
// Multiplies each of N lanes by its own constant: d_o[k] = round(d_i[k] * COEF[k]
// / 2^CF). In the DCT each COEF[k] is round(2^CF / (2 G)), where G is the
// magnitude growth of the shift-and-add rotator that produced lane k (see
// dct_cordic_pkg::comp_coef); it thus removes the CORDIC gain and applies the
// 1/2 normalisation of the 8-point DCT in one constant multiplication per lane.
// Rounding is to nearest, ties toward plus infinity.
//
// Interface: N W-bit signed lanes in with in_valid, N W-bit signed lanes out
// with out_valid, registered (latency one clock). Coefficients are unsigned,
// below 2^CF (every gain G is at least 1, so 1/(2G) < 1), hence a result never
// exceeds its input in magnitude and needs no extra bits. Synchronous active-low
// reset clears the registers.
//
// Compensating by a constant multiplication is one of the two options the
// CORDIC literature offers and the one taken here; the lane layout and CF are
// this design's choices.
module scale_comp #(
  parameter int N       = 12,
  parameter int W       = 24,
  parameter int CF      = 16,
  parameter int COEF[N] = '{default: 1 << (CF - 1)}
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] d_i [N],
  output logic                out_valid,
  output logic signed [W-1:0] d_o [N]
);

  localparam int PW = W + CF + 2;

  logic signed [PW-1:0] prod [N];

  always_comb begin
    for (int k = 0; k < N; k++) begin
      prod[k] = PW'(d_i[k]) * PW'(COEF[k]) + (PW'(1) <<< (CF - 1));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      d_o       <= '{default: '0};
    end else begin
      out_valid <= in_valid;
      for (int k = 0; k < N; k++) d_o[k] <= W'(prod[k] >>> CF);
    end
  end

endmodule
