// haar_synthesis_stage: one level of the inverse Haar transform, evaluated
// for one output pixel at a time.
//
// The Haar synthesis filters are two taps long, so a pixel of level j-1
// depends on exactly one coefficient set (LL, H, V, D) of level j: the one
// whose 2x2 block contains it. With the un-normalised analysis filters of
// haar_analysis_level the inverse is
//   LL_{j-1} = (LL_j + sH*H + sV*V + sD*D) / 4,
// where sH = +1 in the upper row of the block and -1 in the lower row,
// sV = +1 in the left column and -1 in the right column, and sD = sH*sV.
// To avoid the division, the pipeline carries Y_j = 4^(J-j) * LL_j. One stage
// then computes
//   Y_{j-1} = Y_j + 4^(J-j) * (sH*H + sV*V + sD*D),
// a shift and three additions, and after the last stage Y_0 equals 4^J times
// the reconstructed pixel, exact in integer arithmetic. Chaining J stages
// from the coarsest level down reproduces the level-by-level inverse DWT of
// the method for every pixel. keep_detail = 0 drops the level's details
// (background estimate); the caller zeroes Y_J for the diffraction estimate.
//
// row_bit / col_bit are bit (LEVEL-1) of the output pixel's row and column,
// i.e. its position inside the level's 2x2 block.
// Timing: one register stage, y_out valid one cycle after in_valid.
module haar_synthesis_stage #(
  parameter int unsigned LEVEL  = 1,   // j, 1 = finest level
  parameter int unsigned LEVELS = 4,   // J, decomposition depth
  parameter int unsigned CW     = 24,  // coefficient width (signed)
  parameter int unsigned YW     = 26   // reconstruction accumulator width (signed)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic signed [YW-1:0]  y_in,
  input  logic signed [CW-1:0]  coef_h,
  input  logic signed [CW-1:0]  coef_v,
  input  logic signed [CW-1:0]  coef_d,
  input  logic                  row_bit,
  input  logic                  col_bit,
  input  logic                  keep_detail,
  output logic                  out_valid,
  output logic signed [YW-1:0]  y_out
);
  localparam int unsigned SHIFT = 2 * (LEVELS - LEVEL);

  logic signed [YW-1:0] th, tv, td, detail;

  always_comb begin
    th     = row_bit             ? -YW'(coef_h) : YW'(coef_h);
    tv     = col_bit             ? -YW'(coef_v) : YW'(coef_v);
    td     = (row_bit ^ col_bit) ? -YW'(coef_d) : YW'(coef_d);
    detail = (th + tv + td) <<< SHIFT;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y_out     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y_out <= keep_detail ? y_in + detail : y_in;
    end
  end

endmodule
