// threshold_binarizer: global-threshold binarisation of the reconstructed
// image.
//
// The diffraction estimate produced by the inverse DWT is turned into a
// diffraction/background map by comparing every pixel with one global
// threshold (the method's operating point is 170 photons). The reconstructed
// pixel arrives as a signed fixed-point value with FRAC fraction bits; the
// threshold is an integer photon count, so it is shifted up by FRAC bits and
// compared exactly. A pixel is marked when its value is greater than or equal
// to the threshold (the inclusive comparison is this design's choice).
//
// Timing: one register stage; the pixel value is delayed with the mask so
// the two stay aligned. The threshold is a run-time input.
module threshold_binarizer #(
  parameter int unsigned YW   = 26,  // width of the signed fixed-point pixel
  parameter int unsigned FRAC = 8,   // fraction bits of the pixel
  parameter int unsigned TW   = 16   // width of the unsigned threshold
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [YW-1:0] in_pixel,
  input  logic [TW-1:0]        threshold,   // photons
  output logic                 out_valid,
  output logic signed [YW-1:0] out_pixel,
  output logic                 out_mask     // 1 = diffraction pixel
);
  localparam int unsigned CMPW = (YW > TW + FRAC + 1) ? YW : TW + FRAC + 1;

  logic signed [CMPW-1:0] thr_fx, pix_x;
  always_comb begin
    thr_fx = signed'(CMPW'(threshold) << FRAC);
    pix_x  = CMPW'(in_pixel);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pixel <= '0;
      out_mask  <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_pixel <= in_pixel;
        out_mask  <= (pix_x >= thr_fx);
      end
    end
  end

endmodule
