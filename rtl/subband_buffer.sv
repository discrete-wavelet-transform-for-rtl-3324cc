// subband_buffer: double-banked store for the subband coefficients of one
// decomposition level.
//
// In the layer-by-layer pipeline the detail subbands (LH, HL, HH) of a level
// must be kept while the LL subband travels on to the next level; only at the
// end of the frame can the reconstruction use them. This buffer holds one
// W x H plane of DW-bit words per bank (the core packs H, V, D, and at the
// last level also LL, into one word). Two banks let the analysis of frame
// n+1 fill one bank while the reconstruction of frame n reads the other; the
// double banking is this design's choice.
//
// Interface: one write port and one read port, addressed by (bank, row, col).
// Timing: writes take effect at the clock edge; reads are synchronous, rd_data
// is valid the cycle after rd_en (block-RAM style). The array is not reset:
// every word is written by the analysis before it is read. The two ports must
// not use the same bank in the same cycle; dwt_seg_core asserts this.
module subband_buffer #(
  parameter int unsigned W  = 12,  // columns of the subband plane
  parameter int unsigned H  = 84,  // rows of the subband plane
  parameter int unsigned DW = 54   // word width
) (
  input  logic                              clk,
  input  logic                              wr_en,
  input  logic                              wr_bank,
  input  logic [dwt_pkg::idx_w(H)-1:0]      wr_row,
  input  logic [dwt_pkg::idx_w(W)-1:0]      wr_col,
  input  logic [DW-1:0]                     wr_data,
  input  logic                              rd_en,
  input  logic                              rd_bank,
  input  logic [dwt_pkg::idx_w(H)-1:0]      rd_row,
  input  logic [dwt_pkg::idx_w(W)-1:0]      rd_col,
  output logic [DW-1:0]                     rd_data
);
  import dwt_pkg::*;

  localparam int unsigned PLANE = W * H;
  localparam int unsigned AW    = idx_w(2 * PLANE);

  logic [DW-1:0] mem [2 * PLANE];

  logic [AW-1:0] wr_addr, rd_addr;
  always_comb begin
    wr_addr = AW'(wr_bank) * AW'(PLANE) + AW'(wr_row) * AW'(W) + AW'(wr_col);
    rd_addr = AW'(rd_bank) * AW'(PLANE) + AW'(rd_row) * AW'(W) + AW'(rd_col);
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
