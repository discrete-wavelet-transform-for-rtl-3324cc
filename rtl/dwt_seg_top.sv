// dwt_seg_top: DWT segmentation for a whole ePixUHR detector.
//
// The detector has N_ASICS readout ASICs of 192 x 168 pixels; each ASIC sends
// its image as STREAMS_PER_ASIC parallel streams of 24 columns. One
// dwt_seg_core processes each stream independently (the partitioning the
// method proposes), so the default build holds 6 x 8 = 48 cores that run in
// parallel, all under one configuration: the reconstruction mode
// (diffraction estimate, background estimate or full reconstruction) and the
// global threshold.
//
// Ports are flat arrays indexed by stream number s = asic*STREAMS_PER_ASIC +
// stream; each index carries the handshake and data of one core, with the
// timing described in dwt_seg_core. Streams need not be in step; each core
// frames its own tile. The Haar blocks of one core never reach into a
// neighbouring stream, so no overlap columns are exchanged between cores
// (this design's choice; see dwt_seg_core).
module dwt_seg_top #(
  parameter int unsigned N_ASICS          = dwt_pkg::DEF_ASICS,
  parameter int unsigned STREAMS_PER_ASIC = dwt_pkg::DEF_STREAMS,
  parameter int unsigned TILE_W           = dwt_pkg::DEF_TILE_W,
  parameter int unsigned TILE_H           = dwt_pkg::DEF_TILE_H,
  parameter int unsigned LEVELS           = dwt_pkg::DEF_LEVELS,
  parameter int unsigned PIX_W            = dwt_pkg::DEF_PIX_W,
  parameter int unsigned THR_W            = 16,
  localparam int unsigned N_CORES         = N_ASICS * STREAMS_PER_ASIC,
  localparam int unsigned OUT_W           = PIX_W + 2 * LEVELS + 2
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  dwt_pkg::recon_mode_e             cfg_mode,
  input  logic [THR_W-1:0]                 cfg_threshold,
  input  logic [N_CORES-1:0]               in_valid,
  output logic [N_CORES-1:0]               in_ready,
  input  logic signed [PIX_W-1:0]          in_pixel  [N_CORES],
  output logic [N_CORES-1:0]               out_valid,
  output logic signed [OUT_W-1:0]          out_pixel [N_CORES],
  output logic [N_CORES-1:0]               out_mask,
  output logic [N_CORES-1:0]               out_first,
  output logic [N_CORES-1:0]               out_last
);

  for (genvar s = 0; s < N_CORES; s++) begin : g_core
    dwt_seg_core #(
      .TILE_W(TILE_W), .TILE_H(TILE_H), .LEVELS(LEVELS),
      .PIX_W(PIX_W), .THR_W(THR_W)
    ) u_core (
      .clk          (clk),
      .rst_n        (rst_n),
      .in_valid     (in_valid[s]),
      .in_ready     (in_ready[s]),
      .in_pixel     (in_pixel[s]),
      .cfg_mode     (cfg_mode),
      .cfg_threshold(cfg_threshold),
      .out_valid    (out_valid[s]),
      .out_pixel    (out_pixel[s]),
      .out_mask     (out_mask[s]),
      .out_first    (out_first[s]),
      .out_last     (out_last[s])
    );
  end

endmodule
