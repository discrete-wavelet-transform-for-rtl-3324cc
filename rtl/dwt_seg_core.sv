// dwt_seg_core: DWT background/diffraction segmentation of one image tile.
//
// One core serves one detector output stream: a tile of TILE_W x TILE_H
// pixels (24 x 168 for an ePixUHR stream) delivered in raster order. It
// separates the smooth background (water and air scatter) from sharp Bragg
// peaks with a J-level 2D Haar wavelet decomposition:
//   diffraction estimate = inverse DWT with the level-J approximation (LL_J)
//                          set to zero, all detail subbands kept (Fig. 3);
//   background estimate  = inverse DWT with every detail subband set to
//                          zero, LL_J kept (Fig. 4);
//   full reconstruction  = inverse DWT of all subbands, which returns the
//                          input image (Fig. 10c).
// The diffraction estimate is then binarised with a global threshold.
//
// Structure:
//   * Analysis: J haar_analysis_level instances in a chain. Level 1 sees the
//     pixel stream; level j sees the LL stream of level j-1, which carries a
//     quarter of the samples, so the chain keeps pace with one pixel per
//     cycle. The detail subbands H, V, D of each level (and LL_J of the last
//     level) are written into that level's subband_buffer while LL travels
//     on, as in the layer-by-layer pipeline of the method.
//   * Reconstruction: once the last level has finished a frame, a sequencer
//     walks the output pixels in raster order, one per cycle. For each pixel
//     it reads the one coefficient set per level whose Haar block contains
//     it (reads are staggered so each arrives at its stage) and passes the
//     running sum through J haar_synthesis_stage instances, coarsest first.
//     Starting from Y_J = 0 (diffraction) or Y_J = LL_J (background, full), the
//     chain yields Y_0 = 4^J x the reconstructed pixel, which leaves the core
//     as a signed fixed-point value with 2*J fraction bits, together with the
//     mask bit of threshold_binarizer.
//   * Banking: every subband_buffer has two banks. Frame n is reconstructed
//     from one bank while frame n+1 is analysed into the other. in_ready
//     drops only while the bank the next frame needs is still being read,
//     which at back-to-back frames costs a few cycles per frame.
//
// The per-pixel evaluation of the inverse transform is this design's way of
// running the level-by-level IDWT of the method: for the two-tap Haar filters
// it gives identical results. Integer filters, symmetric extension of odd
// sizes, the fixed-point format, the banking and the handshake are this
// design's choices.
//
// Interface: in_valid/in_ready handshake on the pixel stream (a transfer when
// both are high); frames are delimited by counting TILE_W*TILE_H pixels. The
// output stream has no back-pressure: out_valid is high for one cycle per
// pixel, out_first/out_last mark the first and last pixel of a frame.
// cfg_mode is sampled when a frame's reconstruction starts; cfg_threshold is
// applied per pixel.
// Timing: the reconstruction of a frame starts J+2 cycles after its last
// pixel is accepted (analysis drain plus start), then streams one pixel per
// cycle with a further latency of J+2 cycles.
module dwt_seg_core #(
  parameter int unsigned TILE_W = 24,
  parameter int unsigned TILE_H = 168,
  parameter int unsigned LEVELS = 4,
  parameter int unsigned PIX_W  = 16,
  parameter int unsigned THR_W  = 16
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // pixel stream in
  input  logic                                in_valid,
  output logic                                in_ready,
  input  logic signed [PIX_W-1:0]             in_pixel,
  // configuration
  input  dwt_pkg::recon_mode_e                cfg_mode,
  input  logic [THR_W-1:0]                    cfg_threshold,
  // reconstructed stream out
  output logic                                out_valid,
  output logic signed [PIX_W+2*LEVELS+1:0]    out_pixel,  // 2*LEVELS fraction bits
  output logic                                out_mask,
  output logic                                out_first,
  output logic                                out_last
);
  import dwt_pkg::*;

  localparam int unsigned CW   = PIX_W + 2 * LEVELS;      // coefficient width
  localparam int unsigned YW   = PIX_W + 2 * LEVELS + 2;  // reconstruction width
  localparam int unsigned FRAC = 2 * LEVELS;
  // counters are at least LEVELS bits wide: the synthesis stages use bit
  // LEVELS-1 of the pixel position
  localparam int unsigned RW   = (idx_w(TILE_H) > LEVELS) ? idx_w(TILE_H) : LEVELS;
  localparam int unsigned CLW  = (idx_w(TILE_W) > LEVELS) ? idx_w(TILE_W) : LEVELS;
  localparam int unsigned NTAG = LEVELS + 3;

  // ---------------------------------------------------------------- input
  logic          wr_bank;
  logic [1:0]    bank_full;
  logic [RW-1:0] in_row;
  logic [CLW-1:0] in_col;
  logic          in_fire;

  assign in_ready = !bank_full[wr_bank];
  assign in_fire  = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_row  <= '0;
      in_col  <= '0;
      wr_bank <= 1'b0;
    end else if (in_fire) begin
      if (in_col == CLW'(TILE_W - 1)) begin
        in_col <= '0;
        if (in_row == RW'(TILE_H - 1)) begin
          in_row  <= '0;
          wr_bank <= !wr_bank;
        end else begin
          in_row <= in_row + 1'b1;
        end
      end else begin
        in_col <= in_col + 1'b1;
      end
    end
  end

  // ---------------------------------------------------- reconstruction tags
  typedef struct packed {
    logic          valid;
    logic [RW-1:0] r;
    logic [CLW-1:0] c;
    logic          bank;
    recon_mode_e   mode;
    logic          first;
    logic          last;
  } tag_t;

  logic          rd_active, rd_bank;
  recon_mode_e   rd_mode;
  logic [RW-1:0] rd_r;
  logic [CLW-1:0] rd_c;
  tag_t          tag0;
  tag_t          tag_q [1:NTAG-1];

  always_comb begin
    tag0.valid = rd_active;
    tag0.r     = rd_r;
    tag0.c     = rd_c;
    tag0.bank  = rd_bank;
    tag0.mode  = rd_mode;
    tag0.first = (rd_r == '0) && (rd_c == '0);
    tag0.last  = (rd_r == RW'(TILE_H - 1)) && (rd_c == CLW'(TILE_W - 1));
  end

  // -------------------------------------------------------------- analysis
  logic                 a_valid [LEVELS+1];
  logic signed [CW-1:0] a_ll    [LEVELS+1];
  logic                 a_tag   [LEVELS+1];
  logic                 a_last  [LEVELS+1];

  assign a_valid[0] = in_fire;
  assign a_ll[0]    = CW'(in_pixel);
  assign a_tag[0]   = wr_bank;
  assign a_last[0]  = 1'b0;

  // coefficients read back for the reconstruction, one set per level
  logic signed [CW-1:0] rd_h [1:LEVELS];
  logic signed [CW-1:0] rd_v [1:LEVELS];
  logic signed [CW-1:0] rd_d [1:LEVELS];
  logic signed [CW-1:0] rd_ll_top;

  for (genvar j = 1; j <= LEVELS; j++) begin : g_lvl
    localparam int unsigned IW  = PIX_W + 2 * (j - 1);
    localparam int unsigned LW  = level_dim(TILE_W, j - 1);
    localparam int unsigned LH  = level_dim(TILE_H, j - 1);
    localparam int unsigned OW  = level_dim(TILE_W, j);
    localparam int unsigned OH  = level_dim(TILE_H, j);
    localparam bit          TOP = (j == LEVELS);
    localparam int unsigned DW  = TOP ? 4 * CW : 3 * CW;

    logic signed [IW+1:0]        ll, h, v, d;
    logic [idx_w(OH)-1:0]        orow;
    logic [idx_w(OW)-1:0]        ocol;
    logic                        ovalid, otag, olast;

    haar_analysis_level #(.W(LW), .H(LH), .IN_W(IW)) u_ana (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (a_valid[j-1]),
      .in_data  (a_ll[j-1][IW-1:0]),
      .in_tag   (a_tag[j-1]),
      .out_valid(ovalid),
      .out_ll   (ll),
      .out_h    (h),
      .out_v    (v),
      .out_d    (d),
      .out_row  (orow),
      .out_col  (ocol),
      .out_tag  (otag),
      .out_last (olast)
    );

    assign a_valid[j] = ovalid;
    assign a_ll[j]    = CW'(ll);
    assign a_tag[j]   = otag;
    assign a_last[j]  = olast;

    // subband buffer write: {LL,} H, V, D
    logic [DW-1:0] wdata, rdata;
    if (TOP) begin : g_wtop
      assign wdata = {CW'(ll), CW'(h), CW'(v), CW'(d)};
    end else begin : g_wmid
      assign wdata = {CW'(h), CW'(v), CW'(d)};
    end

    // read address from the tag of the pixel whose turn it is at this level
    tag_t rtag;
    if (j == LEVELS) begin : g_t0
      assign rtag = tag0;
    end else begin : g_tq
      assign rtag = tag_q[LEVELS - j];
    end

    subband_buffer #(.W(OW), .H(OH), .DW(DW)) u_buf (
      .clk    (clk),
      .wr_en  (ovalid),
      .wr_bank(otag),
      .wr_row (orow),
      .wr_col (ocol),
      .wr_data(wdata),
      .rd_en  (rtag.valid),
      .rd_bank(rtag.bank),
      .rd_row ($bits(orow)'(rtag.r >> j)),
      .rd_col ($bits(ocol)'(rtag.c >> j)),
      .rd_data(rdata)
    );

    // the reconstruction never reads the bank the analysis is filling
    assert property (@(posedge clk) disable iff (!rst_n)
                     !(ovalid && rtag.valid && (otag == rtag.bank)))
      else $error("dwt_seg_core: level %0d read and write to the same bank", j);

    assign rd_h[j] = rdata[3*CW-1:2*CW];
    assign rd_v[j] = rdata[2*CW-1:CW];
    assign rd_d[j] = rdata[CW-1:0];
    if (TOP) begin : g_rtop
      assign rd_ll_top = rdata[4*CW-1:3*CW];
    end
  end

  // --------------------------------------------------- bank bookkeeping
  logic frame_analysed, frame_released;
  logic release_bank;

  assign frame_analysed = a_valid[LEVELS] && a_last[LEVELS];
  // the level-1 read is the last one a pixel needs
  if (LEVELS == 1) begin : g_rel0
    assign frame_released = tag0.valid && tag0.last;
    assign release_bank   = tag0.bank;
  end else begin : g_reln
    assign frame_released = tag_q[LEVELS-1].valid && tag_q[LEVELS-1].last;
    assign release_bank   = tag_q[LEVELS-1].bank;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank_full <= '0;
    end else begin
      for (int b = 0; b < 2; b++) begin
        if (frame_analysed && (a_tag[LEVELS] == 1'(b))) bank_full[b] <= 1'b1;
        else if (frame_released && (release_bank == 1'(b))) bank_full[b] <= 1'b0;
      end
    end
  end

  // ------------------------------------------------ reconstruction sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_active <= 1'b0;
      rd_bank   <= 1'b0;
      rd_mode   <= MODE_SIGNAL;
      rd_r      <= '0;
      rd_c      <= '0;
    end else if (!rd_active) begin
      if (bank_full[rd_bank]) begin
        rd_active <= 1'b1;
        rd_mode   <= cfg_mode;
        rd_r      <= '0;
        rd_c      <= '0;
      end
    end else if (rd_c == CLW'(TILE_W - 1)) begin
      rd_c <= '0;
      if (rd_r == RW'(TILE_H - 1)) begin
        rd_active <= 1'b0;
        rd_bank   <= !rd_bank;
      end else begin
        rd_r <= rd_r + 1'b1;
      end
    end else begin
      rd_c <= rd_c + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 1; i < NTAG; i++) tag_q[i] <= '0;
    end else begin
      tag_q[1] <= tag0;
      for (int i = 2; i < NTAG; i++) tag_q[i] <= tag_q[i-1];
    end
  end

  // --------------------------------------------------------- synthesis chain
  logic signed [YW-1:0] y  [LEVELS+1];
  logic                 yv [LEVELS+1];

  // LL_J zeroed for the diffraction estimate, kept otherwise
  assign y[LEVELS]  = (tag_q[1].mode != MODE_SIGNAL) ? YW'(rd_ll_top) : '0;
  assign yv[LEVELS] = tag_q[1].valid;

  for (genvar j = LEVELS; j >= 1; j--) begin : g_syn
    tag_t stag;
    assign stag = tag_q[LEVELS - j + 1];

    haar_synthesis_stage #(.LEVEL(j), .LEVELS(LEVELS), .CW(CW), .YW(YW)) u_syn (
      .clk        (clk),
      .rst_n      (rst_n),
      .in_valid   (yv[j]),
      .y_in       (y[j]),
      .coef_h     (rd_h[j]),
      .coef_v     (rd_v[j]),
      .coef_d     (rd_d[j]),
      .row_bit    (stag.r[j-1]),
      .col_bit    (stag.c[j-1]),
      .keep_detail(stag.mode != MODE_BACKGROUND),
      .out_valid  (yv[j-1]),
      .y_out      (y[j-1])
    );
  end

  threshold_binarizer #(.YW(YW), .FRAC(FRAC), .TW(THR_W)) u_thr (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (yv[0]),
    .in_pixel (y[0]),
    .threshold(cfg_threshold),
    .out_valid(out_valid),
    .out_pixel(out_pixel),
    .out_mask (out_mask)
  );

  assign out_first = out_valid && tag_q[NTAG-1].first;
  assign out_last  = out_valid && tag_q[NTAG-1].last;

endmodule
