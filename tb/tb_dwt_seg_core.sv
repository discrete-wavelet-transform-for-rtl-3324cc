// tb_dwt_seg_core: end-to-end test of one segmentation core at the default
// tile size (24 x 168 pixels, four levels).
//
// Synthetic diffraction frames (smooth background ramp and bowl, a few dozen
// sharp peaks, small noise) are streamed in. Each output pixel is compared
// with the floating-point reference model of haar_ref_pkg: out_pixel / 4^J
// must equal the model's reconstruction exactly, and the mask must equal
// (model >= threshold). The frame sequence covers:
//   * two back-to-back frames at full rate, which must stall the input for a
//     few cycles while the older buffer bank is still being read;
//   * a full-reconstruction frame and a background-estimate frame (mode
//     switches);
//   * a frame with random gaps in in_valid and another threshold.
// The first output must follow the last input of an idle core after exactly
// 2*J+3 cycles, and every frame must leave as W*H consecutive pixels.
// The frame period at full rate is timed from the last accepted pixel of
// frame 1 to that of frame 2, which includes frame 2's stall.
// At a 200 MHz clock the detector's 35,000 frames/s leave 5714 cycles per
// frame, which must be met. The 100,000 frames/s of the planned upgrade
// (2000 cycles) are reported but cannot be met at one pixel per cycle.
module tb_dwt_seg_core;
  import dwt_pkg::*;
  import haar_ref_pkg::*;

  localparam int unsigned TW = DEF_TILE_W;
  localparam int unsigned TH = DEF_TILE_H;
  localparam int unsigned J  = DEF_LEVELS;
  localparam int unsigned PW = DEF_PIX_W;
  localparam int unsigned NF = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = !clk;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int checks = 0;
  int failures = 0;

  logic                          in_valid, in_ready;
  logic signed [PW-1:0]          in_pixel;
  recon_mode_e                   cfg_mode;
  logic [15:0]                   cfg_threshold;
  logic                          out_valid, out_mask, out_first, out_last;
  logic signed [PW+2*J+1:0]      out_pixel;

  dwt_seg_core dut (.*);

  haar_ref #(TW, TH, J) ref_f [NF];
  int unsigned thr_f  [NF];
  recon_mode_e mode_f [NF];

  // mechanism counters
  int n_stall = 0, n_bg = 0, n_sig = 0, n_full = 0, n_mask = 0, n_gap = 0;
  longint last_in_time [NF];

  always @(posedge clk) if (in_valid && !in_ready) n_stall++;

  // ---------------------------------------------------------- stimulus
  function automatic void make_image(haar_ref #(TW, TH, J) m, int seed);
    int np;
    for (int r = 0; r < TH; r++)
      for (int c = 0; c < TW; c++)
        m.img[r][c] = $floor(400.0 + 3.0 * r + 10.0 * c + 0.02 * (r - 80) * (r - 80))
                      + real'($urandom_range(4));
    np = 20 + seed * 5;
    for (int p = 0; p < np; p++) begin
      int pr, pc, amp;
      pr = $urandom_range(TH - 2, 1); pc = $urandom_range(TW - 2, 1);
      amp = $urandom_range(3000, 200);
      m.img[pr][pc] += real'(amp);
      m.img[pr-1][pc] += real'(amp / 4); m.img[pr+1][pc] += real'(amp / 4);
      m.img[pr][pc-1] += real'(amp / 4); m.img[pr][pc+1] += real'(amp / 4);
    end
  endfunction

  // Inputs change at the falling edge; in_ready, read there, is the value the
  // next rising edge sees, so a transfer happens exactly when it was high.
  task automatic drive_frame(int f, int gap_pct);
    bit acc;
    for (int r = 0; r < TH; r++)
      for (int c = 0; c < TW; c++) begin
        while (($urandom() % 100) < gap_pct) begin
          in_valid = 1'b0;
          n_gap++;
          @(negedge clk);
        end
        in_valid = 1'b1;
        in_pixel = PW'(longint'(ref_f[f].img[r][c]));
        // halfway through a frame the previous frame's reconstruction has
        // started: set up the configuration of this frame
        if (r == TH / 2 && c == 0) cfg_mode = mode_f[f];
        do begin
          acc = in_ready;
          @(negedge clk);
        end while (!acc);
      end
    last_in_time[f] = $time - 5;   // rising edge that took the last pixel
    in_valid = 1'b0;
  endtask

  // ----------------------------------------------------------- checking
  int     of = 0;           // frame being output
  int     oi = 0;           // pixel index within it
  longint prev_out_cycle = 0;
  bit     first_checked = 0;

  always @(posedge clk) begin
    if (rst_n && out_valid && of < NF) begin
      int r, c;
      real got, exp;
      bit  exp_m;
      r = oi / TW; c = oi % TW;
      if (oi == 0) begin
        if (of == 0) begin
          checks++;
          // the monitor sees at edge k what the core registered at edge k-1
          if (($time - last_in_time[0]) / 10 - 1 != longint'(2 * J + 3)) begin
            failures++;
            $display("FAIL: first output %0d cycles after last input, expected %0d",
                     ($time - last_in_time[0]) / 10 - 1, 2 * J + 3);
          end
        end
      end else begin
        checks++;
        if (cycle != prev_out_cycle + 1) begin
          failures++;
          $display("FAIL: frame %0d pixel %0d not contiguous", of, oi);
        end
      end
      prev_out_cycle = cycle;
      got   = real'(longint'(out_pixel)) / real'(longint'(1) << (2 * J));
      exp   = ref_f[of].rec[r][c];
      exp_m = (exp >= real'(thr_f[of]));
      checks++;
      if (got != exp || out_mask !== exp_m || out_first !== (oi == 0) ||
          out_last !== (oi == TW * TH - 1)) begin
        failures++;
        if (failures < 20)
          $display("FAIL: frame %0d (r%0d,c%0d) got %f m%0b f%0b l%0b expected %f m%0b",
                   of, r, c, got, out_mask, out_first, out_last, exp, exp_m);
      end
      n_mask += int'(out_mask && mode_f[of] == MODE_SIGNAL);
      if (oi == TW * TH - 1) begin
        case (mode_f[of])
          MODE_BACKGROUND: n_bg++;
          MODE_FULL:       n_full++;
          default:         n_sig++;
        endcase
        of++; oi = 0;
      end else begin
        oi++;
      end
    end
  end

  initial begin
    in_valid = 1'b0; in_pixel = '0; cfg_mode = MODE_SIGNAL; cfg_threshold = 16'(DEF_THRESHOLD);
    for (int f = 0; f < NF; f++) begin
      ref_f[f] = new();
      make_image(ref_f[f], f);
      ref_f[f].forward();
      mode_f[f] = (f == 1) ? MODE_FULL : (f == 2) ? MODE_BACKGROUND : MODE_SIGNAL;
      thr_f[f]  = (f == 3) ? 60 : DEF_THRESHOLD;
      ref_f[f].inverse(int'(mode_f[f]));
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    drive_frame(0, 0);
    drive_frame(1, 0);
    drive_frame(2, 0);
    wait (of == 3);
    @(negedge clk);
    cfg_threshold = 16'(thr_f[3]);
    drive_frame(3, 25);
    wait (of == NF);
    repeat (5) @(posedge clk);
    begin
      longint cyc;
      cyc = (last_in_time[2] - last_in_time[1]) / 10;
      checks++;
      if (cyc > 200_000_000 / 35_000) begin
        failures++;
        $display("FAIL: frame takes %0d cycles, more than 35 kfps at 200 MHz allows", cyc);
      end
      $display("frame period: %0d cycles, %0d frames/s at 200 MHz (35 kfps needs <= %0d, 100 kfps <= %0d)",
               cyc, 200_000_000 / cyc, 200_000_000 / 35_000, 200_000_000 / 100_000);
    end
    checks += 4;
    if (n_stall == 0) begin failures++; $display("FAIL: input never stalled"); end
    if (n_bg == 0 || n_sig == 0 || n_full == 0) begin
      failures++; $display("FAIL: mode switch not seen");
    end
    if (n_mask == 0) begin failures++; $display("FAIL: no pixel above threshold"); end
    if (n_gap == 0) begin failures++; $display("FAIL: no input gaps"); end
    $display("stalls=%0d background_frames=%0d signal_frames=%0d full_frames=%0d masked=%0d gaps=%0d",
             n_stall, n_bg, n_sig, n_full, n_mask, n_gap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (frame %0d pixel %0d)", of, oi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
