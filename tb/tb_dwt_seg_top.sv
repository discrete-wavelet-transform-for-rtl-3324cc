// tb_dwt_seg_top: end-to-end test of the whole detector-level design at its
// default size: 6 ASICs x 8 streams = 48 cores, each segmenting a 24 x 168
// tile with a four-level Haar decomposition and a 170-photon threshold.
//
// Every stream gets its own synthetic frames, sent back to back: frames 0
// and 1 at full rate in diffraction mode, frame 2 in background mode and
// frame 3 in full-reconstruction mode, both with independent random gaps on
// every stream so that the cores run out of step. Frame 2 must stall each
// core for a few cycles while the bank of frame 0 is still being read. Every
// output pixel
// of every core is compared with the floating-point reference model
// (haar_ref_pkg). Each mechanism (input stall, the three reconstruction modes,
// above-threshold pixels, input gaps, padding of odd subband sizes) is
// counted and must occur at least once.
module tb_dwt_seg_top;
  import dwt_pkg::*;
  import haar_ref_pkg::*;

  localparam int unsigned TW = DEF_TILE_W;
  localparam int unsigned TH = DEF_TILE_H;
  localparam int unsigned J  = DEF_LEVELS;
  localparam int unsigned PW = DEF_PIX_W;
  localparam int unsigned NC = DEF_ASICS * DEF_STREAMS;
  localparam int unsigned NF = 4;
  localparam int unsigned OW = PW + 2 * J + 2;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = !clk;

  int checks = 0;
  int failures = 0;

  recon_mode_e             cfg_mode;
  logic [15:0]             cfg_threshold;
  logic [NC-1:0]           in_valid, in_ready, out_valid, out_mask, out_first, out_last;
  logic signed [PW-1:0]    in_pixel  [NC];
  logic signed [OW-1:0]    out_pixel [NC];

  dwt_seg_top dut (.*);

  haar_ref #(TW, TH, J) ref_f [NC][NF];

  int n_stall = 0, n_mask = 0, n_gap = 0;
  int n_frames_sig = 0, n_frames_bg = 0, n_frames_full = 0;
  int done_frames [NC];
  int oi [NC];

  // padding of odd sizes happens when some level's plane has an odd side
  function automatic int odd_levels();
    int n = 0;
    for (int unsigned j = 0; j < J; j++)
      if (level_dim(TW, j) % 2 == 1 || level_dim(TH, j) % 2 == 1) n++;
    return n;
  endfunction

  always @(posedge clk)
    for (int s = 0; s < NC; s++) if (rst_n && in_valid[s] && !in_ready[s]) n_stall++;

  function automatic recon_mode_e frame_mode(int f);
    return (f == 2) ? MODE_BACKGROUND : (f == 3) ? MODE_FULL : MODE_SIGNAL;
  endfunction

  function automatic void make_image(haar_ref #(TW, TH, J) m, int s, int f);
    real a, b;
    a = real'($urandom_range(30)) / 10.0;
    b = real'($urandom_range(100)) / 10.0;
    for (int r = 0; r < TH; r++)
      for (int c = 0; c < TW; c++)
        m.img[r][c] = $floor(300.0 + 20.0 * s + a * r + b * c + 0.01 * (r - 84) * (r - 84))
                      + real'($urandom_range(4));
    for (int p = 0; p < 15 + f * 10; p++) begin
      int pr, pc, amp;
      pr = $urandom_range(TH - 2, 1); pc = $urandom_range(TW - 2, 1);
      amp = $urandom_range(2500, 150);
      m.img[pr][pc] += real'(amp);
      m.img[pr-1][pc] += real'(amp / 3); m.img[pr][pc+1] += real'(amp / 3);
    end
  endfunction

  // one driver per stream; inputs change at the falling edge
  task automatic drive_frame(int s, int f, int gap_pct);
    bit acc;
    for (int r = 0; r < TH; r++)
      for (int c = 0; c < TW; c++) begin
        while (($urandom() % 100) < gap_pct) begin
          in_valid[s] = 1'b0;
          n_gap++;
          @(negedge clk);
        end
        in_valid[s] = 1'b1;
        in_pixel[s] = PW'(longint'(ref_f[s][f].img[r][c]));
        do begin
          acc = in_ready[s];
          @(negedge clk);
        end while (!acc);
      end
    in_valid[s] = 1'b0;
  endtask

  // output checking, all streams
  always @(posedge clk) begin
    for (int s = 0; s < NC; s++) begin
      if (rst_n && out_valid[s] && done_frames[s] < NF) begin
        int f, r, c;
        recon_mode_e md;
        real got, exp;
        f = done_frames[s];
        md = frame_mode(f);
        r = oi[s] / TW; c = oi[s] % TW;
        got = real'(longint'(out_pixel[s])) / real'(longint'(1) << (2 * J));
        exp = ref_f[s][f].rec[r][c];
        checks++;
        if (got != exp || out_mask[s] !== (exp >= real'(DEF_THRESHOLD)) ||
            out_first[s] !== (oi[s] == 0) || out_last[s] !== (oi[s] == TW * TH - 1)) begin
          failures++;
          if (failures < 20)
            $display("FAIL: stream %0d frame %0d (r%0d,c%0d) got %f m%0b expected %f",
                     s, f, r, c, got, out_mask[s], exp);
        end
        if (md == MODE_SIGNAL) n_mask += int'(out_mask[s]);
        if (oi[s] == TW * TH - 1) begin
          oi[s] = 0;
          done_frames[s]++;
          case (md)
            MODE_BACKGROUND: n_frames_bg++;
            MODE_FULL:       n_frames_full++;
            default:         n_frames_sig++;
          endcase
        end else begin
          oi[s]++;
        end
      end
    end
  end

  function automatic bit all_done(int n);
    for (int s = 0; s < NC; s++) if (done_frames[s] < n) return 0;
    return 1;
  endfunction

  function automatic bit all_started(int n);
    for (int s = 0; s < NC; s++)
      if (done_frames[s] < n || (done_frames[s] == n && oi[s] == 0)) return 0;
    return 1;
  endfunction

  initial begin
    in_valid = '0; cfg_mode = MODE_SIGNAL; cfg_threshold = 16'(DEF_THRESHOLD);
    for (int s = 0; s < NC; s++) begin
      in_pixel[s] = '0; done_frames[s] = 0; oi[s] = 0;
      for (int f = 0; f < NF; f++) begin
        ref_f[s][f] = new();
        make_image(ref_f[s][f], s, f);
        ref_f[s][f].forward();
        ref_f[s][f].inverse(int'(frame_mode(f)));
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int s = 0; s < NC; s++) begin
      fork
        automatic int ss = s;
        begin
          drive_frame(ss, 0, 0);
          drive_frame(ss, 1, 0);
          drive_frame(ss, 2, 5 + ss % 30);
          drive_frame(ss, 3, 5 + (ss * 7) % 30);
        end
      join_none
    end
    // once every core is reconstructing frame 1, switch to background mode:
    // frame 2's reconstruction starts only after its input has ended
    while (!all_started(1)) @(negedge clk);
    cfg_mode = MODE_BACKGROUND;
    // frame 3 takes at least one frame time after frame 2, so every core has
    // sampled the mode of frame 2 before any reaches the end of frame 3
    while (!all_started(2)) @(negedge clk);
    cfg_mode = MODE_FULL;
    wait fork;
    while (!all_done(NF)) @(negedge clk);
    repeat (5) @(negedge clk);
    checks += 5;
    if (n_stall == 0) begin failures++; $display("FAIL: no input stall"); end
    if (n_frames_sig == 0 || n_frames_bg == 0 || n_frames_full == 0) begin
      failures++; $display("FAIL: mode switch not seen");
    end
    if (n_mask == 0) begin failures++; $display("FAIL: no pixel above threshold"); end
    if (n_gap == 0) begin failures++; $display("FAIL: no input gaps"); end
    if (odd_levels() == 0) begin failures++; $display("FAIL: no odd-size padding"); end
    $display("stalls=%0d signal_frames=%0d background_frames=%0d full_frames=%0d masked=%0d gaps=%0d padded_levels=%0d",
             n_stall, n_frames_sig, n_frames_bg, n_frames_full, n_mask, n_gap, odd_levels());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (150000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
