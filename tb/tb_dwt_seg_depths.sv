// tb_dwt_seg_depths: decomposition-depth sweep of the segmentation core.
//
// The method is judged for depths J = 1 to 5, and J = 4 is the one
// recommended. This testbench builds five cores side by side at the default
// 24 x 168 tile, one for each depth. Each core gets two frames back to back:
// the diffraction estimate of one image, then the background estimate of
// another. Gaps are placed at random in in_valid. Every output pixel must match
// the floating-point model of haar_ref_pkg exactly (out_pixel / 4^J), with the
// mask equal to (model >= 170 photons). J = 5 takes the 24-column tile down to
// a single column, so padding is exercised at almost every level.
//
// Counted per depth: frames in each mode, pixels above the threshold, and input
// stalls. The test fails if a depth produced no frame in either mode or never
// marked a pixel. Inputs change at the falling clock edge. Checks run at the
// rising edge.
module tb_dwt_seg_depths;
  import dwt_pkg::*;
  import haar_ref_pkg::*;

  localparam int unsigned TW = DEF_TILE_W;
  localparam int unsigned TH = DEF_TILE_H;
  localparam int unsigned PW = DEF_PIX_W;
  localparam int unsigned ND = 5;          // depths 1..ND

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = !clk;

  int checks = 0;
  int failures = 0;
  bit done [ND];

  for (genvar gi = 0; gi < ND; gi++) begin : g_depth
    localparam int unsigned J = gi + 1;

    logic                     in_valid, in_ready;
    logic signed [PW-1:0]     in_pixel;
    recon_mode_e              cfg_mode;
    logic [15:0]              cfg_threshold;
    logic                     out_valid, out_mask, out_first, out_last;
    logic signed [PW+2*J+1:0] out_pixel;

    dwt_seg_core #(.TILE_W(TW), .TILE_H(TH), .LEVELS(J), .PIX_W(PW)) dut (
      .clk, .rst_n, .in_valid, .in_ready, .in_pixel, .cfg_mode, .cfg_threshold,
      .out_valid, .out_pixel, .out_mask, .out_first, .out_last);

    haar_ref #(TW, TH, J) ref_f [2];
    int n_stall = 0, n_bg = 0, n_sig = 0, n_mask = 0;
    int of = 0, oi = 0;

    always @(posedge clk) if (rst_n && in_valid && !in_ready) n_stall++;

    always @(posedge clk) begin
      if (rst_n && out_valid && of < 2) begin
        int r, c;
        real got, exp;
        bit  exp_m;
        r = oi / TW; c = oi % TW;
        got   = real'(longint'(out_pixel)) / real'(longint'(1) << (2 * J));
        exp   = ref_f[of].rec[r][c];
        exp_m = (exp >= real'(DEF_THRESHOLD));
        checks++;
        if (got != exp || out_mask !== exp_m || out_first !== (oi == 0) ||
            out_last !== (oi == TW * TH - 1)) begin
          failures++;
          if (failures < 20)
            $display("FAIL: J=%0d frame %0d (r%0d,c%0d) got %f m%0b expected %f m%0b",
                     J, of, r, c, got, out_mask, exp, exp_m);
        end
        n_mask += int'(out_mask && of == 0);
        if (oi == TW * TH - 1) begin
          if (of == 1) n_bg++; else n_sig++;
          of++; oi = 0;
        end else begin
          oi++;
        end
      end
    end

    initial begin
      bit acc;
      in_valid = 1'b0; in_pixel = '0;
      cfg_mode = MODE_SIGNAL; cfg_threshold = 16'(DEF_THRESHOLD);
      for (int f = 0; f < 2; f++) begin
        int np;
        ref_f[f] = new();
        for (int r = 0; r < TH; r++)
          for (int c = 0; c < TW; c++)
            ref_f[f].img[r][c] = $floor(300.0 + 2.0 * r + 12.0 * c
                                        + 0.015 * (r - 90) * (r - 90))
                                 + real'($urandom_range(3));
        np = 25;
        for (int p = 0; p < np; p++) begin
          int pr, pc, amp;
          pr = $urandom_range(TH - 2, 1); pc = $urandom_range(TW - 2, 1);
          amp = $urandom_range(3000, 300);
          ref_f[f].img[pr][pc]   += real'(amp);
          ref_f[f].img[pr-1][pc] += real'(amp / 4);
          ref_f[f].img[pr+1][pc] += real'(amp / 4);
          ref_f[f].img[pr][pc-1] += real'(amp / 4);
          ref_f[f].img[pr][pc+1] += real'(amp / 4);
        end
        ref_f[f].forward();
        ref_f[f].inverse((f == 1) ? 1 : 0);
      end
      wait (rst_n);
      @(negedge clk);
      for (int f = 0; f < 2; f++)
        for (int r = 0; r < TH; r++)
          for (int c = 0; c < TW; c++) begin
            while (($urandom() % 100) < 10) begin
              in_valid = 1'b0;
              @(negedge clk);
            end
            in_valid = 1'b1;
            in_pixel = PW'(longint'(ref_f[f].img[r][c]));
            // the first frame's reconstruction has started by now
            if (f == 1 && r == TH / 2 && c == 0) cfg_mode = MODE_BACKGROUND;
            do begin
              acc = in_ready;
              @(negedge clk);
            end while (!acc);
          end
      in_valid = 1'b0;
      while (of < 2) @(negedge clk);
      checks++;
      if (n_sig == 0 || n_bg == 0 || n_mask == 0) begin
        failures++;
        $display("FAIL: J=%0d mechanisms missing (signal %0d background %0d masked %0d)",
                 J, n_sig, n_bg, n_mask);
      end
      $display("J=%0d: signal_frames=%0d background_frames=%0d masked=%0d stalls=%0d",
               J, n_sig, n_bg, n_mask, n_stall);
      done[gi] = 1'b1;
    end
  end

  function automatic bit all_done();
    for (int i = 0; i < ND; i++) if (!done[i]) return 1'b0;
    return 1'b1;
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (!all_done()) @(negedge clk);
    repeat (3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
