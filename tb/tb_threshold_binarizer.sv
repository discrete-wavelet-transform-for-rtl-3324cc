// tb_threshold_binarizer: self-checking test of the global threshold.
//
// Drives random fixed-point pixels (8 fraction bits, as after a 4-level
// reconstruction) and random thresholds, with extra values placed exactly on
// and just around the threshold. The expected mask is computed in real
// arithmetic (pixel / 2^8 >= threshold); mask and delayed pixel must appear
// one cycle after the input.
module tb_threshold_binarizer;
  localparam int unsigned YW   = 26;
  localparam int unsigned FRAC = 8;
  localparam int unsigned TW   = 16;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = !clk;

  int checks = 0;
  int failures = 0;

  logic                 in_valid, out_valid, out_mask;
  logic signed [YW-1:0] in_pixel, out_pixel;
  logic [TW-1:0]        threshold;

  threshold_binarizer #(.YW(YW), .FRAC(FRAC), .TW(TW)) dut (.*);

  bit     exp_v, exp_m, nxt_m;
  longint exp_p, nxt_p;
  int     n_marked = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (out_valid !== exp_v || (exp_v && (out_mask !== exp_m ||
                                            longint'(out_pixel) != exp_p))) begin
        failures++;
        $display("FAIL: valid=%0b mask=%0b pix=%0d expected %0b %0b %0d",
                 out_valid, out_mask, out_pixel, exp_v, exp_m, exp_p);
      end
    end
  end

  initial begin
    in_valid = 1'b0; in_pixel = '0; threshold = 16'd170;
    exp_v = 1'b0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int t = 0; t < 3000; t++) begin
      longint p;
      int unsigned thr;
      bit v;
      thr = (t < 1000) ? 170 : $urandom_range(4000);
      case ($urandom_range(3))
        0: p = longint'(thr) * 256 + longint'($urandom_range(2)) - 1;  // at the edge
        default: p = longint'($urandom_range(2000000)) - 600000;
      endcase
      v = ($urandom_range(7) != 0);
      in_valid <= v; in_pixel <= YW'(p); threshold <= TW'(thr);
      nxt_m = (real'(p) / 256.0 >= real'(thr));
      nxt_p = p;
      @(posedge clk);
      #1;
      exp_v = v;
      if (v) begin exp_m = nxt_m; exp_p = nxt_p; n_marked += int'(nxt_m); end
    end
    checks++;
    if (n_marked < 100) begin
      failures++;
      $display("FAIL: only %0d pixels above threshold", n_marked);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
