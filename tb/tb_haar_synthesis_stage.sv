// tb_haar_synthesis_stage: self-checking test of one inverse-Haar stage.
//
// Random 2x2 pixel blocks [a b; c d] are analysed in the testbench with the
// integer Haar filters (LL = a+b+c+d, H = a+b-c-d, V = a-b+c-d, D = a-b-c+d).
// Three stage instances (levels 4, 2 and 1 of a 4-level transform) receive
// Y = 4^(J-j) * LL and the three details, with the row and column bit of one
// of the four pixels; each must return 4^(J-j+1) times that pixel, one cycle
// later. With keep_detail low the stage must pass Y through unchanged.
module tb_haar_synthesis_stage;
  localparam int unsigned J  = 4;
  localparam int unsigned CW = 24;
  localparam int unsigned YW = 26;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = !clk;

  int checks = 0;
  int failures = 0;

  logic                 in_valid, row_bit, col_bit, keep;
  logic signed [CW-1:0] ch, cv, cd;
  logic signed [YW-1:0] y_in [3];
  logic                 ov   [3];
  logic signed [YW-1:0] y_out[3];
  localparam int unsigned LV [3] = '{4, 2, 1};

  for (genvar k = 0; k < 3; k++) begin : g_dut
    haar_synthesis_stage #(.LEVEL(LV[k]), .LEVELS(J), .CW(CW), .YW(YW)) dut (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .y_in(y_in[k]),
      .coef_h(ch), .coef_v(cv), .coef_d(cd), .row_bit(row_bit),
      .col_bit(col_bit), .keep_detail(keep), .out_valid(ov[k]), .y_out(y_out[k]));
  end

  longint exp_y [3];
  longint nxt_y [3];
  bit     exp_v;

  always @(posedge clk) begin
    if (rst_n) begin
      for (int k = 0; k < 3; k++) begin
        checks++;
        if (ov[k] !== exp_v || (exp_v && longint'(y_out[k]) != exp_y[k])) begin
          failures++;
          $display("FAIL level %0d: valid=%0b y=%0d expected valid=%0b y=%0d",
                   LV[k], ov[k], y_out[k], exp_v, exp_y[k]);
        end
      end
    end
  end

  initial begin
    in_valid = 1'b0; row_bit = 1'b0; col_bit = 1'b0; keep = 1'b1;
    ch = '0; cv = '0; cd = '0;
    for (int k = 0; k < 3; k++) y_in[k] = '0;
    exp_v = 1'b0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int t = 0; t < 2000; t++) begin
      longint px [2][2];
      longint ll, hh, vv, dd;
      int rb, cb;
      bit v, kp;
      // pixel magnitudes stay within the 4-level coefficient range
      for (int i = 0; i < 2; i++)
        for (int k = 0; k < 2; k++)
          px[i][k] = longint'($urandom_range(200000)) - 100000;
      ll = px[0][0] + px[0][1] + px[1][0] + px[1][1];
      hh = px[0][0] + px[0][1] - px[1][0] - px[1][1];
      vv = px[0][0] - px[0][1] + px[1][0] - px[1][1];
      dd = px[0][0] - px[0][1] - px[1][0] + px[1][1];
      rb = $urandom_range(1); cb = $urandom_range(1);
      v  = ($urandom_range(9) != 0);
      kp = ($urandom_range(4) != 0);
      in_valid <= v; keep <= kp; row_bit <= rb[0]; col_bit <= cb[0];
      ch <= CW'(hh); cv <= CW'(vv); cd <= CW'(dd);
      for (int k = 0; k < 3; k++) begin
        longint s;
        s = longint'(1) << (2 * (J - LV[k]));
        y_in[k] <= YW'(s * ll);
        // expected after the edge: 4*s*pixel, or Y unchanged
        if (v) nxt_y[k] = kp ? 4 * s * px[rb][cb] : s * ll;
      end
      @(posedge clk);
      #1;
      exp_v = v;
      if (v) exp_y = nxt_y;
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
