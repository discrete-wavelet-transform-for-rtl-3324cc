// tb_haar_analysis_level: self-checking test of one Haar analysis level.
//
// Streams random frames with random gaps in in_valid through a 7 x 5 level
// (odd in both directions, so the symmetric extension of the last column and
// the last row is exercised), then through a 24 x 168 level at the default
// size. For every 2x2 block the expected LL, H, V, D are computed from the
// pixel array in the testbench; the block's coefficients must appear exactly
// one cycle after the sample that completes it, with the right row, column,
// tag and end-of-frame flag.
module tb_haar_analysis_level;
  localparam int unsigned IN_W = 16;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = !clk;

  int checks = 0;
  int failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct {
    longint due;
    longint ll, h, v, d;
    int row, col;
    bit tag, last;
  } exp_t;

  // ---------------------------------------------------------------- DUT A
  `define TB_LEVEL_INST(NAME, WW, HH) \
  logic NAME``_iv, NAME``_it, NAME``_ov, NAME``_ot, NAME``_ol; \
  logic signed [IN_W-1:0] NAME``_id; \
  logic signed [IN_W+1:0] NAME``_ll, NAME``_h, NAME``_v, NAME``_d; \
  logic [dwt_pkg::idx_w((HH+1)/2)-1:0] NAME``_or; \
  logic [dwt_pkg::idx_w((WW+1)/2)-1:0] NAME``_oc; \
  haar_analysis_level #(.W(WW), .H(HH), .IN_W(IN_W)) NAME ( \
    .clk(clk), .rst_n(rst_n), .in_valid(NAME``_iv), .in_data(NAME``_id), \
    .in_tag(NAME``_it), .out_valid(NAME``_ov), .out_ll(NAME``_ll), \
    .out_h(NAME``_h), .out_v(NAME``_v), .out_d(NAME``_d), .out_row(NAME``_or), \
    .out_col(NAME``_oc), .out_tag(NAME``_ot), .out_last(NAME``_ol));

  `TB_LEVEL_INST(dut_a, 7, 5)
  `TB_LEVEL_INST(dut_b, 24, 168)

  exp_t q_a[$];
  exp_t q_b[$];

  task automatic check_out(ref exp_t q[$], input string nm, input logic ov,
                           input longint ll, h, v, d, input int row, col,
                           input bit tag, last);
    exp_t e;
    if (!ov) return;
    checks++;
    if (q.size() == 0) begin
      failures++;
      $display("FAIL %s: unexpected output", nm);
      return;
    end
    e = q.pop_front();
    if (e.due != cycle || e.ll != ll || e.h != h || e.v != v || e.d != d ||
        e.row != row || e.col != col || e.tag != tag || e.last != last) begin
      failures++;
      $display("FAIL %s: got cyc=%0d ll=%0d h=%0d v=%0d d=%0d rc=%0d,%0d tag=%0b last=%0b exp cyc=%0d ll=%0d h=%0d v=%0d d=%0d rc=%0d,%0d tag=%0b last=%0b",
               nm, cycle, ll, h, v, d, row, col, tag, last,
               e.due, e.ll, e.h, e.v, e.d, e.row, e.col, e.tag, e.last);
    end
  endtask

  always @(posedge clk) begin
    check_out(q_a, "A", dut_a_ov, dut_a_ll, dut_a_h, dut_a_v, dut_a_d,
              int'(dut_a_or), int'(dut_a_oc), dut_a_ot, dut_a_ol);
    check_out(q_b, "B", dut_b_ov, dut_b_ll, dut_b_h, dut_b_v, dut_b_d,
              int'(dut_b_or), int'(dut_b_oc), dut_b_ot, dut_b_ol);
  end

  // Expected coefficients of the block completed by pixel (r, c).
  function automatic exp_t block(ref longint px[][], input int w, h, r, c,
                                 input bit tag, input longint due);
    exp_t e;
    int r0, c0, r1, c1;
    longint a, b, cc, dd;
    r0 = r - (r % 2); c0 = c - (c % 2);
    r1 = (r0 + 1 < h) ? r0 + 1 : r0;
    c1 = (c0 + 1 < w) ? c0 + 1 : c0;
    a = px[r0][c0]; b = px[r0][c1]; cc = px[r1][c0]; dd = px[r1][c1];
    e.ll = a + b + cc + dd;
    e.h  = a + b - cc - dd;
    e.v  = a - b + cc - dd;
    e.d  = a - b - cc + dd;
    e.row = r0 / 2; e.col = c0 / 2;
    e.tag = tag; e.last = (r == h - 1) && (c == w - 1);
    e.due = due;
    return e;
  endfunction

  task automatic run_frame_a(input bit tag, input int gap_pct);
    longint px[][];
    px = new[5];
    foreach (px[r]) px[r] = new[7];
    for (int r = 0; r < 5; r++)
      for (int c = 0; c < 7; c++) begin
        px[r][c] = longint'($signed(16'($urandom())));
        while (($urandom() % 100) < gap_pct) begin
          dut_a_iv <= 1'b0;
          @(posedge clk);
        end
        dut_a_iv <= 1'b1;
        dut_a_id <= IN_W'(px[r][c]);
        dut_a_it <= tag;
        if (((c % 2 == 1) || (c == 6)) && ((r % 2 == 1) || (r == 4)))
          q_a.push_back(block(px, 7, 5, r, c, tag, cycle + 2));
        @(posedge clk);
      end
    dut_a_iv <= 1'b0;
  endtask

  task automatic run_frame_b(input bit tag, input int gap_pct);
    longint px[][];
    px = new[168];
    foreach (px[r]) px[r] = new[24];
    for (int r = 0; r < 168; r++)
      for (int c = 0; c < 24; c++) begin
        px[r][c] = longint'($signed(16'($urandom())));
        while (($urandom() % 100) < gap_pct) begin
          dut_b_iv <= 1'b0;
          @(posedge clk);
        end
        dut_b_iv <= 1'b1;
        dut_b_id <= IN_W'(px[r][c]);
        dut_b_it <= tag;
        if ((c % 2 == 1) && (r % 2 == 1))
          q_b.push_back(block(px, 24, 168, r, c, tag, cycle + 2));
        @(posedge clk);
      end
    dut_b_iv <= 1'b0;
  endtask

  initial begin
    dut_a_iv = 1'b0; dut_a_id = '0; dut_a_it = 1'b0;
    dut_b_iv = 1'b0; dut_b_id = '0; dut_b_it = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    fork
      begin
        run_frame_a(1'b0, 0);
        run_frame_a(1'b1, 30);
        run_frame_a(1'b0, 60);
      end
      begin
        run_frame_b(1'b1, 0);
        run_frame_b(1'b0, 20);
      end
    join
    repeat (5) @(posedge clk);
    checks++;
    if (q_a.size() != 0 || q_b.size() != 0) begin
      failures++;
      $display("FAIL: %0d/%0d blocks never came out", q_a.size(), q_b.size());
    end
    // 3 frames of 3x4 blocks plus 2 frames of 12x84 blocks
    checks++;
    if (checks != 2 + 3 * 12 + 2 * 1008) begin
      failures++;
      $display("FAIL: %0d outputs checked", checks - 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
