// tb_subband_buffer: self-checking test of the double-banked subband store.
//
// Fills both banks of a 12 x 84 buffer (the level-1 size of a 24 x 168 tile)
// with random words, then reads every word of both banks back in random
// order and checks the data and the one-cycle read latency. A bank is then
// rewritten while the other is read, as the core does, and checked again.
module tb_subband_buffer;
  localparam int unsigned W  = 12;
  localparam int unsigned H  = 84;
  localparam int unsigned DW = 72;

  logic clk = 1'b0;
  always #5 clk = !clk;

  int checks = 0;
  int failures = 0;

  logic                          wr_en, wr_bank, rd_en, rd_bank;
  logic [dwt_pkg::idx_w(H)-1:0]  wr_row, rd_row;
  logic [dwt_pkg::idx_w(W)-1:0]  wr_col, rd_col;
  logic [DW-1:0]                 wr_data, rd_data;

  subband_buffer #(.W(W), .H(H), .DW(DW)) dut (.*);

  logic [DW-1:0] model [2][H][W];

  function automatic logic [DW-1:0] rand_word();
    return {$urandom(), $urandom(), $urandom()};
  endfunction

  // a read issued at one edge must show its word after that edge
  logic          chk_pend = 1'b0;
  logic [DW-1:0] chk_exp;
  always @(posedge clk) begin
    if (chk_pend) begin
      checks++;
      if (rd_data !== chk_exp) begin
        failures++;
        $display("FAIL: read %h expected %h", rd_data, chk_exp);
      end
    end
    chk_pend <= rd_en;
    chk_exp  <= model[rd_bank][rd_row][rd_col];
  end

  task automatic write_bank(input bit b);
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) begin
        logic [DW-1:0] w;
        w = rand_word();
        model[b][r][c] = w;
        wr_en <= 1'b1; wr_bank <= b; wr_row <= 7'(r); wr_col <= 4'(c); wr_data <= w;
        @(posedge clk);
      end
    wr_en <= 1'b0;
  endtask

  task automatic read_bank(input bit b, input int n);
    for (int i = 0; i < n; i++) begin
      int r, c;
      r = $urandom_range(H - 1); c = $urandom_range(W - 1);
      rd_en <= 1'b1; rd_bank <= b; rd_row <= 7'(r); rd_col <= 4'(c);
      @(posedge clk);
    end
    rd_en <= 1'b0;
    @(posedge clk);
  endtask

  initial begin
    wr_en = 1'b0; rd_en = 1'b0; wr_bank = 1'b0; rd_bank = 1'b0;
    wr_row = '0; wr_col = '0; rd_row = '0; rd_col = '0; wr_data = '0;
    @(posedge clk);
    write_bank(1'b0);
    write_bank(1'b1);
    read_bank(1'b0, 500);
    read_bank(1'b1, 500);
    // concurrent: rewrite bank 0 while reading bank 1
    fork
      write_bank(1'b0);
      read_bank(1'b1, 400);
    join
    read_bank(1'b0, 500);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
