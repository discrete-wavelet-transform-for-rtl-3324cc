// haar_analysis_level: one level of the 2D Haar analysis filter bank.
//
// The level takes a W x H image as a raster stream (row by row, left to
// right, at most one sample per cycle) and produces the four subbands of one
// dyadic decomposition step at half the resolution in each direction. The 2D
// filter is applied separably, as two 1D passes with stride two:
//   row pass    : s = a + b, t = a - b      for each horizontal pair (a, b)
//   column pass : LL = s_top + s_bot, H = s_top - s_bot,
//                 V  = t_top + t_bot, D = t_top - t_bot
// For the 2x2 block [a b; c d] this gives LL = a+b+c+d, H = a+b-c-d
// (horizontal detail, the paper's LH), V = a-b+c-d (vertical detail, HL) and
// D = a-b-c+d (diagonal detail, HH). The filters are the Haar pair
// h = [1, 1], g = [1, -1] of the method; their 1/sqrt(2) normalisation is left
// out (kept separate, as the method suggests) so that all arithmetic is
// integer and exact. Outputs are therefore two bits wider than the input.
//
// The row-pass results of an even row wait in a line buffer of ceil(W/2)
// entries until the odd row below arrives. An odd last column or an odd last
// row is paired with itself (symmetric extension), which is this design's
// choice for sizes that are not even.
//
// Timing: a coefficient set leaves one cycle after the sample that completes
// its 2x2 block (registered outputs). No back-pressure: the consumer must
// accept every out_valid. in_tag rides along with the data and reappears on
// out_tag with the coefficients it produced (the core uses it as the buffer
// bank of the frame).
module haar_analysis_level #(
  parameter int unsigned W    = 24,  // input columns
  parameter int unsigned H    = 168, // input rows
  parameter int unsigned IN_W = 16   // signed input width
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic signed [IN_W-1:0]        in_data,
  input  logic                          in_tag,
  output logic                          out_valid,
  output logic signed [IN_W+1:0]        out_ll,
  output logic signed [IN_W+1:0]        out_h,
  output logic signed [IN_W+1:0]        out_v,
  output logic signed [IN_W+1:0]        out_d,
  output logic [dwt_pkg::idx_w((H+1)/2)-1:0] out_row,
  output logic [dwt_pkg::idx_w((W+1)/2)-1:0] out_col,
  output logic                          out_tag,
  output logic                          out_last   // last coefficient of the frame
);
  import dwt_pkg::*;

  localparam int unsigned WO = half_up(W);
  localparam int unsigned CW = idx_w(W);
  localparam int unsigned RW = idx_w(H);

  typedef struct packed {
    logic signed [IN_W:0] s;  // row-pass low-pass (pair sum)
    logic signed [IN_W:0] t;  // row-pass high-pass (pair difference)
  } row_pair_t;

  logic [CW-1:0] col;
  logic [RW-1:0] row;
  logic signed [IN_W-1:0] left;           // left sample of the current pair
  row_pair_t line_buf [WO];               // row pass of the upper row

  logic      last_col, last_row, pair_right, pair_bottom;
  row_pair_t cur, top;
  logic [idx_w(WO)-1:0] lb_idx;           // line buffer slot of the pair

  always_comb begin
    lb_idx      = $bits(lb_idx)'(col >> 1);
    last_col    = (col == CW'(W - 1));
    last_row    = (row == RW'(H - 1));
    // Right member of a horizontal pair: odd column, or a lone last column.
    pair_right  = col[0] || (last_col && (W % 2 == 1));
    // Lower member of a vertical pair: odd row, or a lone last row.
    pair_bottom = row[0] || (last_row && (H % 2 == 1));
    if (col[0]) begin
      cur.s = (IN_W+1)'(left) + (IN_W+1)'(in_data);
      cur.t = (IN_W+1)'(left) - (IN_W+1)'(in_data);
    end else begin
      // lone last column paired with itself
      cur.s = (IN_W+1)'(in_data) <<< 1;
      cur.t = '0;
    end
    top = row[0] ? line_buf[lb_idx] : cur;  // lone last row pairs with itself
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col       <= '0;
      row       <= '0;
      left      <= '0;
      out_valid <= 1'b0;
      out_ll    <= '0;
      out_h     <= '0;
      out_v     <= '0;
      out_d     <= '0;
      out_row   <= '0;
      out_col   <= '0;
      out_tag   <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      if (in_valid) begin
        if (!col[0]) left <= in_data;
        if (pair_right) begin
          if (!pair_bottom) begin
            line_buf[lb_idx] <= cur;
          end else begin
            out_valid <= 1'b1;
            out_ll    <= (IN_W+2)'($signed(top.s)) + (IN_W+2)'($signed(cur.s));
            out_h     <= (IN_W+2)'($signed(top.s)) - (IN_W+2)'($signed(cur.s));
            out_v     <= (IN_W+2)'($signed(top.t)) + (IN_W+2)'($signed(cur.t));
            out_d     <= (IN_W+2)'($signed(top.t)) - (IN_W+2)'($signed(cur.t));
            out_row   <= $bits(out_row)'(row >> 1);
            out_col   <= $bits(out_col)'(col >> 1);
            out_tag   <= in_tag;
            out_last  <= last_row && last_col;
          end
        end
        if (last_col) begin
          col <= '0;
          row <= last_row ? '0 : row + 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

endmodule
