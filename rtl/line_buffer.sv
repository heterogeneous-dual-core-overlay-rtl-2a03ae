// line_buffer: p-core line buffer producing two stacked 3x3 windows.
//
// The p-core feature-map buffer is double: each word carries one pixel of
// an even input row (pix_top) and the pixel of the next, odd row below it
// (pix_bot), for CH channels. Pixels arrive column by column, row_w per
// row pair. Two line memories per channel keep the previous row pair, so
// at column c the buffer sees a 4-pixel column (rows 2j-2 .. 2j+1); three
// such columns are kept in registers. Window A is rows 2j-2..2j, window B
// rows 2j-1..2j+1, both over columns c-2..c: the 3x3 windows of output
// rows 2j-2 and 2j-1 at output column c-2 (stride 1, no padding). Pixel
// order in a window is row-major, index = 3*row + col.
// out_valid rises one cycle after an input once j >= 1 and c >= 2;
// `first` marks the first pixel pair of a tile and clears the counters.
// The line buffer and the two-row parallelism follow the paper; the
// 3x3 window size, stride 1 and the memory organisation are this
// design's choices.
module line_buffer #(
  parameter int CH    = 16,
  parameter int MAX_W = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              first,
  input  logic [15:0]       row_w,
  input  logic signed [7:0] pix_top [CH],
  input  logic signed [7:0] pix_bot [CH],
  output logic              out_valid,
  output logic signed [7:0] win_a [CH][9],
  output logic signed [7:0] win_b [CH][9]
);
  localparam int CW = $clog2(MAX_W);

  logic signed [7:0] line_top [CH][MAX_W];   // row 2j-2
  logic signed [7:0] line_bot [CH][MAX_W];   // row 2j-1
  logic signed [7:0] col_q    [3][CH][4];    // columns c-2, c-1, c
  logic [CW-1:0]     col;
  logic [15:0]       pair;
  logic [CW-1:0]     col_cur;
  logic [15:0]       pair_cur;

  assign col_cur  = first ? '0 : col;
  assign pair_cur = first ? '0 : pair;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col       <= '0;
      pair      <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && (pair_cur >= 16'd1) && (col_cur >= CW'(2));
      if (in_valid) begin
        if (32'(col_cur) == 32'(row_w) - 1) begin
          col  <= '0;
          pair <= pair_cur + 16'd1;
        end else begin
          col  <= col_cur + CW'(1);
          pair <= pair_cur;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int ch = 0; ch < CH; ch++) begin
        col_q[0][ch] <= col_q[1][ch];
        col_q[1][ch] <= col_q[2][ch];
        col_q[2][ch][0] <= line_top[ch][col_cur];
        col_q[2][ch][1] <= line_bot[ch][col_cur];
        col_q[2][ch][2] <= pix_top[ch];
        col_q[2][ch][3] <= pix_bot[ch];
        line_top[ch][col_cur] <= pix_top[ch];
        line_bot[ch][col_cur] <= pix_bot[ch];
      end
    end
  end

  always_comb begin
    for (int ch = 0; ch < CH; ch++)
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++) begin
          win_a[ch][3*r + c] = col_q[c][ch][r];
          win_b[ch][3*r + c] = col_q[c][ch][r+1];
        end
  end
endmodule
