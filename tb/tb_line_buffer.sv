// tb_line_buffer: streams two random tiles (row pairs, column by column)
// through a 4-channel line buffer, with idle cycles in between, and checks
// every emitted pair of 3x3 windows, their number per tile and that they
// appear one cycle after the input that completes them.
module tb_line_buffer;
  localparam int CH = 4, MAX_W = 16;
  logic clk = 0, rst_n = 0, in_valid = 0, first = 0, out_valid, in_prev = 0;
  logic [15:0] row_w;
  logic signed [7:0] pix_top [CH], pix_bot [CH];
  logic signed [7:0] win_a [CH][9], win_b [CH][9];
  logic signed [7:0] img [CH][16][MAX_W];
  int checks = 0, failures = 0, n_out = 0, exp_j, exp_c, rows, cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) begin cyc <= cyc + 1; in_prev <= in_valid; end
  line_buffer #(.CH(CH), .MAX_W(MAX_W)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected output order: pair j = 1.., column c = 2..row_w-1
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (!in_prev) begin failures++; $display("late output"); end
    for (int ch = 0; ch < CH; ch++)
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++) begin
          checks += 2;
          if (win_a[ch][3*r+c] != img[ch][2*exp_j-2+r][exp_c-2+c]) begin
            failures++; if (failures < 10) $display("A j%0d c%0d ch%0d r%0d c%0d", exp_j, exp_c, ch, r, c); end
          if (win_b[ch][3*r+c] != img[ch][2*exp_j-1+r][exp_c-2+c]) begin
            failures++; if (failures < 10) $display("B j%0d c%0d ch%0d", exp_j, exp_c, ch); end
        end
    n_out++;
    if (exp_c == int'(row_w) - 1) begin exp_c = 2; exp_j++; end
    else exp_c++;
  end

  task automatic run_tile(input int w, input int pairs);
    row_w = 16'(w);
    rows = 2 * pairs;
    for (int ch = 0; ch < CH; ch++)
      for (int r = 0; r < rows; r++)
        for (int c = 0; c < w; c++) img[ch][r][c] = 8'($urandom);
    exp_j = 1; exp_c = 2; n_out = 0;
    for (int j = 0; j < pairs; j++)
      for (int c = 0; c < w; c++) begin
        while ($urandom_range(0, 3) == 0) begin in_valid = 0; first = 0; @(negedge clk); end
        in_valid = 1;
        first = (j == 0 && c == 0);
        for (int ch = 0; ch < CH; ch++) begin
          pix_top[ch] = img[ch][2*j][c];
          pix_bot[ch] = img[ch][2*j+1][c];
        end
        @(negedge clk);
      end
    in_valid = 0; first = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (n_out != (pairs - 1) * (w - 2)) begin failures++; $display("tile %0dx%0d: %0d outputs", w, pairs, n_out); end
  endtask

  initial begin
    for (int ch = 0; ch < CH; ch++) begin pix_top[ch] = 0; pix_bot[ch] = 0; end
    row_w = 8;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run_tile(7, 5);
    run_tile(12, 4);
    run_tile(16, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
