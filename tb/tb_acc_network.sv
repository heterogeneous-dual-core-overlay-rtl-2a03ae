// tb_acc_network: random PE sums and group settings 0..6 into the
// 128-input accumulation network; checks every result lane against group
// sums computed here (zero beyond N/G) and the one-cycle latency.
module tb_acc_network;
  localparam int N = 128, IW = 20, OW = IW + 7;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [2:0] group_log2;
  logic signed [IW-1:0] in_data [N];
  logic signed [OW-1:0] out_data [N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  acc_network #(.N(N), .IW(IW)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exp_v;
    int g;
    group_log2 = 0;
    for (int i = 0; i < N; i++) in_data[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      group_log2 = 3'($urandom_range(0, 6));
      for (int i = 0; i < N; i++) in_data[i] = IW'($urandom);
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("no valid"); end
      g = 1 << group_log2;
      for (int j = 0; j < N; j++) begin
        exp_v = 0;
        if (j < N / g) for (int k = 0; k < g; k++) exp_v += longint'(in_data[j*g + k]);
        checks++;
        if (longint'(out_data[j]) != exp_v) begin
          failures++;
          if (failures < 10) $display("g=%0d j=%0d got %0d exp %0d", g, j, out_data[j], exp_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
