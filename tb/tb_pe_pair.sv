// tb_pe_pair: streams random vectors into a PE pair (V=10, not a power of
// two, so the delayer path of the adder tree is used) one per cycle and
// compares both sums with inner products computed in the testbench. Also
// checks the latency of $clog2(V) cycles.
module tb_pe_pair;
  localparam int V  = 10;
  localparam int OW = 16 + $clog2(V);
  localparam int LAT = $clog2(V);
  localparam int NV = 300;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [7:0] common [V], sep0 [V], sep1 [V];
  logic signed [OW-1:0] sum0, sum1;
  int checks = 0, failures = 0;
  int exp0 [NV], exp1 [NV], issue_cyc [NV];
  int cyc = 0, n_out = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  pe_pair #(.V(V)) dut (.clk, .rst_n, .in_valid, .common, .sep0, .sep1, .out_valid, .sum0, .sum1);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 3;
    if (int'(sum0) != exp0[n_out]) begin failures++; $display("sum0 #%0d %0d exp %0d", n_out, sum0, exp0[n_out]); end
    if (int'(sum1) != exp1[n_out]) begin failures++; $display("sum1 #%0d %0d exp %0d", n_out, sum1, exp1[n_out]); end
    if (cyc - issue_cyc[n_out] != LAT) begin failures++; $display("latency %0d", cyc - issue_cyc[n_out]); end
    n_out++;
  end

  initial begin
    for (int j = 0; j < V; j++) begin common[j] = 0; sep0[j] = 0; sep1[j] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < NV; i++) begin
      exp0[i] = 0; exp1[i] = 0;
      for (int j = 0; j < V; j++) begin
        common[j] = 8'($urandom);
        sep0[j]   = 8'($urandom);
        sep1[j]   = 8'($urandom);
        if (i == 0) begin common[j] = -128; sep0[j] = -128; sep1[j] = 127; end
        exp0[i] += int'(common[j]) * int'(sep0[j]);
        exp1[i] += int'(common[j]) * int'(sep1[j]);
      end
      in_valid = ($urandom_range(0, 3) != 0) || i == 0;
      issue_cyc[i] = cyc;
      @(negedge clk);
      if (!in_valid) begin i--; end
    end
    in_valid = 0;
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (n_out != NV) begin failures++; $display("got %0d results", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
