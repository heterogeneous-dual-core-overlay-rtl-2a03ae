// tb_pingpong_buffer: fills both banks with different data, then reads
// one bank while writing the other (the ping-pong use) and checks that
// reads return the right bank's data one cycle after the read enable.
module tb_pingpong_buffer;
  localparam int W = 72, DEPTH = 64;
  logic clk = 0, we = 0, wbank = 0, re = 0, rbank = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [W-1:0] wdata = 0, rdata;
  logic [W-1:0] model [2][DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  pingpong_buffer #(.W(W), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < DEPTH; a++) begin
        we = 1; wbank = 1'(b); waddr = 6'(a);
        wdata = {$urandom, $urandom, $urandom};
        model[b][a] = wdata;
        @(negedge clk);
      end
    we = 0;
    for (int t = 0; t < 400; t++) begin
      logic [W-1:0] expd;
      // read bank t[6], overwrite random words of the other bank
      re = 1; rbank = 1'(t / 64 % 2); raddr = 6'($urandom);
      expd = model[rbank][raddr];
      we = 1; wbank = ~rbank; waddr = 6'($urandom); wdata = {$urandom, $urandom, $urandom};
      @(negedge clk);
      model[wbank][waddr] = wdata;
      re = 0; we = 0;
      checks++;
      if (rdata !== expd) begin failures++; $display("bank %0d addr %0d got %h exp %h", rbank, raddr, rdata, expd); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
