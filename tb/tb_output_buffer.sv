// tb_output_buffer: random overwrite / accumulate operations on a small
// output buffer against a testbench model, reading back through the
// registered read port.
module tb_output_buffer;
  localparam int LANES = 8, DEPTH = 16;
  logic clk = 0, acc_valid = 0, acc_clear = 0, rd_en = 0;
  logic [3:0] acc_addr = 0, rd_addr = 0;
  logic signed [31:0] acc_data [LANES], rd_data [LANES];
  int model [DEPTH][LANES];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  output_buffer #(.LANES(LANES), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < LANES; i++) acc_data[i] = 0;
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      acc_valid = 1; acc_clear = 1; acc_addr = 4'(a);
      for (int i = 0; i < LANES; i++) begin acc_data[i] = int'($urandom_range(0, 2000)) - 1000; model[a][i] = acc_data[i]; end
      @(negedge clk);
    end
    for (int t = 0; t < 1000; t++) begin
      acc_valid = 1; acc_clear = ($urandom_range(0, 7) == 0); acc_addr = 4'($urandom);
      for (int i = 0; i < LANES; i++) acc_data[i] = int'($urandom_range(0, 2000)) - 1000;
      for (int i = 0; i < LANES; i++) model[acc_addr][i] = acc_clear ? acc_data[i] : model[acc_addr][i] + acc_data[i];
      @(negedge clk);
      acc_valid = 0;
      rd_en = 1; rd_addr = 4'($urandom);
      @(negedge clk);
      rd_en = 0;
      for (int i = 0; i < LANES; i++) begin
        checks++;
        if (rd_data[i] != model[rd_addr][i]) begin failures++; if (failures < 10) $display("a%0d l%0d got %0d exp %0d", rd_addr, i, rd_data[i], model[rd_addr][i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
