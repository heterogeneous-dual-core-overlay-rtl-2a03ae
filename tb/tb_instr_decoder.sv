// tb_instr_decoder: a program of random instructions ending in END is
// placed in the behavioural memory; the testbench pops the queue head at
// random and checks that the instructions arrive in program order, that
// fetching stops after the beat holding END, and that a second start at a
// different address flushes the queue and restarts there.
module tb_instr_decoder;
  import opu_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, mem_ready, head_valid, pop = 0;
  logic [31:0] start_addr = 0;
  mem_req_t mem_req;
  mem_rsp_t mem_rsp;
  instr_t head;
  instr_t prog [64];
  int checks = 0, failures = 0, n_seen;

  always #5 clk = ~clk;
  instr_decoder #(.QDEPTH(8)) dut (.*);
  dram_model #(.WORDS(256), .LAT(7)) u_mem (.clk, .rst_n, .req(mem_req), .ready(mem_ready), .rsp(mem_rsp));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int base, input int len);
    int reads0;
    for (int i = 0; i < len; i++) begin
      prog[i] = {OP_NOP, 1'b0, 123'(0)};
      prog[i].op = (i == len - 1) ? OP_END : opcode_e'($urandom_range(0, 5));
      prog[i].body = {4{$urandom}};
      u_mem.mem[base + i/4][(i%4)*128 +: 128] = prog[i];
    end
    for (int i = len; i < (len + 3) / 4 * 4 + 8; i++)
      u_mem.mem[base + i/4][(i%4)*128 +: 128] = {OP_LOAD, 124'(0)};
    reads0 = u_mem.n_reads;
    start_addr = 32'(base);
    start = 1;
    @(negedge clk);
    start = 0;
    n_seen = 0;
    while (n_seen < len) begin
      pop = head_valid && ($urandom_range(0, 2) != 0);
      if (pop) begin
        checks++;
        if (head !== prog[n_seen]) begin failures++; $display("instr %0d wrong", n_seen); end
        n_seen++;
      end
      @(negedge clk);
    end
    pop = 0;
    repeat (30) @(negedge clk);
    checks++;
    if (u_mem.n_reads - reads0 != (len + 3) / 4) begin failures++; $display("%0d fetches for %0d instrs", u_mem.n_reads - reads0, len); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run(10, 23);
    run(100, 9);
    // restart while instructions are still queued
    run(40, 12);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
