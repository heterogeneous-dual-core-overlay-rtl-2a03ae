// tb_mem_arbiter: three requesters issue random reads and writes through
// the arbiter to the behavioural memory. Each checks that its read
// responses come back in order with the data of its own addresses, and
// that its writes land; contention and round-robin service are counted.
module tb_mem_arbiter;
  import opu_pkg::*;
  localparam int N = 3, NREQ = 150;
  logic clk = 0, rst_n = 0, dn_ready;
  mem_req_t up_req [N], dn_req;
  logic     up_ready [N];
  mem_rsp_t up_rsp [N], dn_rsp;
  int checks = 0, failures = 0, contention = 0;

  always #5 clk = ~clk;
  mem_arbiter #(.N(N), .DEPTH(8)) dut (.*);
  dram_model #(.WORDS(4096), .LAT(6)) u_mem (.clk, .rst_n, .req(dn_req), .ready(dn_ready), .rsp(dn_rsp));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && up_req[0].valid && up_req[1].valid && up_req[2].valid) contention++;

  int n_rsp [N];
  int exp_q [N][$];

  for (genvar s = 0; s < N; s++) begin : g_src
    always @(posedge clk) if (rst_n && up_rsp[s].valid) begin
      checks++;
      if (exp_q[s].size() == 0) begin failures++; $display("src %0d: unexpected response", s); end
      else begin
        int a;
        a = exp_q[s].pop_front();
        if (up_rsp[s].rdata[31:0] != 32'(a)) begin failures++; $display("src %0d: got %0d exp %0d", s, up_rsp[s].rdata[31:0], a); end
      end
      n_rsp[s]++;
    end
    initial begin
      int k;
      up_req[s] = '0;
      wait (rst_n);
      @(negedge clk);
      k = 0;
      while (k < NREQ) begin
        up_req[s].valid = ($urandom_range(0, 3) != 0);
        up_req[s].addr  = 32'(s*1000 + k);
        up_req[s].we    = (k % 5 == 4);
        up_req[s].wdata = {480'(0), 32'(s*1000 + k)};
        up_req[s].wstrb = '1;
        @(posedge clk);
        if (up_req[s].valid && up_ready[s]) begin
          if (!up_req[s].we) exp_q[s].push_back(s*1000 + k);
          k++;
        end
        @(negedge clk);
      end
      up_req[s].valid = 0;
    end
  end

  initial begin
    for (int a = 0; a < 4096; a++) u_mem.mem[a] = {480'(0), 32'(a)};
    for (int s = 0; s < N; s++) n_rsp[s] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3000) @(negedge clk);
    for (int s = 0; s < N; s++) begin
      checks++;
      if (n_rsp[s] != NREQ - NREQ/5) begin failures++; $display("src %0d: %0d responses", s, n_rsp[s]); end
    end
    checks++;
    if (u_mem.n_writes != N * (NREQ/5)) begin failures++; $display("%0d writes", u_mem.n_writes); end
    checks++;
    if (contention == 0) begin failures++; $display("no contention"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
