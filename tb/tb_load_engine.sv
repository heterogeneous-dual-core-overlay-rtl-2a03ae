// tb_load_engine: runs LOAD commands for all four destinations (buffer
// words of 2, 3, 1 and 1 memory beats) against the behavioural memory and
// checks every buffer write (destination, bank, address, data) and the
// time taken: with no memory stalls a load of B beats must end within
// B + latency + a few cycles, i.e. requests are pipelined.
module tb_load_engine;
  import opu_pkg::*;
  localparam int FM_W = 600, WT_W = 1200, BIAS_W = 512, RES_W = 100, LAT = 12;
  logic clk = 0, rst_n = 0, start = 0, busy, mem_ready, wr_valid, wr_bank;
  load_body_t cmd;
  mem_req_t mem_req;
  mem_rsp_t mem_rsp;
  load_dst_e wr_dst;
  logic [15:0] wr_addr;
  logic [WT_W-1:0] wr_data;
  int checks = 0, failures = 0, n_wr = 0;
  logic [WT_W-1:0] expw;

  always #5 clk = ~clk;
  load_engine #(.FM_W(FM_W), .WT_W(WT_W), .BIAS_W(BIAS_W), .RES_W(RES_W), .MAX_W(WT_W)) dut (.*);
  dram_model #(.WORDS(1024), .LAT(LAT), .STALL_1_IN(1000000)) u_mem (.clk, .rst_n, .req(mem_req), .ready(mem_ready), .rsp(mem_rsp));

  function automatic int bpw(input load_dst_e d);
    case (d) DST_FM: return 2; DST_W: return 3; DST_BIAS: return 1; default: return 1; endcase
  endfunction
  function automatic int wbits(input load_dst_e d);
    case (d) DST_FM: return FM_W; DST_W: return WT_W; DST_BIAS: return BIAS_W; default: return RES_W; endcase
  endfunction

  always @(posedge clk) if (rst_n && wr_valid) begin
    int b, wb;
    b = bpw(cmd.dst); wb = wbits(cmd.dst);
    expw = '0;
    for (int k = 0; k < b; k++)
      for (int i = 0; i < MEM_DW; i++)
        if (k*MEM_DW + i < WT_W) expw[k*MEM_DW + i] = u_mem.mem[cmd.mem_addr + n_wr*b + k][i];
    checks++;
    if (wr_dst != cmd.dst || wr_bank != cmd.bank || wr_addr != cmd.buf_addr + 16'(n_wr)) begin
      failures++; $display("bad write target dst %0d bank %0d addr %0d", wr_dst, wr_bank, wr_addr);
    end
    for (int i = 0; i < wb; i++) if (wr_data[i] !== expw[i]) begin failures++; $display("data bit %0d word %0d", i, n_wr); break; end
    n_wr++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    cmd = '0;
    for (int a = 0; a < 1024; a++) u_mem.mem[a] = {16{$urandom}};
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    for (int t = 0; t < 12; t++) begin
      cmd = '0;
      cmd.dst = load_dst_e'(t % 4);
      cmd.bank = 1'(t / 4);
      cmd.mem_addr = 32'($urandom_range(0, 500));
      cmd.buf_addr = 16'($urandom_range(0, 50));
      cmd.words = 16'($urandom_range(1, 20));
      n_wr = 0;
      start = 1;
      t0 = 0;
      @(negedge clk);
      start = 0;
      while (busy) begin @(negedge clk); t0++; end
      @(negedge clk);
      checks += 2;
      if (n_wr != int'(cmd.words)) begin failures++; $display("%0d writes for %0d words", n_wr, cmd.words); end
      if (t0 > int'(cmd.words) * bpw(cmd.dst) + LAT + 4) begin failures++; $display("load took %0d cycles", t0); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
