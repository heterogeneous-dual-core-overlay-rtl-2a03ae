// tb_core_controller: feeds a fixed instruction list to the controller,
// models the load and post engines as busy for a fixed time after their
// start pulse, and checks: each LOAD/POST start carries its command body;
// a COMPUTE streams fm_addr, fm_addr+1, ... for exactly `count` cycles
// with a constant weight address; a barrier instruction is not issued
// while an engine is busy; LOAD overlaps COMPUTE without a barrier; WAIT
// blocks until a token is offered; SIGNAL pulses; END raises done only
// after all engines are idle.
module tb_core_controller;
  import opu_pkg::*;
  import opu_prog_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, running, done, head_valid, pop;
  instr_t head;
  logic ld_start, ld_busy, pp_start, pp_busy, cmp_busy, cmp_rd, cmp_first, sig_out, tok_avail = 0, tok_take;
  load_body_t ld_cmd;
  post_body_t pp_cmd;
  logic [15:0] cmp_fm_addr, cmp_w_addr;
  compute_body_t cmp_cmd;
  instr_t prog [10];
  int ip = 0, ld_cnt = 0, pp_cnt = 0, checks = 0, failures = 0, cyc = 0;
  int n_rd = 0, n_overlap = 0, n_sig = 0, t_tok = 0, t_take = -1, t_done = -1, t_pp_end = 0, t_barrier_issue = -1;

  always #5 clk = ~clk;
  core_controller #(.DRAIN(5)) dut (.*);

  assign head_valid = running && ip < 10;
  assign head = prog[ip < 10 ? ip : 0];
  assign ld_busy = ld_cnt != 0;
  assign pp_busy = pp_cnt != 0;

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (pop) ip <= ip + 1;
    ld_cnt <= ld_start ? 30 : (ld_cnt != 0 ? ld_cnt - 1 : 0);
    pp_cnt <= pp_start ? 25 : (pp_cnt != 0 ? pp_cnt - 1 : 0);
    if (pp_cnt == 1) t_pp_end <= cyc;
    if (ld_start) begin
      checks++;
      if (ld_cmd.mem_addr != 32'(100 + ld_cmd.buf_addr)) begin failures++; $display("bad load cmd"); end
    end
    if (pp_start) begin
      checks++;
      if (pp_cmd.mem_addr != 32'd777) begin failures++; $display("bad post cmd"); end
    end
    if (cmp_rd) begin
      checks += 2;
      if (cmp_fm_addr != 16'(50 + n_rd)) begin failures++; $display("fm addr %0d at %0d", cmp_fm_addr, n_rd); end
      if (cmp_w_addr != 16'd7 || cmp_first != (n_rd == 0)) begin failures++; $display("w addr/first"); end
      n_rd <= n_rd + 1;
      if (ld_busy) n_overlap <= n_overlap + 1;
    end
    if (sig_out) n_sig <= n_sig + 1;
    if (tok_take) t_take <= cyc;
    if (done && t_done < 0) t_done <= cyc;
    if (pop && head.op == OP_POST) begin
      checks++;
      if (cmp_busy || ld_busy || ld_start || n_rd < 20) begin failures++; $display("barrier POST issued while busy"); end
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prog[0] = i_load(DST_FM, 0, 100, 0, 4);
    prog[1] = i_load(DST_W, 0, 107, 7, 1);
    prog[2] = i_compute(0, 50, 0, 7, 0, 20, 0, 0, 0, 0, 1);
    prog[3] = i_load(DST_FM, 1, 103, 3, 4);
    prog[4] = i_post(0, 4, 1, 0, 0, 0, 0, 0, 0, ACT_NONE, 0, 0, 0, 777, 1);
    prog[5] = i_simple(OP_SIGNAL);
    prog[6] = i_simple(OP_WAIT);
    prog[7] = i_simple(OP_NOP);
    prog[8] = i_post(0, 4, 1, 0, 0, 0, 0, 0, 0, ACT_NONE, 0, 0, 0, 777);
    prog[9] = i_simple(OP_END);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    repeat (150) @(negedge clk);
    checks++;
    if (ip != 6) begin failures++; $display("WAIT did not block, ip=%0d", ip); end
    tok_avail = 1;
    t_tok = cyc;
    @(negedge clk);
    tok_avail = 0;
    repeat (100) @(negedge clk);
    checks += 6;
    if (n_rd != 20)        begin failures++; $display("%0d compute reads", n_rd); end
    if (n_overlap == 0)    begin failures++; $display("load did not overlap compute"); end
    if (n_sig != 1)        begin failures++; $display("%0d signals", n_sig); end
    if (t_take != t_tok)   begin failures++; $display("token taken at %0d, offered %0d", t_take, t_tok); end
    if (!done || running)  begin failures++; $display("not done"); end
    if (t_done <= t_pp_end) begin failures++; $display("done before post finished"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
