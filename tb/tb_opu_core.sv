// tb_opu_core: one small p-core P(8,12) with the behavioural memory runs
// a program with both compute modes: a channel-mode convolution (24 input
// channels = 2 PEs per result, 4 outputs, 6 pixels) and a window-mode 3x3
// depthwise convolution of 4 channels over a 6-row, 5-column tile. Results
// go through post-processing (no pooling, shift 1, no activation) to
// memory and are compared byte by byte with values computed here. SIGNAL
// and WAIT are checked against the token ports.
module tb_opu_core;
  import opu_pkg::*;
  import opu_prog_pkg::*;
  localparam int N = 8, V = 12, H = N/2;
  localparam int PIX = 6, CI = 24, CO = 4, PW = 5, PP = 3;
  localparam int FM0 = 100, W0 = 200, B0 = 300, OUT0 = 400, FM1 = 500, OUT1 = 600;
  logic [31:0] start_addr = 0;
  logic clk = 0, rst_n = 0, start = 0, done, busy, mem_ready, sig_out, tok_avail = 0, tok_take;
  mem_req_t mem_req;
  mem_rsp_t mem_rsp;
  int checks = 0, failures = 0, n_sig = 0, n_take = 0;
  int fm [PIX][CI], w [CO][CI], bias [N], img [H][2*PP][PW], tap [H][9];

  always #5 clk = ~clk;
  opu_core #(.N_PE(N), .V(V), .PCORE(1'b1), .FM_DEPTH(64), .W_DEPTH(8), .OB_DEPTH(32),
             .BIAS_DEPTH(4), .RES_DEPTH(16), .LB_MAX_W(8)) dut (.*);
  dram_model #(.WORDS(1024), .LAT(9)) u_mem (.clk, .rst_n, .req(mem_req), .ready(mem_ready), .rsp(mem_rsp));

  always @(posedge clk) begin
    if (sig_out) n_sig++;
    if (tok_take) n_take++;
  end

  task automatic put_byte(input int base, input int off, input int val);
    u_mem.mem[base + off / 64][(off % 64)*8 +: 8] = 8'(val);
  endtask
  task automatic put_instr(input int idx, input instr_t i);
    u_mem.mem[idx / 4][(idx % 4)*128 +: 128] = i;
  endtask
  function automatic int get_byte(input int base, input int off);
    return int'(signed'(u_mem.mem[base + off / 64][(off % 64)*8 +: 8]));
  endfunction
  function automatic int sat8(input int x);
    return x > 127 ? 127 : (x < -128 ? -128 : x);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pc;
    for (int a = 0; a < 1024; a++) u_mem.mem[a] = {16{$urandom}};
    for (int x = 0; x < PIX; x++) for (int c = 0; c < CI; c++) fm[x][c] = int'($urandom_range(0, 31)) - 16;
    for (int r = 0; r < CO; r++) for (int c = 0; c < CI; c++) w[r][c] = int'($urandom_range(0, 31)) - 16;
    for (int l = 0; l < N; l++) bias[l] = int'($urandom_range(0, 100)) - 50;
    for (int k = 0; k < H; k++) begin
      for (int r = 0; r < 2*PP; r++) for (int c = 0; c < PW; c++) img[k][r][c] = int'($urandom_range(0, 255)) - 128;
      for (int j = 0; j < 9; j++) tap[k][j] = int'($urandom_range(0, 15)) - 8;
    end
    // channel mode: PE p = 2r+q gets fm slice q (channels q*12..) and weights of output r
    for (int x = 0; x < PIX; x++) for (int c = 0; c < CI; c++) put_byte(FM0 + x, c, fm[x][c]);
    for (int r = 0; r < CO; r++) for (int c = 0; c < CI; c++) put_byte(W0, r*CI + c, w[r][c]);
    for (int k = 0; k < H; k++) for (int j = 0; j < 9; j++) put_byte(W0 + 2, k*V + j, tap[k][j]);
    for (int l = 0; l < N; l++) for (int b = 0; b < 4; b++) put_byte(B0, l*4 + b, (bias[l] >> (8*b)) & 255);
    for (int j = 0; j < PP; j++) for (int c = 0; c < PW; c++) for (int k = 0; k < H; k++) begin
      put_byte(FM1 + j*PW + c, k, img[k][2*j][c]);
      put_byte(FM1 + j*PW + c, N*V/4 + k, img[k][2*j+1][c]);
    end
    pc = 0;
    put_instr(pc++, i_simple(OP_SIGNAL));
    put_instr(pc++, i_load(DST_FM, 0, FM0, 0, PIX));
    put_instr(pc++, i_load(DST_W, 0, W0, 0, 2));
    put_instr(pc++, i_load(DST_BIAS, 0, B0, 0, 1));
    put_instr(pc++, i_compute(0, 0, 0, 0, 0, PIX, 1, 0, 0, 0, 1));
    put_instr(pc++, i_load(DST_FM, 1, FM1, 0, PP*PW));
    put_instr(pc++, i_compute(1, 0, 0, 1, 8, PP*PW, 0, 1, 0, PW, 1));
    put_instr(pc++, i_post(0, PIX, 1, 0, 0, 1, 0, 0, 0, ACT_NONE, 0, 0, 0, OUT0, 1));
    put_instr(pc++, i_post(8, (PP-1)*(PW-2), 1, 0, 0, 1, 0, 0, 0, ACT_NONE, 0, 0, 0, OUT1, 1));
    put_instr(pc++, i_simple(OP_WAIT));
    put_instr(pc++, i_simple(OP_END));
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    repeat (400) @(negedge clk);
    checks += 2;
    if (n_sig != 1) begin failures++; $display("no signal"); end
    if (n_take != 0) begin failures++; $display("WAIT did not block"); end
    tok_avail = 1;
    @(negedge clk);
    tok_avail = 0;
    wait (done);
    checks++;
    if (n_take != 1) begin failures++; $display("token not taken"); end
    for (int x = 0; x < PIX; x++) for (int l = 0; l < N; l++) begin
      int a;
      a = bias[l];
      if (l < CO) for (int c = 0; c < CI; c++) a += fm[x][c] * w[l][c];
      checks++;
      if (get_byte(OUT0 + x, l) != sat8(a >>> 1)) begin failures++; if (failures < 10) $display("ch x%0d l%0d got %0d exp %0d", x, l, get_byte(OUT0 + x, l), sat8(a >>> 1)); end
    end
    for (int j = 1; j < PP; j++) for (int c = 2; c < PW; c++) for (int k = 0; k < H; k++) begin
      int o, sa, sb;
      o = (j-1)*(PW-2) + (c-2);
      sa = bias[k]; sb = bias[k+H];
      for (int r = 0; r < 3; r++) for (int cc = 0; cc < 3; cc++) begin
        sa += tap[k][3*r+cc] * img[k][2*j-2+r][c-2+cc];
        sb += tap[k][3*r+cc] * img[k][2*j-1+r][c-2+cc];
      end
      checks += 2;
      if (get_byte(OUT1 + o, k) != sat8(sa >>> 1))     begin failures++; if (failures < 10) $display("win A o%0d k%0d", o, k); end
      if (get_byte(OUT1 + o, k + H) != sat8(sb >>> 1)) begin failures++; if (failures < 10) $display("win B o%0d k%0d", o, k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
