// tb_dual_opu: end-to-end run of the dual-core processor at its default
// size C(128,10)+P(32,12), with both instruction streams in memory.
//
// c-core, image A: a pointwise convolution of 16 pixels, 40 input and 64
// output channels (2 PEs per result, so 64 results per cycle), split in
// two input-channel tiles that are accumulated in the output buffer; the
// second tile is loaded into the other ping-pong bank while the first is
// computed. Post-processing: bias, 2:1 max pooling, >>>2, residual add,
// ReLU, int8 saturation. Then it gives a token to the p-core and waits for
// one back.
// p-core, image B: waits for the token, then a 3x3 depthwise convolution of
// 16 channels over an 8x8 tile through the line buffer (two output rows
// per cycle); post-processing once with clamped ReLU and once with 2:1
// average pooling; then it returns a token.
// Every stored byte is compared with values computed here. The test also
// counts the mechanisms it is meant to exercise and fails if one never
// happens, and checks the compute rate of one feature-map word per cycle.
module tb_dual_opu;
  import opu_pkg::*;
  import opu_prog_pkg::*;

  localparam int NC = 128, VC = 10, NP = 32, VP = 12;
  localparam int C_PROG = 0, P_PROG = 64;
  localparam int C_FM = 1000, C_W = 2000, C_BIAS = 2100, C_RES = 2200, C_OUT = 3000;
  localparam int P_FM = 4000, P_W = 4200, P_BIAS = 4300, P_OUT = 5000, P_OUT2 = 5100;
  localparam int NPIX = 16, CI = 40, CO = 64;
  localparam int PCH = NP / 2, PW = 8, PPAIRS = 4;

  logic clk = 0, rst_n = 0, start = 0, done_c, done_p, mem_ready;
  mem_req_t mem_req;
  mem_rsp_t mem_rsp;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  dual_opu dut (
    .clk, .rst_n, .start, .c_start_addr(32'(C_PROG)), .p_start_addr(32'(P_PROG)),
    .done_c, .done_p, .mem_req, .mem_ready, .mem_rsp
  );

  dram_model #(.WORDS(8192), .LAT(20)) u_mem (.clk, .rst_n, .req(mem_req), .ready(mem_ready), .rsp(mem_rsp));

  // ---------------- data
  int fmC [NPIX][CI], wC [CO][CI], biasC [NC], resC [8][NC];
  int imgP [PCH][2*PPAIRS][PW], tapP [PCH][9], biasP [NP];

  task automatic put_byte(input int base, input int off, input int val);
    u_mem.mem[base + off / 64][(off % 64)*8 +: 8] = 8'(val);
  endtask

  task automatic put_instr(input int base, input int idx, input instr_t i);
    u_mem.mem[base + idx / 4][(idx % 4)*128 +: 128] = i;
  endtask

  function automatic int get_byte(input int base, input int off);
    return int'(signed'(u_mem.mem[base + off / 64][(off % 64)*8 +: 8]));
  endfunction

  function automatic int sat8(input int x);
    return x > 127 ? 127 : (x < -128 ? -128 : x);
  endfunction

  // ---------------- mechanism counters
  int n_overlap = 0, n_accum = 0, n_window = 0, n_both_req = 0, n_wait_block = 0;
  int n_relu_clip = 0, n_sat = 0, n_rd_c = 0, n_rd_p = 0;
  int busy_c_cycles = 0, first_c = -1, last_c = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_ccore.ld_busy && dut.u_ccore.u_ctrl.streaming) n_overlap++;
    if (dut.u_ccore.pe_out_valid && dut.u_ccore.cmp_cmd.accumulate) n_accum++;
    if (dut.u_pcore.g_lb.lb_valid) n_window++;
    if (dut.core_req[0].valid && dut.core_req[1].valid) n_both_req++;
    if (dut.u_pcore.head_valid && dut.u_pcore.head.op == OP_WAIT && !dut.u_pcore.tok_take) n_wait_block++;
    if (dut.u_ccore.cmp_rd) n_rd_c++;
    if (dut.u_pcore.cmp_rd) n_rd_p++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pc;
    for (int a = 0; a < 8192; a++) u_mem.mem[a] = {16{$urandom}};

    // ---- c-core data
    for (int x = 0; x < NPIX; x++) for (int c = 0; c < CI; c++) fmC[x][c] = int'($urandom_range(0, 31)) - 16;
    for (int r = 0; r < CO; r++) for (int c = 0; c < CI; c++) wC[r][c] = int'($urandom_range(0, 31)) - 16;
    for (int l = 0; l < NC; l++) biasC[l] = int'($urandom_range(0, 400)) - 200;
    for (int o = 0; o < 8; o++) for (int l = 0; l < NC; l++) resC[o][l] = int'($urandom_range(0, 60)) - 30;
    // fm words: tile t at beat C_FM + (t*16 + x)*10, slice q byte j = channel t*20 + q*10 + j
    for (int t = 0; t < 2; t++) for (int x = 0; x < NPIX; x++) for (int q = 0; q < 2; q++) for (int j = 0; j < VC; j++)
      put_byte(C_FM + (t*NPIX + x)*10, q*VC + j, fmC[x][t*20 + q*VC + j]);
    // weight words: tile t at C_W + t*20, PE p = 2r+q, byte p*10+j = W[r][t*20+q*10+j]
    for (int t = 0; t < 2; t++) for (int r = 0; r < CO; r++) for (int q = 0; q < 2; q++) for (int j = 0; j < VC; j++)
      put_byte(C_W + t*20, ((2*r + q)*VC + j), wC[r][t*20 + q*VC + j]);
    for (int l = 0; l < NC; l++) for (int b = 0; b < 4; b++) put_byte(C_BIAS, l*4 + b, (biasC[l] >> (8*b)) & 255);
    for (int o = 0; o < 8; o++) for (int l = 0; l < NC; l++) put_byte(C_RES + o*2, l, resC[o][l]);

    // ---- p-core data
    for (int k = 0; k < PCH; k++) begin
      for (int r = 0; r < 2*PPAIRS; r++) for (int c = 0; c < PW; c++) imgP[k][r][c] = int'($urandom_range(0, 255)) - 128;
      for (int j = 0; j < 9; j++) tapP[k][j] = int'($urandom_range(0, 15)) - 8;
    end
    for (int l = 0; l < NP; l++) biasP[l] = int'($urandom_range(0, 400)) - 200;
    // fm word (192 bytes, 3 beats) per (pair j, column c): bytes k = row 2j, bytes 96+k = row 2j+1
    for (int j = 0; j < PPAIRS; j++) for (int c = 0; c < PW; c++) for (int k = 0; k < PCH; k++) begin
      put_byte(P_FM + (j*PW + c)*3, k, imgP[k][2*j][c]);
      put_byte(P_FM + (j*PW + c)*3, NP*VP/4 + k, imgP[k][2*j+1][c]);
    end
    for (int k = 0; k < PCH; k++) for (int j = 0; j < 9; j++) put_byte(P_W, k*VP + j, tapP[k][j]);
    for (int l = 0; l < NP; l++) for (int b = 0; b < 4; b++) put_byte(P_BIAS, l*4 + b, (biasP[l] >> (8*b)) & 255);

    // ---- c-core program
    pc = 0;
    put_instr(C_PROG, pc++, i_load(DST_FM, 0, C_FM, 0, NPIX));
    put_instr(C_PROG, pc++, i_load(DST_W, 0, C_W, 0, 2));
    put_instr(C_PROG, pc++, i_load(DST_BIAS, 0, C_BIAS, 0, 1));
    put_instr(C_PROG, pc++, i_load(DST_RES, 1, C_RES, 0, 8));
    put_instr(C_PROG, pc++, i_compute(0, 0, 0, 0, 0, NPIX, 1, 0, 0, 0, 1));
    put_instr(C_PROG, pc++, i_load(DST_FM, 1, C_FM + NPIX*10, 0, NPIX));   // overlaps the compute
    put_instr(C_PROG, pc++, i_compute(1, 0, 0, 1, 0, NPIX, 1, 0, 1, 0, 1));
    put_instr(C_PROG, pc++, i_post(0, 8, 2, 0, 0, 2, 1, 0, 1, ACT_RELU, 0, 0, 0, C_OUT, 1));
    put_instr(C_PROG, pc++, i_simple(OP_SIGNAL, 1));
    put_instr(C_PROG, pc++, i_simple(OP_WAIT));
    put_instr(C_PROG, pc++, i_simple(OP_END));

    // ---- p-core program
    pc = 0;
    put_instr(P_PROG, pc++, i_simple(OP_WAIT));
    put_instr(P_PROG, pc++, i_load(DST_FM, 0, P_FM, 0, PPAIRS*PW));
    put_instr(P_PROG, pc++, i_load(DST_W, 1, P_W, 3, 1));
    put_instr(P_PROG, pc++, i_load(DST_BIAS, 1, P_BIAS, 2, 1));
    put_instr(P_PROG, pc++, i_compute(0, 0, 1, 3, 0, PPAIRS*PW, 0, 1, 0, PW, 1));
    put_instr(P_PROG, pc++, i_post(0, 18, 1, 0, 0, 3, 0, 0, 0, ACT_RELU6, 100, 1, 2, P_OUT, 1));
    put_instr(P_PROG, pc++, i_post(0, 9, 2, 1, 1, 3, 0, 0, 0, ACT_RELU6, 100, 1, 2, P_OUT2, 1));
    put_instr(P_PROG, pc++, i_simple(OP_SIGNAL, 1));
    put_instr(P_PROG, pc++, i_simple(OP_END));

    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    fork
      wait (done_c);
      wait (done_p);
    join
    repeat (5) @(negedge clk);

    // ---- check c-core output
    for (int o = 0; o < 8; o++) for (int l = 0; l < NC; l++) begin
      int a0, a1, m, v;
      a0 = biasC[l]; a1 = biasC[l];
      if (l < CO) for (int c = 0; c < CI; c++) begin
        a0 += fmC[2*o][c] * wC[l][c];
        a1 += fmC[2*o+1][c] * wC[l][c];
      end
      m = a0 > a1 ? a0 : a1;
      v = (m >>> 2) + resC[o][l];
      if (v < 0) n_relu_clip++;
      v = v < 0 ? 0 : v;
      if (v > 127) n_sat++;
      v = sat8(v);
      checks++;
      if (get_byte(C_OUT + o*2, l) != v) begin
        failures++;
        if (failures < 10) $display("c out %0d lane %0d got %0d exp %0d", o, l, get_byte(C_OUT + o*2, l), v);
      end
    end

    // ---- check p-core outputs
    begin
      int accP [18][NP];
      for (int j = 1; j < PPAIRS; j++) for (int c = 2; c < PW; c++) for (int k = 0; k < PCH; k++) begin
        int o, sa, sb;
        o = (j-1)*(PW-2) + (c-2);
        sa = biasP[k]; sb = biasP[k + PCH];
        for (int r = 0; r < 3; r++) for (int cc = 0; cc < 3; cc++) begin
          sa += tapP[k][3*r+cc] * imgP[k][2*j-2+r][c-2+cc];
          sb += tapP[k][3*r+cc] * imgP[k][2*j-1+r][c-2+cc];
        end
        accP[o][k] = sa; accP[o][k + PCH] = sb;
      end
      for (int o = 0; o < 18; o++) for (int l = 0; l < NP; l++) begin
        int v;
        v = accP[o][l] >>> 3;
        v = v < 0 ? 0 : (v > 100 ? 100 : v);
        checks++;
        if (get_byte(P_OUT + o, l) != v) begin
          failures++;
          if (failures < 10) $display("p out %0d lane %0d got %0d exp %0d", o, l, get_byte(P_OUT + o, l), v);
        end
      end
      for (int o = 0; o < 9; o++) for (int l = 0; l < NP; l++) begin
        int v;
        v = ((accP[2*o][l] + accP[2*o+1][l]) >>> 1) >>> 3;
        v = v < 0 ? 0 : (v > 100 ? 100 : v);
        checks++;
        if (get_byte(P_OUT2 + o, l) != v) begin
          failures++;
          if (failures < 10) $display("p avg %0d lane %0d got %0d exp %0d", o, l, get_byte(P_OUT2 + o, l), v);
        end
      end
    end

    // ---- rates and mechanisms
    checks += 2;
    if (n_rd_c != 2*NPIX)      begin failures++; $display("c-core streamed %0d words", n_rd_c); end
    if (n_rd_p != PPAIRS*PW)   begin failures++; $display("p-core streamed %0d words", n_rd_p); end
    $display("mechanisms: overlap=%0d accumulate=%0d window=%0d both_req=%0d wait_block=%0d relu_clip=%0d saturate=%0d",
             n_overlap, n_accum, n_window, n_both_req, n_wait_block, n_relu_clip, n_sat);
    checks += 7;
    if (n_overlap == 0)    begin failures++; $display("no load/compute overlap"); end
    if (n_accum == 0)      begin failures++; $display("no accumulation"); end
    if (n_window != (PPAIRS-1)*(PW-2)) begin failures++; $display("window outputs %0d", n_window); end
    if (n_both_req == 0)   begin failures++; $display("no memory contention"); end
    if (n_wait_block == 0) begin failures++; $display("WAIT never blocked"); end
    if (n_relu_clip == 0)  begin failures++; $display("ReLU never clipped"); end
    if (n_sat == 0)        begin failures++; $display("never saturated"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
