// tb_post_proc: drives the post-processing unit with an output buffer,
// bias and residual buffers modelled here (registered reads) and a store
// port with random backpressure. Random commands cover max and average
// pooling, residual add on and off and the three activations; every stored
// byte and byte strobe is checked against a model of bias -> pool ->
// shift -> residual -> activation -> saturate.
module tb_post_proc;
  import opu_pkg::*;
  localparam int LANES = 80, OBD = 64, RESD = 32, BD = 4;
  localparam int BEATS = 2;
  logic clk = 0, rst_n = 0, start = 0, busy;
  post_body_t cmd;
  logic ob_rd_en, bias_rd_en, bias_rd_bank, res_rd_en, res_rd_bank, mem_ready = 1;
  logic [5:0] ob_rd_addr;
  logic [1:0] bias_rd_addr;
  logic [4:0] res_rd_addr;
  logic signed [31:0] ob_rd_data [LANES];
  logic [LANES*32-1:0] bias_rd_data;
  logic [LANES*8-1:0]  res_rd_data;
  mem_req_t mem_req;
  int ob [OBD][LANES], bias [2][BD][LANES], res [2][RESD][LANES];
  int checks = 0, failures = 0, n_st = 0;

  always #5 clk = ~clk;
  post_proc #(.LANES(LANES), .OB_DEPTH(OBD), .RES_DEPTH(RESD), .BIAS_DEPTH(BD)) dut (.*);

  always @(posedge clk) begin
    if (ob_rd_en) for (int i = 0; i < LANES; i++) ob_rd_data[i] <= ob[ob_rd_addr][i];
    if (bias_rd_en) for (int i = 0; i < LANES; i++) bias_rd_data[i*32 +: 32] <= bias[bias_rd_bank][bias_rd_addr][i];
    if (res_rd_en) for (int i = 0; i < LANES; i++) res_rd_data[i*8 +: 8] <= 8'(res[res_rd_bank][res_rd_addr][i]);
    mem_ready <= ($urandom_range(0, 3) != 0);
  end

  function automatic int expect_lane(input int o, input int l);
    int acc, v;
    for (int p = 0; p < int'(cmd.pool_n); p++) begin
      v = ob[int'(cmd.ob_addr) + o*int'(cmd.pool_n) + p][l] + bias[cmd.bias_bank][cmd.bias_addr][l];
      if (p == 0) acc = v;
      else if (cmd.pool_avg) acc += v;
      else if (v > acc) acc = v;
    end
    if (cmd.pool_avg) acc = acc >>> cmd.avg_shift;
    acc = acc >>> cmd.shift;
    if (cmd.res_en) acc += res[cmd.res_bank][int'(cmd.res_addr) + o][l];
    if (cmd.act != ACT_NONE && acc < 0) acc = 0;
    if (cmd.act == ACT_RELU6 && acc > int'(cmd.relu6_max)) acc = int'(cmd.relu6_max);
    return acc > 127 ? 127 : (acc < -128 ? -128 : acc);
  endfunction

  always @(posedge clk) if (rst_n && mem_req.valid && mem_ready) begin
    int o, b;
    o = n_st / BEATS; b = n_st % BEATS;
    checks++;
    if (!mem_req.we || mem_req.addr != cmd.mem_addr + 32'(n_st)) begin failures++; $display("store addr %0d", mem_req.addr); end
    for (int i = 0; i < MEM_BYTES; i++) begin
      int l;
      l = b*MEM_BYTES + i;
      checks++;
      if (mem_req.wstrb[i] != (l < LANES)) begin failures++; $display("strobe %0d", l); end
      else if (l < LANES && int'(signed'(mem_req.wdata[i*8 +: 8])) != expect_lane(o, l)) begin
        failures++;
        if (failures < 10) $display("o%0d l%0d got %0d exp %0d", o, l, signed'(mem_req.wdata[i*8 +: 8]), expect_lane(o, l));
      end
    end
    n_st++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd = '0;
    for (int a = 0; a < OBD; a++) for (int l = 0; l < LANES; l++) ob[a][l] = int'($urandom_range(0, 4000)) - 2000;
    for (int k = 0; k < 2; k++) for (int a = 0; a < BD; a++) for (int l = 0; l < LANES; l++) bias[k][a][l] = int'($urandom_range(0, 200)) - 100;
    for (int k = 0; k < 2; k++) for (int a = 0; a < RESD; a++) for (int l = 0; l < LANES; l++) res[k][a][l] = int'($urandom_range(0, 255)) - 128;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 24; t++) begin
      @(negedge clk);
      cmd = '0;
      cmd.pool_n = 8'($urandom_range(1, 4));
      cmd.count = 16'($urandom_range(1, 8));
      cmd.ob_addr = 16'($urandom_range(0, 20));
      cmd.pool_avg = 1'(t % 2);
      cmd.avg_shift = 4'($urandom_range(0, 2));
      cmd.shift = 5'($urandom_range(0, 5));
      cmd.res_en = 1'(t / 2 % 2);
      cmd.res_addr = 16'($urandom_range(0, 20));
      cmd.res_bank = 1'($urandom);
      cmd.act = act_e'(t % 3);
      cmd.relu6_max = 8'($urandom_range(10, 90));
      cmd.bias_bank = 1'($urandom);
      cmd.bias_addr = 4'($urandom_range(0, BD-1));
      cmd.mem_addr = 32'($urandom_range(0, 1000));
      n_st = 0;
      start = 1;
      @(negedge clk);
      start = 0;
      while (busy) @(negedge clk);
      checks++;
      if (n_st != int'(cmd.count) * BEATS) begin failures++; $display("%0d stores", n_st); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
