// tb_pe_array: two small PE arrays. A c-core array C(16,10) gets random
// feature-map and weight words with every group setting (1..8 PEs per
// result); each result is checked against the grouped inner products with
// the duplicated/broadcast feature map. A p-core array P(8,12) in window
// mode gets random 3x3 windows and per-channel taps; results k and k+4 are
// checked against the two depthwise sums. Latency $clog2(V)+1 is checked.
module tb_pe_array;
  import opu_pkg::*;
  localparam int NC = 16, VC = 10, NP = 8, VP = 12;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  // c-core array
  logic c_valid = 0, c_ovalid;
  logic [2:0] c_grp = 0;
  logic [NC*VC/2*8-1:0] c_fm;
  logic [NC*VC*8-1:0]   c_w;
  logic signed [7:0] c_wa [NC/2][9], c_wb [NC/2][9];
  logic signed [31:0] c_res [NC];
  pe_array #(.N_PE(NC), .V(VC), .PCORE(1'b0)) u_c (
    .clk, .rst_n, .in_valid(c_valid), .window(1'b0), .group_log2(c_grp), .fm_word(c_fm),
    .w_word(c_w), .win_a(c_wa), .win_b(c_wb), .out_valid(c_ovalid), .result(c_res));

  // p-core array
  logic p_valid = 0, p_ovalid;
  logic [NP*VP/2*8-1:0] p_fm;
  logic [NP*VP*8-1:0]   p_w;
  logic signed [7:0] p_wa [NP/2][9], p_wb [NP/2][9];
  logic signed [31:0] p_res [NP];
  pe_array #(.N_PE(NP), .V(VP), .PCORE(1'b1)) u_p (
    .clk, .rst_n, .in_valid(p_valid), .window(1'b1), .group_log2(3'd0), .fm_word(p_fm),
    .w_word(p_w), .win_a(p_wa), .win_b(p_wb), .out_valid(p_ovalid), .result(p_res));

  function automatic int sb(input logic [7:0] b); return int'(signed'(b)); endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int g, e, lat;
    c_fm = '0; c_w = '0; p_fm = '0; p_w = '0;
    for (int k = 0; k < NC/2; k++) for (int j = 0; j < 9; j++) begin c_wa[k][j] = 0; c_wb[k][j] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      c_grp = 3'(t % 4);
      for (int i = 0; i < NC*VC/2; i++) c_fm[i*8 +: 8] = 8'($urandom);
      for (int i = 0; i < NC*VC; i++)   c_w[i*8 +: 8]  = 8'($urandom);
      c_valid = 1;
      @(negedge clk);
      c_valid = 0;
      lat = 1;
      while (!c_ovalid && lat < 20) begin @(negedge clk); lat++; end
      checks++;
      if (lat != $clog2(VC) + 1) begin failures++; $display("c latency %0d", lat); end
      g = 1 << c_grp;
      for (int r = 0; r < NC; r++) begin
        e = 0;
        if (r < NC / g)
          for (int q = 0; q < g; q++)
            for (int j = 0; j < VC; j++)
              e += sb(c_fm[(q*VC + j)*8 +: 8]) * sb(c_w[((r*g + q)*VC + j)*8 +: 8]);
        checks++;
        if (c_res[r] != e) begin failures++; if (failures < 10) $display("c g%0d r%0d got %0d exp %0d", g, r, c_res[r], e); end
      end
    end
    for (int t = 0; t < 60; t++) begin
      for (int i = 0; i < NP*VP/2; i++) p_fm[i*8 +: 8] = 8'($urandom);
      for (int i = 0; i < NP*VP; i++)   p_w[i*8 +: 8]  = 8'($urandom);
      for (int k = 0; k < NP/2; k++) for (int j = 0; j < 9; j++) begin p_wa[k][j] = 8'($urandom); p_wb[k][j] = 8'($urandom); end
      p_valid = 1;
      @(negedge clk);
      p_valid = 0;
      lat = 1;
      while (!p_ovalid && lat < 20) begin @(negedge clk); lat++; end
      checks++;
      if (lat != $clog2(VP) + 1) begin failures++; $display("p latency %0d", lat); end
      for (int k = 0; k < NP/2; k++) begin
        int ea, eb;
        ea = 0; eb = 0;
        for (int j = 0; j < 9; j++) begin
          ea += int'(p_wa[k][j]) * sb(p_w[(k*VP + j)*8 +: 8]);
          eb += int'(p_wb[k][j]) * sb(p_w[(k*VP + j)*8 +: 8]);
        end
        checks += 2;
        if (p_res[k] != ea)        begin failures++; if (failures < 10) $display("p A k%0d got %0d exp %0d", k, p_res[k], ea); end
        if (p_res[k + NP/2] != eb) begin failures++; if (failures < 10) $display("p B k%0d got %0d exp %0d", k, p_res[k+NP/2], eb); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
