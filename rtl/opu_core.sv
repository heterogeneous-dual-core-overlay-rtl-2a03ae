// opu_core: one core of the dual-core overlay processor.
//
// A core is a computing unit with its own input buffers, PE array, output
// buffer and post-processing unit, driven by its own instruction decoder
// and controller. PCORE=0 builds a channel-parallel core (c-core): the
// feature-map word is duplicated and broadcast to the PEs, which reduce
// input channels and produce 2..N_PE output channels per cycle. PCORE=1
// builds a pixel-parallel core (p-core): the same channel mode plus a
// window mode in which the double feature-map buffer feeds a line buffer
// and each PE pair computes a 3x3 depthwise window of one channel at two
// vertically adjacent output pixels.
//
// Data path (one feature-map word per cycle while a COMPUTE streams):
//   IB read (1 cycle) -> [line buffer, 1 cycle, p-core window mode]
//   -> PE array ($clog2(V)+1 cycles) -> output buffer accumulate.
// Post-processing reads the output buffer, bias and residual buffers and
// stores int8 results. Fetch, load and store share the core's memory port
// through a 3-way mem_arbiter.
//
// Buffer words: feature map N_PE*V/2 bytes (in window mode the low half
// holds the even input row, bank 0 of the double buffer, and the high
// half the odd row, bank 1), weight N_PE*V bytes (V per PE), bias N_PE
// int32, residual N_PE int8. Depths are this design's choice: the paper
// derives them from the tiling but prints none.
module opu_core
  import opu_pkg::*;
#(
  parameter int N_PE       = 128,
  parameter int V          = 10,
  parameter bit PCORE      = 1'b0,
  parameter int FM_DEPTH   = 512,
  parameter int W_DEPTH    = 32,
  parameter int OB_DEPTH   = 512,
  parameter int BIAS_DEPTH = 16,
  parameter int RES_DEPTH  = 512,
  parameter int LB_MAX_W   = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [MEM_AW-1:0] start_addr,
  output logic              done,
  output logic              busy,
  output mem_req_t          mem_req,
  input  logic              mem_ready,
  input  mem_rsp_t          mem_rsp,
  output logic              sig_out,
  input  logic              tok_avail,
  output logic              tok_take
);
  localparam int FM_B   = N_PE * V / 2;
  localparam int FM_W   = FM_B * 8;
  localparam int WT_W   = N_PE * V * 8;
  localparam int BIAS_W = N_PE * ACC_W;
  localparam int RES_W  = N_PE * 8;
  localparam int H      = N_PE / 2;
  localparam int DRAIN  = $clog2(V) + 4;

  // ---------------- memory port sharing: fetch, load, store
  mem_req_t arb_req [3];
  logic     arb_rdy [3];
  mem_rsp_t arb_rsp [3];

  mem_arbiter #(.N(3), .DEPTH(64)) u_arb (
    .clk, .rst_n, .up_req(arb_req), .up_ready(arb_rdy), .up_rsp(arb_rsp),
    .dn_req(mem_req), .dn_ready(mem_ready), .dn_rsp(mem_rsp)
  );

  // ---------------- instruction decoder and controller
  logic   head_valid, pop, running;
  instr_t head;

  instr_decoder #(.QDEPTH(8)) u_dec (
    .clk, .rst_n, .start, .start_addr,
    .mem_req(arb_req[0]), .mem_ready(arb_rdy[0]), .mem_rsp(arb_rsp[0]),
    .head_valid, .head, .pop
  );

  logic          ld_start, ld_busy, pp_start, pp_busy;
  load_body_t    ld_cmd;
  post_body_t    pp_cmd;
  logic          cmp_busy, cmp_rd, cmp_first;
  logic [15:0]   cmp_fm_addr, cmp_w_addr;
  compute_body_t cmp_cmd;

  core_controller #(.DRAIN(DRAIN)) u_ctrl (
    .clk, .rst_n, .start, .running, .done,
    .head_valid, .head, .pop,
    .ld_start, .ld_cmd, .ld_busy,
    .pp_start, .pp_cmd, .pp_busy,
    .cmp_busy, .cmp_rd, .cmp_first, .cmp_fm_addr, .cmp_w_addr, .cmp_cmd,
    .sig_out, .tok_avail, .tok_take
  );

  assign busy = running;

  // ---------------- load unit and input buffers
  logic              wr_valid, wr_bank;
  load_dst_e         wr_dst;
  logic [15:0]       wr_addr;
  logic [WT_W-1:0]   wr_data;

  load_engine #(.FM_W(FM_W), .WT_W(WT_W), .BIAS_W(BIAS_W), .RES_W(RES_W), .MAX_W(WT_W)) u_load (
    .clk, .rst_n, .start(ld_start), .cmd(ld_cmd), .busy(ld_busy),
    .mem_req(arb_req[1]), .mem_ready(arb_rdy[1]), .mem_rsp(arb_rsp[1]),
    .wr_valid, .wr_dst, .wr_bank, .wr_addr, .wr_data
  );

  logic [FM_W-1:0]   fm_rdata;
  logic [WT_W-1:0]   w_rdata;
  logic [BIAS_W-1:0] bias_rdata;
  logic [RES_W-1:0]  res_rdata;

  pingpong_buffer #(.W(FM_W), .DEPTH(FM_DEPTH)) u_ib_fm (
    .clk, .we(wr_valid && wr_dst == DST_FM), .wbank(wr_bank),
    .waddr(wr_addr[$clog2(FM_DEPTH)-1:0]), .wdata(wr_data[FM_W-1:0]),
    .re(cmp_rd), .rbank(cmp_cmd.fm_bank), .raddr(cmp_fm_addr[$clog2(FM_DEPTH)-1:0]),
    .rdata(fm_rdata)
  );

  pingpong_buffer #(.W(WT_W), .DEPTH(W_DEPTH)) u_ib_w (
    .clk, .we(wr_valid && wr_dst == DST_W), .wbank(wr_bank),
    .waddr(wr_addr[$clog2(W_DEPTH)-1:0]), .wdata(wr_data),
    .re(cmp_rd), .rbank(cmp_cmd.w_bank), .raddr(cmp_w_addr[$clog2(W_DEPTH)-1:0]),
    .rdata(w_rdata)
  );

  logic                          bias_rd_en, bias_rd_bank, res_rd_en, res_rd_bank;
  logic [$clog2(BIAS_DEPTH)-1:0] bias_rd_addr;
  logic [$clog2(RES_DEPTH)-1:0]  res_rd_addr;

  pingpong_buffer #(.W(BIAS_W), .DEPTH(BIAS_DEPTH)) u_ib_bias (
    .clk, .we(wr_valid && wr_dst == DST_BIAS), .wbank(wr_bank),
    .waddr(wr_addr[$clog2(BIAS_DEPTH)-1:0]), .wdata(wr_data[BIAS_W-1:0]),
    .re(bias_rd_en), .rbank(bias_rd_bank), .raddr(bias_rd_addr), .rdata(bias_rdata)
  );

  pingpong_buffer #(.W(RES_W), .DEPTH(RES_DEPTH)) u_ib_res (
    .clk, .we(wr_valid && wr_dst == DST_RES), .wbank(wr_bank),
    .waddr(wr_addr[$clog2(RES_DEPTH)-1:0]), .wdata(wr_data[RES_W-1:0]),
    .re(res_rd_en), .rbank(res_rd_bank), .raddr(res_rd_addr), .rdata(res_rdata)
  );

  // ---------------- compute pipeline
  logic vld_d1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld_d1 <= 1'b0;
    else        vld_d1 <= cmp_rd;
  end

  logic              first_d1;
  always_ff @(posedge clk) first_d1 <= cmp_first;

  logic              use_win;
  logic              pe_in_valid;
  logic signed [7:0] win_a [H][9];
  logic signed [7:0] win_b [H][9];

  assign use_win = PCORE && cmp_cmd.window;

  if (PCORE) begin : g_lb
    logic signed [7:0] pix_top [H];
    logic signed [7:0] pix_bot [H];
    logic              lb_valid;
    always_comb
      for (int k = 0; k < H; k++) begin
        pix_top[k] = fm_rdata[k*8 +: 8];
        pix_bot[k] = fm_rdata[(FM_B/2 + k)*8 +: 8];
      end
    line_buffer #(.CH(H), .MAX_W(LB_MAX_W)) u_lb (
      .clk, .rst_n, .in_valid(vld_d1 && use_win), .first(first_d1), .row_w(cmp_cmd.row_w),
      .pix_top, .pix_bot, .out_valid(lb_valid), .win_a, .win_b
    );
    assign pe_in_valid = use_win ? lb_valid : vld_d1;
  end else begin : g_nolb
    always_comb
      for (int k = 0; k < H; k++)
        for (int j = 0; j < 9; j++) begin
          win_a[k][j] = '0;
          win_b[k][j] = '0;
        end
    assign pe_in_valid = vld_d1;
  end

  logic                    pe_out_valid;
  logic signed [ACC_W-1:0] pe_result [N_PE];

  pe_array #(.N_PE(N_PE), .V(V), .PCORE(PCORE)) u_pe (
    .clk, .rst_n, .in_valid(pe_in_valid), .window(cmp_cmd.window),
    .group_log2(cmp_cmd.group_log2), .fm_word(fm_rdata), .w_word(w_rdata),
    .win_a, .win_b, .out_valid(pe_out_valid), .result(pe_result)
  );

  // output-buffer write pointer: one word per PE-array result
  logic [15:0] ob_ptr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              ob_ptr <= '0;
    else if (cmp_first)      ob_ptr <= cmp_cmd.ob_addr;
    else if (pe_out_valid)   ob_ptr <= ob_ptr + 1;
  end

  logic                         ob_rd_en;
  logic [$clog2(OB_DEPTH)-1:0]  ob_rd_addr;
  logic signed [ACC_W-1:0]      ob_rd_data [N_PE];

  output_buffer #(.LANES(N_PE), .DEPTH(OB_DEPTH)) u_ob (
    .clk, .acc_valid(pe_out_valid), .acc_clear(!cmp_cmd.accumulate),
    .acc_addr(ob_ptr[$clog2(OB_DEPTH)-1:0]), .acc_data(pe_result),
    .rd_en(ob_rd_en), .rd_addr(ob_rd_addr), .rd_data(ob_rd_data)
  );

  // ---------------- post-processing
  post_proc #(.LANES(N_PE), .OB_DEPTH(OB_DEPTH), .RES_DEPTH(RES_DEPTH), .BIAS_DEPTH(BIAS_DEPTH)) u_pp (
    .clk, .rst_n, .start(pp_start), .cmd(pp_cmd), .busy(pp_busy),
    .ob_rd_en, .ob_rd_addr, .ob_rd_data,
    .bias_rd_en, .bias_rd_bank, .bias_rd_addr, .bias_rd_data(bias_rdata),
    .res_rd_en, .res_rd_bank, .res_rd_addr, .res_rd_data(res_rdata),
    .mem_req(arb_req[2]), .mem_ready(arb_rdy[2])
  );
endmodule
