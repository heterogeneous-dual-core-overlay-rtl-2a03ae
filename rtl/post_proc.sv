// post_proc: post-processing unit (PP) of a core.
//
// Runs one POST command: for each of `count` outputs it reads pool_n
// consecutive output-buffer words, adds the per-lane bias, and pools them
// (max, or sum followed by >>> avg_shift for average pooling); the pooled
// value is requantised by >>> shift, the residual operand (8-bit, from
// bank res_bank of the residual buffer at res_addr + output index) is
// added when res_en is set, the activation (none, ReLU, or ReLU clamped at relu6_max) is applied
// and the lane saturated to int8. The LANES bytes are then stored to
// off-chip memory as ceil(LANES/64) beats starting at mem_addr + output
// index * beats. One output-buffer word per cycle while pooling, then
// three cycles plus the stores per output. The paper gives the order
// pooling -> residual add -> activation; bias, requantisation, rounding
// (truncation) and saturation are this design's choices.
module post_proc
  import opu_pkg::*;
#(
  parameter int LANES    = 128,
  parameter int OB_DEPTH = 512,
  parameter int RES_DEPTH = 512,
  parameter int BIAS_DEPTH = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  post_body_t                    cmd,
  output logic                          busy,
  // output buffer read port (data one cycle after ob_rd_en)
  output logic                          ob_rd_en,
  output logic [$clog2(OB_DEPTH)-1:0]   ob_rd_addr,
  input  logic signed [ACC_W-1:0]       ob_rd_data [LANES],
  // bias buffer read port
  output logic                          bias_rd_en,
  output logic                          bias_rd_bank,
  output logic [$clog2(BIAS_DEPTH)-1:0] bias_rd_addr,
  input  logic [LANES*ACC_W-1:0]        bias_rd_data,
  // residual buffer read port
  output logic                          res_rd_en,
  output logic                          res_rd_bank,
  output logic [$clog2(RES_DEPTH)-1:0]  res_rd_addr,
  input  logic [LANES*8-1:0]            res_rd_data,
  // store port to off-chip memory
  output mem_req_t                      mem_req,
  input  logic                          mem_ready
);
  localparam int BEATS = (LANES + MEM_BYTES - 1) / MEM_BYTES;

  typedef enum logic [2:0] {S_IDLE, S_BIAS, S_RD, S_ACC, S_CALC, S_ST} state_e;

  state_e                  st;
  post_body_t              c_q;
  logic signed [ACC_W-1:0] bias_q [LANES];
  logic signed [ACC_W-1:0] pool_q [LANES];
  logic signed [7:0]       out_q  [LANES];
  logic [7:0]              p;
  logic [15:0]             oi;
  logic [$clog2(BEATS+1)-1:0] beat;

  assign busy = (st != S_IDLE);

  // read-address generation
  always_comb begin
    ob_rd_en     = 1'b0;
    ob_rd_addr   = $bits(ob_rd_addr)'(32'(c_q.ob_addr) + 32'(oi) * 32'(c_q.pool_n) + 32'(p));
    res_rd_en    = 1'b0;
    res_rd_bank  = c_q.res_bank;
    res_rd_addr  = $bits(res_rd_addr)'(c_q.res_addr + oi);
    bias_rd_en   = (st == S_IDLE) && start;
    bias_rd_bank = cmd.bias_bank;
    bias_rd_addr = $bits(bias_rd_addr)'(cmd.bias_addr);
    case (st)
      S_RD:  ob_rd_en = 1'b1;
      S_ACC: begin
        if (p == c_q.pool_n - 1) res_rd_en = 1'b1;
        else begin
          ob_rd_en   = 1'b1;
          ob_rd_addr = $bits(ob_rd_addr)'(32'(c_q.ob_addr) + 32'(oi) * 32'(c_q.pool_n) + 32'(p) + 1);
        end
      end
      default: ;
    endcase
  end

  // one lane of requantisation, residual add, activation and saturation
  function automatic logic signed [7:0] finish_lane(input logic signed [ACC_W-1:0] v,
                                                    input logic signed [7:0] r);
    logic signed [ACC_W-1:0] x;
    x = v >>> c_q.shift;
    if (c_q.res_en) x = x + ACC_W'(r);
    case (c_q.act)
      ACT_RELU:  if (x < 0) x = 0;
      ACT_RELU6: begin
        if (x < 0) x = 0;
        if (x > ACC_W'(c_q.relu6_max)) x = ACC_W'(c_q.relu6_max);
      end
      default: ;
    endcase
    if (x > 127)       return 8'sd127;
    else if (x < -128) return -8'sd128;
    else               return x[7:0];
  endfunction

  logic [BEATS*MEM_DW-1:0] out_flat;
  always_comb begin
    out_flat = '0;
    for (int i = 0; i < LANES; i++) out_flat[i*8 +: 8] = out_q[i];
  end

  always_comb begin
    mem_req       = '0;
    mem_req.valid = (st == S_ST);
    mem_req.we    = 1'b1;
    mem_req.addr  = c_q.mem_addr + 32'(oi) * 32'(BEATS) + 32'(beat);
    mem_req.wdata = out_flat[beat*MEM_DW +: MEM_DW];
    for (int b = 0; b < MEM_BYTES; b++)
      mem_req.wstrb[b] = (32'(beat) * MEM_BYTES + b) < LANES;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      p    <= '0;
      oi   <= '0;
      beat <= '0;
      c_q  <= '0;
    end else begin
      case (st)
        S_IDLE: if (start) begin
          c_q <= cmd;
          p   <= '0;
          oi  <= '0;
          st  <= (cmd.count == 0) ? S_IDLE : S_BIAS;
        end
        S_BIAS: st <= S_RD;
        S_RD:   st <= S_ACC;
        S_ACC: begin
          if (p == c_q.pool_n - 1) st <= S_CALC;
          else                     p  <= p + 1;
        end
        S_CALC: begin
          beat <= '0;
          st   <= S_ST;
        end
        S_ST: if (mem_ready) begin
          if (32'(beat) == BEATS - 1) begin
            p  <= '0;
            oi <= oi + 1;
            st <= (oi == c_q.count - 1) ? S_IDLE : S_RD;
          end else begin
            beat <= beat + 1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (st == S_BIAS)
      for (int i = 0; i < LANES; i++) bias_q[i] <= bias_rd_data[i*ACC_W +: ACC_W];
    if (st == S_ACC) begin
      for (int i = 0; i < LANES; i++) begin
        logic signed [ACC_W-1:0] v;
        v = ob_rd_data[i] + bias_q[i];
        if (p == 0)            pool_q[i] <= v;
        else if (c_q.pool_avg) pool_q[i] <= pool_q[i] + v;
        else if (v > pool_q[i]) pool_q[i] <= v;
      end
    end
    if (st == S_CALC)
      for (int i = 0; i < LANES; i++)
        out_q[i] <= finish_lane(c_q.pool_avg ? (pool_q[i] >>> c_q.avg_shift) : pool_q[i],
                                res_rd_data[i*8 +: 8]);
  end
endmodule
