// load_engine: moves tensors from off-chip memory into the input buffers.
//
// A LOAD command names a destination buffer (feature map, weight, bias or
// residual), its ping-pong bank, a start beat address in memory, a start
// word address in the buffer and a number of buffer words. A buffer word
// of width Wd bits takes ceil(Wd/512) consecutive memory beats. The engine
// issues read requests back to back as long as the port is ready (so the
// DRAM latency is paid once per command, as in the paper's load model),
// packs the in-order responses, and writes one buffer word when its last
// beat arrives (wr_* outputs, registered). busy stays high until the last
// word is written. Which buffers exist follows the paper; the command
// format is this design's own.
module load_engine
  import opu_pkg::*;
#(
  parameter int FM_W   = 5120,
  parameter int WT_W   = 10240,
  parameter int BIAS_W = 4096,
  parameter int RES_W  = 1024,
  parameter int MAX_W  = WT_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  load_body_t        cmd,
  output logic              busy,
  output mem_req_t          mem_req,
  input  logic              mem_ready,
  input  mem_rsp_t          mem_rsp,
  output logic              wr_valid,
  output load_dst_e         wr_dst,
  output logic              wr_bank,
  output logic [15:0]       wr_addr,
  output logic [MAX_W-1:0]  wr_data
);
  localparam int ASM_BEATS = (MAX_W + MEM_DW - 1) / MEM_DW;

  function automatic logic [15:0] beats_of(input load_dst_e d);
    case (d)
      DST_FM:   return 16'((FM_W   + MEM_DW - 1) / MEM_DW);
      DST_W:    return 16'((WT_W   + MEM_DW - 1) / MEM_DW);
      DST_BIAS: return 16'((BIAS_W + MEM_DW - 1) / MEM_DW);
      default:  return 16'((RES_W  + MEM_DW - 1) / MEM_DW);
    endcase
  endfunction

  load_body_t               c_q;
  logic [15:0]              bpw;
  logic [31:0]              req_left, req_addr;
  logic [15:0]              beat_in, word_in;
  logic [ASM_BEATS*MEM_DW-1:0] asm_q, asm_next;

  always_comb begin
    asm_next = asm_q;
    asm_next[beat_in*MEM_DW +: MEM_DW] = mem_rsp.rdata;
  end

  always_comb begin
    mem_req       = '0;
    mem_req.valid = busy && (req_left != 0);
    mem_req.we    = 1'b0;
    mem_req.addr  = req_addr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      req_left <= '0;
      req_addr <= '0;
      beat_in  <= '0;
      word_in  <= '0;
      wr_valid <= 1'b0;
      bpw      <= '0;
      c_q      <= '0;
    end else begin
      wr_valid <= 1'b0;
      if (start && !busy) begin
        busy     <= (cmd.words != 0);
        c_q      <= cmd;
        bpw      <= beats_of(cmd.dst);
        req_left <= 32'(cmd.words) * 32'(beats_of(cmd.dst));
        req_addr <= cmd.mem_addr;
        beat_in  <= '0;
        word_in  <= '0;
      end else if (busy) begin
        if (mem_req.valid && mem_ready) begin
          req_left <= req_left - 1;
          req_addr <= req_addr + 1;
        end
        if (mem_rsp.valid) begin
          if (beat_in == bpw - 1) begin
            beat_in  <= '0;
            word_in  <= word_in + 1;
            wr_valid <= 1'b1;
            if (word_in == c_q.words - 1) busy <= 1'b0;
          end else begin
            beat_in <= beat_in + 1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (mem_rsp.valid) asm_q <= asm_next;
    if (busy && mem_rsp.valid && beat_in == bpw - 1) begin
      wr_data <= asm_next[MAX_W-1:0];
      wr_addr <= c_q.buf_addr + word_in;
      wr_dst  <= c_q.dst;
      wr_bank <= c_q.bank;
    end
  end
endmodule
