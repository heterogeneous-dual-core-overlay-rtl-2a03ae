// instr_decoder: instruction fetch and decode for one core.
//
// After `start` the decoder fetches 512-bit beats from off-chip memory,
// starting at start_addr; each beat holds four 128-bit instructions
// (lowest bits first), which are pushed into a queue of QDEPTH entries.
// One fetch is outstanding at a time and a new one is issued only when
// four entries are free. Fetching stops after a beat that contains an END
// instruction. The head of the queue is presented to the controller as a
// decoded instr_t (head_valid, head) and removed by `pop`. `start` flushes
// the queue. The paper shows a decoder fed from off-chip memory; the
// queue and the fetch policy are this design's choices.
module instr_decoder
  import opu_pkg::*;
#(
  parameter int QDEPTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [MEM_AW-1:0] start_addr,
  output mem_req_t          mem_req,
  input  logic              mem_ready,
  input  mem_rsp_t          mem_rsp,
  output logic              head_valid,
  output instr_t            head,
  input  logic              pop
);
  localparam int QW = $clog2(QDEPTH);

  instr_t            q [QDEPTH];
  logic [QW-1:0]     rd_ptr, wr_ptr;
  logic [QW:0]       count;
  logic [MEM_AW-1:0] pc;
  logic              fetching, outstanding, end_seen;
  logic              beat_has_end;

  always_comb begin
    beat_has_end = 1'b0;
    for (int i = 0; i < INSTR_PER_BEAT; i++)
      if (mem_rsp.rdata[i*INSTR_W + INSTR_W - 1 -: 4] == OP_END) beat_has_end = 1'b1;
  end

  always_comb begin
    mem_req       = '0;
    mem_req.valid = fetching && !outstanding && !end_seen &&
                    (32'(count) + INSTR_PER_BEAT <= QDEPTH);
    mem_req.addr  = pc;
  end

  assign head_valid = (count != 0);
  assign head       = q[rd_ptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr      <= '0;
      wr_ptr      <= '0;
      count       <= '0;
      pc          <= '0;
      fetching    <= 1'b0;
      outstanding <= 1'b0;
      end_seen    <= 1'b0;
    end else if (start) begin
      rd_ptr      <= '0;
      wr_ptr      <= '0;
      count       <= '0;
      pc          <= start_addr;
      fetching    <= 1'b1;
      outstanding <= 1'b0;
      end_seen    <= 1'b0;
    end else begin
      if (mem_req.valid && mem_ready) outstanding <= 1'b1;
      if (mem_rsp.valid && outstanding) begin
        outstanding <= 1'b0;
        pc          <= pc + 1;
        wr_ptr      <= wr_ptr + QW'(INSTR_PER_BEAT);
        if (beat_has_end) end_seen <= 1'b1;
      end
      if (pop && head_valid) rd_ptr <= rd_ptr + 1'b1;
      count <= count + ((mem_rsp.valid && outstanding) ? (QW+1)'(INSTR_PER_BEAT) : '0)
                     - ((pop && head_valid) ? (QW+1)'(1) : '0);
    end
  end

  always_ff @(posedge clk)
    if (!start && mem_rsp.valid && outstanding)
      for (int i = 0; i < INSTR_PER_BEAT; i++)
        q[wr_ptr + QW'(i)] <= instr_t'(mem_rsp.rdata[i*INSTR_W +: INSTR_W]);
endmodule
