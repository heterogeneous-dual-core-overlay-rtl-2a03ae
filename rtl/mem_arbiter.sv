// mem_arbiter: shares one off-chip memory port among N requesters.
//
// Requests use a valid/ready handshake (mem_req_t.valid, up_ready); the
// arbiter grants round-robin, starting after the last granted port, and
// passes the granted request through combinationally. Reads are answered
// in order by the memory, so the arbiter queues the requester id of every
// accepted read (FIFO of DEPTH entries) and routes each response
// (mem_rsp_t.valid, no backpressure) to the id at the head. While the FIFO
// is full, reads are not granted. Writes get no response. The paper shows
// both cores and both instruction decoders on one off-chip memory; the
// arbitration scheme is this design's choice.
module mem_arbiter
  import opu_pkg::*;
#(
  parameter int N     = 2,
  parameter int DEPTH = 64
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t up_req   [N],
  output logic     up_ready [N],
  output mem_rsp_t up_rsp   [N],
  output mem_req_t dn_req,
  input  logic     dn_ready,
  input  mem_rsp_t dn_rsp
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  localparam int DW = $clog2(DEPTH);

  logic [IW-1:0] last_q, grant;
  logic          any;
  logic [IW-1:0] fifo [DEPTH];
  logic [DW:0]   count;
  logic [DW-1:0] wr_ptr, rd_ptr;
  logic          fifo_full, push, pop;

  assign fifo_full = (count == (DW+1)'(DEPTH));

  always_comb begin
    any   = 1'b0;
    grant = '0;
    for (int k = 1; k <= N; k++) begin
      int idx;
      idx = (int'(last_q) + k) % N;
      if (!any && up_req[idx].valid && !(fifo_full && !up_req[idx].we)) begin
        any   = 1'b1;
        grant = IW'(idx);
      end
    end
  end

  always_comb begin
    dn_req       = up_req[grant];
    dn_req.valid = any;
    for (int i = 0; i < N; i++) begin
      up_ready[i]     = any && (IW'(i) == grant) && dn_ready;
      up_rsp[i].rdata = dn_rsp.rdata;
      up_rsp[i].valid = dn_rsp.valid && (fifo[rd_ptr] == IW'(i));
    end
  end

  assign push = any && dn_ready && !dn_req.we;
  assign pop  = dn_rsp.valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_q <= '0;
      count  <= '0;
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (any && dn_ready) last_q <= grant;
      if (push) wr_ptr <= wr_ptr + 1'b1;
      if (pop)  rd_ptr <= rd_ptr + 1'b1;
      count <= count + (push ? 1 : 0) - (pop ? 1 : 0);
    end
  end

  always_ff @(posedge clk)
    if (push) fifo[wr_ptr] <= grant;

  // a response must belong to an outstanding read
  assert property (@(posedge clk) disable iff (!rst_n) dn_rsp.valid |-> count != 0);
endmodule
