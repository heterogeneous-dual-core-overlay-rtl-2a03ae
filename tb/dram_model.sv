// dram_model: behavioural off-chip memory for the testbenches (not RTL).
//
// WORDS beats of 512 bits. Accepts one request per cycle when ready
// (ready drops for a cycle at random about one time in STALL_1_IN);
// writes apply their byte strobes at once, reads are answered in order
// LAT cycles after acceptance, one response per cycle. The array `mem`
// is filled and inspected by the testbenches through hierarchical names.
module dram_model
  import opu_pkg::*;
#(
  parameter int WORDS      = 8192,
  parameter int LAT        = 20,
  parameter int STALL_1_IN = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t req,
  output logic     ready,
  output mem_rsp_t rsp
);
  logic [MEM_DW-1:0] mem [WORDS];
  logic [MEM_DW-1:0] q_data [$];
  longint            q_time [$];
  longint            now = 0;
  int                n_reads = 0, n_writes = 0;

  always_ff @(posedge clk) begin
    now <= now + 1;
    rsp.valid <= 1'b0;
    if (rst_n) begin
      if (q_time.size() != 0 && q_time[0] <= now) begin
        rsp.valid <= 1'b1;
        rsp.rdata <= q_data.pop_front();
        void'(q_time.pop_front());
      end
      if (req.valid && ready) begin
        if (req.we) begin
          n_writes++;
          for (int b = 0; b < MEM_BYTES; b++)
            if (req.wstrb[b]) mem[req.addr % WORDS][b*8 +: 8] <= req.wdata[b*8 +: 8];
        end else begin
          n_reads++;
          q_data.push_back(mem[req.addr % WORDS]);
          q_time.push_back(now + longint'(LAT));
        end
      end
      ready <= ($urandom_range(1, STALL_1_IN) != 1);
    end else begin
      ready <= 1'b0;
    end
  end
endmodule
