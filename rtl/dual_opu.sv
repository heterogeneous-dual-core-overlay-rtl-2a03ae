// dual_opu: heterogeneous dual-core overlay processor for light-weight CNNs.
//
// One channel-parallel core C(N_C, V_C) for regular and pointwise
// convolutions and one pixel-parallel core P(N_P, V_P) with a line buffer
// for depthwise convolutions run their own instruction streams side by
// side, typically layers of two different input images interleaved so
// that a regular layer of one image overlaps a depthwise layer of the
// other. Defaults are C(128,10)+P(32,12), the configuration the paper
// selects for the best average throughput over MobileNet v1/v2 and
// SqueezeNet (832 DSP slices: 64*10 + 16*12).
//
// Both cores and their instruction fetch share the single off-chip memory
// port (mem_req / mem_ready / mem_rsp; 512-bit beats, reads answered in
// order with any latency) through a round-robin mem_arbiter. Layer outputs
// pass between cores through off-chip memory; the order between the two
// instruction streams is kept with tokens: a SIGNAL instruction on one
// core adds a token for the other, a WAIT instruction takes one and blocks
// while there is none. The token counters are this design's choice; the
// paper shows the dependences (its Fig. 4 execution traces) but not the
// mechanism. `start` starts both cores at their program addresses;
// done_c / done_p rise when each has executed END.
module dual_opu
  import opu_pkg::*;
#(
  parameter int N_C = 128,
  parameter int V_C = 10,
  parameter int N_P = 32,
  parameter int V_P = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [MEM_AW-1:0] c_start_addr,
  input  logic [MEM_AW-1:0] p_start_addr,
  output logic              done_c,
  output logic              done_p,
  output mem_req_t          mem_req,
  input  logic              mem_ready,
  input  mem_rsp_t          mem_rsp
);
  mem_req_t core_req [2];
  logic     core_rdy [2];
  mem_rsp_t core_rsp [2];
  logic     busy_c, busy_p;
  logic     sig_c, sig_p, take_c, take_p;
  logic [7:0] tok_for_c, tok_for_p;

  opu_core #(.N_PE(N_C), .V(V_C), .PCORE(1'b0)) u_ccore (
    .clk, .rst_n, .start, .start_addr(c_start_addr), .done(done_c), .busy(busy_c),
    .mem_req(core_req[0]), .mem_ready(core_rdy[0]), .mem_rsp(core_rsp[0]),
    .sig_out(sig_c), .tok_avail(tok_for_c != 0), .tok_take(take_c)
  );

  opu_core #(.N_PE(N_P), .V(V_P), .PCORE(1'b1)) u_pcore (
    .clk, .rst_n, .start, .start_addr(p_start_addr), .done(done_p), .busy(busy_p),
    .mem_req(core_req[1]), .mem_ready(core_rdy[1]), .mem_rsp(core_rsp[1]),
    .sig_out(sig_p), .tok_avail(tok_for_p != 0), .tok_take(take_p)
  );

  mem_arbiter #(.N(2), .DEPTH(128)) u_arb (
    .clk, .rst_n, .up_req(core_req), .up_ready(core_rdy), .up_rsp(core_rsp),
    .dn_req(mem_req), .dn_ready(mem_ready), .dn_rsp(mem_rsp)
  );

  // inter-core tokens
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tok_for_c <= '0;
      tok_for_p <= '0;
    end else if (start) begin
      tok_for_c <= '0;
      tok_for_p <= '0;
    end else begin
      tok_for_c <= tok_for_c + (sig_p ? 8'd1 : 8'd0) - (take_c ? 8'd1 : 8'd0);
      tok_for_p <= tok_for_p + (sig_c ? 8'd1 : 8'd0) - (take_p ? 8'd1 : 8'd0);
    end
  end
endmodule
