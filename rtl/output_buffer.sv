// output_buffer: partial-sum store of a core.
//
// LANES accumulators of ACC_W bits per word. The PE array writes one word
// per cycle through the accumulate port: the word at acc_addr becomes
// acc_data (acc_clear=1, first input-channel tile) or its old value plus
// acc_data (acc_clear=0, further tiles). The post-processing unit reads
// through a separate registered read port (data one cycle after rd_en).
// A read of the address being accumulated in the same cycle returns the
// old value. The paper states that partial sums stay here for further
// accumulation; the port structure is this design's choice.
module output_buffer
  import opu_pkg::*;
#(
  parameter int LANES = 128,
  parameter int DEPTH = 512
) (
  input  logic                     clk,
  input  logic                     acc_valid,
  input  logic                     acc_clear,
  input  logic [$clog2(DEPTH)-1:0] acc_addr,
  input  logic signed [ACC_W-1:0]  acc_data [LANES],
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic signed [ACC_W-1:0]  rd_data [LANES]
);
  logic signed [ACC_W-1:0] mem [DEPTH][LANES];

  always_ff @(posedge clk) begin
    if (acc_valid)
      for (int i = 0; i < LANES; i++)
        mem[acc_addr][i] <= acc_clear ? acc_data[i] : mem[acc_addr][i] + acc_data[i];
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
