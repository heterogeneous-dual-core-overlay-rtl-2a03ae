// pingpong_buffer: two-bank on-chip input buffer (feature maps, weights,
// biases, residual operands).
//
// Bank `wbank` is written by the load unit while bank `rbank` is read by
// the compute or post-processing pipeline, so a memory load overlaps the
// computation on the other bank, as in the paper's ping-pong input
// buffers. One write port, one read port, read data registered (one cycle
// after re). Widths and depths are parameters; the paper sizes them from
// the tiling (width T_ci resp. T_ci*T_co, depth T_h*T_w).
module pingpong_buffer #(
  parameter int W     = 640,
  parameter int DEPTH = 512
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic                     wbank,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic                     re,
  input  logic                     rbank,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [2][DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wbank][waddr] <= wdata;
    if (re) rdata <= mem[rbank][raddr];
  end
endmodule
