// adder_tree: balanced, pipelined reduction of N signed inputs to one sum.
//
// Level l adds neighbouring pairs of level l-1 and registers the result;
// when a level has an odd count, its last element is passed on through a
// plain register (the "delayer" the paper needs when the PE vector length
// is not a power of two). Latency is $clog2(N) cycles, one result per
// cycle. The output grows by $clog2(N) bits so it cannot overflow.
module adder_tree #(
  parameter int N  = 10,
  parameter int IW = 16,
  parameter int OW = IW + $clog2(N)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [IW-1:0] in_data [N],
  output logic                 out_valid,
  output logic signed [OW-1:0] out_data
);
  localparam int L = (N > 1) ? $clog2(N) : 1;

  function automatic int cnt(input int lvl);
    return (N + (1 << lvl) - 1) >> lvl;
  endfunction

  logic signed [OW-1:0] lvl_q [L+1][N];
  logic [L:0]           vld;

  always_comb begin
    for (int i = 0; i < N; i++) lvl_q[0][i] = OW'(in_data[i]);
    vld[0] = in_valid;
  end

  for (genvar l = 1; l <= L; l++) begin : g_lvl
    always_ff @(posedge clk) begin
      for (int i = 0; i < N; i++) begin
        if (i < cnt(l)) begin
          if (2*i + 1 < cnt(l-1)) lvl_q[l][i] <= lvl_q[l-1][2*i] + lvl_q[l-1][2*i+1];
          else                    lvl_q[l][i] <= lvl_q[l-1][2*i];   // delayer
        end else begin
          lvl_q[l][i] <= '0;
        end
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld[l] <= 1'b0;
      else        vld[l] <= vld[l-1];
    end
  end

  assign out_valid = vld[L];
  assign out_data  = lvl_q[L][0];
endmodule
