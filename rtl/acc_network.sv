// acc_network: adders after the PE outputs, configurable number of results.
//
// The N PE sums are reduced in groups of G = 2**group_log2 neighbouring PEs:
// result j = sum of PE j*G .. j*G+G-1, for j < N/G. With G from 1 to N/2
// the array gives N down to 2 accumulated results, chosen per instruction,
// as the paper describes. Built as a full binary tree over N padded to a
// power of two; the level selected by group_log2 is registered. Results
// beyond N/G are zero. Latency one cycle. The paper gives the function;
// the tree-with-level-select structure is this design's choice.
module acc_network #(
  parameter int N  = 128,
  parameter int IW = 20,
  parameter int OW = IW + $clog2(N)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [2:0]           group_log2,
  input  logic signed [IW-1:0] in_data [N],
  output logic                 out_valid,
  output logic signed [OW-1:0] out_data [N]
);
  localparam int NP = 1 << $clog2(N);
  localparam int L  = $clog2(N);

  logic signed [OW-1:0] lvl [L+1][NP];

  always_comb begin
    for (int i = 0; i < NP; i++) lvl[0][i] = (i < N) ? OW'(in_data[i]) : '0;
    for (int l = 1; l <= L; l++)
      for (int i = 0; i < NP; i++)
        lvl[l][i] = (i < (NP >> l)) ? lvl[l-1][2*i] + lvl[l-1][2*i+1] : '0;
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      if (int'(group_log2) <= L) out_data[i] <= lvl[group_log2][i];
      else                       out_data[i] <= '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
