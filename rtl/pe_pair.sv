// pe_pair: two processing elements that share V DSP slices.
//
// Each PE is an inner product of length V: V products reduced to one sum
// by a balanced pipelined adder tree (adder_tree). Because a DSP slice
// gives two 8-bit multipliers with one common input, PEs are built in
// pairs: slice j multiplies common[j] by sep0[j] for PE 0 and by sep1[j]
// for PE 1. Latency from in_valid to out_valid is $clog2(V) cycles, one
// vector pair per cycle. The pairing and the tree follow the paper; the
// pipelining of every tree level is this design's choice.
module pe_pair #(
  parameter int V  = 10,
  parameter int OW = 16 + $clog2(V)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [7:0]    common [V],
  input  logic signed [7:0]    sep0   [V],
  input  logic signed [7:0]    sep1   [V],
  output logic                 out_valid,
  output logic signed [OW-1:0] sum0,
  output logic signed [OW-1:0] sum1
);
  logic signed [15:0] prod0 [V];
  logic signed [15:0] prod1 [V];
  logic               v1_unused;

  for (genvar j = 0; j < V; j++) begin : g_dsp
    dsp_dual_mult u_dsp (
      .a_common(common[j]), .b0(sep0[j]), .b1(sep1[j]),
      .p0(prod0[j]), .p1(prod1[j])
    );
  end

  adder_tree #(.N(V), .IW(16), .OW(OW)) u_tree0 (
    .clk, .rst_n, .in_valid, .in_data(prod0), .out_valid(out_valid), .out_data(sum0)
  );
  adder_tree #(.N(V), .IW(16), .OW(OW)) u_tree1 (
    .clk, .rst_n, .in_valid, .in_data(prod1), .out_valid(v1_unused), .out_data(sum1)
  );
endmodule
