// pe_array: the PE array of one core, with its operand routing.
//
// N_PE PEs of V multipliers are built as N_PE/2 pe_pairs; pair k holds
// PE k and PE k+N_PE/2, which share V DSP slices. Two modes:
//  * channel mode (c-core, and p-core without line buffer): with G =
//    2**group_log2 PEs per result, PE p reads feature-map slice (p mod G),
//    V bytes of the feature-map word, so the word is duplicated and
//    broadcast to all N_PE/G output channels; PE p reads weight slice p.
//    The shared DSP input is the pixel: PE k and k+N_PE/2 read the same
//    slice whenever G divides N_PE/2 (always true for power-of-two N_PE).
//  * window mode (p-core only, PCORE=1): pair k takes the 3x3 windows of
//    channel k at two vertically adjacent output rows (win_a, win_b) and
//    the shared DSP input is the channel's weight (taps in weight slice k).
//    Taps beyond 9 are fed with zero pixels; V must be at least 9.
// The PE sums go through acc_network. Latency $clog2(V)+1 cycles, one
// vector per cycle. Results are sign-extended to ACC_W bits.
module pe_array
  import opu_pkg::*;
#(
  parameter int N_PE  = 128,
  parameter int V     = 10,
  parameter bit PCORE = 1'b0,
  parameter int FM_B  = N_PE * V / 2,     // feature-map word, bytes
  parameter int W_B   = N_PE * V          // weight word, bytes
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    window,
  input  logic [2:0]              group_log2,
  input  logic [FM_B*8-1:0]       fm_word,
  input  logic [W_B*8-1:0]        w_word,
  input  logic signed [7:0]       win_a [N_PE/2][9],
  input  logic signed [7:0]       win_b [N_PE/2][9],
  output logic                    out_valid,
  output logic signed [ACC_W-1:0] result [N_PE]
);
  localparam int H   = N_PE / 2;
  localparam int PW  = 16 + $clog2(V);
  localparam int AW  = PW + $clog2(N_PE);

  logic signed [7:0] common [H][V];
  logic signed [7:0] sep0   [H][V];
  logic signed [7:0] sep1   [H][V];
  logic              use_win;

  assign use_win = PCORE && window;

  always_comb begin
    for (int k = 0; k < H; k++) begin
      for (int j = 0; j < V; j++) begin
        if (use_win) begin
          common[k][j] = w_word[(k*V + j)*8 +: 8];
          sep0[k][j]   = (j < 9) ? win_a[k][(j < 9) ? j : 0] : 8'sd0;
          sep1[k][j]   = (j < 9) ? win_b[k][(j < 9) ? j : 0] : 8'sd0;
        end else begin
          common[k][j] = fm_word[((k % (1 << group_log2)) * V + j)*8 +: 8];
          sep0[k][j]   = w_word[(k*V + j)*8 +: 8];
          sep1[k][j]   = w_word[((k+H)*V + j)*8 +: 8];
        end
      end
    end
  end

  logic signed [PW-1:0] pe_sum [N_PE];
  logic [H-1:0]         pe_vld;

  for (genvar k = 0; k < H; k++) begin : g_pair
    pe_pair #(.V(V), .OW(PW)) u_pair (
      .clk, .rst_n, .in_valid,
      .common(common[k]), .sep0(sep0[k]), .sep1(sep1[k]),
      .out_valid(pe_vld[k]), .sum0(pe_sum[k]), .sum1(pe_sum[k+H])
    );
  end

  logic signed [AW-1:0] acc [N_PE];
  logic [2:0]           grp_d [$clog2(V)];

  // the group setting travels with the data through the PE pipeline
  always_ff @(posedge clk) begin
    grp_d[0] <= use_win ? 3'd0 : group_log2;
    for (int i = 1; i < $clog2(V); i++) grp_d[i] <= grp_d[i-1];
  end

  acc_network #(.N(N_PE), .IW(PW), .OW(AW)) u_acc (
    .clk, .rst_n, .in_valid(pe_vld[0]), .group_log2(grp_d[$clog2(V)-1]),
    .in_data(pe_sum), .out_valid, .out_data(acc)
  );

  always_comb
    for (int i = 0; i < N_PE; i++) result[i] = ACC_W'(acc[i]);
endmodule
