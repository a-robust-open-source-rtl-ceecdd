// synapse_array: 16x16 synaptic crossbar with pipelined column adder trees.
//
// Each synapse (i, j) passes its signed weight w[i][j] when the spike on
// input row i is 1 and contributes zero otherwise; with 0/1 spikes this is the
// spike-times-weight product of the paper's synapse cell. Column j's N
// contributions are summed by a pipelined adder tree (adder_tree), so the
// crossbar accepts one tile per clock and delivers OUT[j], the total
// presynaptic potential for postsynaptic neuron j, log2(N) clocks later.
// A sideband tag (tile indices, RESET and the membrane/input words of the
// tile) is delayed through a shift register of the same depth so that it
// leaves together with the sums; this carries the paper's RESET signal
// through the array. Everything advances only while `ready` is high (the
// paper's CLK AND READY); with `ready` low the pipeline holds its contents.
// A synchronous active-low reset clears the tag line (and so its valid
// bit); the adder-tree registers need none, as their contents are only used
// together with a valid tag.
// The crossbar and its per-column pipelined trees follow the paper; the
// tag shift register and the latency of log2(N) are this design's choices.
module synapse_array #(
  parameter int unsigned N     = 16,
  parameter int unsigned W_W   = 8,
  parameter int unsigned TAG_W = 1,
  localparam int unsigned SUM_W = W_W + $clog2(N),
  localparam int unsigned LAT   = $clog2(N)
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               ready,
  input  logic [N-1:0]                       spk_in,
  input  logic signed [N-1:0][N-1:0][W_W-1:0] weight,   // [i][j]
  input  logic [TAG_W-1:0]                   tag_in,
  output logic signed [N-1:0][SUM_W-1:0]     out,
  output logic [TAG_W-1:0]                   tag_out
);

  // Gated weights regrouped by column: col[j][i] = spk[i] ? w[i][j] : 0.
  logic signed [N-1:0][N-1:0][W_W-1:0] col;

  always_comb begin
    for (int j = 0; j < N; j++)
      for (int i = 0; i < N; i++)
        col[j][i] = spk_in[i] ? weight[i][j] : '0;
  end

  for (genvar j = 0; j < N; j++) begin : g_col
    adder_tree #(.N(N), .IN_W(W_W), .OUT_W(SUM_W)) u_tree (
      .clk  (clk),
      .en   (ready),
      .in_i (col[j]),
      .sum_o(out[j])
    );
  end

  // Sideband delay line matching the adder-tree latency.
  logic [TAG_W-1:0] tag_q [LAT];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < LAT; s++) tag_q[s] <= '0;
    end else if (ready) begin
      tag_q[0] <= tag_in;
      for (int s = 1; s < LAT; s++) tag_q[s] <= tag_q[s-1];
    end
  end

  assign tag_out = tag_q[LAT-1];

endmodule
