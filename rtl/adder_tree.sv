// adder_tree: pipelined adder tree for one column of the synaptic crossbar.
//
// Sums N signed operands. The tree has log2(N) levels of two-input adders
// and a register after every level, so a new set of operands can enter on
// every enabled clock and its sum appears on `sum_o` log2(N) enabled clocks
// later (4 for N = 16). All registers advance only while `en` is high; this
// is the READY clock enable of the crossbar, drawn in the paper as CLK AND
// READY feeding the output register. That each column is a pipelined adder
// tree follows the paper; one register per level is this design's choice
// (the paper's 2x2 example has a single level and a single register).
// OUT_W defaults to IN_W + log2(N), wide enough that no sum can overflow.
// N must be a power of two.
module adder_tree #(
  parameter int unsigned N     = 16,
  parameter int unsigned IN_W  = 8,
  parameter int unsigned OUT_W = IN_W + $clog2(N),
  localparam int unsigned LV   = $clog2(N)
) (
  input  logic                         clk,
  input  logic                         en,
  input  logic signed [N-1:0][IN_W-1:0] in_i,
  output logic signed [OUT_W-1:0]      sum_o
);

  // r[l][k]: k-th partial sum registered after level l+1; only the first
  // N >> (l+1) entries of level l are used.
  logic signed [OUT_W-1:0] r [LV][N];

  always_ff @(posedge clk) begin
    if (en) begin
      for (int k = 0; k < N/2; k++)
        r[0][k] <= OUT_W'($signed(in_i[2*k])) + OUT_W'($signed(in_i[2*k+1]));
      for (int l = 1; l < LV; l++)
        for (int k = 0; k < (N >> (l+1)); k++)
          r[l][k] <= r[l-1][2*k] + r[l-1][2*k+1];
    end
  end

  initial begin
    for (int l = 0; l < LV; l++)
      for (int k = 0; k < N; k++) r[l][k] = '0;
  end

  assign sum_o = r[LV-1][0];

endmodule
