// bram_sdp: block RAM with one write port and one synchronous read port.
//
// Models the on-chip block memory that holds all network state: tile
// weights, inputs, membranes, spikes and output spikes. A write with `we`
// stores `wdata` at `waddr` on the rising edge. A read with `re` presents
// the word at `raddr` on `rdata` one clock later (read-first: a read and
// write of the same address in the same cycle returns the old word), which is
// how FPGA block RAM behaves. Keeping all state in block memory follows the
// paper; the port arrangement and the one-cycle latency are this design's
// choice. Contents start at zero, or, when INIT_FILE names a hex file
// ($readmemh format, one W-bit word per line), at that file's words: this is
// how a network can be built into the bitstream instead of being written
// through the host port.
module bram_sdp #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 64,
  parameter string       INIT_FILE = "",
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
    if (INIT_FILE != "") $readmemh(INIT_FILE, mem);
  end

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
