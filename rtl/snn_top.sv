// snn_top: tiled spiking-neural-network accelerator for small FPGAs.
//
// The network is cut into 16x16 tiles (16 presynaptic by 16 postsynaptic
// neurons) that are stored in block memory sorted by postsynaptic tile. Every
// timestep the control unit streams all tiles, one per clock, through a
// 16x16 synaptic crossbar whose columns are pipelined adder trees; the
// neuron array integrates the column sums of all tiles that share a
// postsynaptic tile and, when that tile is complete (RESET), fires the
// neurons above threshold, writes spikes and membranes back to block memory
// and, for output tiles, records the spike word per timestep in the output
// memory. There is no leak, and a spike reaches its targets one timestep
// after it is fired. The input is injected directly into the membrane
// every timestep.
//
// Block memories (all simple dual-port, one-clock read):
//   tile    2**TILE_AW words of {out_idx, out_en, y, x, 16x16 int8 weights}
//           written by the host, read by the control unit;
//   input   one word of 16 int8 inputs per neuron tile, written by the host;
//   membrane one word of 16 int8 membranes per neuron tile;
//   spike   16-bit spike words, two banks selected by timestep parity;
//   output  16-bit spike words at {timestep, output slot}, read by the host.
// Host side (a soft CPU in the paper's system): write tiles and inputs, set
// num_tiles, num_steps and threshold, pulse `start` (with `restart` to begin
// from timestep 0 with zero state), wait for `done`, read the output memory.
// Timing: one tile per clock; a timestep takes num_tiles + about 10 clocks.
// The block structure follows the paper's overview; memory widths beyond the
// paper's 16-bit spike word and int8 membranes, the host ports and the
// single global threshold are this design's choices.
// TILE_INIT and INP_INIT optionally name $readmemh files that preload the
// tile and input memories (tile words as in snn_pkg::tile_word_t, input
// words as 16 int8 values with neuron 0 in the low byte); empty by default.
module snn_top
  import snn_pkg::*;
#(
  parameter string TILE_INIT = "",
  parameter string INP_INIT  = ""
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // run control
  input  logic                    start,
  input  logic                    restart,
  input  logic [STEP_W:0]         num_steps,
  input  logic [TILE_AW:0]        num_tiles,
  input  acc_t                    threshold,
  output logic                    busy,
  output logic                    done,
  output step_t                   step,
  // host: tile memory write port
  input  logic                    tile_we,
  input  logic [TILE_AW-1:0]      tile_waddr,
  input  tile_word_t              tile_wdata,
  // host: input memory write port
  input  logic                    inp_we,
  input  ntile_t                  inp_waddr,
  input  logic [N-1:0][IN_W-1:0]  inp_wdata,
  // host: output memory read port
  input  logic                    out_re,
  input  logic [STEP_W+OUT_W-1:0] out_raddr,
  output logic [N-1:0]            out_rdata
);

  // ---------------- memories ------------------------------------------------
  logic                    c_tile_re;
  logic [TILE_AW-1:0]      c_tile_raddr;
  tile_word_t              c_tile_rdata;
  logic                    c_spk_re, c_mem_re, c_inp_re;
  logic [NT_W:0]           c_spk_raddr;
  ntile_t                  c_mem_raddr, c_inp_raddr;
  logic [N-1:0]            c_spk_rdata;
  logic [N-1:0][MEM_W-1:0] c_mem_rdata;
  logic [N-1:0][IN_W-1:0]  c_inp_rdata;

  logic                    n_spk_we, n_mem_we, n_out_we;
  logic [NT_W:0]           n_spk_waddr;
  ntile_t                  n_mem_waddr;
  logic [STEP_W+OUT_W-1:0] n_out_waddr;
  logic [N-1:0]            n_spk_wdata, n_out_wdata;
  logic [N-1:0][MEM_W-1:0] n_mem_wdata;

  bram_sdp #(.W(TILE_WORD_W), .DEPTH(2**TILE_AW), .INIT_FILE(TILE_INIT)) u_tile_mem (
    .clk, .we(tile_we), .waddr(tile_waddr), .wdata(tile_wdata),
    .re(c_tile_re), .raddr(c_tile_raddr), .rdata(c_tile_rdata));

  bram_sdp #(.W(N*IN_W), .DEPTH(2**NT_W), .INIT_FILE(INP_INIT)) u_inp_mem (
    .clk, .we(inp_we), .waddr(inp_waddr), .wdata(inp_wdata),
    .re(c_inp_re), .raddr(c_inp_raddr), .rdata(c_inp_rdata));

  bram_sdp #(.W(N*MEM_W), .DEPTH(2**NT_W)) u_mem_mem (
    .clk, .we(n_mem_we), .waddr(n_mem_waddr), .wdata(n_mem_wdata),
    .re(c_mem_re), .raddr(c_mem_raddr), .rdata(c_mem_rdata));

  bram_sdp #(.W(N), .DEPTH(2**(NT_W+1))) u_spk_mem (
    .clk, .we(n_spk_we), .waddr(n_spk_waddr), .wdata(n_spk_wdata),
    .re(c_spk_re), .raddr(c_spk_raddr), .rdata(c_spk_rdata));

  bram_sdp #(.W(N), .DEPTH(2**(STEP_W+OUT_W))) u_out_mem (
    .clk, .we(n_out_we), .waddr(n_out_waddr), .wdata(n_out_wdata),
    .re(out_re), .raddr(out_raddr), .rdata(out_rdata));

  // ---------------- control unit -------------------------------------------
  logic                         ready, flush_done;
  logic [N-1:0]                 beat_spk;
  logic [N-1:0][N-1:0][W_W-1:0] beat_w;
  beat_tag_t                    beat_tag;

  control_unit u_ctrl (
    .clk, .rst_n, .start, .restart, .num_steps, .num_tiles,
    .busy, .done, .step, .flush_done,
    .tile_re(c_tile_re), .tile_raddr(c_tile_raddr), .tile_rdata(c_tile_rdata),
    .spk_re(c_spk_re), .spk_raddr(c_spk_raddr), .spk_rdata(c_spk_rdata),
    .mem_re(c_mem_re), .mem_raddr(c_mem_raddr), .mem_rdata(c_mem_rdata),
    .inp_re(c_inp_re), .inp_raddr(c_inp_raddr), .inp_rdata(c_inp_rdata),
    .ready, .beat_spk, .beat_w, .beat_tag);

  // ---------------- synaptic crossbar --------------------------------------
  logic signed [N-1:0][SUM_W-1:0] xb_sum;
  beat_tag_t                      xb_tag;
  logic                           ready_q;

  synapse_array #(.N(N), .W_W(W_W), .TAG_W(TAG_W)) u_xbar (
    .clk, .rst_n, .ready, .spk_in(beat_spk), .weight(beat_w),
    .tag_in(beat_tag), .out(xb_sum), .tag_out(xb_tag));

  // The crossbar output is new only after an edge on which READY was high.
  always_ff @(posedge clk) begin
    if (!rst_n) ready_q <= 1'b0;
    else        ready_q <= ready;
  end

  // ---------------- crossbar-to-neuron FIFO --------------------------------
  typedef struct packed {
    logic [N-1:0][SUM_W-1:0] sums;
    beat_tag_t               tag;
  } xb_beat_t;

  xb_beat_t nf_in, nf_out;
  logic     nf_push, nf_empty, nf_full;

  assign nf_in   = '{sums: xb_sum, tag: xb_tag};
  assign nf_push = ready_q && xb_tag.valid;

  sync_fifo #(.W($bits(xb_beat_t)), .DEPTH(4)) u_nfifo (
    .clk, .rst_n, .push(nf_push), .din(nf_in), .pop(!nf_empty),
    .dout(nf_out), .empty(nf_empty), .full(nf_full));

  // The neuron array retires one beat per clock, so this FIFO never holds
  // more than one entry and READY needs no back-pressure from it.
  a_nfifo_never_full: assert property (@(posedge clk) disable iff (!rst_n) !nf_full);

  // ---------------- neuron array -------------------------------------------
  neuron_array u_neurons (
    .clk, .rst_n,
    .beat_valid(!nf_empty), .sums(nf_out.sums), .tag(nf_out.tag),
    .threshold, .step,
    .spk_we(n_spk_we), .spk_waddr(n_spk_waddr), .spk_wdata(n_spk_wdata),
    .mem_we(n_mem_we), .mem_waddr(n_mem_waddr), .mem_wdata(n_mem_wdata),
    .out_we(n_out_we), .out_waddr(n_out_waddr), .out_wdata(n_out_wdata),
    .flush_done);

endmodule
