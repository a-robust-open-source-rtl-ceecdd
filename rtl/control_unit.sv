// control_unit: streams tiles from block memory into the synaptic crossbar.
//
// A run covers `num_steps` timesteps. In each timestep the unit walks the
// tile memory from address 0 to num_tiles-1, one tile per clock, and ends
// the timestep with one flush beat. The tile indices decide the addresses of
// the other data, so the stream is built in three stages:
//   A  read the tile word (header and 16x16 weights);
//   B  from its header read the presynaptic spikes of TILE_IDX_X (the bank
//      written in the previous timestep) and the stored membranes and the
//      direct-injection inputs of TILE_IDX_Y; meanwhile the weights and the
//      control bits wait in two FIFOs;
//   C  the read data arrive, both FIFOs are popped and the assembled beat is
//      presented to the crossbar with READY high.
// RESET is raised on the first tile of a timestep and whenever TILE_IDX_Y
// differs from the previous tile's (tiles are stored sorted by Y), telling
// the neuron array that the previous output tile is complete. The flush beat
// carries RESET without a new tile so the last output tile is written back.
// After the flush beat the unit keeps READY high, feeding bubbles, until the
// neuron array reports `flush_done`; only then does the next timestep begin,
// so every spike a timestep reads was written by the one before it (spikes
// are double-banked by timestep parity: one timestep of synaptic delay).
// After `restart`, the first timestep reads zero spikes and zero membranes
// instead of the memories, so no clearing pass is needed. Timing: a timestep
// takes num_tiles + about 10 clocks (3 stages, the crossbar and the drain).
// Streaming one tile per clock, the RESET signal, the FIFOs and the order of
// index and data reads follow the paper; the three-stage schedule, the
// flush beat, the drain, the double bank and the zero-masking are this
// design's choices.
module control_unit
  import snn_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // run control
  input  logic                 start,
  input  logic                 restart,
  input  logic [STEP_W:0]      num_steps,   // 1..128
  input  logic [TILE_AW:0]     num_tiles,   // 1..2**TILE_AW
  output logic                 busy,
  output logic                 done,        // one-cycle pulse at the end of a run
  output step_t                step,        // current timestep
  input  logic                 flush_done,  // neuron array has retired the flush beat
  // tile memory read port
  output logic                 tile_re,
  output logic [TILE_AW-1:0]   tile_raddr,
  input  tile_word_t           tile_rdata,
  // spike memory read port, address {bank, tile}
  output logic                 spk_re,
  output logic [NT_W:0]        spk_raddr,
  input  logic [N-1:0]         spk_rdata,
  // membrane and input memory read ports, address = tile
  output logic                 mem_re,
  output ntile_t               mem_raddr,
  input  logic [N-1:0][MEM_W-1:0] mem_rdata,
  output logic                 inp_re,
  output ntile_t               inp_raddr,
  input  logic [N-1:0][IN_W-1:0]  inp_rdata,
  // beat to the synaptic crossbar
  output logic                 ready,
  output logic [N-1:0]         beat_spk,
  output logic [N-1:0][N-1:0][W_W-1:0] beat_w,
  output beat_tag_t            beat_tag
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_t;

  typedef struct packed {
    logic      reset;
    logic      flush;
    tile_hdr_t hdr;
  } ctrl_t;

  state_t               state;
  logic [TILE_AW:0]     tidx;       // next tile to read
  logic [STEP_W:0]      steps_left;
  logic                 a_v, a_flush;   // stage A issued a read / the flush
  logic                 b_v;            // stage B issued the data reads
  logic                 have_y;
  ntile_t               prev_y;
  logic                 first_step;     // timestep follows a restart

  // ---------------- stage A: tile address sequencing ----------------------
  logic issue_tile, issue_flush;
  assign issue_tile  = (state == S_RUN) && (tidx < num_tiles);
  assign issue_flush = (state == S_RUN) && (tidx == num_tiles);

  assign tile_re    = issue_tile;
  assign tile_raddr = tidx[TILE_AW-1:0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      tidx       <= '0;
      steps_left <= '0;
      step       <= '0;
      first_step <= 1'b1;
      a_v        <= 1'b0;
      a_flush    <= 1'b0;
      done       <= 1'b0;
    end else begin
      done    <= 1'b0;
      a_v     <= issue_tile || issue_flush;
      a_flush <= issue_flush;
      case (state)
        S_IDLE: if (start && num_steps != 0) begin
          state      <= S_RUN;
          tidx       <= '0;
          steps_left <= num_steps;
          if (restart) begin
            step       <= '0;
            first_step <= 1'b1;
          end
        end
        S_RUN: begin
          tidx <= tidx + 1'b1;
          if (issue_flush) state <= S_DRAIN;
        end
        S_DRAIN: if (flush_done) begin
          step       <= step + 1'b1;
          first_step <= 1'b0;
          tidx       <= '0;
          if (steps_left == 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_RUN;
          end
          steps_left <= steps_left - 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // ---------------- stage B: index-addressed reads, FIFO push -------------
  tile_hdr_t hdr_b;
  ctrl_t     ctrl_b;
  assign hdr_b = a_flush ? '0 : tile_rdata.hdr;

  always_comb begin
    ctrl_b.flush = a_flush;
    ctrl_b.reset = a_flush || !have_y || (hdr_b.y != prev_y);
    ctrl_b.hdr   = hdr_b;
  end

  assign spk_re    = a_v;
  assign spk_raddr = {~step[0], hdr_b.x};
  assign mem_re    = a_v;
  assign mem_raddr = hdr_b.y;
  assign inp_re    = a_v;
  assign inp_raddr = hdr_b.y;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      b_v    <= 1'b0;
      have_y <= 1'b0;
      prev_y <= '0;
    end else begin
      b_v <= a_v;
      if (a_v) begin
        have_y <= !a_flush;
        prev_y <= hdr_b.y;
      end
    end
  end

  logic [N-1:0][N-1:0][W_W-1:0] w_b, w_c;
  ctrl_t                        ctrl_c;
  logic                         wf_empty, wf_full, cf_empty, cf_full;

  assign w_b = a_flush ? '0 : tile_rdata.w;

  sync_fifo #(.W(N*N*W_W), .DEPTH(4)) u_wfifo (
    .clk, .rst_n, .push(a_v), .din(w_b), .pop(b_v),
    .dout(w_c), .empty(wf_empty), .full(wf_full)
  );

  sync_fifo #(.W($bits(ctrl_t)), .DEPTH(4)) u_cfifo (
    .clk, .rst_n, .push(a_v), .din(ctrl_b), .pop(b_v),
    .dout(ctrl_c), .empty(cf_empty), .full(cf_full)
  );

  // ---------------- stage C: assemble the beat ----------------------------
  assign ready    = b_v || (state == S_DRAIN);
  assign beat_spk = (b_v && !first_step && !ctrl_c.flush) ? spk_rdata : '0;
  assign beat_w   = b_v ? w_c : '0;

  always_comb begin
    beat_tag       = '0;
    if (b_v) begin
      beat_tag.valid = 1'b1;
      beat_tag.reset = ctrl_c.reset;
      beat_tag.flush = ctrl_c.flush;
      beat_tag.hdr   = ctrl_c.hdr;
      beat_tag.mem   = first_step ? '0 : mem_rdata;
      beat_tag.inp   = inp_rdata;
    end
  end

  // Both FIFOs move in lock-step: pushed in stage B, popped one clock later.
  a_fifos_in_step: assert property (@(posedge clk) disable iff (!rst_n)
                                    (wf_empty == cf_empty) && (wf_full == cf_full));
  a_pop_has_data:  assert property (@(posedge clk) disable iff (!rst_n) b_v |-> !cf_empty);

endmodule
