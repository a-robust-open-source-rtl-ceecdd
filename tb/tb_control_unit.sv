// tb_control_unit: self-checking test of the tile-streaming control unit.
//
// The unit is connected to block-RAM instances preloaded with random tiles
// (sorted by Y), spike words, membranes and inputs. The testbench plays the
// neuron array: it answers each flush beat with `flush_done` after a random
// delay. Every beat presented with READY high is compared with what the
// memories say it must hold: tile header and weights in memory order, the
// spike word of TILE_IDX_X from the previous timestep's bank (zero in the
// first timestep after restart), the membranes (zero after restart) and
// inputs of TILE_IDX_Y, RESET on the first tile and on every change of Y,
// and one flush beat per timestep. Also checked: tiles of a timestep arrive
// on consecutive clocks (one tile per clock), no beat is issued between a
// flush and its flush_done, the run lasts num_steps timesteps, `done`
// pulses once, and READY is low while the first data of a timestep are read.
module tb_control_unit;
  import snn_pkg::*;
  localparam int NT = 23;     // tiles in the test network
  logic clk = 0, rst_n;
  logic start, restart, busy, done, first_step, flush_done;
  logic [STEP_W:0] num_steps;
  logic [TILE_AW:0] num_tiles;
  step_t step;
  logic tile_re, spk_re, mem_re, inp_re, ready;
  logic [TILE_AW-1:0] tile_raddr;
  tile_word_t tile_rdata;
  logic [NT_W:0] spk_raddr;
  logic [N-1:0] spk_rdata, beat_spk;
  ntile_t mem_raddr, inp_raddr;
  logic [N-1:0][MEM_W-1:0] mem_rdata;
  logic [N-1:0][IN_W-1:0] inp_rdata;
  logic [N-1:0][N-1:0][W_W-1:0] beat_w;
  beat_tag_t beat_tag;
  int checks = 0, failures = 0;

  control_unit dut (.*);

  // memories, written by the testbench through their write ports
  logic t_we, s_we, m_we, i_we;
  logic [TILE_AW-1:0] t_wa;
  tile_word_t t_wd;
  logic [NT_W:0] s_wa;
  logic [N-1:0] s_wd;
  ntile_t m_wa, i_wa;
  logic [N-1:0][MEM_W-1:0] m_wd;
  logic [N-1:0][IN_W-1:0] i_wd;

  bram_sdp #(.W(TILE_WORD_W), .DEPTH(2**TILE_AW)) u_t (.clk, .we(t_we), .waddr(t_wa), .wdata(t_wd), .re(tile_re), .raddr(tile_raddr), .rdata(tile_rdata));
  bram_sdp #(.W(N), .DEPTH(2**(NT_W+1))) u_s (.clk, .we(s_we), .waddr(s_wa), .wdata(s_wd), .re(spk_re), .raddr(spk_raddr), .rdata(spk_rdata));
  bram_sdp #(.W(N*MEM_W), .DEPTH(2**NT_W)) u_m (.clk, .we(m_we), .waddr(m_wa), .wdata(m_wd), .re(mem_re), .raddr(mem_raddr), .rdata(mem_rdata));
  bram_sdp #(.W(N*IN_W), .DEPTH(2**NT_W)) u_i (.clk, .we(i_we), .waddr(i_wa), .wdata(i_wd), .re(inp_re), .raddr(inp_raddr), .rdata(inp_rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  tile_word_t tiles [NT];
  logic [N-1:0] spk_ref [2**(NT_W+1)];
  logic [N-1:0][MEM_W-1:0] mem_ref [2**NT_W];
  logic [N-1:0][IN_W-1:0] inp_ref [2**NT_W];

  task automatic fail(string what);
    failures++;
    if (failures < 12) $display("t=%0t %s", $time, what);
  endtask

  // Beat checker.
  int exp_tile = 0, exp_step = 0, steps_seen = 0, n_done = 0, n_ready_low = 0;
  int last_tile_cycle = -10, cyc = 0, n_resets = 0;
  bit waiting_flush = 0, first_run = 1;
  int pending_fd = -1;

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n) begin
    flush_done = 0;
    if (pending_fd == 0) flush_done = 1;
    if (pending_fd >= 0) pending_fd--;
    if (done) n_done++;
    if (busy && !ready) n_ready_low++;
    if (ready && beat_tag.valid) begin
      checks++;
      if (waiting_flush) fail("beat issued before flush_done");
      if (exp_tile == NT) begin
        // flush beat
        if (!beat_tag.flush || !beat_tag.reset || beat_spk != 0 || beat_w != '0) fail("bad flush beat");
        exp_tile = 0;
        waiting_flush = 1;
        pending_fd = $urandom_range(0, 6);
      end else begin
        tile_word_t tw;
        bit exp_rst;
        tw = tiles[exp_tile];
        exp_rst = (exp_tile == 0) || (tw.hdr.y != tiles[exp_tile-1].hdr.y);
        if (exp_rst) n_resets++;
        if (beat_tag.flush || beat_tag.reset != exp_rst) fail($sformatf("reset flag tile %0d", exp_tile));
        if (beat_tag.hdr != tw.hdr || beat_w != tw.w) fail($sformatf("tile %0d content", exp_tile));
        if (beat_spk != (first_run ? '0 : spk_ref[{~exp_step[0], tw.hdr.x}])) fail($sformatf("spikes tile %0d step %0d", exp_tile, exp_step));
        if (beat_tag.mem != (first_run ? '0 : mem_ref[tw.hdr.y])) fail("membrane data");
        if (beat_tag.inp != inp_ref[tw.hdr.y]) fail("input data");
        if (int'(step) != exp_step) fail("step number");
        if (exp_tile != 0 && cyc != last_tile_cycle + 1) fail("tiles not on consecutive clocks");
        last_tile_cycle = cyc;
        exp_tile++;
      end
    end
    if (flush_done) begin
      waiting_flush = 0;
      exp_step++;
      first_run = 0;
      steps_seen++;
    end
  end

  initial begin
    int y;
    rst_n = 0; start = 0; restart = 0; num_steps = '0; num_tiles = '0; flush_done = 0;
    t_we = 0; s_we = 0; m_we = 0; i_we = 0; t_wa = '0; t_wd = '0; s_wa = '0; s_wd = '0;
    m_wa = '0; m_wd = '0; i_wa = '0; i_wd = '0;
    // build sorted random tiles
    y = 0;
    for (int k = 0; k < NT; k++) begin
      if (k != 0 && $urandom_range(0, 2) == 0) y += $urandom_range(1, 3);
      tiles[k].hdr.x = ntile_t'($urandom);
      tiles[k].hdr.y = ntile_t'(y);
      tiles[k].hdr.out_en = 1'($urandom);
      tiles[k].hdr.out_idx = OUT_W'($urandom);
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) tiles[k].w[i][j] = W_W'($urandom);
    end
    @(negedge clk);
    for (int k = 0; k < NT; k++) begin t_we = 1; t_wa = TILE_AW'(k); t_wd = tiles[k]; @(negedge clk); end
    t_we = 0;
    for (int a = 0; a < 2**(NT_W+1); a++) begin spk_ref[a] = N'($urandom); s_we = 1; s_wa = a[NT_W:0]; s_wd = spk_ref[a]; @(negedge clk); end
    s_we = 0;
    for (int a = 0; a < 2**NT_W; a++) begin
      for (int j = 0; j < N; j++) begin mem_ref[a][j] = MEM_W'($urandom); inp_ref[a][j] = IN_W'($urandom); end
      m_we = 1; i_we = 1; m_wa = ntile_t'(a); i_wa = ntile_t'(a); m_wd = mem_ref[a]; i_wd = inp_ref[a];
      @(negedge clk);
    end
    m_we = 0; i_we = 0;
    rst_n = 1;
    @(negedge clk);
    num_tiles = (TILE_AW+1)'(NT); num_steps = 8'd5;
    start = 1; restart = 1;
    @(negedge clk);
    start = 0; restart = 0;
    while (busy) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++;
    if (steps_seen != 5 || n_done != 1 || exp_tile != 0) fail($sformatf("run: steps=%0d done=%0d", steps_seen, n_done));
    checks++;
    if (n_ready_low < 5) fail("READY never low during a run");
    checks++;
    if (n_resets < 10) fail("too few RESETs");
    // continue without restart: state is read from memory, step keeps counting
    start = 1; num_steps = 8'd2;
    @(negedge clk);
    start = 0;
    while (busy) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++;
    if (steps_seen != 7 || int'(step) != 7) fail("continued run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
