// tb_snn_top: end-to-end test of the accelerator against the reference model.
//
// Builds a small any-to-any network of six neuron tiles: two input tiles
// (driven by direct injection, updated through zero-weight tiles), two
// hidden tiles fed by the inputs and recurrently by themselves, and two
// output tiles. It loads tiles and inputs through the host ports, runs
// 12 timesteps from a restart, continues 6 more without restart, then
// restarts with new inputs and threshold for 5 timesteps. After every run
// the output memory (read through the host port) and the internal spike and
// membrane memories are compared with snn_ref_pkg. It also checks that a
// timestep costs num_tiles plus a fixed overhead of at most 12 clocks (one
// tile per clock) and counts the mechanisms of the design: RESET on a change
// of output tile, multi-tile accumulation, flush beats, output-memory writes,
// READY low (pipeline hold), spikes, int8 saturation of stored membranes and
// zero-masking after restart. A mechanism that never happens is a failure.
module tb_snn_top;
  import snn_pkg::*;
  import snn_ref_pkg::*;

  logic clk = 0, rst_n;
  logic start, restart, busy, done;
  logic [STEP_W:0] num_steps;
  logic [TILE_AW:0] num_tiles;
  acc_t threshold;
  step_t step;
  logic tile_we, inp_we, out_re;
  logic [TILE_AW-1:0] tile_waddr;
  tile_word_t tile_wdata;
  ntile_t inp_waddr;
  logic [N-1:0][IN_W-1:0] inp_wdata;
  logic [STEP_W+OUT_W-1:0] out_raddr;
  logic [N-1:0] out_rdata;
  int checks = 0, failures = 0;

  snn_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int c_reset_change = 0, c_accum = 0, c_flush = 0, c_out = 0, c_ready_low = 0, c_spikes = 0, c_restart = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.n_spk_we && !dut.nf_out.tag.flush) c_reset_change++;
    if (!dut.nf_empty && dut.nf_out.tag.valid && !dut.nf_out.tag.reset) c_accum++;
    if (dut.flush_done) c_flush++;
    if (dut.n_out_we) c_out++;
    if (busy && !dut.ready) c_ready_low++;
    if (dut.n_spk_we) c_spikes += $countones(dut.n_spk_wdata);
  end

  snn_ref ref_m;

  task automatic fail(string what);
    failures++;
    if (failures < 12) $display("%s", what);
  endtask

  task automatic add_tile(int x, int y, bit out_en, int out_idx, int wlo, int whi, int density);
    tile_word_t tw;
    tw.hdr.x = ntile_t'(x); tw.hdr.y = ntile_t'(y);
    tw.hdr.out_en = out_en; tw.hdr.out_idx = OUT_W'(out_idx);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        tw.w[i][j] = ($urandom_range(0, 99) < density) ? W_W'($urandom_range(0, whi - wlo) + wlo) : '0;
    ref_m.tiles.push_back(tw);
  endtask

  task automatic load_tiles();
    foreach (ref_m.tiles[k]) begin
      tile_we = 1; tile_waddr = TILE_AW'(k); tile_wdata = ref_m.tiles[k];
      @(negedge clk);
    end
    tile_we = 0;
    num_tiles = (TILE_AW+1)'(ref_m.tiles.size());
  endtask

  task automatic load_inputs(int lo, int hi);
    for (int a = 0; a < 2**NT_W; a++) begin
      for (int j = 0; j < N; j++) begin
        ref_m.inp[a][j] = (a < 2) ? $urandom_range(0, hi - lo) + lo : 0;
        inp_wdata[j] = IN_W'(ref_m.inp[a][j]);
      end
      inp_we = 1; inp_waddr = ntile_t'(a);
      @(negedge clk);
    end
    inp_we = 0;
  endtask

  task automatic run(int steps, bit rs);
    int t0, t1, cyc;
    int base = rs ? 0 : int'(step);
    if (rs) c_restart++;
    for (int s = 0; s < steps; s++) ref_m.run_step(base + s, rs && s == 0);
    num_steps = (STEP_W+1)'(steps);
    start = 1; restart = rs;
    cyc = 0;
    @(negedge clk);
    start = 0; restart = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc > steps * (ref_m.tiles.size() + 12) || cyc < steps * (ref_m.tiles.size() + 1))
      fail($sformatf("run of %0d steps took %0d clocks for %0d tiles", steps, cyc, ref_m.tiles.size()));
    $display("run: %0d timesteps, %0d tiles, %0d clocks (%0d per timestep)", steps, ref_m.tiles.size(), cyc, cyc / steps);
  endtask

  task automatic compare(int t_lo, int t_hi);
    for (int t = t_lo; t < t_hi; t++)
      for (int s = 0; s < 2**OUT_W; s++) begin
        out_re = 1; out_raddr = {t[STEP_W-1:0], OUT_W'(s)};
        @(negedge clk);
        out_re = 0;
        checks++;
        if (out_rdata != ref_m.out[{t[STEP_W-1:0], OUT_W'(s)}])
          fail($sformatf("output t=%0d slot %0d: got %h exp %h", t, s, out_rdata, ref_m.out[{t[STEP_W-1:0], OUT_W'(s)}]));
      end
    for (int a = 0; a < 6; a++)
      for (int j = 0; j < N; j++) begin
        checks += 3;
        if (int'($signed(dut.u_mem_mem.mem[a][j*MEM_W +: MEM_W])) != ref_m.mem[a][j])
          fail($sformatf("membrane tile %0d neuron %0d: got %0d exp %0d", a, j, $signed(dut.u_mem_mem.mem[a][j*MEM_W +: MEM_W]), ref_m.mem[a][j]));
        for (int b = 0; b < 2; b++)
          if (dut.u_spk_mem.mem[{b[0], ntile_t'(a)}][j] != ref_m.spk[b][a][j])
            fail($sformatf("spike bank %0d tile %0d neuron %0d", b, a, j));
      end
  endtask

  initial begin
    ref_m = new();
    rst_n = 0; start = 0; restart = 0; num_steps = '0; num_tiles = '0;
    tile_we = 0; inp_we = 0; out_re = 0; tile_waddr = '0; tile_wdata = '0;
    inp_waddr = '0; inp_wdata = '0; out_raddr = '0;
    threshold = 20'sd50;
    ref_m.threshold = 50;
    // network: Y sorted
    add_tile(0, 0, 0, 0, 0, 0, 0);       // input tile 0 (zero weights)
    add_tile(1, 1, 0, 0, 0, 0, 0);       // input tile 1
    add_tile(0, 2, 0, 0, -10, 40, 50);   // hidden tile 2
    add_tile(1, 2, 0, 0, -10, 40, 50);
    add_tile(3, 2, 0, 0, -30, 30, 30);   // recurrent from tile 3
    add_tile(0, 3, 0, 0, -10, 40, 50);   // hidden tile 3
    add_tile(2, 3, 0, 0, -40, 20, 40);
    add_tile(3, 3, 0, 0, -20, 20, 30);   // self-recurrent
    add_tile(2, 4, 1, 1, -20, 60, 50);   // output tile 4 -> slot 1
    add_tile(3, 4, 1, 1, -20, 60, 50);
    add_tile(2, 5, 1, 2, -120, 127, 80); // output tile 5 -> slot 2 (large sums)
    add_tile(3, 5, 1, 2, -120, 127, 80);
    @(negedge clk);
    load_tiles();
    load_inputs(0, 30);
    @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run(12, 1);
    compare(0, 12);
    run(6, 0);
    compare(12, 18);
    threshold = 20'sd30;
    ref_m.threshold = 30;
    load_inputs(5, 25);
    run(5, 1);
    compare(0, 5);
    $display("mechanisms: reset_change=%0d accumulate=%0d flush=%0d output_write=%0d ready_low=%0d spikes=%0d saturation=%0d restart=%0d",
             c_reset_change, c_accum, c_flush, c_out, c_ready_low, c_spikes, ref_m.n_sat, c_restart);
    checks++; if (c_reset_change == 0) fail("no RESET on output-tile change");
    checks++; if (c_accum == 0) fail("no multi-tile accumulation");
    checks++; if (c_flush != 23) fail($sformatf("flush beats %0d, expected 23", c_flush));
    checks++; if (c_out == 0) fail("no output-memory write");
    checks++; if (c_ready_low == 0) fail("READY never low");
    checks++; if (c_spikes == 0) fail("no spikes");
    checks++; if (ref_m.n_sat == 0) fail("no membrane saturation");
    checks++; if (c_restart != 2) fail("restart count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
