// tb_snn_mnist: full-size run of a 784-128-10 fully connected network.
//
// The network has the shape of the MNIST classifier the design is sized
// for: 49 input neuron tiles (784 pixels, updated by 49 zero-weight tiles),
// 8 hidden tiles (128 neurons) each fed by 49 tiles, and one output tile (10
// classes in a 16-neuron tile) fed by 8 tiles and designated output slot 0:
// 449 tiles in all. Weights and the image are pseudo-random (drawn from a
// fixed-seed generator, biased so that hidden and output neurons spike);
// a trained network is not needed to check the datapath. The run lasts 100
// timesteps from a restart with the design at its default sizes. The output
// memory for all 100 timesteps and the final membranes of all 58 neuron
// tiles are compared with snn_ref_pkg, and the run time is checked against
// one tile per clock: it must be at most (449 + 12) clocks per timestep.
// At 100 MHz the measured count gives the time per image.
module tb_snn_mnist;
  import snn_pkg::*;
  import snn_ref_pkg::*;

  localparam int IN_T = 49, HID_T = 8, STEPS = 100;
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
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  snn_ref ref_m;

  task automatic fail(string what);
    failures++;
    if (failures < 12) $display("%s", what);
  endtask

  function automatic tile_word_t make_tile(int x, int y, int wlo, int whi, bit out_en);
    tile_word_t tw;
    tw = '0;
    tw.hdr.x = ntile_t'(x); tw.hdr.y = ntile_t'(y); tw.hdr.out_en = out_en;
    if (whi > wlo)
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          tw.w[i][j] = W_W'($urandom_range(0, whi - wlo) + wlo);
    return tw;
  endfunction

  initial begin
    int cyc, k, out_spikes, cls_count [10];
    void'($urandom(12345));
    ref_m = new();
    rst_n = 0; start = 0; restart = 0; num_steps = '0; num_tiles = '0;
    tile_we = 0; inp_we = 0; out_re = 0; tile_waddr = '0; tile_wdata = '0;
    inp_waddr = '0; inp_wdata = '0; out_raddr = '0;
    threshold = 20'sd64;
    ref_m.threshold = 64;
    for (int y = 0; y < IN_T; y++) ref_m.tiles.push_back(make_tile(y, y, 0, 0, 0));
    for (int y = IN_T; y < IN_T + HID_T; y++)
      for (int x = 0; x < IN_T; x++) ref_m.tiles.push_back(make_tile(x, y, -3, 4, 0));
    for (int x = IN_T; x < IN_T + HID_T; x++) ref_m.tiles.push_back(make_tile(x, IN_T + HID_T, -8, 12, 1));
    // only 10 of the 16 output-tile neurons exist
    for (int kk = ref_m.tiles.size() - HID_T; kk < ref_m.tiles.size(); kk++)
      for (int i = 0; i < N; i++) for (int j = 10; j < N; j++) ref_m.tiles[kk].w[i][j] = '0;
    @(negedge clk);
    foreach (ref_m.tiles[kk]) begin
      tile_we = 1; tile_waddr = TILE_AW'(kk); tile_wdata = ref_m.tiles[kk]; @(negedge clk);
    end
    tile_we = 0;
    num_tiles = (TILE_AW+1)'(ref_m.tiles.size());
    // image: 28x28 pixels scaled to 0..40, a bright blob in the middle
    for (int a = 0; a < IN_T; a++) begin
      for (int j = 0; j < N; j++) begin
        int p, r, c, v;
        p = a * N + j; r = p / 28; c = p % 28;
        v = ((r - 14) * (r - 14) + (c - 13) * (c - 13) < 60) ? 20 + $urandom_range(0, 20) : $urandom_range(0, 3);
        ref_m.inp[a][j] = v;
        inp_wdata[j] = IN_W'(v);
      end
      inp_we = 1; inp_waddr = ntile_t'(a); @(negedge clk);
    end
    inp_we = 0;
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < STEPS; t++) ref_m.run_step(t, t == 0);
    num_steps = (STEP_W+1)'(STEPS); start = 1; restart = 1;
    @(negedge clk);
    start = 0; restart = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    $display("%0d tiles, %0d timesteps: %0d clocks = %0d per timestep = %0d.%03d ms per image at 100 MHz",
             ref_m.tiles.size(), STEPS, cyc, cyc / STEPS, cyc / 100000, (cyc % 100000) / 100);
    checks++;
    if (cyc > STEPS * (ref_m.tiles.size() + 12)) fail("slower than one tile per clock plus overhead");
    out_spikes = 0;
    for (int j = 0; j < 10; j++) cls_count[j] = 0;
    for (int t = 0; t < STEPS; t++) begin
      out_re = 1; out_raddr = {STEP_W'(t), 2'd0}; @(negedge clk); out_re = 0;
      checks++;
      if (out_rdata != ref_m.out[{STEP_W'(t), 2'd0}]) fail($sformatf("output t=%0d got %h exp %h", t, out_rdata, ref_m.out[{STEP_W'(t), 2'd0}]));
      for (int j = 0; j < 10; j++) cls_count[j] += out_rdata[j];
      out_spikes += $countones(out_rdata);
    end
    for (int a = 0; a < IN_T + HID_T + 1; a++)
      for (int j = 0; j < N; j++) begin
        checks++;
        if (int'($signed(dut.u_mem_mem.mem[a][j*MEM_W +: MEM_W])) != ref_m.mem[a][j])
          fail($sformatf("membrane tile %0d neuron %0d", a, j));
      end
    k = 0;
    for (int j = 1; j < 10; j++) if (cls_count[j] > cls_count[k]) k = j;
    $display("output spikes %0d, hidden+input spikes in model %0d, predicted class %0d", out_spikes, ref_m.n_spikes, k);
    checks++;
    if (out_spikes == 0) fail("no output spikes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
