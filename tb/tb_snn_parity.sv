// tb_snn_parity: the hand-built any-to-any "odd or even gap" network.
//
// Two input spikes arrive on neuron 1; neuron 16 must fire if the gap
// between them is even (2 timesteps) and stay silent if it is odd (3).
// Neuron 1 relays the input to neuron 2, which starts a parity oscillator
// between neurons 3 and 4 and is then inhibited by both; neuron 16 is a
// coincidence detector of neuron 1 and neuron 3. Neurons 1-4 sit in neuron
// tile 0 and neuron 16 in tile 1, so the network needs two tiles (X=0 to
// Y=0 and X=0 to Y=1). Integer weights, with 8 counts = 1.0 so that the
// strict "> 7" comparison means "reaches 1.0": 1->2, 2->3, 3->4, 4->3 = +8;
// 3->2, 4->2 = -8; 1->16, 3->16 = +4 (one half); input 8 on neuron 1 at a
// spike time; a constant input of -1 on neuron 16. The input is changed
// through the host port between single-timestep runs. Both tiles are output
// tiles, so the output memory holds the spikes of neurons 1-4 and 16 for
// every timestep, which are compared with the expected spike table of the
// two experiments (gap 2: five columns over 4 timesteps; gap 3: over 5).
module tb_snn_parity;
  import snn_pkg::*;

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

  // expected spikes of neurons {1,2,3,4,16} per timestep
  typedef bit [4:0] row_t;   // {n16, n4, n3, n2, n1}
  row_t even_tab [4] = '{5'b00001, 5'b00010, 5'b00101, 5'b11000};
  row_t odd_tab  [5] = '{5'b00001, 5'b00010, 5'b00100, 5'b01001, 5'b00100};

  task automatic write_input(bit spike);
    inp_wdata = '0;
    inp_wdata[1] = spike ? 8'sd8 : 8'sd0;
    inp_we = 1; inp_waddr = 0; @(negedge clk);
    inp_wdata = '0;
    inp_wdata[0] = -8'sd1;          // bias of neuron 16
    inp_we = 1; inp_waddr = 1; @(negedge clk);
    inp_we = 0;
  endtask

  task automatic one_step(bit rs);
    num_steps = 1; start = 1; restart = rs;
    @(negedge clk);
    start = 0; restart = 0;
    while (!done) @(negedge clk);
  endtask

  task automatic experiment(int gap, int nsteps, string name);
    row_t got;
    logic [N-1:0] w0, w1;
    for (int t = 0; t < nsteps; t++) begin
      write_input(t == 0 || t == gap);
      one_step(t == 0);
    end
    for (int t = 0; t < nsteps; t++) begin
      out_re = 1; out_raddr = {STEP_W'(t), 2'd0}; @(negedge clk); w0 = out_rdata;
      out_raddr = {STEP_W'(t), 2'd1}; @(negedge clk); w1 = out_rdata;
      out_re = 0;
      got = {w1[0], w0[4], w0[3], w0[2], w0[1]};
      checks++;
      if (got != ((gap == 2) ? even_tab[t] : odd_tab[t]) || w0[0] || w0[15:5] != 0 || w1[15:1] != 0) begin
        failures++;
        $display("%s t=%0d: got %b", name, t + 1, got);
      end
      $display("%s t=%0d  n1=%0b n2=%0b n3=%0b n4=%0b n16=%0b", name, t + 1, got[0], got[1], got[2], got[3], got[4]);
    end
  endtask

  initial begin
    tile_word_t tw;
    rst_n = 0; start = 0; restart = 0; num_steps = '0; num_tiles = 2;
    tile_we = 0; inp_we = 0; out_re = 0; tile_waddr = '0; tile_wdata = '0;
    inp_waddr = '0; inp_wdata = '0; out_raddr = '0;
    threshold = 20'sd7;
    @(negedge clk);
    // tile 0: neurons 0-15 -> neurons 0-15, output slot 0
    tw = '0;
    tw.hdr.x = 0; tw.hdr.y = 0; tw.hdr.out_en = 1; tw.hdr.out_idx = 0;
    tw.w[1][2] = 8'sd8;  tw.w[2][3] = 8'sd8;  tw.w[3][4] = 8'sd8;  tw.w[4][3] = 8'sd8;
    tw.w[3][2] = -8'sd8; tw.w[4][2] = -8'sd8;
    tile_we = 1; tile_waddr = 0; tile_wdata = tw; @(negedge clk);
    // tile 1: neurons 0-15 -> neurons 16-31, output slot 1
    tw = '0;
    tw.hdr.x = 0; tw.hdr.y = 1; tw.hdr.out_en = 1; tw.hdr.out_idx = 1;
    tw.w[1][0] = 8'sd4;  tw.w[3][0] = 8'sd4;
    tile_we = 1; tile_waddr = 1; tile_wdata = tw; @(negedge clk);
    tile_we = 0;
    rst_n = 1;
    @(negedge clk);
    experiment(2, 4, "gap 2 (even)");
    experiment(3, 5, "gap 3 (odd) ");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
