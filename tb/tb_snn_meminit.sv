// tb_snn_meminit: the accelerator booted from a memory initialisation file.
//
// The tile memory is preloaded through snn_top's TILE_INIT parameter from
// tb/parity_tiles.mem, which holds the two tiles of the parity network of
// tb_snn_parity as $readmemh words laid out as snn_pkg::tile_word_t
// ({out_idx, out_en, y, x} above w[15][15] .. w[0][0], 8 bits each). No tile
// is written through the host port. The testbench checks both preloaded
// words against tiles it builds itself, then runs the even-gap experiment
// (input spikes at timesteps 1 and 3) and checks the spikes of neurons 1-4
// and 16 in the output memory against the expected table, which ends with
// neuron 16 firing at timestep 4.
module tb_snn_meminit;
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

  snn_top #(.TILE_INIT("tb/parity_tiles.mem")) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef bit [4:0] row_t;   // {n16, n4, n3, n2, n1}
  row_t even_tab [4] = '{5'b00001, 5'b00010, 5'b00101, 5'b11000};

  initial begin
    tile_word_t t0, t1;
    row_t got;
    logic [N-1:0] w0, w1;
    rst_n = 0; start = 0; restart = 0; num_steps = '0; num_tiles = 2;
    tile_we = 0; inp_we = 0; out_re = 0; tile_waddr = '0; tile_wdata = '0;
    inp_waddr = '0; inp_wdata = '0; out_raddr = '0;
    threshold = 20'sd7;
    t0 = '0;
    t0.hdr.x = 0; t0.hdr.y = 0; t0.hdr.out_en = 1; t0.hdr.out_idx = 0;
    t0.w[1][2] = 8'sd8;  t0.w[2][3] = 8'sd8;  t0.w[3][4] = 8'sd8;  t0.w[4][3] = 8'sd8;
    t0.w[3][2] = -8'sd8; t0.w[4][2] = -8'sd8;
    t1 = '0;
    t1.hdr.x = 0; t1.hdr.y = 1; t1.hdr.out_en = 1; t1.hdr.out_idx = 1;
    t1.w[1][0] = 8'sd4;  t1.w[3][0] = 8'sd4;
    @(negedge clk);
    checks++;
    if (dut.u_tile_mem.mem[0] != t0) begin failures++; $display("preloaded tile 0 differs"); end
    checks++;
    if (dut.u_tile_mem.mem[1] != t1) begin failures++; $display("preloaded tile 1 differs"); end
    @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 4; t++) begin
      inp_wdata = '0; inp_wdata[1] = (t == 0 || t == 2) ? 8'sd8 : 8'sd0;
      inp_we = 1; inp_waddr = 0; @(negedge clk);
      inp_wdata = '0; inp_wdata[0] = -8'sd1;
      inp_we = 1; inp_waddr = 1; @(negedge clk);
      inp_we = 0;
      num_steps = 1; start = 1; restart = (t == 0);
      @(negedge clk);
      start = 0; restart = 0;
      while (!done) @(negedge clk);
    end
    for (int t = 0; t < 4; t++) begin
      out_re = 1; out_raddr = {STEP_W'(t), 2'd0}; @(negedge clk); w0 = out_rdata;
      out_raddr = {STEP_W'(t), 2'd1}; @(negedge clk); w1 = out_rdata;
      out_re = 0;
      got = {w1[0], w0[4], w0[3], w0[2], w0[1]};
      checks++;
      if (got != even_tab[t]) begin failures++; $display("t=%0d got %b exp %b", t + 1, got, even_tab[t]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
