// tb_neuron_array: self-checking test of the neuron array and its write-back.
//
// Feeds random beats (with random idle cycles) organised as the crossbar
// would deliver them: per timestep, groups of beats with the same output
// tile Y, the first of each group carrying RESET, and a flush beat at the
// end. A reference model integrates the sums and, on every RESET that closes
// a group, predicts the spike word (register > threshold), the saturated
// int8 membranes (0 where a neuron spiked), the output-memory write for
// output tiles and their addresses; the DUT's write ports are compared every
// clock. `flush_done` must follow each flush beat by one clock.
module tb_neuron_array;
  import snn_pkg::*;
  logic clk = 0, rst_n;
  logic beat_valid;
  logic signed [N-1:0][SUM_W-1:0] sums;
  beat_tag_t tag;
  acc_t threshold;
  step_t step;
  logic spk_we, mem_we, out_we, flush_done;
  logic [NT_W:0] spk_waddr;
  logic [N-1:0] spk_wdata, out_wdata;
  ntile_t mem_waddr;
  logic [N-1:0][MEM_W-1:0] mem_wdata;
  logic [STEP_W+OUT_W-1:0] out_waddr;
  int checks = 0, failures = 0;
  int n_wb = 0, n_spikes = 0, n_out = 0, n_sat = 0;

  neuron_array dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference state
  int acc [N];
  bit open_m;
  tile_hdr_t cur_m;
  bit exp_flush_done;

  function automatic int sat8(int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  task automatic fail(string what);
    failures++;
    if (failures < 12) $display("t=%0t %s", $time, what);
  endtask

  // Apply one beat at the next edge and check the write ports before it.
  task automatic send(bit rst, bit flush, tile_hdr_t h);
    bit exp_wb;
    logic [N-1:0] exp_spk;
    beat_valid = 1;
    tag = '0;
    tag.valid = 1; tag.reset = rst; tag.flush = flush; tag.hdr = h;
    for (int j = 0; j < N; j++) begin
      sums[j] = SUM_W'($signed($urandom_range(0, 160)) - 80);
      tag.mem[j] = MEM_W'($urandom);
      tag.inp[j] = IN_W'($signed($urandom_range(0, 40)) - 20);
    end
    #1;
    exp_wb = rst && open_m;
    checks++;
    if (spk_we != exp_wb || mem_we != exp_wb || out_we != (exp_wb && cur_m.out_en))
      fail($sformatf("write strobes spk=%0b mem=%0b out=%0b exp wb=%0b", spk_we, mem_we, out_we, exp_wb));
    if (exp_wb) begin
      n_wb++;
      for (int j = 0; j < N; j++) exp_spk[j] = (acc[j] > int'(threshold));
      checks++;
      if (spk_wdata != exp_spk || spk_waddr != {step[0], cur_m.y}) fail("spike write");
      for (int j = 0; j < N; j++) begin
        int e = exp_spk[j] ? 0 : sat8(acc[j]);
        if (!exp_spk[j] && e != acc[j]) n_sat++;
        checks++;
        if (int'($signed(mem_wdata[j])) != e) fail($sformatf("mem[%0d] got %0d exp %0d", j, $signed(mem_wdata[j]), e));
      end
      checks++;
      if (mem_waddr != cur_m.y) fail("mem address");
      n_spikes += $countones(exp_spk);
      if (cur_m.out_en) begin
        n_out++;
        checks++;
        if (out_wdata != exp_spk || out_waddr != {step, cur_m.out_idx}) fail("output write");
      end
    end
    @(posedge clk);
    // update the model
    if (rst) begin
      if (flush) begin
        for (int j = 0; j < N; j++) acc[j] = 0;
        open_m = 0;
      end else begin
        for (int j = 0; j < N; j++)
          acc[j] = int'($signed(tag.mem[j])) + int'($signed(tag.inp[j])) + int'($signed(sums[j]));
        open_m = 1;
        cur_m = h;
      end
    end else begin
      for (int j = 0; j < N; j++) acc[j] += int'($signed(sums[j]));
    end
    exp_flush_done = flush;
    @(negedge clk);
    checks++;
    if (flush_done != exp_flush_done) fail("flush_done");
  endtask

  task automatic idle();
    beat_valid = 0;
    tag = '0;
    #1;
    checks++;
    if (spk_we || mem_we || out_we) fail("write while idle");
    @(posedge clk);
    exp_flush_done = 0;
    @(negedge clk);
    checks++;
    if (flush_done) fail("flush_done while idle");
  endtask

  initial begin
    tile_hdr_t h;
    int y;
    rst_n = 0; beat_valid = 0; tag = '0; sums = '0; threshold = 20'sd60; step = '0;
    open_m = 0; cur_m = '0; exp_flush_done = 0;
    for (int j = 0; j < N; j++) acc[j] = 0;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 40; s++) begin
      step = step_t'(s);
      y = $urandom_range(0, 3);
      for (int g = 0; g < 5; g++) begin
        h = '0;
        h.y = ntile_t'(y);
        h.out_en = ($urandom_range(0, 2) == 0);
        h.out_idx = OUT_W'($urandom);
        for (int b = 0, nb = $urandom_range(1, 6); b < nb; b++) begin
          h.x = ntile_t'($urandom);
          if ($urandom_range(0, 3) == 0) idle();
          send(b == 0, 0, h);
        end
        y += $urandom_range(1, 5);
      end
      send(1, 1, '0);
      idle();
    end
    checks++;
    if (n_wb < 100 || n_spikes == 0 || n_out == 0 || n_sat == 0) begin
      failures++;
      $display("coverage: writebacks=%0d spikes=%0d outputs=%0d saturations=%0d", n_wb, n_spikes, n_out, n_sat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
