// tb_synapse_array: self-checking test of the 16x16 synaptic crossbar.
//
// Streams random tiles (random spikes, random int8 weights, a tag holding the
// tile number) one per clock with random READY stalls. A reference model
// computes OUT[j] = sum over i of spike[i] * w[i][j] for every tile, and a
// model delay line gives the tile number that must come out; each enabled
// clock the outputs and the tag are compared. Also checks one tile per clock
// throughput and a latency of 4 clocks with READY held high.
module tb_synapse_array;
  localparam int N = 16, W_W = 8, SUM_W = 12, LAT = 4, TAG_W = 16;
  logic clk = 0;
  logic rst_n;
  logic ready;
  logic [N-1:0] spk_in;
  logic signed [N-1:0][N-1:0][W_W-1:0] weight;
  logic [TAG_W-1:0] tag_in, tag_out;
  logic signed [N-1:0][SUM_W-1:0] out;
  int checks = 0, failures = 0;

  synapse_array #(.N(N), .W_W(W_W), .TAG_W(TAG_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_sum [LAT][N];
  int exp_tag [LAT];
  int tile_no = 0;
  int lat;

  task automatic rand_tile();
    spk_in = N'($urandom);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) weight[i][j] = W_W'($urandom);
    tag_in = TAG_W'(tile_no);
  endtask

  initial begin
    for (int s = 0; s < LAT; s++) begin exp_tag[s] = 0; for (int j = 0; j < N; j++) exp_sum[s][j] = 0; end
    rst_n = 0; ready = 1; spk_in = '0; weight = '0; tag_in = '1;
    @(negedge clk); @(negedge clk);
    rst_n = 1; tag_in = '0;
    checks++;
    if (tag_out != '0) begin failures++; $display("tag line not cleared by reset"); end
    ready = 0;
    @(negedge clk);
    for (int c = 0; c < 2000; c++) begin
      ready = ($urandom_range(0, 4) != 0);
      rand_tile();
      if (c == 100) begin spk_in = '1; for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) weight[i][j] = -8'sd128; end
      if (c == 101) begin spk_in = '1; for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) weight[i][j] = 8'sd127; end
      @(posedge clk);
      if (ready) begin
        for (int s = LAT-1; s > 0; s--) begin exp_tag[s] = exp_tag[s-1]; for (int j = 0; j < N; j++) exp_sum[s][j] = exp_sum[s-1][j]; end
        exp_tag[0] = tile_no;
        for (int j = 0; j < N; j++) begin
          exp_sum[0][j] = 0;
          for (int i = 0; i < N; i++) if (spk_in[i]) exp_sum[0][j] += int'($signed(weight[i][j]));
        end
        tile_no++;
      end
      #1;
      for (int j = 0; j < N; j++) begin
        checks++;
        if (int'($signed(out[j])) != exp_sum[LAT-1][j]) begin
          failures++;
          if (failures < 10) $display("c=%0d col %0d got %0d exp %0d", c, j, out[j], exp_sum[LAT-1][j]);
        end
      end
      checks++;
      if (int'(tag_out) != exp_tag[LAT-1]) begin failures++; if (failures < 10) $display("tag mismatch c=%0d", c); end
      @(negedge clk);
    end
    // Latency with READY high: a single tile with one spike on row 2.
    ready = 1; spk_in = '0; weight = '0; tag_in = '0;
    repeat (LAT+1) @(negedge clk);
    spk_in = 16'h0004; weight[2][9] = -8'sd33; tag_in = 16'hBEEF;
    @(negedge clk);
    spk_in = '0; tag_in = '0;
    lat = 1;
    while (tag_out != 16'hBEEF && lat < 20) begin @(negedge clk); lat++; end
    checks++;
    if (lat != LAT) begin failures++; $display("latency %0d expected %0d", lat, LAT); end
    checks++;
    if ($signed(out[9]) != -12'sd33 || out[8] != 0) begin failures++; $display("impulse sums wrong"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
