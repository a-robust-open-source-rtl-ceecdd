// tb_adder_tree: self-checking test of the pipelined column adder tree.
//
// Drives random signed operands with a randomly toggling enable and compares
// the output every clock with a reference model: a shift register of exact
// sums that advances on the same enables. A separate impulse test measures
// the latency (expected log2(N) = 4 enabled clocks) and checks that the
// pipeline holds while the enable is low.
module tb_adder_tree;
  localparam int N = 16, IN_W = 8, OUT_W = 12, LV = 4;
  logic clk = 0;
  logic en;
  logic signed [N-1:0][IN_W-1:0] in_i;
  logic signed [OUT_W-1:0] sum_o;
  int checks = 0, failures = 0;

  adder_tree #(.N(N), .IN_W(IN_W), .OUT_W(OUT_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_sum(logic signed [N-1:0][IN_W-1:0] v);
    int s = 0;
    for (int k = 0; k < N; k++) s += int'($signed(v[k]));
    return s;
  endfunction

  int model [LV];
  int lat;

  initial begin
    for (int s = 0; s < LV; s++) model[s] = 0;
    en = 0; in_i = '0;
    @(negedge clk);
    // Random streaming with random stalls.
    for (int c = 0; c < 3000; c++) begin
      en = ($urandom_range(0, 3) != 0);
      for (int k = 0; k < N; k++) in_i[k] = IN_W'($urandom);
      if (c % 500 == 0) for (int k = 0; k < N; k++) in_i[k] = (c % 1000 == 0) ? 8'sd127 : -8'sd128;
      @(posedge clk);
      if (en) begin
        for (int s = LV-1; s > 0; s--) model[s] = model[s-1];
        model[0] = ref_sum(in_i);
      end
      #1;
      checks++;
      if (int'(sum_o) != model[LV-1]) begin
        failures++;
        if (failures < 10) $display("mismatch c=%0d got %0d exp %0d", c, sum_o, model[LV-1]);
      end
      @(negedge clk);
    end
    // Latency: flush with zeros, apply one impulse, count enabled clocks.
    en = 1; in_i = '0;
    repeat (LV+1) @(negedge clk);
    in_i[3] = 8'sd77;
    @(negedge clk);
    in_i = '0;
    lat = 1;
    while (sum_o != 77 && lat < 20) begin @(negedge clk); lat++; end
    checks++;
    if (lat != LV) begin failures++; $display("latency %0d, expected %0d", lat, LV); end
    // Hold: with enable low the output must not change.
    in_i[0] = 8'sd5;
    en = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (sum_o != 77) begin failures++; $display("output changed while en low"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
