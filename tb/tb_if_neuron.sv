// tb_if_neuron: self-checking test of the integrate-and-fire neuron.
//
// Applies random sequences of enable, RST, SPK and SNN_IN with random
// thresholds and checks, every clock, SPK_OUT and MEM_OUT against a
// reference: the register adds SPK when RST is low, loads SNN_IN when RST is
// high, holds when the enable is low; SPK_OUT = register > THRESH (strict);
// MEM_OUT = 0 on a spike, the register otherwise; no leak.
module tb_if_neuron;
  localparam int SPK_W = 12, ACC_W = 20;
  logic clk = 0, rst_n, en, rst, spk_out;
  logic signed [SPK_W-1:0] spk;
  logic signed [ACC_W-1:0] snn_in, thresh, mem_out;
  int checks = 0, failures = 0;
  int v;

  if_neuron #(.SPK_W(SPK_W), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    logic exp_spk;
    int exp_mem;
    exp_spk = (v > int'(thresh));
    exp_mem = exp_spk ? 0 : v;
    checks++;
    if (spk_out !== exp_spk || int'(mem_out) != exp_mem) begin
      failures++;
      if (failures < 10) $display("v=%0d th=%0d got spk=%0b mem=%0d", v, thresh, spk_out, mem_out);
    end
  endtask

  initial begin
    rst_n = 0; en = 0; rst = 0; spk = '0; snn_in = '0; thresh = 20'sd10;
    @(negedge clk); @(negedge clk);
    rst_n = 1; v = 0;
    check();
    // Threshold edge: exactly THRESH does not fire, THRESH+1 does.
    en = 1; rst = 1; snn_in = 20'sd10; @(negedge clk); v = 10; check();
    checks++; if (spk_out) begin failures++; $display("fired at threshold"); end
    rst = 0; spk = 12'sd1; @(negedge clk); v = 11; check();
    checks++; if (!spk_out || mem_out != 0) begin failures++; $display("no fire above threshold"); end
    // Random sequences.
    for (int c = 0; c < 5000; c++) begin
      en  = ($urandom_range(0, 5) != 0);
      rst = ($urandom_range(0, 7) == 0);
      spk = SPK_W'($signed($urandom_range(0, 400)) - 200);
      snn_in = ACC_W'($signed($urandom_range(0, 600)) - 300);
      if (c % 97 == 0) thresh = ACC_W'($signed($urandom_range(0, 200)) - 50);
      @(posedge clk);
      if (en) v = rst ? int'(snn_in) : v + int'(spk);
      @(negedge clk);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
