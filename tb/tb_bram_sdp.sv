// tb_bram_sdp: self-checking test of the simple dual-port block RAM.
//
// Random writes and reads against an associative-array model: read data
// must appear exactly one clock after the read, a read of an address being
// written in the same clock returns the old word, and with `re` low the
// read register holds.
module tb_bram_sdp;
  localparam int W = 16, DEPTH = 64, AW = 6;
  logic clk = 0, we, re;
  logic [AW-1:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  int checks = 0, failures = 0;
  logic [W-1:0] model [DEPTH];
  logic [W-1:0] exp_q;
  logic exp_v;

  bram_sdp #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) model[i] = '0;
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0; exp_v = 0; exp_q = '0;
    @(negedge clk);
    for (int c = 0; c < 5000; c++) begin
      we = ($urandom_range(0, 1) == 1);
      re = ($urandom_range(0, 2) != 0);
      waddr = AW'($urandom);
      raddr = (c % 7 == 0) ? waddr : AW'($urandom);
      wdata = W'($urandom);
      @(posedge clk);
      if (re) begin exp_q = model[raddr]; exp_v = 1; end
      if (we) model[waddr] = wdata;
      @(negedge clk);
      if (exp_v) begin
        checks++;
        if (rdata != exp_q) begin failures++; if (failures < 10) $display("c=%0d got %h exp %h", c, rdata, exp_q); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
