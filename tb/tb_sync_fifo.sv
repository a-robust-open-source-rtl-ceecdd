// tb_sync_fifo: self-checking test of the first-word-fall-through FIFO.
//
// Random pushes and pops (never pushing into a full or popping an empty
// FIFO) are mirrored in a queue; every clock `dout`, `empty` and `full` are
// compared with the queue's head and size. Also fills the FIFO to DEPTH.
module tb_sync_fifo;
  localparam int W = 8, DEPTH = 4;
  logic clk = 0, rst_n, push, pop, empty, full;
  logic [W-1:0] din, dout;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];

  sync_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    checks++;
    if (empty != (q.size() == 0) || full != (q.size() == DEPTH) ||
        (q.size() != 0 && dout != q[0])) begin
      failures++;
      if (failures < 10) $display("size=%0d empty=%0b full=%0b dout=%h", q.size(), empty, full, dout);
    end
  endtask

  initial begin
    rst_n = 0; push = 0; pop = 0; din = '0;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    check();
    // Fill completely, then drain.
    for (int k = 0; k < DEPTH; k++) begin
      push = 1; din = W'(k + 8'h40); @(posedge clk); q.push_back(din); @(negedge clk); check();
    end
    push = 0;
    checks++; if (!full) begin failures++; $display("not full after DEPTH pushes"); end
    while (q.size() != 0) begin pop = 1; @(posedge clk); void'(q.pop_front()); @(negedge clk); check(); end
    pop = 0;
    for (int c = 0; c < 4000; c++) begin
      push = ($urandom_range(0, 1) == 1);
      pop  = ($urandom_range(0, 1) == 1) && (q.size() != 0);
      if (q.size() == DEPTH && !pop) push = 0;
      din = W'($urandom);
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
      @(negedge clk);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
