// sync_fifo: small synchronous first-word-fall-through FIFO.
//
// Used where two streams must be brought back into step: in the control unit
// (tile weights and control wait for the spike and membrane words that their
// tile indices address) and between the synaptic crossbar and the neuron
// array. `dout` always shows the oldest entry while `empty` is low; `pop`
// removes it at the clock edge, `push` appends `din`. Push and pop may happen
// in the same cycle. The paper says FIFOs synchronise these streams; depth,
// the fall-through behaviour and the reset are this design's choices.
// Assertions flag a push into a full FIFO and a pop from an empty one.
module sync_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic         full
);

  logic [W-1:0] buf_q [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   count;

  assign empty = (count == 0);
  assign full  = (count == (AW+1)'(DEPTH));
  assign dout  = buf_q[rp];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) begin
        buf_q[wp] <= din;
        wp        <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      end
      if (pop) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  initial for (int i = 0; i < DEPTH; i++) buf_q[i] = '0;

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule
