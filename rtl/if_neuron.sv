// if_neuron: integrate-and-fire neuron without leak.
//
// One register holds the membrane potential. On every enabled clock it
// either adds the crossbar's accumulated input SPK to itself (RST low) or
// loads SNN_IN (RST high), the start value for the next tile of neurons.
// The outputs are combinational views of the register: SPK_OUT is 1 when the
// register is strictly greater than THRESH, and MEM_OUT is 0 when the neuron
// spikes and the register value otherwise. The neuron array samples the
// outputs in the same cycle that RST loads the new value, so the value that
// is judged is the one accumulated over all tiles of the finished group.
// The structure (register, adder, RST mux, "> THRESH" comparator, output mux)
// follows the paper's neuron circuit. The paper's drawing of the output mux
// could be read as passing the register on a spike; its text says the
// membrane output is zero on a spike, and that is what is built. `en` and the
// synchronous active-low reset are this design's additions.
module if_neuron #(
  parameter int unsigned SPK_W = 12,
  parameter int unsigned ACC_W = 20
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    rst,      // RST: load snn_in
  input  logic signed [SPK_W-1:0] spk,      // SPK: accumulated synaptic sum
  input  logic signed [ACC_W-1:0] snn_in,   // SNN_IN
  input  logic signed [ACC_W-1:0] thresh,   // THRESH
  output logic signed [ACC_W-1:0] mem_out,  // MEM_OUT
  output logic                    spk_out   // SPK_OUT
);

  logic signed [ACC_W-1:0] v_q;
  logic signed [ACC_W-1:0] sum;

  assign sum = v_q + ACC_W'(spk);

  always_ff @(posedge clk) begin
    if (!rst_n)  v_q <= '0;
    else if (en) v_q <= rst ? snn_in : sum;
  end

  assign spk_out = (v_q > thresh);
  assign mem_out = spk_out ? '0 : v_q;

endmodule
