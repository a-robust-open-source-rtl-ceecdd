// neuron_array: 16 integrate-and-fire neurons and their write-back control.
//
// Consumes one crossbar beat per clock (sums for the 16 postsynaptic
// neurons plus the beat's tag). On a beat without RESET every neuron adds
// its sum to its register. On a RESET beat, in the same clock:
//   * the neurons' outputs for the finished output tile are written back:
//     the 16 spike bits as one word to the spike memory (bank = timestep
//     parity), the 16 membranes, saturated to int8 (0 for a neuron that
//     spiked), to the membrane memory, and, if the tile is designated an
//     output tile, the spike word to the output memory at {timestep, slot};
//   * each register loads SNN_IN: for a new tile Y, its stored membrane plus
//     its direct-injection input plus this beat's sum; for the flush beat
//     that ends a timestep, zero.
// Nothing is written on the first RESET of a timestep, when no tile is open.
// `flush_done` pulses in the clock after the flush beat is retired. There is
// no leak. Spiking on RESET, zero membrane on a spike, the 16-bit spike word,
// the int8 membranes, the output memory addressed by timestep and index and
// direct injection of the input into the membrane follow the paper; adding
// the first tile's sum and the input in the load value, saturation and the
// flush beat are this design's choices.
module neuron_array
  import snn_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  // beat from the crossbar FIFO
  input  logic                    beat_valid,
  input  logic signed [N-1:0][SUM_W-1:0] sums,
  input  beat_tag_t               tag,
  // configuration and timestep
  input  acc_t                    threshold,
  input  step_t                   step,
  // write ports
  output logic                    spk_we,
  output logic [NT_W:0]           spk_waddr,     // {bank, tile}
  output logic [N-1:0]            spk_wdata,
  output logic                    mem_we,
  output ntile_t                  mem_waddr,
  output logic [N-1:0][MEM_W-1:0] mem_wdata,
  output logic                    out_we,
  output logic [STEP_W+OUT_W-1:0] out_waddr,     // {timestep, slot}
  output logic [N-1:0]            out_wdata,
  output logic                    flush_done
);

  logic                   open_q;
  ntile_t                 cur_y;
  logic                   cur_out_en;
  logic [OUT_W-1:0]       cur_out_idx;
  acc_t  [N-1:0]          snn_in, mem_o;
  logic  [N-1:0]          spk_o;
  logic                   en, rst;

  assign en  = beat_valid && tag.valid;
  assign rst = tag.reset;

  always_comb begin
    for (int j = 0; j < N; j++) begin
      if (tag.flush) snn_in[j] = '0;
      else snn_in[j] = acc_t'($signed(tag.mem[j])) + acc_t'($signed(tag.inp[j]))
                     + acc_t'($signed(sums[j]));
    end
  end

  for (genvar j = 0; j < N; j++) begin : g_neuron
    if_neuron #(.SPK_W(SUM_W), .ACC_W(ACC_W)) u_neuron (
      .clk, .rst_n,
      .en     (en),
      .rst    (rst),
      .spk    (sums[j]),
      .snn_in (snn_in[j]),
      .thresh (threshold),
      .mem_out(mem_o[j]),
      .spk_out(spk_o[j])
    );
  end

  // Write-back of the finished tile.
  logic wb;
  assign wb = en && rst && open_q;

  assign spk_we    = wb;
  assign spk_waddr = {step[0], cur_y};
  assign spk_wdata = spk_o;
  assign mem_we    = wb;
  assign mem_waddr = cur_y;
  assign out_we    = wb && cur_out_en;
  assign out_waddr = {step, cur_out_idx};
  assign out_wdata = spk_o;

  always_comb begin
    for (int j = 0; j < N; j++) mem_wdata[j] = sat_mem(mem_o[j]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      open_q     <= 1'b0;
      cur_y       <= '0;
      cur_out_en  <= 1'b0;
      cur_out_idx <= '0;
      flush_done <= 1'b0;
    end else begin
      flush_done <= en && tag.flush;
      if (en && rst) begin
        open_q <= !tag.flush;
        cur_y       <= tag.hdr.y;
        cur_out_en  <= tag.hdr.out_en;
        cur_out_idx <= tag.hdr.out_idx;
      end
    end
  end

  // A tile is only extended by beats of its own Y.
  always_ff @(posedge clk) begin
    if (rst_n && en && !rst)
      a_same_y: assert (open_q && tag.hdr.y == cur_y)
        else $error("beat without RESET does not extend the open tile");
  end

endmodule
