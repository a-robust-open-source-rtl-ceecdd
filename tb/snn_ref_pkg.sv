// snn_ref_pkg: cycle-free reference model of the tiled SNN accelerator,
// used by the end-to-end testbenches.
//
// It computes, per timestep and in tile-memory order, what the hardware must
// produce: for every run of tiles with the same Y, the register starts at
// the stored membrane (zero in the first timestep after restart) plus the
// direct-injection input, and adds sum_i spike_prev[X][i] * w[i][j] for each
// tile; a neuron fires when the total exceeds the threshold, its stored
// membrane becomes 0 if it fired and the total saturated to int8 otherwise.
// Spike words are kept in two banks by timestep parity, as in the hardware,
// and spikes of the previous timestep are read as zero after a restart.
// Output tiles are recorded per {timestep, slot}.
package snn_ref_pkg;
  import snn_pkg::*;

  class snn_ref;
    tile_word_t tiles[$];
    int         inp   [2**NT_W][N];
    int         mem   [2**NT_W][N];
    bit         spk   [2][2**NT_W][N];
    logic [N-1:0] out [2**(STEP_W+OUT_W)];
    int         threshold;
    // statistics
    int         n_spikes, n_sat, n_groups;

    function new();
      foreach (inp[a, j]) inp[a][j] = 0;
      foreach (mem[a, j]) mem[a][j] = 0;
      foreach (spk[b, a, j]) spk[b][a][j] = 0;
      foreach (out[a]) out[a] = '0;
      threshold = 0;
      n_spikes = 0; n_sat = 0; n_groups = 0;
    endfunction

    // One timestep t; `first` = first timestep after a restart.
    function void run_step(int t, bit first);
      int acc [N];
      int k = 0;
      int rb = (t + 1) % 2;   // bank of timestep t-1
      int wb = t % 2;
      while (k < tiles.size()) begin
        int y = int'(tiles[k].hdr.y);
        tile_hdr_t h = tiles[k].hdr;
        for (int j = 0; j < N; j++) acc[j] = (first ? 0 : mem[y][j]) + inp[y][j];
        while (k < tiles.size() && int'(tiles[k].hdr.y) == y) begin
          int x = int'(tiles[k].hdr.x);
          for (int i = 0; i < N; i++)
            if (!first && spk[rb][x][i])
              for (int j = 0; j < N; j++) acc[j] += int'($signed(tiles[k].w[i][j]));
          k++;
        end
        n_groups++;
        for (int j = 0; j < N; j++) begin
          bit f = (acc[j] > threshold);
          spk[wb][y][j] = f;
          if (f) begin
            mem[y][j] = 0;
            n_spikes++;
          end else begin
            mem[y][j] = (acc[j] > 127) ? 127 : (acc[j] < -128) ? -128 : acc[j];
            if (mem[y][j] != acc[j]) n_sat++;
          end
        end
        if (h.out_en) begin
          logic [N-1:0] w;
          for (int j = 0; j < N; j++) w[j] = spk[wb][y][j];
          out[{t[STEP_W-1:0], h.out_idx}] = w;
        end
      end
    endfunction
  endclass

endpackage
