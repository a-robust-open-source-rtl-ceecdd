// snn_pkg: sizes, types and tile format shared by the tiled SNN accelerator.
//
// The accelerator processes a spiking network in "tiles": a tile connects 16
// presynaptic neurons (tile column index X) to 16 postsynaptic neurons (tile
// row index Y) through a 16x16 matrix of signed 8-bit weights. Tiles are kept
// in memory sorted by Y. Neurons are stored per neuron tile of 16: a 16-bit
// spike word, 16 signed 8-bit membranes and 16 signed 8-bit direct-injection
// inputs. The 16x16 tile, int8 weights and membranes and the 128-timestep
// limit follow the paper; the index widths, the accumulator width, the number
// of output tiles and the tile-word layout are this design's choices.
package snn_pkg;

  // Tile geometry and number formats.
  localparam int unsigned N      = 16;             // neurons per tile side
  localparam int unsigned W_W    = 8;              // weight bits (int8)
  localparam int unsigned MEM_W  = 8;              // stored membrane bits (int8)
  localparam int unsigned IN_W   = 8;              // direct-injection input bits
  localparam int unsigned SUM_W  = W_W + $clog2(N); // crossbar column sum bits
  localparam int unsigned ACC_W  = 20;             // neuron register bits

  // Capacities.
  localparam int unsigned TILE_AW  = 9;   // up to 512 tiles
  localparam int unsigned NT_W     = 6;   // up to 64 neuron tiles (1024 neurons)
  localparam int unsigned STEP_W   = 7;   // timesteps 0..127
  localparam int unsigned OUT_W    = 2;   // up to 4 output-layer tiles

  typedef logic signed [W_W-1:0]   weight_t;
  typedef logic signed [MEM_W-1:0] mem_t;
  typedef logic signed [IN_W-1:0]  inp_t;
  typedef logic signed [SUM_W-1:0] sum_t;
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef logic [NT_W-1:0]         ntile_t;
  typedef logic [STEP_W-1:0]       step_t;

  // Header of one tile word in the tile memory.
  typedef struct packed {
    logic [OUT_W-1:0] out_idx;  // slot in the output memory
    logic             out_en;   // Y tile belongs to the output layer
    ntile_t           y;        // TILE_IDX_Y: postsynaptic neuron tile
    ntile_t           x;        // TILE_IDX_X: presynaptic neuron tile
  } tile_hdr_t;

  // One tile word: header above the 16x16 weights. w[i][j] connects
  // presynaptic neuron i of tile X to postsynaptic neuron j of tile Y.
  typedef struct packed {
    tile_hdr_t                        hdr;
    logic [N-1:0][N-1:0][W_W-1:0]     w;
  } tile_word_t;

  localparam int unsigned TILE_WORD_W = $bits(tile_word_t);

  // Side information that travels with a tile through the crossbar.
  typedef struct packed {
    logic                   valid;   // a beat (tile or flush), not a bubble
    logic                   reset;   // RESET: previous Y tile is finished
    logic                   flush;   // end-of-timestep beat: no new Y tile
    tile_hdr_t              hdr;     // tile indices and output designation
    logic [N-1:0][MEM_W-1:0] mem;    // stored membranes of tile Y
    logic [N-1:0][IN_W-1:0]  inp;    // direct-injection inputs of tile Y
  } beat_tag_t;

  localparam int unsigned TAG_W = $bits(beat_tag_t);

  // Saturate a wide signed value to the stored int8 membrane.
  function automatic mem_t sat_mem(acc_t v);
    localparam acc_t MAXV = acc_t'((1 <<< (MEM_W-1)) - 1);
    localparam acc_t MINV = -acc_t'(1 <<< (MEM_W-1));
    if (v > MAXV)      return mem_t'(MAXV);
    else if (v < MINV) return mem_t'(MINV);
    else               return mem_t'(v);
  endfunction

endpackage
