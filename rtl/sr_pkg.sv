// Shared constants and types of the tilted-layer-fusion super-resolution accelerator.
//
// The network is a seven-layer plain CNN (3x3 convolutions, 3 -> 28 -> ... -> 28 -> 27
// channels) whose last layer adds the input image as an anchor and is followed by a x3
// depth-to-space rearrangement.  Feature maps are processed in tiles of TILE_R rows by TILE_C
// columns; each layer of a tile is shifted one column to the left of the previous layer
// ("tilted" tiles), so only the two right-most columns of every layer have to be kept for the
// next tile.  Tile size, channel counts, PE geometry and buffer sizes follow the paper; the
// arithmetic widths, and the requantisation shift are this design's own.  The frame size is set at run time
// (cfg_tiles_x up to 127 tiles = 1016 columns, cfg_strips up to 7 strips = 420 rows).
package sr_pkg;

  // ---- network -----------------------------------------------------------------------
  localparam int unsigned N_LAYERS  = 7;    // convolution layers
  localparam int unsigned MAX_CH    = 28;   // widest layer = number of PE blocks
  localparam int unsigned IN_CH     = 3;    // RGB input (Ch0)
  localparam int unsigned OUT_CH    = 27;   // last layer: 3 colours x 3 x 3 sub-pixels
  localparam int unsigned K         = 3;    // kernel size

  // ---- tiling (paper: 8 x 60 tile, L + 2 overlap layers) -----------------------------
  localparam int unsigned TILE_R    = 60;   // rows of a tile
  localparam int unsigned TILE_C    = 8;    // columns of a tile
  localparam int unsigned OVL_COLS  = 2;    // columns kept per layer in the overlap buffer
  localparam int unsigned OVL_SLOTS = N_LAYERS + 2;           // queue depth in layers
  localparam int unsigned RES_COLS  = TILE_C + N_LAYERS;      // residual buffer columns

  // ---- PE geometry -------------------------------------------------------------------
  localparam int unsigned PE_ROWS   = 5;                // outputs per PE array (5x3 MACs)
  localparam int unsigned WIN_ROWS  = PE_ROWS + K - 1;  // 7 broadcast input rows
  localparam int unsigned N_GROUPS  = TILE_R / PE_ROWS; // 12 row groups per tile
  localparam int unsigned IN_COLS   = TILE_C + OVL_COLS;// 10 input columns per layer

  // ---- arithmetic ----------------------------------------------------------------------
  localparam int unsigned DW        = 8;    // activation / pixel width (unsigned)
  localparam int unsigned WW        = 8;    // weight / bias width (signed)
  localparam int unsigned PW        = 20;   // PE array partial-sum width
  localparam int unsigned AW        = 28;   // accumulator width

  typedef logic [DW-1:0]         pix_t;
  typedef logic signed [WW-1:0]  wgt_t;
  typedef logic signed [PW-1:0]  psum_t;
  typedef logic signed [AW-1:0]  acc_t;

  // one buffer word: one pixel position with all MAX_CH channels
  typedef pix_t [MAX_CH-1:0]     chword_t;
  // one column of the input window: WIN_ROWS rows x MAX_CH channels
  typedef chword_t [WIN_ROWS-1:0] wincol_t;
  // all 3x3 weights of one output channel: [input channel][kernel column][kernel row]
  typedef wgt_t [MAX_CH-1:0][K-1:0][K-1:0] wword_t;

  typedef logic [$clog2(N_LAYERS+1)-1:0] layer_t;   // 0 = input, 1..7 = conv layers

  // output channels of layer l (1-based)
  function automatic int unsigned layer_och(input int unsigned l);
    return (l == N_LAYERS) ? OUT_CH : MAX_CH;
  endfunction

  // input channels of layer l (1-based)
  function automatic int unsigned layer_ich(input int unsigned l);
    return (l == 1) ? IN_CH : MAX_CH;
  endfunction

endpackage
