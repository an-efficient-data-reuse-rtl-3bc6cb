// tas_pkg: types and default sizes shared by the tile-based adaptive stationary
// (TAS) matrix engine.
//
// The engine computes OUT[M][K] = IN[M][N] x W[N][K] one square tile at a time.
// For every multiplication it picks one of two loop orders: IS-OS (input tile
// stationary, partial sums kept on chip along K) when M < K, WS-OS (weight tile
// stationary, partial sums kept on chip along M) otherwise. A tile step, the
// unit of work handed from the scheduler to the controller, is described by
// tas_step_t.
//
// Numbers that come from the source paper: the square tile of 8 x 8 (the paper
// names 8 x 8 and 16 x 16 PE arrays as the usual sizes). Everything else here
// (element and accumulator widths, the number of on-chip partial-sum tiles,
// index widths) is this design's own choice.
package tas_pkg;

  // Which loop order a multiplication runs with.
  typedef enum logic {
    MODE_IS_OS = 1'b0,  // M <  K: input stationary + output stationary
    MODE_WS_OS = 1'b1   // M >= K: weight stationary + output stationary
  } tas_mode_e;

  // Default sizes.
  localparam int unsigned TILE_DEF       = 8;   // m = n = k
  localparam int unsigned PSUM_TILES_DEF = 4;   // k'/k (IS-OS) and m'/m (WS-OS)
  localparam int unsigned DATA_W_DEF     = 8;   // signed operand width
  localparam int unsigned ACC_W_DEF      = 32;  // partial-sum width
  localparam int unsigned ADDR_W_DEF     = 32;  // external word address

  // Widths fixed for the whole design.
  localparam int unsigned DIM_W  = 16;  // matrix sizes and tile indices
  localparam int unsigned SLOT_W = 8;   // partial-sum slot number

  typedef logic [DIM_W-1:0]  dim_t;
  typedef logic [SLOT_W-1:0] slot_t;

  // One tile step: multiply input tile (mi, ni) by weight tile (ni, ki) and
  // add the product to the partial-sum tile of output tile (mi, ki), held in
  // on-chip slot `slot`.
  typedef struct packed {
    dim_t  mi;       // input-tile row and output-tile row
    dim_t  ni;       // position along the shared dimension N
    dim_t  ki;       // weight-tile column and output-tile column
    slot_t slot;     // partial-sum slot of output tile (mi, ki)
    logic  first_n;  // ni == 0: start the partial sum from zero
    logic  last_n;   // ni == N/n - 1: the output tile is final, write it out
    logic  new_if;   // input tile differs from the one on chip: fetch it
    logic  new_wp;   // weight tile differs from the one on chip: fetch it
  } tas_step_t;

endpackage
