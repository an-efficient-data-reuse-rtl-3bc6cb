// tas_psum_buffer: on-chip partial-sum tiles of the output-stationary part of
// tile-based adaptive stationary.
//
// In IS-OS order the buffer holds the k'/k output tiles along K that share
// one input row block; in WS-OS order the m'/m output tiles along M that share
// one weight column block. Each tile stays here while the whole shared
// dimension N is accumulated and leaves the chip only once, as a final
// result; the paper names this capacity k' (or m') and leaves its size to the
// accelerator. PSUM_TILES slots of TILE x TILE accumulators, as a register
// array, is this design's choice.
//
// Interface and timing: a write stores a whole tile (from the PE array) into
// slot wr_slot at the clock edge. rd_tile is slot rd_slot, combinational, for
// reloading the PE array; rd_row is row row_sel of slot rd_slot,
// combinational, for writing a finished tile to external memory one row per
// word (element j in bits [j*ACC_W +: ACC_W]).
module tas_psum_buffer
  import tas_pkg::*;
#(
  parameter int unsigned PSUM_TILES = PSUM_TILES_DEF,
  parameter int unsigned TILE       = TILE_DEF,
  parameter int unsigned ACC_W      = ACC_W_DEF,
  localparam int unsigned SLOT_IW   = (PSUM_TILES > 1) ? $clog2(PSUM_TILES) : 1,
  localparam int unsigned IDX_W     = (TILE > 1) ? $clog2(TILE) : 1
) (
  input  logic                       clk,
  input  logic                       wr_en,
  input  logic [SLOT_IW-1:0]         wr_slot,
  input  logic [TILE*TILE*ACC_W-1:0] wr_tile,
  input  logic [SLOT_IW-1:0]         rd_slot,
  output logic [TILE*TILE*ACC_W-1:0] rd_tile,
  input  logic [IDX_W-1:0]           row_sel,
  output logic [TILE*ACC_W-1:0]      rd_row
);

  logic [TILE*TILE*ACC_W-1:0] mem [PSUM_TILES];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_slot] <= wr_tile;
  end

  always_comb begin
    rd_tile = mem[rd_slot];
    rd_row  = rd_tile[row_sel*TILE*ACC_W +: TILE*ACC_W];
  end

endmodule
