// tas_tile_buffer: on-chip store for one square operand tile.
//
// The engine has two of these: the input-feature (IF) buffer holds one m x n
// tile of the input matrix and the weight (WP) buffer one n x k tile of the
// weight matrix. Whichever of the two is stationary in the current scheme is
// kept across several tile steps; that reuse is what cuts external memory
// traffic. The paper only says that the stationary tile is held in internal
// memory; the register-array form and the ports are this design's choice.
//
// Interface and timing: external memory delivers a tile one row per word, so
// a write stores row wr_row (TILE elements, element j in bits
// [j*DATA_W +: DATA_W]) at the clock edge. Reads are combinational and give
// both views the PE array needs: rd_col is column rd_idx (element i = row i),
// used for the input tile; rd_row is row rd_idx, used for the weight tile.
module tas_tile_buffer
  import tas_pkg::*;
#(
  parameter int unsigned TILE   = TILE_DEF,
  parameter int unsigned DATA_W = DATA_W_DEF,
  localparam int unsigned IDX_W = (TILE > 1) ? $clog2(TILE) : 1
) (
  input  logic                   clk,
  input  logic                   wr_en,
  input  logic [IDX_W-1:0]       wr_row,
  input  logic [TILE*DATA_W-1:0] wr_data,
  input  logic [IDX_W-1:0]       rd_idx,
  output logic [TILE*DATA_W-1:0] rd_col,
  output logic [TILE*DATA_W-1:0] rd_row
);

  logic [TILE*DATA_W-1:0] mem [TILE];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row] <= wr_data;
  end

  always_comb begin
    rd_row = mem[rd_idx];
    for (int i = 0; i < TILE; i++)
      rd_col[i*DATA_W +: DATA_W] = mem[i][rd_idx*DATA_W +: DATA_W];
  end

endmodule
