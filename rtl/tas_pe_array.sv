// tas_pe_array: TILE x TILE multiply-accumulate array.
//
// Each processing element PE(i, j) owns one accumulator, the partial sum of
// output element (i, j) of the current output tile. A tile step is TILE
// rank-1 updates: in cycle l the controller broadcasts column l of the input
// tile (a_col, element i to row i of the array) and row l of the weight tile
// (b_row, element j to column j), and every PE adds a[i] * b[j]. After TILE
// cycles the array holds old partial sum + input tile x weight tile.
//
// The paper only states that such arrays are square, typically 8 x 8 or
// 16 x 16, so that the tile sizes m, n and k are equal; the PE organisation,
// signed DATA_W operands and ACC_W accumulators are this design's choice.
//
// Interface and timing: `load` copies psum_in into the accumulators (the
// controller passes zero for the first step along N); `mac_en` performs one
// rank-1 update. Both take effect at the clock edge; `load` wins. acc is the
// registered accumulator tile, element (i, j) at index i*TILE + j.
module tas_pe_array
  import tas_pkg::*;
#(
  parameter int unsigned TILE   = TILE_DEF,
  parameter int unsigned DATA_W = DATA_W_DEF,
  parameter int unsigned ACC_W  = ACC_W_DEF
) (
  input  logic                         clk,
  input  logic                         load,
  input  logic [TILE*TILE*ACC_W-1:0]   psum_in,
  input  logic                         mac_en,
  input  logic [TILE*DATA_W-1:0]       a_col,
  input  logic [TILE*DATA_W-1:0]       b_row,
  output logic [TILE*TILE*ACC_W-1:0]   acc
);

  for (genvar i = 0; i < TILE; i++) begin : g_row
    for (genvar j = 0; j < TILE; j++) begin : g_col
      localparam int unsigned E = i*TILE + j;
      logic signed [DATA_W-1:0]   a, b;
      logic signed [2*DATA_W-1:0] prod;
      assign a    = a_col[i*DATA_W +: DATA_W];
      assign b    = b_row[j*DATA_W +: DATA_W];
      assign prod = a * b;
      always_ff @(posedge clk) begin
        if (load)        acc[E*ACC_W +: ACC_W] <= psum_in[E*ACC_W +: ACC_W];
        else if (mac_en) acc[E*ACC_W +: ACC_W] <= acc[E*ACC_W +: ACC_W]
                                                  + ACC_W'(prod);
      end
    end
  end

endmodule
