// Weight buffer.
//
// Holds the packed weight tiles of one or more row sections as they came
// from off-chip: for each tile, ROWS words of COLS node entries (weight
// field, signs, indices), plus one tile descriptor saying how the tile is
// mapped (subarray split, output-buffer slots of the one or two row sections,
// and whether the tile is the first of its section). The controller reads one
// row per cycle while loading a tile into the array. Writes come from
// off-chip, one row or one descriptor per cycle; reads are combinational.
//
// The buffer's role follows the paper; the capacity (16 tiles) and the
// descriptor are this design's choices.
module weight_buffer
  import tc_pkg::*;
#(
  parameter int TILES_P = WB_TILES,
  parameter int ROWS_P  = ROWS,
  parameter int COLS_P  = COLS
) (
  input  logic                           clk,
  input  logic                           wr_en,
  input  logic [$clog2(TILES_P)-1:0]     wr_tile,
  input  logic [$clog2(ROWS_P)-1:0]      wr_row,
  input  node_wt_t [COLS_P-1:0]          wr_data,
  input  logic                           desc_wr_en,
  input  tile_desc_t                     desc_wr_data,
  input  logic [$clog2(TILES_P)-1:0]     rd_tile,
  input  logic [$clog2(ROWS_P)-1:0]      rd_row,
  output node_wt_t [COLS_P-1:0]          rd_data,
  output tile_desc_t                     rd_desc
);

  node_wt_t [COLS_P-1:0] mem  [TILES_P][ROWS_P];
  tile_desc_t            desc [TILES_P];

  always_ff @(posedge clk) begin
    if (wr_en)      mem[wr_tile][wr_row] <= wr_data;
    if (desc_wr_en) desc[wr_tile]        <= desc_wr_data;
  end

  assign rd_data = mem[rd_tile][rd_row];
  assign rd_desc = desc[rd_tile];

endmodule
