// Address look-up table.
//
// For every tile and every array column it stores which input channel each
// of the G = 16 packed columns came from, as found by the offline
// compression (entry = valid bit + channel index). The input register array
// reads FILL_COLS (4) columns per cycle; the 64 entries go to the input
// buffer as read addresses, so the activations land in the register array in
// the order of the column packing. Written from off-chip one column (16
// entries) per cycle; reads are combinational.
//
// The LUT's role follows the paper; its organisation, the valid bit and the
// capacity (WB_TILES tiles) are this design's choices.
module address_lut
  import tc_pkg::*;
#(
  parameter int TILES_P = WB_TILES,
  parameter int COLS_P  = COLS
) (
  input  logic                                   clk,
  input  logic                                   wr_en,
  input  logic [$clog2(TILES_P)-1:0]             wr_tile,
  input  logic [$clog2(COLS_P)-1:0]              wr_col,
  input  lut_entry_t [G-1:0]                     wr_data,
  input  logic [$clog2(TILES_P)-1:0]             rd_tile,
  input  logic [$clog2(COLS_P/FILL_COLS)-1:0]    rd_grp,
  output lut_entry_t [FILL_COLS-1:0][G-1:0]      rd_data
);

  lut_entry_t [G-1:0] mem [TILES_P][COLS_P];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_tile][wr_col] <= wr_data;
  end

  always_comb begin
    for (int k = 0; k < FILL_COLS; k++)
      rd_data[k] = mem[rd_tile][int'(rd_grp) * FILL_COLS + k];
  end

endmodule
