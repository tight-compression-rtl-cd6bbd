// Top level of the tight-compression CNN accelerator.
//
// The offline compression prunes a layer's weight matrix, permutes its rows
// and columns and packs up to G = 16 sparse columns into one dense column,
// separately for every row section of 32 output channels. This block runs
// such packed tiles on a 32 x 32 weight-stationary, bit-serial systolic
// array:
//
//   weight_buffer --(one row/cycle)--> systolic_array (32 x 32 sa_node)
//   address_lut --> input_buffer --> input_reg_array --(skewed bits)--^
//   output_buffer --> accu_in (A/B) --> array rows --> accu_out (A/B) --^
//   tc_controller sequences load / stream / drain for every tile.
//
// Every node keeps one packed weight entry and uses its index (two indices
// with subword weights) to pick its activation bit out of the 16 that travel
// up its column; 4 interleaved bit-serial MACs per node let a new 8-bit
// activation vector enter every 8 cycles while each 32-bit partial sum takes
// 32 cycles. Partial sums flow along the rows and are accumulated across the
// tiles of a row section through the output buffer. The array can be split
// at a subarray boundary so that two row sections (groups A and B) share it.
//
// Off-chip traffic appears as plain ports: writes into the weight buffer,
// tile descriptors, LUT and input buffer, and a read port of the output
// buffer. 'mode' selects the subword split of the layer ({5H,3L}, {4H,4L},
// {3H,5L}). SUBWORD = 1 (default) builds the subword-level MAC, 0 the
// weight-level MAC. ROWS_P/COLS_P exist to shrink the array for fast
// simulation; COLS_P must be a multiple of 8.
//
// The block structure follows the paper's architecture figure; buffer sizes,
// ports, the tile descriptor and the control sequencing are this design's.
module tc_top
  import tc_pkg::*;
#(
  parameter int ROWS_P  = ROWS,
  parameter int COLS_P  = COLS,
  parameter bit SUBWORD = 1'b1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // run control
  input  logic                              start,
  input  logic [1:0]                        mode,
  input  logic [TILE_BITS:0]                num_tiles,
  input  logic [PIX_BITS:0]                 num_pix,
  output logic                              busy,
  output logic                              done,
  // weight buffer and tile descriptors (from off-chip)
  input  logic                              wb_wr_en,
  input  logic                              desc_wr_en,
  input  logic [TILE_BITS-1:0]              wb_wr_tile,
  input  logic [$clog2(ROWS_P)-1:0]         wb_wr_row,
  input  node_wt_t [COLS_P-1:0]             wb_wr_data,
  input  tile_desc_t                        desc_wr_data,
  // address LUT (from off-chip)
  input  logic                              lut_wr_en,
  input  logic [TILE_BITS-1:0]              lut_wr_tile,
  input  logic [$clog2(COLS_P)-1:0]         lut_wr_col,
  input  lut_entry_t [G-1:0]                lut_wr_data,
  // input buffer (from off-chip)
  input  logic                              ib_wr_en,
  input  logic [CH_BITS-1:0]                ib_wr_ch,
  input  logic [PIX_BITS-1:0]               ib_wr_pix,
  input  logic [ABITS-1:0]                  ib_wr_data,
  // output buffer read-out (to off-chip)
  input  logic [$clog2(ROWS_P)-1:0]         ob_rd_row,
  input  logic [SLOT_BITS+PIX_BITS-1:0]     ob_rd_addr,
  output logic [PSUM_BITS-1:0]              ob_rd_data
);

  localparam int AW   = SLOT_BITS + PIX_BITS;
  localparam int NGRP = COLS_P / FILL_COLS;

  // controller
  logic [TILE_BITS-1:0]        tile;
  logic [$clog2(ROWS_P)-1:0]   wload_row;
  logic                        wload_en, fill_req, fill_ready, irf_idle, fill_active;
  logic [PIX_BITS-1:0]         fill_pix, buf_pix;
  tile_desc_t                  desc_rd, desc;
  node_wt_t [COLS_P-1:0]       wb_rd_data;
  logic [$clog2(NGRP)-1:0]     lut_grp;
  lut_entry_t [FILL_COLS-1:0][G-1:0] lut_rd;
  logic [RD_PORTS-1:0]         ib_rd_vld;
  logic [RD_PORTS-1:0][CH_BITS-1:0] ib_rd_ch;
  logic [RD_PORTS-1:0][ABITS-1:0]   ib_rd_data;
  logic [COLS_P-1:0][G-1:0]    x_bot;
  ctl_t [COLS_P-1:0]           ctl_bot;
  logic [ROWS_P-1:0][MACS-1:0] yin_a, yin_b, yout_a, yout_b;
  ctl_t [ROWS_P-1:0]           ctl_a_in, ctl_b_in, ctl_a_out, ctl_b_out;
  logic [ROWS_P-1:0]           rd_en_a, rd_en_b, wr_en_a, wr_en_b, wr_en_b_raw;
  logic [ROWS_P-1:0][AW-1:0]   rd_addr_a, rd_addr_b, wr_addr_a, wr_addr_b;
  logic [ROWS_P-1:0][PSUM_BITS-1:0] rd_data_a, rd_data_b, wr_data_a, wr_data_b;
  logic                        split_on;

  tc_controller #(.ROWS_P(ROWS_P), .COLS_P(COLS_P), .TILES_P(WB_TILES)) u_ctrl (
    .clk, .rst_n, .start, .num_tiles, .num_pix, .busy, .done,
    .tile, .wload_row, .wload_en, .desc_in(desc_rd), .desc,
    .fill_req, .fill_pix, .fill_ready, .irf_idle);

  weight_buffer #(.TILES_P(WB_TILES), .ROWS_P(ROWS_P), .COLS_P(COLS_P)) u_wbuf (
    .clk, .wr_en(wb_wr_en), .wr_tile(wb_wr_tile), .wr_row(wb_wr_row),
    .wr_data(wb_wr_data), .desc_wr_en, .desc_wr_data,
    .rd_tile(tile), .rd_row(wload_row), .rd_data(wb_rd_data), .rd_desc(desc_rd));

  address_lut #(.TILES_P(WB_TILES), .COLS_P(COLS_P)) u_lut (
    .clk, .wr_en(lut_wr_en), .wr_tile(lut_wr_tile), .wr_col(lut_wr_col),
    .wr_data(lut_wr_data), .rd_tile(tile), .rd_grp(lut_grp), .rd_data(lut_rd));

  always_comb begin
    for (int k = 0; k < FILL_COLS; k++)
      for (int s = 0; s < G; s++) begin
        ib_rd_vld[k*G+s] = fill_active && lut_rd[k][s].vld;
        ib_rd_ch[k*G+s]  = lut_rd[k][s].ch;
      end
  end

  input_buffer u_ibuf (
    .clk, .wr_en(ib_wr_en), .wr_ch(ib_wr_ch), .wr_pix(ib_wr_pix), .wr_data(ib_wr_data),
    .rd_pix(buf_pix), .rd_vld(ib_rd_vld), .rd_ch(ib_rd_ch), .rd_data(ib_rd_data));

  input_reg_array #(.COLS_P(COLS_P)) u_irf (
    .clk, .rst_n, .fill_req, .fill_pix, .fill_ready, .fill_active,
    .lut_grp, .buf_pix, .buf_data(ib_rd_data), .idle(irf_idle),
    .x_bot, .ctl_bot);

  systolic_array #(.ROWS_P(ROWS_P), .COLS_P(COLS_P), .SUB_COLS_P(SUB_COLS),
                   .SUBWORD(SUBWORD)) u_array (
    .clk, .rst_n, .mode, .split(desc.split),
    .wload_en, .wload_row, .wload_data(wb_rd_data),
    .x_bot, .ctl_bot, .yin_a, .yin_b, .yout_a, .yout_b,
    .ctl_a_in, .ctl_b_in, .ctl_a_out, .ctl_b_out);

  assign split_on = (desc.split != 2'd0) && (int'(desc.split) < COLS_P / SUB_COLS);

  for (genvar r = 0; r < ROWS_P; r++) begin : g_row
    accu_in u_acc_in_a (
      .clk, .rst_n, .ctl(ctl_a_in[r]), .first_tile(desc.first_a), .sec(desc.sec_a),
      .rd_en(rd_en_a[r]), .rd_addr(rd_addr_a[r]), .rd_data(rd_data_a[r]), .y(yin_a[r]));
    accu_in u_acc_in_b (
      .clk, .rst_n, .ctl(ctl_b_in[r]), .first_tile(desc.first_b), .sec(desc.sec_b),
      .rd_en(rd_en_b[r]), .rd_addr(rd_addr_b[r]), .rd_data(rd_data_b[r]), .y(yin_b[r]));
    accu_out u_acc_out_a (
      .clk, .rst_n, .ctl(ctl_a_out[r]), .y(yout_a[r]), .sec(desc.sec_a),
      .wr_en(wr_en_a[r]), .wr_addr(wr_addr_a[r]), .wr_data(wr_data_a[r]));
    accu_out u_acc_out_b (
      .clk, .rst_n, .ctl(ctl_b_out[r]), .y(yout_b[r]), .sec(desc.sec_b),
      .wr_en(wr_en_b_raw[r]), .wr_addr(wr_addr_b[r]), .wr_data(wr_data_b[r]));
    // group B exists only when the array is split
    assign wr_en_b[r] = wr_en_b_raw[r] && split_on;
  end

  output_buffer #(.ROWS_P(ROWS_P), .DEPTH(OB_SLOTS * PIX_MAX)) u_obuf (
    .clk, .rd_en_a, .rd_addr_a, .rd_data_a, .rd_en_b, .rd_addr_b, .rd_data_b,
    .wr_en_a, .wr_addr_a, .wr_data_a, .wr_en_b, .wr_addr_b, .wr_data_b,
    .host_row(ob_rd_row), .host_addr(ob_rd_addr), .host_data(ob_rd_data));

endmodule
