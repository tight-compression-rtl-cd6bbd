// Weight-stationary, bit-serial systolic array with subarray folding.
//
// ROWS x COLS nodes (32 x 32). Input bits enter each column at the bottom
// (row 0) and move up one row per cycle; the caller skews the columns by one
// cycle each. Partial-sum lanes enter each row at the left and move right one
// column per cycle, so row r sees its words one cycle after row r-1.
//
// The array is made of COLS/SUB_COLS subarrays (four of 32 x 8). With
// split = 0 all columns form one group A. With split = k (k >= 1) the chain is
// cut in front of column SUB_COLS*k: group A is columns [0, 8k) and group B
// columns [8k, COLS); group B takes its partial sums from yin_b and group A's
// results are taken out at column 8k-1. This lets a row section with only a
// few column groups share the array with another row section. For each group
// the array also exports the control word at the group's first column
// (aligned with the partial sums entering it) and after its last column
// (aligned with the partial sums leaving it).
//
// Weights are loaded one row per cycle: wload_en with wload_row selects the
// row, wload_data carries the COLS node entries.
//
// From the paper: 32x32 array, four 32x8 subarrays usable as two independent
// groups, inputs up/partial sums right with one-cycle skews. The split
// encoding, the lane and control ports and the load port are this design's.
module systolic_array
  import tc_pkg::*;
#(
  parameter int ROWS_P     = ROWS,
  parameter int COLS_P     = COLS,
  parameter int SUB_COLS_P = SUB_COLS,
  parameter bit SUBWORD    = 1'b1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [1:0]                  mode,
  input  logic [1:0]                  split,
  input  logic                        wload_en,
  input  logic [$clog2(ROWS_P)-1:0]   wload_row,
  input  node_wt_t [COLS_P-1:0]       wload_data,
  input  logic [COLS_P-1:0][G-1:0]    x_bot,
  input  ctl_t [COLS_P-1:0]           ctl_bot,
  input  logic [ROWS_P-1:0][MACS-1:0] yin_a,
  input  logic [ROWS_P-1:0][MACS-1:0] yin_b,
  output logic [ROWS_P-1:0][MACS-1:0] yout_a,
  output logic [ROWS_P-1:0][MACS-1:0] yout_b,
  output ctl_t [ROWS_P-1:0]           ctl_a_in,
  output ctl_t [ROWS_P-1:0]           ctl_b_in,
  output ctl_t [ROWS_P-1:0]           ctl_a_out,
  output ctl_t [ROWS_P-1:0]           ctl_b_out
);

  localparam int NSUB = COLS_P / SUB_COLS_P;

  // xv[r][c]: bits into row r; the bits leaving the top row are not used
  logic [ROWS_P:0][COLS_P-1:0][G-1:0] xv;
  ctl_t [ROWS_P:0][COLS_P-1:0]        cv;
  logic [ROWS_P-1:0][COLS_P-1:0][MACS-1:0] yo;
  ctl_t [ROWS_P-1:0][COLS_P-1:0]      co;
  logic [$clog2(COLS_P+1)-1:0]        bcol;   // first column of group B
  logic                               split_on;

  assign split_on = (split != 2'd0) && (int'(split) < NSUB);
  assign bcol     = split_on ? ($clog2(COLS_P+1))'(int'(split) * SUB_COLS_P)
                             : ($clog2(COLS_P+1))'(COLS_P);

  assign xv[0] = x_bot;
  assign cv[0] = ctl_bot;

  for (genvar r = 0; r < ROWS_P; r++) begin : g_row
    for (genvar c = 0; c < COLS_P; c++) begin : g_col
      logic [MACS-1:0] yin_n;
      // partial-sum source: left neighbour, group A input or group B input
      if (c == 0) begin : g_first
        assign yin_n = yin_a[r];
      end else if (c % SUB_COLS_P == 0) begin : g_bound
        assign yin_n = (split_on && bcol == c) ? yin_b[r] : yo[r][c-1];
      end else begin : g_inner
        assign yin_n = yo[r][c-1];
      end
      sa_node #(.SUBWORD(SUBWORD)) u_node (
        .clk, .rst_n, .mode,
        .wload_en  (wload_en && wload_row == r),
        .wload_data(wload_data[c]),
        .x_in (xv[r][c]),   .ctl_in (cv[r][c]),
        .x_out(xv[r+1][c]), .ctl_out(cv[r+1][c]),
        .y_in (yin_n),      .y_out  (yo[r][c]));
      assign co[r][c] = cv[r+1][c];
    end

    always_comb begin
      ctl_a_in[r]  = cv[r][0];
      ctl_b_in[r]  = cv[r][COLS_P-1];
      ctl_a_out[r] = co[r][COLS_P-1];
      yout_a[r]    = yo[r][COLS_P-1];
      for (int k = 1; k < NSUB; k++) begin
        if (split_on && int'(bcol) == k * SUB_COLS_P) begin
          ctl_b_in[r]  = cv[r][k*SUB_COLS_P];
          ctl_a_out[r] = co[r][k*SUB_COLS_P-1];
          yout_a[r]    = yo[r][k*SUB_COLS_P-1];
        end
      end
      ctl_b_out[r] = co[r][COLS_P-1];
      yout_b[r]    = yo[r][COLS_P-1];
    end
  end

endmodule
