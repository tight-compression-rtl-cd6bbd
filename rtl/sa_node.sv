// One node of the systolic array.
//
// The node keeps one packed weight entry (node_wt_t: 8-bit weight field,
// signs and two 4-bit indices) that stays in place while a tile is being
// computed. Each cycle the G = 16 input bits of the column arrive from the
// node below; the indices pick x_i (and, for the subword MAC, x_j) out of
// them. Four MAC units share the weight and the indices and take input
// vectors in turn: MAC m owns the 32-bit partial-sum words that begin at
// phase 8*m of the 32-cycle frame, takes the selected bits during the first
// 8 cycles of its word and zero afterwards. So a new 8-bit activation vector
// can enter every 8 cycles while each partial sum needs 32 cycles.
//
// Interface: x_in/ctl_in come from below and leave registered on
// x_out/ctl_out (one cycle per row); y_in[m] comes from the left and leaves
// registered on y_out[m] (one cycle per column). ctl_out is therefore aligned
// with y_out, which the accumulation units at the array edge rely on.
// wload_en writes wload_data into the weight register.
//
// From the paper: 16 input bits per column, index selection, 4 MACs sharing
// weight and index, the skewed one-cycle-per-node flow. This design's own:
// the phase-based slot assignment, one partial-sum lane per MAC, the control
// word and the weight-load port. SUBWORD = 1 builds the subword MAC, 0 the
// weight-level MAC (which uses idx_h and ignores idx_l, opp and mode).
module sa_node
  import tc_pkg::*;
#(
  parameter bit SUBWORD = 1'b1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [1:0]        mode,
  input  logic              wload_en,
  input  node_wt_t          wload_data,
  input  logic [G-1:0]      x_in,
  input  ctl_t              ctl_in,
  output logic [G-1:0]      x_out,
  output ctl_t              ctl_out,
  input  logic [MACS-1:0]   y_in,
  output logic [MACS-1:0]   y_out
);

  node_wt_t wt_q;
  logic     xi_sel, xj_sel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        wt_q <= '0;
    else if (wload_en) wt_q <= wload_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_out   <= '0;
      ctl_out <= '0;
    end else begin
      x_out   <= x_in;
      ctl_out <= ctl_in;
    end
  end

  assign xi_sel = x_in[wt_q.idx_h];
  assign xj_sel = x_in[wt_q.idx_l];

  for (genvar m = 0; m < MACS; m++) begin : g_mac
    logic [PH_BITS-1:0] b;
    logic first, win;
    assign b     = word_bit(ctl_in.phase, m);
    assign first = (b == '0);
    assign win   = (b < PH_BITS'(ABITS));
    if (SUBWORD) begin : g_sw
      mac_subword u_mac (
        .clk, .rst_n, .first,
        .x_i(xi_sel & win), .x_j(xj_sel & win),
        .w(wt_q.w), .sign_l(wt_q.sign_l), .opp(wt_q.opp), .mode,
        .y_i(y_in[m]), .y_o(y_out[m]));
    end else begin : g_wl
      mac_weight u_mac (
        .clk, .rst_n, .first,
        .x(xi_sel & win), .w(wt_q.w), .sign_w(wt_q.sign_l),
        .y_i(y_in[m]), .y_o(y_out[m]));
    end
  end

endmodule
