// Bit-serial multiply-accumulate unit of the subword-level design.
//
// The 8-bit weight field holds two subwords: Subword H in the upper bits,
// multiplied with activation bit x_i, and Subword L in the lower bits,
// multiplied with activation bit x_j. The split is set per layer by the 2-bit
// mode: w7..w5 always belong to H and w2..w0 always to L; mode[1] moves w4
// and mode[0] moves w3 from H to L, giving {5H,3L}, {4H,4L} and {3H,5L}.
// A full precision weight, or two merged weights, use both subwords; for a
// full precision weight the node drives x_i = x_j.
//
// When the two subwords have opposite signs ('opp'), x_i is first negated
// bit-serially (inverted, +1 on the first bit), so the H product is formed
// with -x. The carry-save chain of eight full adders then produces
// (w_H * (+-x_i) + w_L * x_j) one bit per cycle; sign_l selects that stream
// or its serial two's complement, and a last full adder adds it to y_i.
// y_o is registered: one cycle from y_i to y_o.
//
// A word is PSUM_BITS (32) cycles long and starts with first=1. x_i and x_j
// must be 0 after the 8 activation bits; the negated x_i then continues as
// its sign extension, so the result is exact modulo 2^32:
//   y_o = y_i + (-1)^sign_l * ( w_H * (opp ? -x_i : x_i) + w_L * x_j ).
//
// The gate structure follows the paper's subword MAC drawing. Which mux input
// selects x_j, the mode encoding and the sign encoding (sign_l plus an
// 'opposite' flag) are this design's reading of it.
module mac_subword
  import tc_pkg::*;
#(
  parameter int W = WBITS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         first,   // bit 0 of a partial-sum word
  input  logic         x_i,     // activation bit for Subword H
  input  logic         x_j,     // activation bit for Subword L
  input  logic [W-1:0] w,       // {Subword H, Subword L} magnitudes
  input  logic         sign_l,  // sign of Subword L
  input  logic         opp,     // Subword H has the opposite sign
  input  logic [1:0]   mode,    // mod[1:0], see sw_mode_e
  input  logic         y_i,
  output logic         y_o
);

  logic [W-1:0] s_q, c_q, s_d, c_d, sel_j;
  logic         xneg_c_q, xneg_c_d, xi_eff;
  logic         negc_q, accc_q, negc_d, accc_d, p, pn, q, y_d;

  // which weight bits take x_j (Subword L)
  always_comb begin
    sel_j = '0;
    for (int k = 0; k < W; k++) sel_j[k] = (k < W-5);  // w2..w0
    sel_j[W-4] = mode[1];                                // w4
    sel_j[W-5] = mode[0];                                // w3
  end

  always_comb begin
    // serial negation of x_i when the subword signs differ
    {xneg_c_d, xi_eff} = {1'b0, opp ? ~x_i : x_i}
                       + {1'b0, (first ? 1'b0 : xneg_c_q)}
                       + {1'b0, (opp & first)};
    for (int k = 0; k < W; k++) begin
      logic sin, cin, a;
      a   = w[k] & (sel_j[k] ? x_j : xi_eff);
      sin = (k == W-1 || first) ? 1'b0 : s_q[k+1];
      cin = first ? 1'b0 : c_q[k];
      {c_d[k], s_d[k]} = {1'b0, a} + {1'b0, sin} + {1'b0, cin};
    end
    p = s_d[0];
    {negc_d, pn} = {1'b0, ~p} + {1'b0, first ? 1'b1 : negc_q};
    q = sign_l ? pn : p;
    {accc_d, y_d} = {1'b0, q} + {1'b0, y_i} + {1'b0, first ? 1'b0 : accc_q};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_q <= '0; c_q <= '0; xneg_c_q <= 1'b0; negc_q <= 1'b0; accc_q <= 1'b0;
      y_o <= 1'b0;
    end else begin
      s_q <= s_d; c_q <= c_d; xneg_c_q <= xneg_c_d; negc_q <= negc_d;
      accc_q <= accc_d; y_o <= y_d;
    end
  end

endmodule
