// Bit-serial multiply-accumulate unit of the weight-level design.
//
// One serial activation bit x arrives per cycle, LSB first. Eight AND gates
// form x & w[k]; eight full adders in a carry-save serial-parallel chain add
// these partial products to the running remainder, so the cell for w[0]
// emits one product bit per cycle. A second adder with an inverted input and
// a carry-in of 1 on the first bit forms the two's complement of the product
// stream; the weight sign selects the plain or the negated stream, and a last
// full adder adds it to the incoming partial-sum bit y_i. The sum bit is
// registered to y_o, so the partial sum leaves one cycle after it came in.
//
// A word is PSUM_BITS (32) cycles long and starts with first=1, which clears
// every carry and sum register. The caller drives x=0 after the activation's
// 8 bits, so y_o over one word = y_i + (-1)^sign_w * w * x (mod 2^32).
//
// From the paper: the 8 AND gates and 8 full adders, the sign mux, the
// inverter/adder pair with a 1/0 carry-in and the accumulating adder. This
// design's own choices: weight as sign plus 8-bit magnitude (the figure draws
// sign_w apart from w7..w0), unsigned activations, and the 'first' framing.
module mac_weight
  import tc_pkg::*;
#(
  parameter int W = WBITS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         first,   // bit 0 of a partial-sum word
  input  logic         x,       // activation bit (0 outside the 8-bit window)
  input  logic [W-1:0] w,       // weight magnitude
  input  logic         sign_w,  // 1: negative weight
  input  logic         y_i,     // partial-sum bit in
  output logic         y_o      // partial-sum bit out (registered)
);

  logic [W-1:0] s_q, c_q;       // per-cell sum and carry registers
  logic [W-1:0] s_d, c_d;
  logic         negc_q, accc_q; // carries of the negator and accumulator
  logic         p, pn, q, negc_d, accc_d, y_d;

  // serial-parallel multiplier: cell k adds x&w[k], the sum of cell k+1 and
  // its own carry; cell 0's sum is the product bit of this cycle
  always_comb begin
    for (int k = 0; k < W; k++) begin
      logic sin, cin;
      sin = (k == W-1 || first) ? 1'b0 : s_q[k+1];
      cin = first ? 1'b0 : c_q[k];
      {c_d[k], s_d[k]} = {1'b0, x & w[k]} + {1'b0, sin} + {1'b0, cin};
    end
    p = s_d[0];
    // serial negation: ~p + 1 on the first bit, then ~p + carry
    {negc_d, pn} = {1'b0, ~p} + {1'b0, first ? 1'b1 : negc_q};
    q = sign_w ? pn : p;
    // accumulate with the incoming partial sum
    {accc_d, y_d} = {1'b0, q} + {1'b0, y_i} + {1'b0, first ? 1'b0 : accc_q};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_q <= '0; c_q <= '0; negc_q <= 1'b0; accc_q <= 1'b0; y_o <= 1'b0;
    end else begin
      s_q <= s_d; c_q <= c_d; negc_q <= negc_d; accc_q <= accc_d; y_o <= y_d;
    end
  end

endmodule
