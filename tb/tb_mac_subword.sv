// Self-checking testbench of mac_subword: for the three subword splits it
// sends random {H,L} weight fields, signs, opposite-sign flags and two
// activations, and compares each 32-bit word with
// y + (-1)^sign_l * (w_H * (opp ? -x_i : x_i) + w_L * x_j), worked out here.
module tb_mac_subword;
  import tc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic first, x_i, x_j, sign_l, opp, y_i, y_o;
  logic [1:0] mode;
  logic [7:0] w;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  mac_subword dut (.*);

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int lbits(logic [1:0] m);
    case (m) 2'b00: return 3; 2'b01: return 4; default: return 5; endcase
  endfunction

  initial begin
    logic [31:0] yw, exp_w, got, wh, wl, hterm;
    logic [7:0]  xi, xj;
    logic [1:0]  modes [3] = '{2'b00, 2'b01, 2'b11};
    first = 0; x_i = 0; x_j = 0; sign_l = 0; opp = 0; y_i = 0; w = 0; mode = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      mode = modes[n % 3];
      yw = $urandom; xi = $urandom; xj = $urandom; w = $urandom;
      sign_l = $urandom; opp = $urandom;
      if (n % 7 == 0) xj = xi;                // full-precision use: x_i = x_j
      wl = 32'(w) & ((32'd1 << lbits(mode)) - 1);
      wh = 32'(w) & ~((32'd1 << lbits(mode)) - 1);
      hterm = opp ? -(wh * 32'(xi)) : wh * 32'(xi);
      exp_w = sign_l ? yw - (hterm + wl * 32'(xj)) : yw + (hterm + wl * 32'(xj));
      for (int b = 0; b < 32; b++) begin
        first = (b == 0);
        x_i = (b < 8) ? xi[b] : 1'b0;
        x_j = (b < 8) ? xj[b] : 1'b0;
        y_i = yw[b];
        @(posedge clk); #1;
        got[b] = y_o;
      end
      checks++;
      if (got !== exp_w) begin
        failures++;
        $display("mismatch n=%0d mode=%b w=%h sl=%0d opp=%0d xi=%0d xj=%0d got=%h exp=%h",
                 n, mode, w, sign_l, opp, xi, xj, got, exp_w);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
