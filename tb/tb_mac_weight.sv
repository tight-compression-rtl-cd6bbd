// Self-checking testbench of mac_weight: random weights, signs, activations
// and incoming partial sums, words sent back to back; each 32-bit output word
// is compared with y + (-1)^s * w * x computed here in integer arithmetic.
module tb_mac_weight;
  import tc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic first, x, sign_w, y_i, y_o;
  logic [7:0] w;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  mac_weight dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] yw, exp_w, got, prev_exp;
    logic [7:0]  xv;
    bit have_prev = 0;
    first = 0; x = 0; sign_w = 0; y_i = 0; w = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      yw = $urandom; xv = $urandom; w = $urandom; sign_w = $urandom;
      if (n < 4) begin xv = 8'hff; w = 8'hff; end
      exp_w = sign_w ? yw - 32'(w) * 32'(xv) : yw + 32'(w) * 32'(xv);
      for (int b = 0; b < 32; b++) begin
        first = (b == 0);
        x     = (b < 8) ? xv[b] : 1'b0;
        y_i   = yw[b];
        @(posedge clk); #1;
        got[b] = y_o;                      // y_o is one cycle behind y_i
      end
      checks++;
      if (got !== exp_w) begin
        failures++;
        $display("mismatch n=%0d w=%0d s=%0d x=%0d y=%h got=%h exp=%h", n, w, sign_w, xv, yw, got, exp_w);
      end
      have_prev = 1; prev_exp = exp_w;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
