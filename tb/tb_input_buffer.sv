// Self-checking testbench of input_buffer: fills a part of the buffer with
// a known pattern, then reads 64 random channels of random pixels at once
// and compares each port with the pattern (zero for ports marked empty).
module tb_input_buffer;
  import tc_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0;
  logic [CH_BITS-1:0] wr_ch = 0;
  logic [PIX_BITS-1:0] wr_pix = 0, rd_pix = 0;
  logic [ABITS-1:0] wr_data = 0;
  logic [RD_PORTS-1:0] rd_vld = 0;
  logic [RD_PORTS-1:0][CH_BITS-1:0] rd_ch = '0;
  logic [RD_PORTS-1:0][ABITS-1:0] rd_data;
  int checks = 0, failures = 0;
  localparam int NCH = 100;

  input_buffer dut (.*);

  function automatic logic [7:0] pat(int p, int ch);
    return 8'(p * 29 + ch * 7 + 3);
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < PIX_MAX; p++)
      for (int ch = 0; ch < NCH; ch++) begin
        @(negedge clk); wr_en = 1; wr_pix = p; wr_ch = ch; wr_data = pat(p, ch);
      end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 20; n++) begin
      @(negedge clk);
      rd_pix = $urandom;
      for (int i = 0; i < RD_PORTS; i++) begin
        int unsigned u; u = $urandom; rd_ch[i] = CH_BITS'(u % NCH); rd_vld[i] = (u[31:29] != 0);
      end
      #1;
      for (int i = 0; i < RD_PORTS; i++) begin
        checks++;
        if (rd_data[i] !== (rd_vld[i] ? pat(rd_pix, rd_ch[i]) : 8'd0)) begin failures++; $display("pix %0d ch %0d got %h exp %h", rd_pix, rd_ch[i], rd_data[i], pat(rd_pix, rd_ch[i])); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
