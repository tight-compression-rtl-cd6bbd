// Self-checking testbench of output_buffer: random writes through both
// write ports of every bank (to different addresses), then reads through
// port A, port B and the host port, compared with a reference copy.
module tb_output_buffer;
  import tc_pkg::*;
  localparam int D = OB_SLOTS * PIX_MAX, AW = $clog2(D);
  logic clk = 0;
  always #5 clk = ~clk;
  logic [ROWS-1:0] rd_en_a = 0, rd_en_b = 0, wr_en_a = 0, wr_en_b = 0;
  logic [ROWS-1:0][AW-1:0] rd_addr_a = '0, rd_addr_b = '0, wr_addr_a = '0, wr_addr_b = '0;
  logic [ROWS-1:0][31:0] rd_data_a, rd_data_b, wr_data_a = '0, wr_data_b = '0;
  logic [$clog2(ROWS)-1:0] host_row = 0;
  logic [AW-1:0] host_addr = 0;
  logic [31:0] host_data;
  logic [31:0] ref_m [ROWS][D];
  int checks = 0, failures = 0;

  output_buffer dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < D; a += 2) begin
      @(negedge clk);
      for (int r = 0; r < ROWS; r++) begin
        wr_en_a[r] = 1; wr_addr_a[r] = a;     wr_data_a[r] = $urandom;
        wr_en_b[r] = 1; wr_addr_b[r] = a + 1; wr_data_b[r] = $urandom;
        ref_m[r][a] = wr_data_a[r]; ref_m[r][a+1] = wr_data_b[r];
      end
    end
    @(negedge clk); wr_en_a = 0; wr_en_b = 0;
    for (int n = 0; n < 50; n++) begin
      @(negedge clk);
      for (int r = 0; r < ROWS; r++) begin
        rd_en_a[r] = 1; rd_addr_a[r] = $urandom; rd_en_b[r] = $urandom; rd_addr_b[r] = $urandom;
      end
      host_row = $urandom; host_addr = $urandom;
      #1;
      for (int r = 0; r < ROWS; r++) begin
        checks += 2;
        if (rd_data_a[r] !== ref_m[r][rd_addr_a[r]]) failures++;
        if (rd_data_b[r] !== (rd_en_b[r] ? ref_m[r][rd_addr_b[r]] : 32'd0)) failures++;
      end
      checks++;
      if (host_data !== ref_m[host_row][host_addr]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
