// Self-checking testbench of address_lut: writes random 16-entry columns for
// every tile and column, then reads every (tile, 4-column group) and
// compares the 64 entries with what was written.
module tb_address_lut;
  import tc_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0;
  logic [TILE_BITS-1:0] wr_tile = 0, rd_tile = 0;
  logic [$clog2(COLS)-1:0] wr_col = 0;
  lut_entry_t [G-1:0] wr_data = '0;
  logic [$clog2(COLS/FILL_COLS)-1:0] rd_grp = 0;
  lut_entry_t [FILL_COLS-1:0][G-1:0] rd_data;
  lut_entry_t [G-1:0] ref_m [WB_TILES][COLS];
  int checks = 0, failures = 0;

  address_lut dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < WB_TILES; t++)
      for (int c = 0; c < COLS; c++) begin
        @(negedge clk);
        wr_en = 1; wr_tile = t; wr_col = c;
        for (int s = 0; s < G; s++) wr_data[s] = lut_entry_t'($urandom);
        ref_m[t][c] = wr_data;
      end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < WB_TILES; t++)
      for (int g = 0; g < COLS / FILL_COLS; g++) begin
        @(negedge clk); rd_tile = t; rd_grp = g; #1;
        for (int k = 0; k < FILL_COLS; k++) begin
          checks++;
          if (rd_data[k] !== ref_m[t][g*FILL_COLS+k]) failures++;
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
