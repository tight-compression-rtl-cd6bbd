// Self-checking testbench of weight_buffer: writes random rows of node
// entries and random descriptors for every tile, then reads them back in a
// different order and compares.
module tb_weight_buffer;
  import tc_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, desc_wr_en = 0;
  logic [TILE_BITS-1:0] wr_tile = 0, rd_tile = 0;
  logic [$clog2(ROWS)-1:0] wr_row = 0, rd_row = 0;
  node_wt_t [COLS-1:0] wr_data = '0, rd_data;
  tile_desc_t desc_wr_data = '0, rd_desc;
  node_wt_t [COLS-1:0] ref_m [WB_TILES][ROWS];
  tile_desc_t ref_d [WB_TILES];
  int checks = 0, failures = 0;

  weight_buffer dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < WB_TILES; t++) begin
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        wr_en = 1; desc_wr_en = 0; wr_tile = t; wr_row = r;
        for (int c = 0; c < COLS; c++) wr_data[c] = node_wt_t'($urandom);
        ref_m[t][r] = wr_data;
      end
      @(negedge clk);
      wr_en = 0; desc_wr_en = 1; desc_wr_data = tile_desc_t'($urandom); ref_d[t] = desc_wr_data;
    end
    @(negedge clk); desc_wr_en = 0;
    for (int t = WB_TILES - 1; t >= 0; t--)
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk); rd_tile = t; rd_row = r; #1;
        checks += 2;
        if (rd_data !== ref_m[t][r]) failures++;
        if (rd_desc !== ref_d[t]) failures++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
