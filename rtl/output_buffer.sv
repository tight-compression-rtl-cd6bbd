// Output (partial-sum) buffer.
//
// One bank per array row, i.e. per output channel of a row section. A bank
// word is the 32-bit partial sum of one (row-section slot, pixel) pair.
// Each bank has two combinational read ports and two write ports, one pair
// for each column group of the array (the two groups work on different row
// sections, so they never touch the same word in the same cycle), plus a
// host read port that reads out finished results. The paper only names the
// output buffer; the banking, the sizes and the ports are this design's
// choices.
module output_buffer
  import tc_pkg::*;
#(
  parameter int ROWS_P = ROWS,
  parameter int DEPTH  = OB_SLOTS * PIX_MAX
) (
  input  logic                                   clk,
  input  logic [ROWS_P-1:0]                      rd_en_a,
  input  logic [ROWS_P-1:0][$clog2(DEPTH)-1:0]   rd_addr_a,
  output logic [ROWS_P-1:0][PSUM_BITS-1:0]       rd_data_a,
  input  logic [ROWS_P-1:0]                      rd_en_b,
  input  logic [ROWS_P-1:0][$clog2(DEPTH)-1:0]   rd_addr_b,
  output logic [ROWS_P-1:0][PSUM_BITS-1:0]       rd_data_b,
  input  logic [ROWS_P-1:0]                      wr_en_a,
  input  logic [ROWS_P-1:0][$clog2(DEPTH)-1:0]   wr_addr_a,
  input  logic [ROWS_P-1:0][PSUM_BITS-1:0]       wr_data_a,
  input  logic [ROWS_P-1:0]                      wr_en_b,
  input  logic [ROWS_P-1:0][$clog2(DEPTH)-1:0]   wr_addr_b,
  input  logic [ROWS_P-1:0][PSUM_BITS-1:0]       wr_data_b,
  input  logic [$clog2(ROWS_P)-1:0]              host_row,
  input  logic [$clog2(DEPTH)-1:0]               host_addr,
  output logic [PSUM_BITS-1:0]                   host_data
);

  logic [PSUM_BITS-1:0] mem [ROWS_P][DEPTH];

  for (genvar r = 0; r < ROWS_P; r++) begin : g_bank
    always_ff @(posedge clk) begin
      if (wr_en_a[r]) mem[r][wr_addr_a[r]] <= wr_data_a[r];
      if (wr_en_b[r]) mem[r][wr_addr_b[r]] <= wr_data_b[r];
    end
    assign rd_data_a[r] = rd_en_a[r] ? mem[r][rd_addr_a[r]] : '0;
    assign rd_data_b[r] = rd_en_b[r] ? mem[r][rd_addr_b[r]] : '0;
  end

  assign host_data = mem[host_row][host_addr];

endmodule
