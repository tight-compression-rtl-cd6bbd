// Input activation buffer.
//
// Holds 8-bit activations of CH_MAX input channels for PIX_MAX pixel
// positions, written one activation per cycle from off-chip and read by
// channel index, RD_PORTS (64) activations per cycle, all for the same pixel:
// enough to fill the input register array for one input vector in the eight
// cycles that one vector spends entering the systolic array. Read ports whose
// LUT entry is empty return 0. Reads are combinational (register-file
// style); the paper models the buffer as SRAM without giving its size or
// port structure, so both are this design's choice.
module input_buffer
  import tc_pkg::*;
#(
  parameter int CH_P  = CH_MAX,
  parameter int PIX_P = PIX_MAX,
  parameter int NRD   = RD_PORTS
) (
  input  logic                               clk,
  input  logic                               wr_en,
  input  logic [$clog2(CH_P)-1:0]            wr_ch,
  input  logic [$clog2(PIX_P)-1:0]           wr_pix,
  input  logic [ABITS-1:0]                   wr_data,
  input  logic [$clog2(PIX_P)-1:0]           rd_pix,
  input  logic [NRD-1:0]                     rd_vld,
  input  logic [NRD-1:0][$clog2(CH_P)-1:0]   rd_ch,
  output logic [NRD-1:0][ABITS-1:0]          rd_data
);

  logic [ABITS-1:0] mem [PIX_P][CH_P];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_pix][wr_ch] <= wr_data;
  end

  always_comb begin
    for (int i = 0; i < NRD; i++)
      rd_data[i] = rd_vld[i] ? mem[rd_pix][rd_ch[i]] : '0;
  end

endmodule
