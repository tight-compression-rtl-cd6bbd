// Output accumulation unit ("Accu (out)") of one array row and one column
// group.
//
// Collects the bit-serial partial sums leaving the last column of the group
// and writes each finished 32-bit word to the output buffer. Each of the
// four lanes carries its own word; at bit 0 of lane m (phase == 8*m of the
// control word that leaves the group's last column with the partial sums) the
// slot's valid flag and pixel index are latched; bits are collected for 32
// cycles, and on bit 31 the word is written to (sec, pixel) if the slot was
// valid. At most one lane finishes per cycle, so one write port suffices.
//
// The paper names this unit only; the serial-to-parallel function is this
// design's reading of its place between the array and the output buffer.
module accu_out
  import tc_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  ctl_t                          ctl,
  input  logic [MACS-1:0]               y,
  input  logic [SLOT_BITS-1:0]          sec,
  output logic                          wr_en,
  output logic [SLOT_BITS+PIX_BITS-1:0] wr_addr,
  output logic [PSUM_BITS-1:0]          wr_data
);

  logic [MACS-1:0][PSUM_BITS-1:0] word_q;
  logic [MACS-1:0]                vld_q;
  logic [MACS-1:0][PIX_BITS-1:0]  pix_q;
  logic [MACS-1:0]                done;

  for (genvar m = 0; m < MACS; m++) begin : g_lane
    logic [PH_BITS-1:0] b;
    assign b       = word_bit(ctl.phase, m);
    assign done[m] = (b == PH_BITS'(PSUM_BITS-1));
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        word_q[m] <= '0; vld_q[m] <= 1'b0; pix_q[m] <= '0;
      end else begin
        word_q[m][b] <= y[m];
        if (b == '0) begin
          vld_q[m] <= ctl.vld;
          pix_q[m] <= ctl.pix;
        end
      end
    end
  end

  always_comb begin
    wr_en   = 1'b0;
    wr_addr = {sec, pix_q[0]};
    wr_data = {y[0], word_q[0][PSUM_BITS-2:0]};
    for (int m = 0; m < MACS; m++) begin
      if (done[m]) begin
        wr_en   = vld_q[m];
        wr_addr = {sec, pix_q[m]};
        wr_data = {y[m], word_q[m][PSUM_BITS-2:0]};
      end
    end
  end

endmodule
