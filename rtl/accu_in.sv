// Input accumulation unit ("Accu (in)") of one array row and one column group.
//
// Tiles of the same row section add into the same outputs, so every partial
// sum entering a row starts from the value the earlier tiles left in the
// output buffer (or from zero on the section's first tile). This unit reads
// that 32-bit word and shifts it, LSB first, into the row's partial-sum lane
// of the MAC that owns the word.
//
// Timing: ctl is the control word at the group's first column of this row.
// When lane m reaches bit 0 of its word (phase == 8*m) and the slot carries a
// vector, the word for (sec, ctl.pix) is read combinationally from the
// output buffer (rd_en/rd_addr/rd_data), bit 0 is driven the same cycle and
// bits 1..31 on the following cycles from a lane register. Slots without a
// vector shift in zeros.
//
// The paper names this unit only; its function here (parallel-to-serial
// feeding of previous partial sums) is this design's reading of its place in
// the dataflow.
module accu_in
  import tc_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  ctl_t                          ctl,
  input  logic                          first_tile,
  input  logic [SLOT_BITS-1:0]          sec,
  output logic                          rd_en,
  output logic [SLOT_BITS+PIX_BITS-1:0] rd_addr,
  input  logic [PSUM_BITS-1:0]          rd_data,
  output logic [MACS-1:0]               y
);

  logic [MACS-1:0][PSUM_BITS-1:0] word_q;
  logic [PSUM_BITS-1:0]           new_word;

  assign rd_en    = ctl.vld && !first_tile && (ctl.phase[$clog2(SLOT_CYC)-1:0] == '0);
  assign rd_addr  = {sec, ctl.pix};
  assign new_word = (ctl.vld && !first_tile) ? rd_data : '0;

  for (genvar m = 0; m < MACS; m++) begin : g_lane
    logic [PH_BITS-1:0] b;
    assign b    = word_bit(ctl.phase, m);
    assign y[m] = (b == '0) ? new_word[0] : word_q[m][b];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)         word_q[m] <= '0;
      else if (b == '0)   word_q[m] <= new_word;
    end
  end

endmodule
