// Self-checking testbench of accu_in: a model output buffer answers the
// unit's reads; the testbench checks every bit the unit shifts into each of
// the four lanes against the stored word of (section, pixel) of the slot
// (zero on a first tile or an empty slot) and that reads happen only at slot
// starts of valid slots.
module tb_accu_in;
  import tc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  ctl_t ctl = '0;
  logic first_tile = 0;
  logic [SLOT_BITS-1:0] sec = 3;
  logic rd_en;
  logic [SLOT_BITS+PIX_BITS-1:0] rd_addr;
  logic [PSUM_BITS-1:0] rd_data;
  logic [MACS-1:0] y;
  logic [31:0] mem [OB_SLOTS*PIX_MAX];
  int checks = 0, failures = 0;

  accu_in dut (.*);
  assign rd_data = mem[rd_addr];

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    localparam int NS = 64;
    logic slot_vld [NS];
    logic [PIX_BITS-1:0] slot_pix [NS];
    logic [31:0] expw [NS], got [NS];
    for (int i = 0; i < OB_SLOTS*PIX_MAX; i++) mem[i] = $urandom;
    for (int s = 0; s < NS; s++) begin
      slot_vld[s] = ($urandom % 4 != 0);
      slot_pix[s] = $urandom;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < NS * SLOT_CYC + PSUM_BITS; t++) begin
      int s;
      @(negedge clk);
      s = t / SLOT_CYC;
      first_tile = (t >= 256 && t < 384);   // a stretch of first-tile slots
      ctl.phase = PH_BITS'(t);
      ctl.vld   = (s < NS) ? slot_vld[s] : 1'b0;
      ctl.pix   = (s < NS) ? slot_pix[s] : '0;
      if (t % SLOT_CYC == 0 && s < NS)
        expw[s] = (slot_vld[s] && !first_tile) ? mem[{sec, slot_pix[s]}] : 32'd0;
      #1;
      checks++;
      if (rd_en !== (ctl.vld && !first_tile && t % SLOT_CYC == 0)) failures++;
      for (int m = 0; m < MACS; m++) begin
        int ss;
        ss = (t / PSUM_BITS) * MACS + m - ((t % PSUM_BITS < m * SLOT_CYC) ? MACS : 0);
        if (ss >= 0 && ss < NS) got[ss][t - ss * SLOT_CYC] = y[m];
      end
    end
    for (int s = 0; s < NS; s++) begin
      checks++;
      if (got[s] !== expw[s]) begin
        failures++; $display("slot %0d got %h exp %h", s, got[s], expw[s]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
