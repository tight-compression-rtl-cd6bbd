// Self-checking testbench of accu_out: random words are sent bit-serially on
// the four interleaved lanes with slot valid flags and pixel indices; every
// write to the output buffer is checked for data, address and cycle (the
// cycle of bit 31), and no write may appear for an empty slot.
module tb_accu_out;
  import tc_pkg::*;
  localparam int NS = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  ctl_t ctl = '0;
  logic [MACS-1:0] y = '0;
  logic [SLOT_BITS-1:0] sec = 5;
  logic wr_en;
  logic [SLOT_BITS+PIX_BITS-1:0] wr_addr;
  logic [PSUM_BITS-1:0] wr_data;
  int checks = 0, failures = 0, writes = 0, exp_writes = 0;

  accu_out dut (.*);

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic slot_vld [NS];
    logic [PIX_BITS-1:0] slot_pix [NS];
    logic [31:0] word [NS];
    for (int s = 0; s < NS; s++) begin
      slot_vld[s] = ($urandom % 4 != 0);
      slot_pix[s] = $urandom;
      word[s] = $urandom;
      if (slot_vld[s]) exp_writes++;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < NS * SLOT_CYC + PSUM_BITS; t++) begin
      int s, done_s;
      @(negedge clk);
      s = t / SLOT_CYC;
      ctl.phase = PH_BITS'(t);
      ctl.vld   = (s < NS) ? slot_vld[s] : 1'b0;
      ctl.pix   = (s < NS) ? slot_pix[s] : '0;
      done_s = -1;
      for (int m = 0; m < MACS; m++) begin
        int ss;
        ss = (t / PSUM_BITS) * MACS + m - ((t % PSUM_BITS < m * SLOT_CYC) ? MACS : 0);
        y[m] = (ss >= 0 && ss < NS) ? word[ss][t - ss * SLOT_CYC] : 1'b0;
        if (ss >= 0 && ss < NS && t - ss * SLOT_CYC == PSUM_BITS - 1) done_s = ss;
      end
      #1;
      checks++;
      if (done_s >= 0 && slot_vld[done_s]) begin
        if (!wr_en || wr_data !== word[done_s] || wr_addr !== {sec, slot_pix[done_s]}) begin
          failures++;
          $display("slot %0d: wr_en=%0d data %h exp %h", done_s, wr_en, wr_data, word[done_s]);
        end
      end else if (wr_en) begin
        failures++; $display("unexpected write at t=%0d", t);
      end
      if (wr_en) writes++;
    end
    checks++;
    if (writes != exp_writes) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
