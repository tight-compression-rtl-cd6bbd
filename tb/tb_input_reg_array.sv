// Self-checking testbench of input_reg_array. A model input buffer returns
// act(pix, column, slot) = a hash of the three for the LUT group being
// filled. The testbench sends fill requests, mostly back to back, sometimes
// with gaps, and checks: each column's bits equal the LSB-first bits of the
// right activations for the pixel named in that column's control word; bits
// are zero in empty slots; column c lags column 0 by exactly c cycles; the
// pixels come out in request order; back-to-back requests give vectors
// exactly 8 cycles apart; and the unit reports idle at the end.
module tb_input_reg_array;
  import tc_pkg::*;
  localparam int NREQ = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic fill_req = 0, fill_ready, fill_active, idle;
  logic [PIX_BITS-1:0] fill_pix = 0, buf_pix;
  logic [$clog2(COLS/FILL_COLS)-1:0] lut_grp;
  logic [RD_PORTS-1:0][ABITS-1:0] buf_data;
  logic [COLS-1:0][G-1:0] x_bot;
  ctl_t [COLS-1:0] ctl_bot;
  int checks = 0, failures = 0;

  input_reg_array dut (.*);

  function automatic logic [7:0] act(int pix, int col, int s);
    return 8'((pix * 37) ^ (col * 11) ^ (s * 5) ^ 8'h5a);
  endfunction

  always_comb
    for (int k = 0; k < FILL_COLS; k++)
      for (int s = 0; s < G; s++)
        buf_data[k*G+s] = act(buf_pix, int'(lut_grp) * FILL_COLS + k, s);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stream checker, sampled before each rising edge
  int order [$];
  int seen = 0, last_start = -100, cyc = 0, spacing_ok = 0;
  always @(negedge clk) if (rst_n) begin
    cyc++;
    for (int c = 0; c < COLS; c++) begin
      if (cyc > COLS && ctl_bot[c].phase !== PH_BITS'(ctl_bot[0].phase - c)) failures++;
      for (int s = 0; s < G; s++) begin
        logic e;
        e = ctl_bot[c].vld ? act(ctl_bot[c].pix, c, s)[ctl_bot[c].phase[2:0]] : 1'b0;
        if (x_bot[c][s] !== e) begin failures++; if (failures < 5) $display("cyc %0d col %0d s %0d vld %0d pix %0d ph %0d got %0d exp %0d", cyc, c, s, ctl_bot[c].vld, ctl_bot[c].pix, ctl_bot[c].phase, x_bot[c][s], e); end
      end
    end
    checks++;
    if (ctl_bot[0].vld && ctl_bot[0].phase[2:0] == 3'd0) begin
      checks++;
      if (seen >= order.size() || int'(ctl_bot[0].pix) != order[seen]) begin
        failures++; $display("vector %0d out of order", seen);
      end
      if (cyc - last_start == SLOT_CYC) spacing_ok++;
      last_start = cyc;
      seen++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NREQ; n++) begin
      @(negedge clk);
      while (!fill_ready) @(negedge clk);
      fill_req = 1; fill_pix = PIX_BITS'($urandom);   // taken at the next edge
      order.push_back(int'(fill_pix));
      @(negedge clk); fill_req = 0;
      if (n == 12) repeat (40) @(negedge clk);   // a gap: empty slots
    end
    repeat (80) @(negedge clk);
    checks += 3;
    if (seen != NREQ) begin failures++; $display("saw %0d vectors", seen); end
    if (spacing_ok < NREQ / 2) begin failures++; $display("only %0d back-to-back vectors", spacing_ok); end
    if (!idle) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
