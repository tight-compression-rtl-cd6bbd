// Self-checking testbench of sa_node, built twice: with the subword MAC and
// with the weight-level MAC. A stream of random 16-activation vectors enters
// one per 8 cycles; the four MAC lanes carry random incoming partial sums.
// Every outgoing 32-bit word is compared with
// y + contribution of the vector that lane took, worked out here; the
// registered pass-through of the input bits and control word is checked too.
// The weight entry is reloaded halfway to check the load port.
module tb_sa_node;
  import tc_pkg::*;
  localparam int NS = 48;                 // vectors (slots)
  localparam int NC = NS * SLOT_CYC;      // cycles of stimulus

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [1:0] mode = 2'b01;
  logic wload_en = 0;
  node_wt_t wload_data = '0;
  logic [G-1:0] x_in = '0, x_out_s, x_out_w;
  ctl_t ctl_in = '0, ctl_out_s, ctl_out_w;
  logic [MACS-1:0] y_in = '0, y_out_s, y_out_w;

  sa_node #(.SUBWORD(1'b1)) dut_s (.clk, .rst_n, .mode, .wload_en, .wload_data,
    .x_in, .ctl_in, .x_out(x_out_s), .ctl_out(ctl_out_s), .y_in, .y_out(y_out_s));
  sa_node #(.SUBWORD(1'b0)) dut_w (.clk, .rst_n, .mode, .wload_en, .wload_data,
    .x_in, .ctl_in, .x_out(x_out_w), .ctl_out(ctl_out_w), .y_in, .y_out(y_out_w));

  int checks = 0, failures = 0;
  logic [7:0]  vec [NS][G];
  logic [31:0] yw  [NS];          // incoming word of the lane that takes slot s
  logic [31:0] got_s [NS], got_w [NS];
  node_wt_t    wt  [2];

  initial begin
    repeat (NC + 400) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] contrib(node_wt_t e, int s, bit sw, logic [1:0] m);
    logic [31:0] xi, xj, wh, wl, v;
    int lb;
    lb = (m == 2'b00) ? 3 : (m == 2'b01) ? 4 : 5;
    xi = 32'(vec[s][e.idx_h]);
    xj = 32'(vec[s][e.idx_l]);
    if (sw) begin
      wl = 32'(e.w) & ((32'd1 << lb) - 1);
      wh = 32'(e.w) & ~((32'd1 << lb) - 1);
      v  = (e.opp ? -(wh * xi) : wh * xi) + wl * xj;
    end else v = 32'(e.w) * xi;
    return e.sign_l ? -v : v;
  endfunction

  initial begin
    for (int s = 0; s < NS; s++) begin
      yw[s] = $urandom;
      for (int k = 0; k < G; k++) vec[s][k] = $urandom;
    end
    wt[0] = node_wt_t'($urandom); wt[0].opp = 1; wt[0].sign_l = 0;
    wt[1] = node_wt_t'($urandom); wt[1].opp = 0; wt[1].sign_l = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); wload_en = 1; wload_data = wt[0];
    @(negedge clk); wload_en = 0;
    // cycle t: slot s = t/8 streams bit t%8; lane of s is s%4 and its word
    // bit b = t - 8*s (0..31), taken from the slot's incoming word
    for (int t = 0; t < NC + 32; t++) begin
      @(negedge clk);
      if (t == NC/2) begin wload_en = 1; wload_data = wt[1]; end   // loaded at a frame edge
      else wload_en = 0;
      ctl_in.phase = PH_BITS'(t);
      ctl_in.vld   = 1'b1;
      ctl_in.pix   = PIX_BITS'(t / SLOT_CYC);
      for (int k = 0; k < G; k++) x_in[k] = (t < NC) ? vec[t / SLOT_CYC][k][t % SLOT_CYC] : 1'b0;
      for (int m = 0; m < MACS; m++) begin
        int s;
        s = (t / PSUM_BITS) * MACS + m;          // slot whose word lane m is on
        if (t % PSUM_BITS < m * SLOT_CYC) s -= MACS;
        y_in[m] = (s >= 0 && s < NS) ? yw[s][(t - s * SLOT_CYC) % PSUM_BITS] : 1'b0;
      end
      @(posedge clk); #1;
      // pass-through
      checks++;
      if (x_out_s !== x_in || ctl_out_s !== ctl_in || x_out_w !== x_in) failures++;
      for (int m = 0; m < MACS; m++) begin
        int s;
        s = (t / PSUM_BITS) * MACS + m;
        if (t % PSUM_BITS < m * SLOT_CYC) s -= MACS;
        if (s >= 0 && s < NS) begin
          got_s[s][(t - s * SLOT_CYC) % PSUM_BITS] = y_out_s[m];
          got_w[s][(t - s * SLOT_CYC) % PSUM_BITS] = y_out_w[m];
        end
      end
    end
    // slots whose whole word used one weight: words start at t = 8s
    for (int s = 0; s < NS; s++) begin
      int ts, te;
      node_wt_t e;
      ts = s * SLOT_CYC; te = ts + PSUM_BITS - 1;
      if (ts <= NC/2 && te >= NC/2) continue;     // straddles the reload
      e = (ts > NC/2) ? wt[1] : wt[0];
      checks += 2;
      if (got_s[s] !== yw[s] + contrib(e, s, 1'b1, mode)) begin
        failures++; $display("subword slot %0d got %h exp %h", s, got_s[s], yw[s] + contrib(e, s, 1'b1, mode));
      end
      if (got_w[s] !== yw[s] + contrib(e, s, 1'b0, mode)) begin
        failures++; $display("weight slot %0d got %h exp %h", s, got_w[s], yw[s] + contrib(e, s, 1'b0, mode));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
