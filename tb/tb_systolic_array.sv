// Self-checking testbench of systolic_array on a 4 x 16 array of two 8-wide
// subarrays. Random weight entries are loaded row by row; random
// 16-activation vectors enter each column with a one-cycle column skew, and
// random partial sums enter each row with a one-cycle row skew. Each word
// leaving a group is compared with its incoming word plus the sum of the
// contributions of that group's nodes, worked out here. The array is run
// unsplit (one group of 16 columns) and split (groups of 8 + 8 columns);
// the exported control words are checked to line up with the data.
module tb_systolic_array;
  import tc_pkg::*;
  localparam int R = 4, C = 16, NS = 12, SUBC = 8;
  localparam logic [1:0] MODE = 2'b11;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [1:0] split = 0;
  logic wload_en = 0;
  logic [$clog2(R)-1:0] wload_row = 0;
  node_wt_t [C-1:0] wload_data = '0;
  logic [C-1:0][G-1:0] x_bot = '0;
  ctl_t [C-1:0] ctl_bot = '0;
  logic [R-1:0][MACS-1:0] yin_a = '0, yin_b = '0, yout_a, yout_b;
  ctl_t [R-1:0] ctl_a_in, ctl_b_in, ctl_a_out, ctl_b_out;

  systolic_array #(.ROWS_P(R), .COLS_P(C), .SUB_COLS_P(SUBC), .SUBWORD(1'b1)) dut (
    .clk, .rst_n, .mode(MODE), .split, .wload_en, .wload_row, .wload_data,
    .x_bot, .ctl_bot, .yin_a, .yin_b, .yout_a, .yout_b,
    .ctl_a_in, .ctl_b_in, .ctl_a_out, .ctl_b_out);

  int checks = 0, failures = 0;
  node_wt_t    wt [R][C];
  logic [7:0]  vec [NS][C][G];
  logic [31:0] ya [NS][R], yb [NS][R], ga [NS][R], gb [NS][R];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] contrib(node_wt_t e, logic [7:0] v [G]);
    logic [31:0] xi, xj, wh, wl, s;
    xi = 32'(v[e.idx_h]); xj = 32'(v[e.idx_l]);
    wl = 32'(e.w) & 32'h1f; wh = 32'(e.w) & ~32'h1f;   // {3H,5L}
    s  = (e.opp ? -(wh * xi) : wh * xi) + wl * xj;
    return e.sign_l ? -s : s;
  endfunction

  // lane and word bit of slot s at local time u (u = 8s + b)
  task automatic run(input int sp);
    int bc, ea, T;
    bc = (sp == 0) ? C : sp * SUBC;
    ea = (sp == 0) ? C - 1 : bc - 1;
    T  = NS * SLOT_CYC + R + C + PSUM_BITS + 4;
    for (int s = 0; s < NS; s++) begin
      for (int c = 0; c < C; c++) for (int k = 0; k < G; k++) vec[s][c][k] = $urandom;
      for (int r = 0; r < R; r++) begin ya[s][r] = $urandom; yb[s][r] = $urandom; end
    end
    @(negedge clk); split = 2'(sp);
    for (int t = 0; t < T; t++) begin
      for (int c = 0; c < C; c++) begin
        int u; u = t - c;
        ctl_bot[c].phase = PH_BITS'(u);
        ctl_bot[c].vld   = (u >= 0 && u < NS * SLOT_CYC);
        ctl_bot[c].pix   = '0;
        for (int k = 0; k < G; k++)
          x_bot[c][k] = (u >= 0 && u < NS * SLOT_CYC) ? vec[u / SLOT_CYC][c][k][u % SLOT_CYC] : 1'b0;
      end
      for (int r = 0; r < R; r++)
        for (int m = 0; m < MACS; m++) begin
          int ua, ub, sa, sb;
          ua = t - r; ub = t - r - bc;
          sa = (ua >= 0) ? ((ua / PSUM_BITS) * MACS + m - ((ua % PSUM_BITS < m * SLOT_CYC) ? MACS : 0)) : -1;
          sb = (ub >= 0) ? ((ub / PSUM_BITS) * MACS + m - ((ub % PSUM_BITS < m * SLOT_CYC) ? MACS : 0)) : -1;
          yin_a[r][m] = (sa >= 0 && sa < NS) ? ya[sa][r][ua - sa * SLOT_CYC] : 1'b0;
          yin_b[r][m] = (sb >= 0 && sb < NS) ? yb[sb][r][ub - sb * SLOT_CYC] : 1'b0;
        end
      @(posedge clk); #1;
      for (int r = 0; r < R; r++) begin
        // control words exported at the group edges line up with the data
        // (sampled just after the clock edge: rows above 0 already moved)
        if (t - r >= 0) begin
          checks++;
          if (ctl_a_in[r].phase !== PH_BITS'(t - r + (r > 0 ? 1 : 0))) failures++;
        end
        for (int m = 0; m < MACS; m++) begin
          int ua, ub, sa, sb;
          ua = t - r - ea;          // output of column ea: one cycle after its input
          ub = t - r - (C - 1);
          sa = (ua >= 0) ? ((ua / PSUM_BITS) * MACS + m - ((ua % PSUM_BITS < m * SLOT_CYC) ? MACS : 0)) : -1;
          sb = (ub >= 0) ? ((ub / PSUM_BITS) * MACS + m - ((ub % PSUM_BITS < m * SLOT_CYC) ? MACS : 0)) : -1;
          if (sa >= 0 && sa < NS) ga[sa][r][ua - sa * SLOT_CYC] = yout_a[r][m];
          if (sb >= 0 && sb < NS) gb[sb][r][ub - sb * SLOT_CYC] = yout_b[r][m];
        end
      end
    end
    for (int s = 0; s < NS; s++)
      for (int r = 0; r < R; r++) begin
        logic [31:0] ea_v, eb_v;
        ea_v = ya[s][r];
        eb_v = yb[s][r];
        for (int c = 0; c < C; c++)
          if (c < bc) ea_v += contrib(wt[r][c], vec[s][c]);
          else        eb_v += contrib(wt[r][c], vec[s][c]);
        checks++;
        if (ga[s][r] !== ea_v) begin
          failures++; $display("split %0d group A slot %0d row %0d got %h exp %h", sp, s, r, ga[s][r], ea_v);
        end
        if (sp != 0) begin
          checks++;
          if (gb[s][r] !== eb_v) begin
            failures++; $display("split %0d group B slot %0d row %0d got %h exp %h", sp, s, r, gb[s][r], eb_v);
          end
        end
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < R; r++) begin
      @(negedge clk);
      wload_en = 1; wload_row = r;
      for (int c = 0; c < C; c++) begin wt[r][c] = node_wt_t'($urandom); wload_data[c] = wt[r][c]; end
    end
    @(negedge clk); wload_en = 0;
    run(0);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
