// Full-size end-to-end testbench of tc_top: every parameter at its default (32 x 32 array).
//
// Three runs, one per subword split of the paper ({4H,4L}, {5H,3L}, {3H,5L}),
// each with three tiles: a first tile of row section 0, a second tile of the
// same section that must add onto the first through the output buffer, and a
// folded tile whose array is split into group A (row section 1) and group B
// (row section 2). Weights, indices, signs, LUT entries (some empty) and
// activations are random. The expected partial sums are worked out here from
// the same tables, node by node, and compared with every word of the output
// buffer. Also checked: consecutive input vectors enter the array exactly 8
// cycles apart (full occupancy with double buffering). Counted, and required
// at least once: folding writes of group B, accumulation reads, fills that
// overlap streaming, fill requests held off by a full register array,
// opposite-sign subwords, full-precision weights, empty LUT slots.
module tb_tc_top_full;
  import tc_pkg::*;
  localparam int R = ROWS;
  localparam int C = COLS;
  localparam int NT = 3;
  localparam int NP = PIX_MAX;
  localparam int CH_USE = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done;
  logic [1:0] mode = 0;
  logic [TILE_BITS:0] num_tiles = 0;
  logic [PIX_BITS:0]  num_pix = 0;
  logic wb_wr_en = 0, desc_wr_en = 0, lut_wr_en = 0, ib_wr_en = 0;
  logic [TILE_BITS-1:0] wb_wr_tile = 0, lut_wr_tile = 0;
  logic [$clog2(R)-1:0] wb_wr_row = 0, ob_rd_row = 0;
  node_wt_t [C-1:0] wb_wr_data = '0;
  tile_desc_t desc_wr_data = '0;
  logic [$clog2(C)-1:0] lut_wr_col = 0;
  lut_entry_t [G-1:0] lut_wr_data = '0;
  logic [CH_BITS-1:0] ib_wr_ch = 0;
  logic [PIX_BITS-1:0] ib_wr_pix = 0;
  logic [ABITS-1:0] ib_wr_data = 0;
  logic [SLOT_BITS+PIX_BITS-1:0] ob_rd_addr = 0;
  logic [PSUM_BITS-1:0] ob_rd_data;

  tc_top dut (.*);

  int checks = 0, failures = 0;
  int n_fold = 0, n_accu = 0, n_overlap = 0, n_hold = 0, n_opp = 0, n_full = 0, n_empty = 0;
  int n_rate = 0;

  // reference tables
  node_wt_t   wt  [NT][R][C];
  lut_entry_t lut [NT][C][G];
  tile_desc_t dsc [NT];
  logic [7:0] act [NP][CH_USE];
  logic [31:0] expv [OB_SLOTS][R][NP];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism monitors
  longint cyc = 0, last_slot = -1;
  always @(posedge clk) begin
    cyc++;
    if (|dut.wr_en_b) n_fold++;
    if (|dut.rd_en_a) n_accu++;
    if (dut.u_irf.fill_active && dut.u_irf.slot_vld) n_overlap++;
    if (dut.fill_req && !dut.fill_ready && busy) n_hold++;
    if (dut.u_ctrl.state_q == 2'd1) last_slot = -1;   // new tile: restart spacing
    if (dut.u_irf.slot_vld && dut.u_irf.phase_q[2:0] == 3'd0) begin
      if (last_slot >= 0) begin
        checks++; n_rate++;
        if (cyc - last_slot != SLOT_CYC) begin
          failures++;
          $display("vector spacing %0d cycles, expected %0d", cyc - last_slot, SLOT_CYC);
        end
      end
      last_slot = cyc;
    end
  end

  function automatic int lbits(logic [1:0] m);
    case (m) 2'b00: return 3; 2'b01: return 4; default: return 5; endcase
  endfunction

  task automatic host_load();
    for (int t = 0; t < NT; t++) begin
      for (int r = 0; r < R; r++) begin
        @(negedge clk);
        wb_wr_en = 1; wb_wr_tile = t; wb_wr_row = r;
        for (int c = 0; c < C; c++) wb_wr_data[c] = wt[t][r][c];
      end
      @(negedge clk); wb_wr_en = 0;
      desc_wr_en = 1; desc_wr_data = dsc[t];
      for (int c = 0; c < C; c++) begin
        @(negedge clk); desc_wr_en = 0;
        lut_wr_en = 1; lut_wr_tile = t; lut_wr_col = c;
        for (int s = 0; s < G; s++) lut_wr_data[s] = lut[t][c][s];
      end
      @(negedge clk); lut_wr_en = 0;
    end
    for (int p = 0; p < NP; p++)
      for (int ch = 0; ch < CH_USE; ch++) begin
        @(negedge clk);
        ib_wr_en = 1; ib_wr_pix = p; ib_wr_ch = ch; ib_wr_data = act[p][ch];
      end
    @(negedge clk); ib_wr_en = 0;
  endtask

  task automatic make_run(int run, logic [1:0] m);
    for (int t = 0; t < NT; t++) begin
      dsc[t] = '0;
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          wt[t][r][c] = node_wt_t'($urandom);
          if ($urandom % 4 == 0) begin wt[t][r][c].idx_l = wt[t][r][c].idx_h; wt[t][r][c].opp = 0; n_full++; end
          if (wt[t][r][c].opp && wt[t][r][c].w != 0) n_opp++;
        end
      for (int c = 0; c < C; c++)
        for (int s = 0; s < G; s++) begin
          lut[t][c][s].vld = ($urandom % 8 != 0);
          lut[t][c][s].ch  = CH_BITS'($urandom % CH_USE);
          if (!lut[t][c][s].vld) n_empty++;
        end
    end
    dsc[0].sec_a = 0; dsc[0].first_a = 1;
    dsc[1].sec_a = 0; dsc[1].first_a = 0;
    dsc[2].split = 2'(1 + run % (C/SUB_COLS - 1));
    dsc[2].sec_a = 1; dsc[2].first_a = 1;
    dsc[2].sec_b = 2; dsc[2].first_b = 1;
    for (int p = 0; p < NP; p++)
      for (int ch = 0; ch < CH_USE; ch++) act[p][ch] = $urandom;
    // expected results
    for (int t = 0; t < NT; t++)
      for (int r = 0; r < R; r++)
        for (int p = 0; p < NP; p++) begin
          logic [31:0] sum_a = 0, sum_b = 0;
          for (int c = 0; c < C; c++) begin
            node_wt_t e = wt[t][r][c];
            logic [31:0] xi, xj, wh, wl, v;
            xi = lut[t][c][e.idx_h].vld ? 32'(act[p][lut[t][c][e.idx_h].ch]) : 0;
            xj = lut[t][c][e.idx_l].vld ? 32'(act[p][lut[t][c][e.idx_l].ch]) : 0;
            wl = 32'(e.w) & ((32'd1 << lbits(m)) - 1);
            wh = 32'(e.w) & ~((32'd1 << lbits(m)) - 1);
            v  = (e.opp ? -(wh * xi) : wh * xi) + wl * xj;
            if (e.sign_l) v = -v;
            if (dsc[t].split != 0 && c >= int'(dsc[t].split) * SUB_COLS) sum_b += v;
            else sum_a += v;
          end
          if (dsc[t].first_a) expv[dsc[t].sec_a][r][p] = 0;
          expv[dsc[t].sec_a][r][p] += sum_a;
          if (dsc[t].split != 0) begin
            if (dsc[t].first_b) expv[dsc[t].sec_b][r][p] = 0;
            expv[dsc[t].sec_b][r][p] += sum_b;
          end
        end
  endtask

  initial begin
    logic [1:0] modes [3] = '{2'b01, 2'b00, 2'b11};
    longint t0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      make_run(run, modes[run]);
      host_load();
      @(negedge clk);
      mode = modes[run]; num_tiles = NT; num_pix = NP; start = 1;
      t0 = cyc;
      @(negedge clk); start = 0;
      wait (done);
      $display("run %0d mode %b: %0d cycles for %0d tiles x %0d pixels", run, mode, cyc - t0, NT, NP);
      @(negedge clk);
      for (int sec = 0; sec < 3; sec++)
        for (int r = 0; r < R; r++)
          for (int p = 0; p < NP; p++) begin
            ob_rd_row = r; ob_rd_addr = {SLOT_BITS'(sec), PIX_BITS'(p)};
            #1;
            checks++;
            if (ob_rd_data !== expv[sec][r][p]) begin
              failures++;
              if (failures < 10)
                $display("run %0d sec %0d row %0d pix %0d: got %h expected %h",
                         run, sec, r, p, ob_rd_data, expv[sec][r][p]);
            end
          end
    end
    $display("mechanisms: fold_writes=%0d accu_reads=%0d fill_overlap=%0d fill_held=%0d opp=%0d fullprec=%0d empty_slots=%0d spacing_checks=%0d",
             n_fold, n_accu, n_overlap, n_hold, n_opp, n_full, n_empty, n_rate);
    if (n_fold == 0 || n_accu == 0 || n_overlap == 0 || n_hold == 0 || n_opp == 0 ||
        n_full == 0 || n_empty == 0 || n_rate == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
