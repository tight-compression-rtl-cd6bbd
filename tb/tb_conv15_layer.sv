// Workload test: one 512 x 512 pointwise convolution layer at full array size.
//
// The layer has the shape of the late CIFAR-10 layers that the compression
// method is evaluated on. It has 512 output channels and 512 input channels,
// and 93.3 % of its weights are pruned. The surviving weights are already
// subword-pruned for the {4H,4L} split:
//   - about 60 % keep only Subword L (magnitude 1..15);
//   - about 30 % keep only Subword H (multiples of 16);
//   - the rest keep full 8-bit precision.
// Signs are random.
//
// The bench compresses the layer itself. For every row section of 32 output
// channels it shuffles the input channels and packs them first-fit into
// groups of at most G = 16 columns. A column may join a group if it takes no
// subword position that is already used in any of its rows. So an H-only
// weight and an L-only weight from different channels can share a node,
// with 'opp' set when their signs differ. The real compression flow uses
// simulated annealing instead of first-fit; the hardware cannot tell the
// difference. Groups are cut into 32-column tiles, and tiles into runs of at
// most WB_TILES. The input buffer keeps the same 8 pixel vectors for all runs,
// while the weight buffer is reloaded between runs. Partial sums of a section
// stay in the output buffer across tiles and runs; only a section's first
// tile starts from zero.
//
// Check: every one of the 512 x 8 outputs is compared with the plain sparse
// matrix product of the original, unpacked weights and the activations. That
// product does not depend on the packing, so the check covers the packing,
// the LUT gather, the subword arithmetic and the accumulation together. The
// bench also reports the packed size, the compression rate and the cycle
// count. It uses tc_top with its default parameters.
module tb_conv15_layer;
  import tc_pkg::*;
  localparam int R   = ROWS;
  localparam int C   = COLS;
  localparam int K   = 512;           // input channels
  localparam int N   = 512;           // output channels
  localparam int NS  = N / R;         // row sections
  localparam int NP  = PIX_MAX;
  localparam int MAXG = K;            // worst case: one column per group
  localparam logic [1:0] MODE = 2'b01; // {4H,4L}

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done;
  logic [1:0] mode = MODE;
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

  // original sparse layer: signed weight and which subwords it uses
  int         wv   [N][K];
  logic [1:0] used [N][K];   // bit 1: H, bit 0: L
  logic [7:0] act  [NP][K];

  // packing of one section
  int         gcol  [MAXG][G];
  int         gn    [MAXG];
  logic [1:0] gocc  [MAXG][R];
  node_wt_t   gnode [MAXG][R];
  int         ngrp;

  // packed layer, all sections: node entries and LUT per global tile
  node_wt_t   tnode [][R][C];
  lut_entry_t tlut  [][C][G];
  int         tsec  [];
  bit         tfirst[];
  int         ntiles = 0;
  int         nmerged = 0, nopp = 0, ngroups_total = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint cyc = 0;
  always @(posedge clk) cyc++;

  task automatic make_layer();
    for (int n = 0; n < N; n++)
      for (int k = 0; k < K; k++) begin
        int mag, kind;
        wv[n][k] = 0; used[n][k] = 2'b00;
        if ($urandom % 1000 < 67) begin
          kind = $urandom % 10;
          if (kind < 6)      begin mag = 1 + $urandom % 15;        used[n][k] = 2'b01; end
          else if (kind < 9) begin mag = 16 * (1 + $urandom % 15); used[n][k] = 2'b10; end
          else begin
            mag = 16 * (1 + $urandom % 15) + 1 + $urandom % 15;     used[n][k] = 2'b11;
          end
          wv[n][k] = ($urandom % 2) ? -mag : mag;
        end
      end
    for (int p = 0; p < NP; p++)
      for (int k = 0; k < K; k++) act[p][k] = 8'($urandom);
  endtask

  // Place weight (n, k) into node r of group g.
  task automatic place(int g, int r, int n, int k, int slot);
    int mag = wv[n][k] < 0 ? -wv[n][k] : wv[n][k];
    bit neg = wv[n][k] < 0;
    node_wt_t e = gnode[g][r];
    if (used[n][k] == 2'b11) begin
      e.w = 8'(mag); e.sign_l = neg; e.opp = 0; e.idx_h = 4'(slot); e.idx_l = 4'(slot);
    end else if (used[n][k] == 2'b01) begin
      e.w[3:0] = 4'(mag); e.idx_l = 4'(slot);
      if (gocc[g][r][1]) begin   // merge with an H weight already there
        e.opp = (e.sign_l != neg); e.sign_l = neg; nmerged++;
        if (e.opp) nopp++;
      end else e.sign_l = neg;
    end else begin
      e.w[7:4] = 4'(mag >> 4); e.idx_h = 4'(slot);
      if (gocc[g][r][0]) begin   // merge with an L weight already there
        e.opp = (e.sign_l != neg); nmerged++;
        if (e.opp) nopp++;
      end else e.sign_l = neg;
    end
    gnode[g][r] = e;
    gocc[g][r] |= used[n][k];
  endtask

  task automatic pack_section(int s);
    int perm [K];
    for (int k = 0; k < K; k++) perm[k] = k;
    for (int k = K - 1; k > 0; k--) begin
      int j = $urandom % (k + 1);
      int tmp = perm[k]; perm[k] = perm[j]; perm[j] = tmp;
    end
    ngrp = 0;
    foreach (perm[i]) begin
      int k = perm[i], g;
      bit any = 0;
      for (int r = 0; r < R; r++) any |= (used[s*R + r][k] != 0);
      if (!any) continue;        // empty column of this section: dropped
      for (g = 0; g < ngrp; g++) begin
        bit ok = (gn[g] < G);
        for (int r = 0; r < R && ok; r++)
          if ((gocc[g][r] & used[s*R + r][k]) != 0) ok = 0;
        if (ok) break;
      end
      if (g == ngrp) begin
        gn[g] = 0;
        for (int r = 0; r < R; r++) begin gocc[g][r] = 0; gnode[g][r] = '0; end
        ngrp++;
      end
      for (int r = 0; r < R; r++)
        if (used[s*R + r][k] != 0) place(g, r, s*R + r, k, gn[g]);
      gcol[g][gn[g]] = k;
      gn[g]++;
    end
    ngroups_total += ngrp;
    // cut into tiles of C groups
    for (int t = 0; t * C < ngrp; t++) begin
      int i = ntiles;
      ntiles++;
      tnode = new[ntiles](tnode); tlut = new[ntiles](tlut);
      tsec  = new[ntiles](tsec);  tfirst = new[ntiles](tfirst);
      tsec[i] = s; tfirst[i] = (t == 0);
      for (int c = 0; c < C; c++) begin
        int g = t * C + c;
        for (int r = 0; r < R; r++) tnode[i][r][c] = (g < ngrp) ? gnode[g][r] : '0;
        for (int sl = 0; sl < G; sl++) begin
          tlut[i][c][sl].vld = (g < ngrp) && (sl < gn[g]);
          tlut[i][c][sl].ch  = (g < ngrp && sl < gn[g]) ? CH_BITS'(gcol[g][sl]) : '0;
        end
      end
    end
  endtask

  task automatic load_inputs();
    for (int p = 0; p < NP; p++)
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        ib_wr_en = 1; ib_wr_pix = PIX_BITS'(p); ib_wr_ch = CH_BITS'(k); ib_wr_data = act[p][k];
      end
    @(negedge clk); ib_wr_en = 0;
  endtask

  task automatic load_tiles(int first, int cnt);
    for (int t = 0; t < cnt; t++) begin
      tile_desc_t d = '0;
      for (int r = 0; r < R; r++) begin
        @(negedge clk);
        wb_wr_en = 1; wb_wr_tile = TILE_BITS'(t); wb_wr_row = 5'(r);
        for (int c = 0; c < C; c++) wb_wr_data[c] = tnode[first + t][r][c];
      end
      @(negedge clk); wb_wr_en = 0;
      d.sec_a = SLOT_BITS'(tsec[first + t]); d.first_a = tfirst[first + t];
      desc_wr_en = 1; desc_wr_data = d;
      for (int c = 0; c < C; c++) begin
        @(negedge clk); desc_wr_en = 0;
        lut_wr_en = 1; lut_wr_tile = TILE_BITS'(t); lut_wr_col = 5'(c);
        for (int sl = 0; sl < G; sl++) lut_wr_data[sl] = tlut[first + t][c][sl];
      end
      @(negedge clk); lut_wr_en = 0;
    end
  endtask

  initial begin
    longint busy_cyc = 0, t0;
    int nruns = 0;
    make_layer();
    for (int s = 0; s < NS; s++) pack_section(s);
    $display("packed %0d x %0d layer: %0d column groups in %0d sections (%0.2fx), %0d tiles, %0d merged subword pairs (%0d opposite sign)",
             N, K, ngroups_total, NS, real'(NS * K) / real'(ngroups_total), ntiles, nmerged, nopp);
    repeat (4) @(posedge clk);
    rst_n = 1;
    load_inputs();
    for (int first = 0; first < ntiles; first += WB_TILES) begin
      int cnt;
      cnt = (ntiles - first < WB_TILES) ? ntiles - first : WB_TILES;
      load_tiles(first, cnt);
      @(negedge clk);
      num_tiles = (TILE_BITS+1)'(cnt); num_pix = (PIX_BITS+1)'(NP); start = 1;
      t0 = cyc;
      @(negedge clk); start = 0;
      wait (done);
      busy_cyc += cyc - t0;
      nruns++;
    end
    $display("%0d runs, %0d array cycles for %0d tiles x %0d pixels", nruns, busy_cyc, ntiles, NP);
    @(negedge clk);
    for (int n = 0; n < N; n++)
      for (int p = 0; p < NP; p++) begin
        int ref_v;
        ref_v = 0;
        for (int k = 0; k < K; k++) ref_v += wv[n][k] * int'(act[p][k]);
        ob_rd_row = 5'(n % R); ob_rd_addr = {SLOT_BITS'(n / R), PIX_BITS'(p)};
        #1;
        checks++;
        if (ob_rd_data !== 32'(ref_v)) begin
          failures++;
          if (failures < 10)
            $display("output %0d pixel %0d: got %0d expected %0d", n, p, $signed(ob_rd_data), ref_v);
        end
      end
    if (nmerged == 0 || nopp == 0 || nruns < 2) begin
      failures++;
      $display("workload did not merge subwords or did not need a weight-buffer reload");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
