// Self-checking testbench of tc_controller with a model of the input
// register array (each accepted fill keeps it busy 8 cycles; it is not ready
// while busy, plus random extra wait cycles). Checks, for every tile: weight
// rows loaded 0..31 in order with the right tile index, the descriptor of
// that tile latched, exactly num_pix fill requests for pixels 0..num_pix-1,
// no fill before the load ends, at least DRAIN cycles between the register
// array going idle and the next load, and a single done pulse at the end.
module tb_tc_controller;
  import tc_pkg::*;
  localparam int NT = 4, NP = 5;
  localparam int DRAIN = (COLS-1) + (ROWS-1) + (PSUM_BITS-ABITS) + 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, wload_en, fill_req, fill_ready, irf_idle;
  logic [TILE_BITS:0] num_tiles = NT;
  logic [PIX_BITS:0] num_pix = NP;
  logic [TILE_BITS-1:0] tile;
  logic [$clog2(ROWS)-1:0] wload_row;
  tile_desc_t desc_in, desc;
  logic [PIX_BITS-1:0] fill_pix;
  int checks = 0, failures = 0;

  tc_controller dut (.*);

  assign desc_in = tile_desc_t'(tile * 13 + 7);

  // model of the input register array
  int busy_cnt = 0;
  assign fill_ready = (busy_cnt == 0);
  assign irf_idle   = (busy_cnt == 0);
  always @(posedge clk) begin
    if (fill_req && fill_ready) busy_cnt <= SLOT_CYC + ($urandom % 3);
    else if (busy_cnt > 0) busy_cnt <= busy_cnt - 1;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cur_tile = -1, next_row = 0, fills = 0, dones = 0, idle_since = 0, cyc = 0;
  bit loading = 0;
  always @(negedge clk) if (rst_n) begin
    cyc++;
    if (wload_en) begin
      if (wload_row == 0) begin
        cur_tile++; next_row = 0;
        checks++;
        if (cur_tile > 0 && fills != NP) begin failures++; $display("tile %0d had %0d fills", cur_tile-1, fills); end
        checks++;
        if (cur_tile > 0 && cyc - idle_since < DRAIN) begin failures++; $display("drain too short"); end
        fills = 0;
      end
      checks++;
      if (int'(wload_row) != next_row || int'(tile) != cur_tile) failures++;
      next_row++;
    end
    if (fill_req && fill_ready) begin
      checks++;
      if (next_row != ROWS || int'(fill_pix) != fills) begin failures++; $display("bad fill"); end
      fills++;
    end
    if (!irf_idle) idle_since = cyc;
    if (next_row == ROWS && !wload_en && busy) begin
      checks++;
      if (desc !== tile_desc_t'(cur_tile * 13 + 7)) failures++;
    end
    if (done) dones++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    wait (done);
    repeat (20) @(negedge clk);
    checks += 3;
    if (cur_tile != NT - 1) begin failures++; $display("%0d tiles", cur_tile + 1); end
    if (fills != NP) failures++;
    if (dones != 1 || busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
