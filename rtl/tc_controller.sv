// Tile sequencer of the accelerator.
//
// Runs the dataflow the paper describes: with the input buffer holding the
// activations of num_pix pixel positions and the weight buffer holding
// num_tiles tiles, every tile in turn is (1) loaded into the array, one array
// row per cycle (LOAD, ROWS cycles), (2) run against every pixel vector of
// the input buffer by issuing one fill request per pixel to the input
// register array (STREAM; with double buffering one vector enters the array
// every 8 cycles), and (3) drained until the last partial sum has left the
// array and been written to the output buffer (DRAIN, a fixed
// DRAIN_CYC cycles covering the column skew, the row skew and the rest of a
// 32-bit word). Only then are the next tile's weights loaded, since the array
// is weight-stationary. A start pulse begins the run; done pulses when the
// last tile has drained. The tile descriptor is latched when a tile's load
// begins and drives the split and the output-buffer slots until the tile is
// finished.
//
// The order of operations follows the paper; the FSM, the handshake and the
// fixed drain time are this design's choices.
module tc_controller
  import tc_pkg::*;
#(
  parameter int ROWS_P = ROWS,
  parameter int COLS_P = COLS,
  parameter int TILES_P = WB_TILES
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [$clog2(TILES_P):0]      num_tiles,
  input  logic [PIX_BITS:0]             num_pix,
  output logic                          busy,
  output logic                          done,
  // weight buffer / array load
  output logic [$clog2(TILES_P)-1:0]    tile,
  output logic [$clog2(ROWS_P)-1:0]     wload_row,
  output logic                          wload_en,
  input  tile_desc_t                    desc_in,
  output tile_desc_t                    desc,
  // input register array
  output logic                          fill_req,
  output logic [PIX_BITS-1:0]           fill_pix,
  input  logic                          fill_ready,
  input  logic                          irf_idle
);

  localparam int DRAIN_CYC = (COLS_P-1) + (ROWS_P-1) + (PSUM_BITS-ABITS) + 4;

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_STREAM, S_DRAIN} state_e;
  state_e state_q;

  logic [$clog2(ROWS_P)-1:0]        row_q;
  logic [PIX_BITS:0]                pcnt_q;
  logic [$clog2(DRAIN_CYC+1)-1:0]   dcnt_q;
  logic [$clog2(TILES_P):0]         tcnt_q;

  assign busy      = (state_q != S_IDLE);
  assign tile      = tcnt_q[$clog2(TILES_P)-1:0];
  assign wload_en  = (state_q == S_LOAD);
  assign wload_row = row_q;
  assign fill_req  = (state_q == S_STREAM) && (pcnt_q < num_pix);
  assign fill_pix  = pcnt_q[PIX_BITS-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE; row_q <= '0; pcnt_q <= '0; dcnt_q <= '0; tcnt_q <= '0;
      desc <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start && num_tiles != '0) begin
          state_q <= S_LOAD; tcnt_q <= '0; row_q <= '0;
        end
        S_LOAD: begin
          row_q <= row_q + 1'b1;
          if (row_q == '0) desc <= desc_in;  // latch as the load begins
          if (row_q == ($clog2(ROWS_P))'(ROWS_P-1)) begin
            state_q <= S_STREAM; pcnt_q <= '0;
          end
        end
        S_STREAM: begin
          if (fill_req && fill_ready) pcnt_q <= pcnt_q + 1'b1;
          if (pcnt_q == num_pix && irf_idle) begin
            state_q <= S_DRAIN; dcnt_q <= '0;
          end
        end
        S_DRAIN: begin
          dcnt_q <= dcnt_q + 1'b1;
          if (dcnt_q == ($clog2(DRAIN_CYC+1))'(DRAIN_CYC)) begin
            if (tcnt_q + 1'b1 == num_tiles) begin
              state_q <= S_IDLE; done <= 1'b1;
            end else begin
              state_q <= S_LOAD; row_q <= '0;
              tcnt_q  <= tcnt_q + 1'b1;
            end
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
