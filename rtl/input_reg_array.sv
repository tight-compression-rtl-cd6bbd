// Input register array: gathers, double-buffers and serialises activations.
//
// Each array column computes with G = 16 original input channels, chosen by
// the column packing of the current tile. For one input vector (one pixel
// position) this unit reads the 16 x 32 needed activations from the input
// buffer in LUT order and streams them into the array one bit per cycle,
// LSB first, so a vector occupies 8 cycles.
//
// Fill side: a request (fill_req, fill_pix) is taken when fill_ready is
// high. Over 8 cycles the unit walks the LUT in groups of FILL_COLS = 4
// columns (lut_grp), receives the 64 activations of a group from the input
// buffer (buf_data) and stores them in the free one of two register banks.
// Stream side: at every 8-cycle slot boundary (phase % 8 == 0) a full bank is
// streamed during the slot and then released; if none is full the slot is
// empty (vld = 0, zero bits). With requests arriving in time, filling one
// bank while the other streams keeps every slot busy.
//
// A free-running 5-bit phase counter numbers the cycles of the 32-cycle
// partial-sum frame. The control word {vld, pix, phase} and the 16 bits of
// column c leave through a c-cycle delay line, which gives the one-cycle
// skew between adjacent columns that the partial-sum flow needs.
//
// From the paper: LUT-ordered gathering, double buffering, bit-serial
// shifting and the column skew. The fill width, the handshake and the
// control word are this design's choices.
module input_reg_array
  import tc_pkg::*;
#(
  parameter int COLS_P = COLS
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               fill_req,
  input  logic [PIX_BITS-1:0]                fill_pix,
  output logic                               fill_ready,
  output logic                               fill_active,
  output logic [$clog2(COLS_P/FILL_COLS)-1:0] lut_grp,
  output logic [PIX_BITS-1:0]                buf_pix,
  input  logic [RD_PORTS-1:0][ABITS-1:0]     buf_data,
  output logic                               idle,
  output logic [COLS_P-1:0][G-1:0]           x_bot,
  output ctl_t [COLS_P-1:0]                  ctl_bot
);

  localparam int NGRP = COLS_P / FILL_COLS;
  localparam int SB   = $clog2(SLOT_CYC);

  logic [ABITS-1:0] act [2][COLS_P][G];
  logic [1:0]                full_q;
  logic [1:0][PIX_BITS-1:0]  tag_q;
  logic                      wsel_q, rsel_q, filling_q, slot_q;
  logic [$clog2(NGRP)-1:0]   fcnt_q;
  logic [PIX_BITS-1:0]       fpix_q;
  logic [PH_BITS-1:0]        phase_q;
  logic                      accept, fill_go, fill_last, slot_vld, slot_end;
  logic [COLS_P-1:0][G-1:0]  x_raw;
  ctl_t                      ctl_raw;

  assign fill_ready  = !filling_q && !full_q[wsel_q];
  assign accept      = fill_req && fill_ready;
  assign fill_go     = filling_q || accept;
  assign fill_active = fill_go;
  assign lut_grp     = filling_q ? fcnt_q : '0;
  assign buf_pix     = filling_q ? fpix_q : fill_pix;
  assign fill_last   = fill_go && (lut_grp == ($clog2(NGRP))'(NGRP-1));

  assign slot_vld = (phase_q[SB-1:0] == '0) ? full_q[rsel_q] : slot_q;
  assign slot_end = slot_vld && (phase_q[SB-1:0] == SB'(SLOT_CYC-1));
  assign idle     = !filling_q && (full_q == 2'b00);

  // fill bank wsel_q, group lut_grp
  always_ff @(posedge clk) begin
    if (fill_go)
      for (int k = 0; k < FILL_COLS; k++)
        for (int s = 0; s < G; s++)
          act[wsel_q][int'(lut_grp)*FILL_COLS + k][s] <= buf_data[k*G + s];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full_q <= '0; tag_q <= '0; wsel_q <= 1'b0; rsel_q <= 1'b0;
      filling_q <= 1'b0; fcnt_q <= '0; fpix_q <= '0; phase_q <= '0; slot_q <= 1'b0;
    end else begin
      phase_q <= phase_q + 1'b1;
      slot_q  <= slot_vld;
      if (accept) begin
        fpix_q    <= fill_pix;
        filling_q <= 1'b1;
        fcnt_q    <= ($clog2(NGRP))'(1);
      end else if (filling_q) begin
        fcnt_q <= fcnt_q + 1'b1;
      end
      if (fill_last) begin
        filling_q      <= 1'b0;
        full_q[wsel_q] <= 1'b1;
        tag_q[wsel_q]  <= buf_pix;
        wsel_q         <= ~wsel_q;
      end
      if (slot_end) begin
        full_q[rsel_q] <= 1'b0;
        rsel_q         <= ~rsel_q;
      end
    end
  end

  // unskewed bit stream of the bank being streamed
  always_comb begin
    for (int c = 0; c < COLS_P; c++)
      for (int s = 0; s < G; s++)
        x_raw[c][s] = slot_vld & act[rsel_q][c][s][phase_q[SB-1:0]];
    ctl_raw.vld   = slot_vld;
    ctl_raw.pix   = tag_q[rsel_q];
    ctl_raw.phase = phase_q;
  end

  // column c is delayed by c cycles
  for (genvar c = 0; c < COLS_P; c++) begin : g_skew
    if (c == 0) begin : g_nodelay
      assign x_bot[c]   = x_raw[c];
      assign ctl_bot[c] = ctl_raw;
    end else begin : g_delay
      logic [c-1:0][G-1:0] xd;
      ctl_t [c-1:0]        cd;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          xd <= '0; cd <= '0;
        end else begin
          xd[0] <= x_raw[c];
          cd[0] <= ctl_raw;
          for (int i = 1; i < c; i++) begin
            xd[i] <= xd[i-1];
            cd[i] <= cd[i-1];
          end
        end
      end
      assign x_bot[c]   = xd[c-1];
      assign ctl_bot[c] = cd[c-1];
    end
  end

endmodule
