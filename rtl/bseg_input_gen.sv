// Input generator for the BSEG convolution layer.
//
// The layer input arrives channels-last: one beat per pixel, carrying all
// D channels of WI bits. The engines instead need, per channel, NI
// consecutive pixels packed side by side on the DSP B path. This block
// collects NI pixels into a collect buffer and, when full, moves them into
// the present buffer, reordered as blk[d][j] = channel d of pixel j of the
// block. A presented block stays valid until the consumer pulses blk_take
// (after it has used the block in all of its round-robin slots), so
// collecting the next block overlaps with computing the current one.
//
// Frames: W_I pixels form a frame. After the last pixel, NB_FEED - ceil(W_I/NI)
// further blocks of zeros are generated without consuming input, so that
// the last outputs of the frame leave the engine chain; pixels past W_I in
// the last real block are zero too. blk_idx is the block's index within
// the frame. frame_idle is high when no part of a frame is held, so the
// consumer may insert idle periods.
//
// The function (buffering and reordering to feed the parallel DSP inputs)
// is the generator's role in the BSEG layer; this two-buffer structure for
// one-row inputs, the zero flush and the handshake are this design's.
module bseg_input_gen #(
  parameter int unsigned D       = 16,
  parameter int unsigned WI      = 4,
  parameter int unsigned NI      = 2,
  parameter int unsigned W_I     = 1500,
  parameter int unsigned NB_FEED = 753,
  parameter int unsigned BW      = $clog2(NB_FEED + 1)
) (
  input  logic                             clk,
  input  logic                             rst,
  input  logic [D-1:0][WI-1:0]             s_x_tdata,
  input  logic                             s_x_tvalid,
  output logic                             s_x_tready,
  output logic                             blk_valid,
  output logic [D-1:0][NI-1:0][WI-1:0]     blk,
  output logic [BW-1:0]                    blk_idx,
  input  logic                             blk_take,
  output logic                             frame_idle
);
  localparam int unsigned CW = $clog2(NI + 1);

  logic [NI-1:0][D-1:0][WI-1:0] cbuf;
  logic [CW-1:0]                ccnt;
  logic [BW-1:0]                cblk;
  logic                         cfull, pad, load;
  logic [31:0]                  pix;

  assign pix        = cblk * NI + ccnt;
  assign cfull      = (ccnt == CW'(NI));
  assign pad        = ~cfull & (pix >= W_I);            // past the image: zero fill
  assign s_x_tready = ~cfull & ~pad;
  assign load       = cfull & (~blk_valid | blk_take);
  assign frame_idle = (cblk == '0) & (ccnt == '0) & ~blk_valid;

  initial assert (NB_FEED * NI >= W_I) else $error("bseg_input_gen: NB_FEED too small");

  always_ff @(posedge clk) begin
    if (rst) begin
      ccnt      <= '0;
      cblk      <= '0;
      cbuf      <= '0;
      blk_valid <= 1'b0;
      blk       <= '0;
      blk_idx   <= '0;
    end else begin
      if (s_x_tvalid & s_x_tready) begin
        cbuf[ccnt] <= s_x_tdata;
        ccnt       <= ccnt + 1'b1;
      end else if (pad) begin
        cbuf[ccnt] <= '0;
        ccnt       <= ccnt + 1'b1;
      end
      if (blk_take & ~load) blk_valid <= 1'b0;
      if (load) begin
        blk_valid <= 1'b1;
        blk_idx   <= cblk;
        for (int d = 0; d < D; d++)
          for (int j = 0; j < NI; j++) blk[d][j] <= cbuf[j][d];
        ccnt <= '0;
        cblk <= (cblk == BW'(NB_FEED - 1)) ? '0 : cblk + 1'b1;
      end
    end
  end
endmodule
