// BSEG convolution layer: a 1 x KW kernel over a 1 x W_I x D input with C
// output channels, computed on DSP slices with binary segmentation.
//
//   y[p][c] = sum_{q<KW} sum_{d<D} K[c][d][q] * x[p+q][d],  0 <= p <= W_I-KW
//
// The 3D convolution is sliced into 1D correlations along the width, one
// per (depth d, output channel c). PAR_C x D bseg_engine instances run in
// parallel; the depth results of each channel are added by a pipelined
// adder tree. The C channels are mapped onto the PAR_C parallel engine
// columns in round robin: R = C/PAR_C slots, slot r computing channels
// r*PAR_C .. r*PAR_C+PAR_C-1, each engine keeping the partial sums of all
// its slots in its feedback delay lines. Every block of NI pixels is
// therefore used R times, one slot per cycle, so the layer consumes NI
// pixels per R cycles and produces NI*PAR_C outputs per cycle.
//
// Kernel buffer: the kernels of all channels are held here and written
// through k_we/k_ch/k_data (one channel, all depths and taps, per write);
// in slot r the kernels of its channels are read and given to the engines.
// Loading is meant to happen while the layer is idle.
//
// Output stream m_y: one beat per (block, slot) with, for the NI positions
// p0+j of the block (p0 = b*NI + 1 - G*NK), the PAR_C channel results of
// the slot, m_y_tdata[j][pc] = y[p0+j][r*PAR_C+pc]; m_y_tkeep[j] marks the
// positions that exist (0 <= p <= W_I-KW); beats without any are dropped.
// Beats come in block order and, within a block, in slot order, from an
// output register. A stalled output freezes the whole pipeline; input
// starvation freezes it too, while the output register may still drain.
// Between frames the engines run idle periods of R cycles, so the last
// outputs of a frame drain without the next frame.
//
// The per-row slicing, depth adder trees, round-robin channels and
// parallel channel engines follow the BSEG architecture's generalisation;
// the sizes of the reference layer (1x1500x16 input, 128 kernels 1x8x16,
// 4-bit, eight outputs per cycle) are the defaults. The kernel buffer
// write port, the output beat format and the idle/flush handling are this
// design's choices.
module bseg_conv
  import pack_pkg::*;
#(
  parameter int unsigned W_I   = 1500,
  parameter int unsigned D     = 16,
  parameter int unsigned C     = 128,
  parameter int unsigned KW    = 8,
  parameter int unsigned WK    = 4,
  parameter int unsigned WI    = 4,
  parameter int unsigned L     = 9,
  parameter int unsigned PAR_C = 4,
  parameter int unsigned NK    = bseg_fit(DSP_AW, WK, L),
  parameter int unsigned NI    = bseg_fit(DSP_BW, WI, L),
  parameter int unsigned G     = (KW + NK - 1) / NK,
  parameter int unsigned EW    = WK + WI + 1 + $clog2(G * NK),
  parameter int unsigned OUT_W = EW + $clog2(D),
  parameter int unsigned CHW   = (C > 1) ? $clog2(C) : 1
) (
  input  logic                                    clk,
  input  logic                                    rst,
  // kernel buffer write
  input  logic                                    k_we,
  input  logic [CHW-1:0]                          k_ch,
  input  logic [D-1:0][KW-1:0][WK-1:0]            k_data,
  // input pixels, channels-last
  input  logic [D-1:0][WI-1:0]                    s_x_tdata,
  input  logic                                    s_x_tvalid,
  output logic                                    s_x_tready,
  // output
  output logic signed [NI-1:0][PAR_C-1:0][OUT_W-1:0] m_y_tdata,
  output logic [NI-1:0]                           m_y_tkeep,
  output logic                                    m_y_tvalid,
  input  logic                                    m_y_tready
);
  localparam int unsigned R       = C / PAR_C;
  localparam int unsigned P_MAX   = W_I - KW;
  // last block the final DSP must see, then G-1 more to push it through
  localparam int unsigned B_LAST  = (P_MAX + G * NK - 1) / NI;
  localparam int unsigned NB_FEED = B_LAST + G;
  localparam int unsigned BW      = $clog2(NB_FEED + 1);
  localparam int unsigned SW      = (R > 1) ? $clog2(R) : 1;
  localparam int unsigned TW      = 1 + BW + SW;
  localparam int unsigned TL      = (D > 1) ? $clog2(D) : 1;

  initial assert (C % PAR_C == 0 && W_I >= KW) else $error("bseg_conv: bad sizes");

  typedef struct packed {
    logic          v;
    logic [BW-1:0] b;
    logic [SW-1:0] r;
  } tag_t;

  // ---------------- kernel buffer ----------------
  logic [D-1:0][KW-1:0][WK-1:0] kmem [R][PAR_C];
  always_ff @(posedge clk)
    if (k_we) kmem[k_ch / PAR_C][k_ch % PAR_C] <= k_data;

  // ---------------- input generator and period control ----------------
  logic                         blk_valid, blk_take, frame_idle;
  logic [D-1:0][NI-1:0][WI-1:0] blk;
  logic [BW-1:0]                blk_idx;
  logic                         ce, run, real_q, real_now, start_ok;
  logic [SW-1:0]                slot;
  logic                         m_valid_i;

  bseg_input_gen #(.D(D), .WI(WI), .NI(NI), .W_I(W_I), .NB_FEED(NB_FEED), .BW(BW)) u_gen (
    .clk, .rst, .s_x_tdata, .s_x_tvalid, .s_x_tready,
    .blk_valid, .blk, .blk_idx, .blk_take, .frame_idle
  );

  // A period of R slots is real (uses a block) or idle (between frames).
  // It may only start at slot 0; mid-frame starvation stalls instead.
  assign start_ok = blk_valid | frame_idle;
  assign real_now = (slot == '0) ? blk_valid : real_q;
  assign run      = (slot != '0) | start_ok;
  assign ce       = run & (~m_y_tvalid | m_y_tready);
  assign blk_take = ce & real_now & (slot == SW'(R - 1));

  always_ff @(posedge clk) begin
    if (rst) begin
      slot   <= '0;
      real_q <= 1'b0;
    end else if (ce) begin
      real_q <= real_now;
      slot   <= (slot == SW'(R - 1)) ? '0 : slot + 1'b1;
    end
  end

  // ---------------- engines ----------------
  tag_t tag_in, tag_eng, tag_out;
  assign tag_in = '{v: real_now, b: blk_idx, r: slot};

  logic signed [NI-1:0][PAR_C-1:0][OUT_W-1:0] ysum;
  logic [PAR_C-1:0] tv_unused;

  for (genvar pc = 0; pc < PAR_C; pc++) begin : g_ch
    logic signed [NI-1:0][EW-1:0] ye [D];
    for (genvar d = 0; d < D; d++) begin : g_d
      logic [NI-1:0][WI-1:0] xe;
      logic [TW-1:0]         t_o;
      assign xe = real_now ? blk[d] : '0;
      if (pc == 0 && d == 0) begin : g_tag
        bseg_engine #(.WK(WK), .WI(WI), .KW(KW), .L(L), .NK(NK), .NI(NI), .R(R),
                      .TAG_W(TW), .G(G), .EW(EW)) u_eng (
          .clk, .rst, .ce, .x(xe), .k(kmem[slot][pc][d]), .in_tag(tag_in),
          .y(ye[d]), .out_tag(t_o)
        );
        assign tag_eng = t_o;
      end else begin : g_notag
        logic t1;
        bseg_engine #(.WK(WK), .WI(WI), .KW(KW), .L(L), .NK(NK), .NI(NI), .R(R),
                      .TAG_W(1), .G(G), .EW(EW)) u_eng (
          .clk, .rst, .ce, .x(xe), .k(kmem[slot][pc][d]), .in_tag(1'b0),
          .y(ye[d]), .out_tag(t1)
        );
      end
    end
    for (genvar j = 0; j < NI; j++) begin : g_pos
      logic signed [D-1:0][EW-1:0] col;
      logic signed [OUT_W-1:0]     s;
      logic                        tv;
      always_comb for (int d = 0; d < D; d++) col[d] = ye[d][j];
      adder_tree #(.N(D), .IW(EW), .OW(OUT_W)) u_tree (
        .clk, .rst, .ce, .in_valid(1'b0), .in(col), .out_valid(tv), .out(s)
      );
      assign ysum[j][pc] = s;
      if (j == 0) begin : g_tv
        assign tv_unused[pc] = tv;
      end
    end
  end

  delay_line #(.W(TW), .DEPTH(TL)) u_tagdl (
    .clk, .rst, .ce, .din(tag_eng), .dout(tag_out)
  );

  // ---------------- output ----------------
  logic [NI-1:0] keep_i;
  always_comb begin
    int p0;
    p0 = int'(tag_out.b) * NI + 1 - int'(G * NK);
    for (int j = 0; j < NI; j++)
      keep_i[j] = tag_out.v && (p0 + j >= 0) && (p0 + j <= int'(P_MAX));
  end
  assign m_valid_i = |keep_i;

  // Output register: loaded whenever the pipeline advances, emptied when
  // the beat is taken. The pipeline may be frozen by input starvation while
  // a beat is taken, so the beat must not stay at the pipeline's end.
  always_ff @(posedge clk) begin
    if (rst) begin
      m_y_tvalid <= 1'b0;
      m_y_tkeep  <= '0;
      m_y_tdata  <= '0;
    end else if (ce) begin
      m_y_tvalid <= m_valid_i;
      m_y_tkeep  <= keep_i;
      m_y_tdata  <= ysum;
    end else if (m_y_tready) begin
      m_y_tvalid <= 1'b0;
    end
  end
endmodule
