// 1D binary-segmentation (BSEG) correlation engine on a chain of DSP slices.
//
// Computes y[p] = sum_k K[k] * x[p+k] for a kernel of KW signed WK-bit
// elements over a stream of unsigned WI-bit inputs. Both multiplier inputs
// are packed with lane size L: DSP g holds NK kernel elements (group g,
// reversed, K[g*NK+NK-1-i] in lane i) on its A path via the sign-splitting
// packing and pre-adder (packed_dsp), and NI consecutive inputs on its B path. The
// product then holds NK+NI-1 lanes, each the sum of the kernel-input pairs
// of one output position, so up to min(NK,NI) products are added inside the
// multiplier. G = ceil(KW/NK) DSPs cover the kernel.
//
// Per block of NI inputs the partial lane sums are moved on through the C
// port: lanes k >= NI of DSP g return to lane k-NI of the same DSP for the
// next block; the completed lanes 0..NI-2 of DSP g-1 enter DSP g at lanes
// NK..NK+NI-2 for the same block, and its lane NI-1 enters lane NK-1 one
// block later. The completed lanes 0..NI-1 of the last DSP are the outputs.
// Inputs reach DSP g through the B cascade plus fabric delay, one block
// period later than DSP g-1.
//
// Guard bits: each lane fed back through C carries the offset 2^(L-1), so
// lane values never cross lane boundaries (conditions checked at
// elaboration). Only the low WL bits of a lane stay on the DSP; the high
// part minus the offset is added to a fabric "high" counter that travels
// with the lane, and the output is high*2^WL + low.
//
// Round robin: R independent correlations (e.g. output channels) share
// the engine; slot r = cycle mod R, and every feedback path is R (or 2R)
// cycles long. The caller presents, every enabled cycle, the input block
// and the kernel of the current slot (the same kernel to all groups).
// Latency from a block at x to the outputs that it completes:
// LAT = (G-1)*R + 5 enabled cycles. A tag of TAG_W bits travels with it.
// Output y[k] of a block with index b (its input x[b*NI..]) is position
// p = b*NI + k + 1 - G*NK.
//
// The lane layout, C-port accumulation, guard offset, low/high slicing and
// B-cascade input buffering follow the BSEG architecture; the exact lane
// routing between DSPs, the round-robin timing and the delay lines in
// fabric are this design's construction.
module bseg_engine
  import pack_pkg::*;
#(
  parameter int unsigned WK    = 4,
  parameter int unsigned WI    = 4,
  parameter int unsigned KW    = 8,
  parameter int unsigned L     = 9,
  parameter int unsigned NK    = bseg_fit(DSP_AW, WK, L),
  parameter int unsigned NI    = bseg_fit(DSP_BW, WI, L),
  parameter int unsigned WL    = bseg_low_width(L, WK, WI, min_u(NK, NI)),
  parameter int unsigned R     = 1,
  parameter int unsigned TAG_W = 1,
  parameter int unsigned G     = (KW + NK - 1) / NK,
  parameter int unsigned EW    = WK + WI + 1 + $clog2(G * NK)
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        ce,
  input  logic [NI-1:0][WI-1:0]       x,
  input  logic [KW-1:0][WK-1:0]       k,
  input  logic [TAG_W-1:0]            in_tag,
  output logic signed [NI-1:0][EW-1:0] y,
  output logic [TAG_W-1:0]            out_tag
);
  localparam int unsigned NL  = NK + NI - 1;     // product lanes
  localparam int unsigned HW  = EW - WL + 1;     // high part width
  localparam int unsigned XW  = WL + HW;         // sliced lane word
  localparam int unsigned LAT = (G - 1) * R + 5;

  initial begin
    assert ((NK - 1) * L + WK + 1 <= DSP_AW) else $error("bseg_engine: kernel packing");
    assert ((NI - 1) * L + WI + 1 <= DSP_BW) else $error("bseg_engine: input packing");
    assert (NL * L <= DSP_PW) else $error("bseg_engine: lanes exceed P");
    assert (bseg_guard_ok(L, WK, WI, min_u(NK, NI))) else $error("bseg_engine: guard too small");
    assert (WL < L) else $error("bseg_engine: low part");
  end

  typedef struct packed {
    logic signed [HW-1:0] hi;
    logic [WL-1:0]        lo;
  } lane_t;

  logic signed [47:0] p     [G];
  logic [17:0]        bin   [G];
  logic [17:0]        bcout [G];
  lane_t              hreg  [G][NL];     // high part of each lane, aligned with P
  lane_t              xs    [G][NL];     // sliced lane values at P
  lane_t              xs_r  [G][NL];     // delayed R-1
  lane_t              xs_2r [G];         // lane NI-1 delayed 2R-1

  // input block packing (unsigned, plain concatenation)
  always_comb begin
    bin[0] = '0;
    for (int j = 0; j < NI; j++) bin[0][j * L +: WI] = x[j];
  end

  for (genvar g = 0; g < G; g++) begin : g_dsp
    logic [NK-1:0][WK-1:0] kg;
    logic [47:0]           cin;
    lane_t                 hin [NL];

    always_comb
      for (int i = 0; i < NK; i++)
        kg[i] = (g * NK + NK - 1 - i < KW) ? k[(g * NK + NK - 1 - i) % KW] : '0;

    if (g > 0) begin : g_casc
      delay_line #(.W(18), .DEPTH(R - 1)) u_bdl (
        .clk, .rst, .ce, .din(bcout[g-1]), .dout(bin[g])
      );
    end

    // C-port lanes: offset 2^(L-1) plus the low part of the source lane
    always_comb begin
      cin = '0;
      for (int kk = 0; kk < NL; kk++) begin
        lane_t src;
        logic  has;
        has = 1'b0;
        src = '0;
        if (kk + NI < NL) begin
          has = 1'b1; src = xs_r[g][kk + NI];
        end else if (g > 0 && kk == NK - 1) begin
          has = 1'b1; src = xs_2r[g-1];
        end else if (g > 0 && kk >= NK) begin
          has = 1'b1; src = xs_r[g-1][kk - NK];
        end
        hin[kk] = has ? '{hi: src.hi, lo: '0} : '0;
        cin[kk * L +: L] = L'(1 << (L - 1)) | L'(has ? src.lo : '0);
      end
    end

    packed_dsp #(.N(NK), .W(WK), .L(L), .SIGNED(1'b1)) u_dsp (
      .clk, .rst, .ce,
      .v     (kg),
      .b     (signed'(bin[g])),
      .acc   (1'b0),
      .c     (signed'(cin)),
      .bcout (bcout[g]),
      .p     (p[g])
    );

    // high parts move with their lanes, in step with the P register
    // (hreg holds only .hi; .lo is unused)
    always_ff @(posedge clk)
      if (rst) for (int kk = 0; kk < NL; kk++) hreg[g][kk] <= '0;
      else if (ce) for (int kk = 0; kk < NL; kk++) hreg[g][kk] <= hin[kk];

    // slice each lane: low part stays, high part minus offset joins the counter
    always_comb
      for (int kk = 0; kk < NL; kk++) begin
        logic [L-1:0] lv;
        lv = p[g][kk * L +: L];
        xs[g][kk].lo = lv[WL-1:0];
        xs[g][kk].hi = hreg[g][kk].hi + HW'(lv[L-1:WL]) - HW'(1 << (L - 1 - WL));
      end

    for (genvar kk = 0; kk < NL; kk++) begin : g_dl
      delay_line #(.W(XW), .DEPTH(R - 1)) u_dl (
        .clk, .rst, .ce, .din(xs[g][kk]), .dout(xs_r[g][kk])
      );
    end
    delay_line #(.W(XW), .DEPTH(2 * R - 1)) u_dl2 (
      .clk, .rst, .ce, .din(xs[g][NI-1]), .dout(xs_2r[g])
    );
  end

  always_ff @(posedge clk)
    if (rst) y <= '0;
    else if (ce)
      for (int j = 0; j < NI; j++)
        y[j] <= EW'({xs[G-1][j].hi, xs[G-1][j].lo});

  delay_line #(.W(TAG_W), .DEPTH(LAT)) u_tag (
    .clk, .rst, .ce, .din(in_tag), .dout(out_tag)
  );
endmodule
