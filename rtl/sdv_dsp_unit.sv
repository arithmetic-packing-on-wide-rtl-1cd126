// One SDV (soft datapath vectorization) compute unit: N multiply-accumulate
// lanes on a single DSP slice.
//
// Each step multiplies N weights w[i], packed into the 27-bit A path, by
// one shared activation x on the B path and accumulates the N products in
// the P register, lane i at bit i*L with L = WA + WB - 1. Signed weights
// are packed by sign splitting and the DSP pre-adder (packed_dsp, D - A).
// In parallel, one LUT per lane forms the two LSBs of w[i]*x, and the spill
// tracker uses them to follow and finally correct the carries that cross
// lane boundaries, so each lane result is exact.
//
// Interface: in_valid qualifies a step; first starts a new accumulation,
// last ends it. A step not marked valid feeds zero operands with
// accumulation on, leaving P unchanged. res_valid pulses with all N
// corrected sums 5 enabled cycles after the last step was presented.
// Everything advances with ce only.
module sdv_dsp_unit
  import pack_pkg::*;
#(
  parameter int unsigned WA       = 4,
  parameter int unsigned WB       = 4,
  parameter bit          A_SIGNED = 1'b1,
  parameter bit          B_SIGNED = 1'b0,
  parameter int unsigned N        = sdv_lanes(WA, WB),
  parameter int unsigned DEPTH    = 64,
  parameter int unsigned L        = sdv_lane(WA, WB),
  parameter int unsigned RW       = L + $clog2(DEPTH) + 3
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        ce,
  input  logic                        in_valid,
  input  logic                        first,
  input  logic                        last,
  input  logic [N-1:0][WA-1:0]        w,
  input  logic [WB-1:0]               x,
  output logic                        res_valid,
  output logic signed [N-1:0][RW-1:0] res
);
  initial assert ((N - 1) * L + WA + 1 <= DSP_AW && WB + 1 <= DSP_BW)
    else $error("sdv_dsp_unit: packing does not fit the DSP");

  logic signed [17:0] bx;
  logic signed [47:0] p;
  logic signed [17:0] bcout_unused;
  logic [N-1:0][1:0]  lsb0;

  assign bx = B_SIGNED ? 18'(signed'(x)) : 18'(x);

  packed_dsp #(.N(N), .W(WA), .L(L), .SIGNED(A_SIGNED)) u_dsp (
    .clk, .rst, .ce,
    .v     (in_valid ? w : '0),
    .b     (bx),
    .acc   (in_valid ? ~first : 1'b1),
    .c     (48'sd0),
    .bcout (bcout_unused),
    .p     (p)
  );

  // fractured-LUT reference: two LSBs of each lane product
  always_comb
    for (int i = 0; i < N; i++) lsb0[i] = 2'(w[i][1:0] * x[1:0]);

  // align the step with the P-stage addition (3 register stages)
  typedef struct packed {
    logic              v;
    logic              first;
    logic              last;
    logic [N-1:0][1:0] lsb;
  } step_t;
  step_t st [3];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < 3; k++) st[k] <= '0;
    end else if (ce) begin
      st[0] <= '{v: in_valid, first: first, last: last, lsb: lsb0};
      st[1] <= st[0];
      st[2] <= st[1];
    end
  end

  sdv_spill_tracker #(.N(N), .L(L), .SIGNED_SPILL(A_SIGNED | B_SIGNED), .DEPTH(DEPTH),
                      .RW(RW)) u_trk (
    .clk, .rst, .ce,
    .upd   (st[2].v),
    .first (st[2].first),
    .last  (st[2].last),
    .lsb   (st[2].lsb),
    .p     (p),
    .res_valid,
    .res
  );
endmodule
