// Spill-over tracker and result correction for one SDV-packed accumulator.
//
// The DSP accumulates N packed lanes of L bits in its 48-bit P register.
// Carries and borrows between lanes are not prevented; they are observed.
// A fabric reference keeps, per lane, the sum of the products' two LSBs
// modulo 4 (lsb, one fractured LUT per product upstream). Because
// 2^L = 0 mod 4, the two LSBs of lane i+1 in P equal its reference plus
// the total spill S_i received from lane i, modulo 4. With L = wa + wb - 1
// a single accumulation step changes S_i by at most a range of three
// values ([-1:1] signed, [0:2] unsigned), so the change since the previous
// step is recovered exactly from its remainder class and summed into a
// wider external spill counter. At the end of an accumulation the lane
// results are completed and corrected:
//     res_i = 2^L * S_i + R_i - S_(i-1)     (lanes below the top)
//     res_top = signed(P[47:(N-1)L]) - S_(N-2)
//
// Timing: a step presented on upd (with first/last and its product LSBs)
// in the cycle in which its product is added into P (P holds the new sum
// from the next cycle). The spill counters update in the cycle after, and
// res/res_valid appear one cycle after the P register holds the final sum
// of a step marked last. All state advances only with ce.
//
// The tracking principle and the correction formula follow the SDV scheme;
// the counter widths (DEPTH) and the pipelining are this design's.
module sdv_spill_tracker #(
  parameter int unsigned N          = 4,
  parameter int unsigned L          = 7,
  parameter bit          SIGNED_SPILL = 1'b1,  // any operand signed
  parameter int unsigned DEPTH      = 64,      // max steps per accumulation
  parameter int unsigned SW         = $clog2(DEPTH) + 3,
  parameter int unsigned RW         = L + SW
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       ce,
  input  logic                       upd,
  input  logic                       first,
  input  logic                       last,
  input  logic [N-1:0][1:0]          lsb,
  input  logic [47:0]                p,
  output logic                       res_valid,
  output logic signed [N-1:0][RW-1:0] res
);
  localparam int unsigned TOPW = 48 - (N - 1) * L;

  logic [N-1:0][1:0]          ref_q;
  logic                       v4, first4, last4;
  logic signed [SW-1:0]       s_q   [N];     // S_i for i < N-1 (index N-1 unused)
  logic signed [SW-1:0]       s_new [N];

  // reference accumulation, aligned with the P update
  always_ff @(posedge clk) begin
    if (rst) begin
      ref_q <= '0; v4 <= 1'b0; first4 <= 1'b0; last4 <= 1'b0;
    end else if (ce) begin
      v4     <= upd;
      first4 <= first;
      last4  <= last;
      if (upd)
        for (int i = 0; i < N; i++)
          ref_q[i] <= first ? lsb[i] : 2'(ref_q[i] + lsb[i]);
    end
  end

  // spill detection from the remainder class of the next lane's LSBs
  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic [1:0] ds;
      logic signed [SW-1:0] base, inc;
      s_new[i] = '0;
      if (i < N - 1) begin
        base = first4 ? '0 : s_q[i];
        ds   = 2'(p[(i + 1) * L +: 2] - ref_q[i + 1] - 2'(base));
        inc  = SIGNED_SPILL ? SW'(signed'(ds)) : SW'(ds);
        s_new[i] = base + inc;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < N; i++) s_q[i] <= '0;
      res_valid <= 1'b0;
      res       <= '0;
    end else if (ce) begin
      res_valid <= v4 & last4;
      if (v4) for (int i = 0; i < N; i++) s_q[i] <= s_new[i];
      if (v4 & last4) begin
        for (int i = 0; i < N; i++) begin
          logic signed [RW-1:0] lo_s, hi;
          lo_s = (i == 0) ? '0 : RW'(s_new[i - 1]);
          if (i < N - 1) hi = RW'({s_new[i], p[i * L +: L]});
          else           hi = RW'(signed'(p[47 -: TOPW]));
          res[i] <= hi - lo_s;
        end
      end
    end
  end
endmodule
