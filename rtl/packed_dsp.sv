// DSP slice with a sign-split packed multiplicand.
//
// N values of W bits are packed into the 27-bit multiplicand of one DSP
// slice, element i in the lane starting at bit i*L (element 0 lowest), and
// multiplied by the 18-bit operand b, so that
//     P = sum_i 2^(i*L) * v_i * b + c (+ P when acc).
// For signed elements the sign bit, which carries the weight -2^(W-1), is
// cut off: the W-1 magnitude bits of every element are concatenated into
// the pre-adder's D word, all sign bits are collected at their own bit
// positions into the A word, and the slice's pre-adder forms D - A, the
// arithmetic sum of all (possibly negative) elements, with no fabric
// adder. Unsigned elements are simply concatenated into D and A is zero.
//
// Interface and timing are those of dsp_slice: v, b and acc are taken
// together; their product reaches p four enabled cycles later; c is added
// unregistered at the P stage; bcout is b after the input register.
//
// The sign-splitting method is the one of the packing scheme; the lane
// order and the register configuration (inherited from dsp_slice) are this
// design's.
module packed_dsp
  import pack_pkg::*;
#(
  parameter int unsigned N      = 4,
  parameter int unsigned W      = 4,
  parameter int unsigned L      = 7,
  parameter bit          SIGNED = 1'b1
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                ce,
  input  logic [N-1:0][W-1:0] v,
  input  logic signed [17:0]  b,
  input  logic                acc,
  input  logic signed [47:0]  c,
  output logic signed [17:0]  bcout,
  output logic signed [47:0]  p
);
  initial begin
    assert ((N - 1) * L + W + 1 <= DSP_AW) else $error("packed_dsp: lanes do not fit");
    assert (L >= W) else $error("packed_dsp: lane narrower than element");
  end

  logic [DSP_AW-1:0] d, a;

  always_comb begin
    d = '0;
    a = '0;
    for (int i = 0; i < N; i++) begin
      if (SIGNED) begin
        for (int k = 0; k < W - 1; k++) d[i * L + k] = v[i][k];
        a[i * L + W - 1] = v[i][W - 1];
      end else begin
        for (int k = 0; k < W; k++) d[i * L + k] = v[i][k];
      end
    end
  end

  dsp_slice #(.PREADD_SUB(1'b1)) u_dsp (
    .clk, .rst, .ce,
    .a(signed'(a)), .d(signed'(d)), .b, .acc, .c, .bcout, .p
  );
endmodule
