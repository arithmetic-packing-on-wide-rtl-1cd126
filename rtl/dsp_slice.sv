// Behaviour of a DSP48E2-class DSP slice, written as inferable RTL.
//
// Datapath (all signed): AD = D -/+ A (27-bit pre-adder), M = AD * B
// (27x18 multiplier), P = M + C + (acc ? P : 0) (48-bit adder/accumulator).
// Pipeline: input registers (A, D, B, control), AD register (with a second
// B register), M register and P register, so a product reaches P four
// enabled cycles after its operands are presented. The C operand is not
// registered: it is added in the same cycle it is presented to the P adder,
// which lets a fabric feedback path use P as soon as it is produced.
// The B cascade output bcout is the B value after the input register, as
// the dedicated BCOUT path of the real slice. All registers advance only
// when ce is high; rst clears them.
//
// This models the function of the vendor primitive the packing schemes run
// on; the register choice (AREG=DREG=BREG=1, ADREG=1, MREG=1, PREG=1,
// CREG=0) is this design's.
module dsp_slice #(
  parameter bit PREADD_SUB = 1'b1   // 1: AD = D - A, 0: AD = D + A
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               ce,
  input  logic signed [26:0] a,
  input  logic signed [26:0] d,
  input  logic signed [17:0] b,
  input  logic               acc,    // add P to the product (with the operands)
  input  logic signed [47:0] c,     // added at the P stage, unregistered
  output logic signed [17:0] bcout,
  output logic signed [47:0] p
);
  logic signed [26:0] a1, d1, ad2;
  logic signed [17:0] b1, b2;
  logic signed [44:0] m3;
  logic               acc1, acc2, acc3;

  always_ff @(posedge clk) begin
    if (rst) begin
      a1 <= '0; d1 <= '0; b1 <= '0; b2 <= '0; ad2 <= '0; m3 <= '0;
      acc1 <= 1'b0; acc2 <= 1'b0; acc3 <= 1'b0; p <= '0;
    end else if (ce) begin
      a1   <= a;
      d1   <= d;
      b1   <= b;
      acc1 <= acc;
      ad2  <= PREADD_SUB ? (d1 - a1) : (d1 + a1);
      b2   <= b1;
      acc2 <= acc1;
      m3   <= ad2 * b2;
      acc3 <= acc2;
      p    <= 48'(m3) + c + (acc3 ? p : 48'sd0);
    end
  end

  assign bcout = b1;
endmodule
