// Pipelined signed adder tree.
//
// Sums N signed inputs of IW bits into one OW-bit result. The tree is
// binary with one register level per stage, so the sum appears
// $clog2(N) enabled cycles after its inputs (one cycle when N = 1); a valid
// bit travels with the data. All registers advance only with ce.
// Used to combine the per-SIMD results of the SDV units and the per-depth
// 1D results of the BSEG engines; its form (binary, fully pipelined) is
// this design's choice.
module adder_tree #(
  parameter int unsigned N  = 8,
  parameter int unsigned IW = 16,
  parameter int unsigned OW = IW + $clog2(N)
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       ce,
  input  logic                       in_valid,
  input  logic signed [N-1:0][IW-1:0] in,
  output logic                       out_valid,
  output logic signed [OW-1:0]       out
);
  localparam int unsigned LV = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned NP = 1 << LV;   // padded leaf count

  logic signed [OW-1:0] lvl [LV+1][NP];
  logic                 vld [LV+1];

  always_comb begin
    for (int i = 0; i < NP; i++) lvl[0][i] = (i < N) ? OW'(signed'(in[i])) : '0;
    vld[0] = in_valid;
  end

  for (genvar s = 0; s < LV; s++) begin : g_lvl
    always_ff @(posedge clk) begin
      if (rst) begin
        vld[s+1] <= 1'b0;
        for (int i = 0; i < NP; i++) lvl[s+1][i] <= '0;
      end else if (ce) begin
        vld[s+1] <= vld[s];
        for (int i = 0; i < (NP >> (s + 1)); i++)
          lvl[s+1][i] <= lvl[s][2*i] + lvl[s][2*i+1];
        for (int i = (NP >> (s + 1)); i < NP; i++)
          lvl[s+1][i] <= '0;
      end
    end
  end

  assign out       = lvl[LV][0];
  assign out_valid = vld[LV];
endmodule
