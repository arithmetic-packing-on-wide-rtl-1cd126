// Matrix-vector unit built from SDV-packed DSP slices.
//
// Computes y = W x for an MH x MW matrix of WA-bit weights and an MW-element
// vector of WB-bit activations, with FINN-style folding: PE rows and SIMD
// columns are processed per cycle, so a vector takes SF = MW/SIMD steps for
// each of the NF = MH/PE row folds. The PE rows of one fold are packed N to
// a DSP (N = lanes that fit the 27-bit A path), giving ceil(PE/N) x SIMD
// sdv_dsp_unit instances. Unit (g, s) multiplies the weights of rows
// g*N..g*N+N-1 in column s by activation x[s] and accumulates over the SF
// steps; its corrected lane sums are then added over s by one pipelined
// adder tree per row.
//
// Streams (AXI-Stream valid/ready): s_w carries one PE x SIMD weight tile
// per step, w[pe][s] = W[nf*PE+pe][sf*SIMD+s]; s_x carries the SIMD
// activations of step sf and is read during the first row fold only, a
// vector buffer replays it for the other folds; m_y carries PE results per
// fold, y[pe] = row nf*PE+pe. A stalled output freezes the whole pipeline
// (ce low). Latency from the last step of a fold to its m_y beat:
// 5 + $clog2(SIMD) cycles.
//
// The packing, the LSB tracking and the PE/SIMD terms follow the SDV
// architecture; streamed weights, the replay buffer and the freeze-on-stall
// flow control are this design's choices.
module sdv_mvu
  import pack_pkg::*;
#(
  parameter int unsigned MW       = 24,
  parameter int unsigned MH       = 24,
  parameter int unsigned PE       = 24,
  parameter int unsigned SIMD     = 8,
  parameter int unsigned WA       = 4,
  parameter int unsigned WB       = 4,
  parameter bit          A_SIGNED = 1'b1,
  parameter bit          B_SIGNED = 1'b0,
  parameter int unsigned ACC_W    = WA + WB + $clog2(MW) + 1
) (
  input  logic                           clk,
  input  logic                           rst,
  input  logic [PE-1:0][SIMD-1:0][WA-1:0] s_w_tdata,
  input  logic                           s_w_tvalid,
  output logic                           s_w_tready,
  input  logic [SIMD-1:0][WB-1:0]        s_x_tdata,
  input  logic                           s_x_tvalid,
  output logic                           s_x_tready,
  output logic signed [PE-1:0][ACC_W-1:0] m_y_tdata,
  output logic                           m_y_tvalid,
  input  logic                           m_y_tready
);
  localparam int unsigned N   = sdv_lanes(WA, WB);
  localparam int unsigned L   = sdv_lane(WA, WB);
  localparam int unsigned NG  = (PE + N - 1) / N;
  localparam int unsigned SF  = MW / SIMD;
  localparam int unsigned NF  = MH / PE;
  localparam int unsigned RW  = L + $clog2(SF + 1) + 3;
  localparam int unsigned SFW = (SF > 1) ? $clog2(SF) : 1;
  localparam int unsigned NFW = (NF > 1) ? $clog2(NF) : 1;

  initial assert (MW % SIMD == 0 && MH % PE == 0) else $error("sdv_mvu: folding must divide");

  logic ce, fire, first, last, use_buf;
  logic [SFW-1:0] sf_q;
  logic [NFW-1:0] nf_q;
  logic [SIMD-1:0][WB-1:0] xbuf [SF];
  logic [SIMD-1:0][WB-1:0] x_cur;

  assign ce         = ~(m_y_tvalid & ~m_y_tready);
  assign use_buf    = (nf_q != '0);
  assign fire       = ce & s_w_tvalid & (use_buf | s_x_tvalid);
  assign s_w_tready = ce & (use_buf | s_x_tvalid);
  assign s_x_tready = ce & s_w_tvalid & ~use_buf;
  assign first      = (sf_q == '0);
  assign last       = (sf_q == SFW'(SF - 1));
  assign x_cur      = use_buf ? xbuf[sf_q] : s_x_tdata;

  always_ff @(posedge clk) begin
    if (rst) begin
      sf_q <= '0;
      nf_q <= '0;
    end else if (fire) begin
      if (!use_buf) xbuf[sf_q] <= s_x_tdata;
      if (last) begin
        sf_q <= '0;
        nf_q <= (nf_q == NFW'(NF - 1)) ? '0 : nf_q + 1'b1;
      end else begin
        sf_q <= sf_q + 1'b1;
      end
    end
  end

  // unit array: group g of N rows, column s
  logic signed [N-1:0][RW-1:0] ures [NG][SIMD];
  logic                        uvld [NG][SIMD];

  for (genvar g = 0; g < NG; g++) begin : g_grp
    for (genvar s = 0; s < SIMD; s++) begin : g_col
      logic [N-1:0][WA-1:0] wl;
      always_comb
        for (int i = 0; i < N; i++)
          wl[i] = (g * N + i < PE) ? s_w_tdata[(g * N + i) % PE][s] : '0;
      sdv_dsp_unit #(.WA(WA), .WB(WB), .A_SIGNED(A_SIGNED), .B_SIGNED(B_SIGNED), .N(N),
                     .DEPTH(SF + 1), .RW(RW)) u_unit (
        .clk, .rst, .ce,
        .in_valid  (fire),
        .first, .last,
        .w         (wl),
        .x         (x_cur[s]),
        .res_valid (uvld[g][s]),
        .res       (ures[g][s])
      );
    end
  end

  // SIMD reduction per row
  logic [PE-1:0] tvld;
  for (genvar pe = 0; pe < PE; pe++) begin : g_row
    logic signed [SIMD-1:0][RW-1:0] col;
    always_comb
      for (int s = 0; s < SIMD; s++) col[s] = ures[pe / N][s][pe % N];
    adder_tree #(.N(SIMD), .IW(RW), .OW(ACC_W)) u_tree (
      .clk, .rst, .ce,
      .in_valid  (uvld[pe / N][0]),
      .in        (col),
      .out_valid (tvld[pe]),
      .out       (m_y_tdata[pe])
    );
  end

  assign m_y_tvalid = tvld[0];
endmodule
