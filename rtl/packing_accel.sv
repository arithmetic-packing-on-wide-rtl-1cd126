// DSP-packing accelerator: the two packed-arithmetic operators side by side.
//
//  * An SDV matrix-vector unit (sdv_mvu): N low-precision weights per DSP
//    slice share one activation; lane spill-overs are tracked from product
//    LSBs and corrected. Default: 24x24 matrix of 4-bit signed weights,
//    4-bit unsigned activations, PE=24, SIMD=8, one vector per 3 cycles.
//  * A BSEG convolution layer (bseg_conv): kernel and input elements are
//    both packed, guard-biased lanes carry partial sums through the C port.
//    Default: 1x1500x16 input, 128 kernels of 1x8x16, 4-bit, 8 outputs
//    per cycle on 192 DSP slices.
//
// The two operators have independent AXI-Stream interfaces and share only
// clock and reset; in a FINN dataflow network each would be one layer,
// with the stream adapters and the other layers of the network outside
// this module. Port groups carry the prefix of their operator (mvu_, conv_).
module packing_accel
  import pack_pkg::*;
#(
  // SDV matrix-vector unit
  parameter int unsigned MVU_MW     = 24,
  parameter int unsigned MVU_MH     = 24,
  parameter int unsigned MVU_PE     = 24,
  parameter int unsigned MVU_SIMD   = 8,
  parameter int unsigned MVU_WA     = 4,
  parameter int unsigned MVU_WB     = 4,
  parameter bit          MVU_A_SIGNED = 1'b1,
  parameter bit          MVU_B_SIGNED = 1'b0,
  parameter int unsigned MVU_ACC_W  = MVU_WA + MVU_WB + $clog2(MVU_MW) + 1,
  // BSEG convolution
  parameter int unsigned CONV_W_I   = 1500,
  parameter int unsigned CONV_D     = 16,
  parameter int unsigned CONV_C     = 128,
  parameter int unsigned CONV_KW    = 8,
  parameter int unsigned CONV_WK    = 4,
  parameter int unsigned CONV_WI    = 4,
  parameter int unsigned CONV_L     = 9,
  parameter int unsigned CONV_PAR_C = 4,
  parameter int unsigned CONV_NI    = bseg_fit(DSP_BW, CONV_WI, CONV_L),
  parameter int unsigned CONV_NK    = bseg_fit(DSP_AW, CONV_WK, CONV_L),
  parameter int unsigned CONV_G     = (CONV_KW + CONV_NK - 1) / CONV_NK,
  parameter int unsigned CONV_OUT_W = CONV_WK + CONV_WI + 1 + $clog2(CONV_G * CONV_NK)
                                      + $clog2(CONV_D),
  parameter int unsigned CONV_CHW   = (CONV_C > 1) ? $clog2(CONV_C) : 1
) (
  input  logic clk,
  input  logic rst,
  // matrix-vector unit
  input  logic [MVU_PE-1:0][MVU_SIMD-1:0][MVU_WA-1:0]  mvu_w_tdata,
  input  logic                                        mvu_w_tvalid,
  output logic                                        mvu_w_tready,
  input  logic [MVU_SIMD-1:0][MVU_WB-1:0]             mvu_x_tdata,
  input  logic                                        mvu_x_tvalid,
  output logic                                        mvu_x_tready,
  output logic signed [MVU_PE-1:0][MVU_ACC_W-1:0]     mvu_y_tdata,
  output logic                                        mvu_y_tvalid,
  input  logic                                        mvu_y_tready,
  // convolution layer
  input  logic                                        conv_k_we,
  input  logic [CONV_CHW-1:0]                         conv_k_ch,
  input  logic [CONV_D-1:0][CONV_KW-1:0][CONV_WK-1:0] conv_k_data,
  input  logic [CONV_D-1:0][CONV_WI-1:0]              conv_x_tdata,
  input  logic                                        conv_x_tvalid,
  output logic                                        conv_x_tready,
  output logic signed [CONV_NI-1:0][CONV_PAR_C-1:0][CONV_OUT_W-1:0] conv_y_tdata,
  output logic [CONV_NI-1:0]                          conv_y_tkeep,
  output logic                                        conv_y_tvalid,
  input  logic                                        conv_y_tready
);
  sdv_mvu #(.MW(MVU_MW), .MH(MVU_MH), .PE(MVU_PE), .SIMD(MVU_SIMD), .WA(MVU_WA), .WB(MVU_WB),
            .A_SIGNED(MVU_A_SIGNED), .B_SIGNED(MVU_B_SIGNED), .ACC_W(MVU_ACC_W)) u_mvu (
    .clk, .rst,
    .s_w_tdata (mvu_w_tdata), .s_w_tvalid (mvu_w_tvalid), .s_w_tready (mvu_w_tready),
    .s_x_tdata (mvu_x_tdata), .s_x_tvalid (mvu_x_tvalid), .s_x_tready (mvu_x_tready),
    .m_y_tdata (mvu_y_tdata), .m_y_tvalid (mvu_y_tvalid), .m_y_tready (mvu_y_tready)
  );

  bseg_conv #(.W_I(CONV_W_I), .D(CONV_D), .C(CONV_C), .KW(CONV_KW), .WK(CONV_WK),
              .WI(CONV_WI), .L(CONV_L), .PAR_C(CONV_PAR_C), .NK(CONV_NK), .NI(CONV_NI),
              .G(CONV_G), .OUT_W(CONV_OUT_W), .CHW(CONV_CHW)) u_conv (
    .clk, .rst,
    .k_we (conv_k_we), .k_ch (conv_k_ch), .k_data (conv_k_data),
    .s_x_tdata (conv_x_tdata), .s_x_tvalid (conv_x_tvalid), .s_x_tready (conv_x_tready),
    .m_y_tdata (conv_y_tdata), .m_y_tkeep (conv_y_tkeep), .m_y_tvalid (conv_y_tvalid),
    .m_y_tready (conv_y_tready)
  );
endmodule
