// Full-size run of packing_accel with every parameter at its default.
//
// The matrix-vector unit (24x24 matrix, 4-bit signed weights, 4-bit
// unsigned activations, PE=24, SIMD=8) computes four matrix-vector
// products; the convolution layer (1x1500x16 input, 128 kernels of
// 1x8x16, 4-bit, PAR_C=4, so 32 round-robin slots on 64 engines of three
// DSP slices) is loaded with all kernels and processes one complete frame.
// Every output is checked against a reference computed here, the number
// of convolution outputs must be 128 x 1493, and the frame must finish
// within NB_FEED x 32 cycles plus the pipeline latency, i.e. at eight
// outputs per cycle.
module tb_packing_accel_full;
  // MVU
  localparam int MW = 24, MH = 24, PE = 24, SI = 8, WA = 4, WB = 4;
  localparam int SF = MW / SI, NF = MH / PE, ACC_W = WA + WB + $clog2(MW) + 1;
  localparam int NV = 4;
  // conv
  localparam int W_I = 1500, D = 16, C = 128, KW = 8, PAR_C = 4, R = C / PAR_C;
  localparam int NI = 2, NK = 3, G = (KW + NK - 1) / NK;
  localparam int OUT_W = 4 + 4 + 1 + $clog2(G * NK) + $clog2(D);
  localparam int P_MAX = W_I - KW, NFR = 1;
  localparam int CHW = $clog2(C);
  localparam int NB_FEED = (P_MAX + G * NK - 1) / NI + G;
  int cyc = 0, t_frame_start = 0, t_frame_end = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int done_mvu = 0, done_conv = 0;

  logic [PE-1:0][SI-1:0][WA-1:0] mvu_w_tdata;
  logic mvu_w_tvalid, mvu_w_tready;
  logic [SI-1:0][WB-1:0] mvu_x_tdata;
  logic mvu_x_tvalid, mvu_x_tready;
  logic signed [PE-1:0][ACC_W-1:0] mvu_y_tdata;
  logic mvu_y_tvalid, mvu_y_tready;
  logic conv_k_we;
  logic [CHW-1:0] conv_k_ch;
  logic [D-1:0][KW-1:0][3:0] conv_k_data;
  logic [D-1:0][3:0] conv_x_tdata;
  logic conv_x_tvalid, conv_x_tready;
  logic signed [NI-1:0][PAR_C-1:0][OUT_W-1:0] conv_y_tdata;
  logic [NI-1:0] conv_y_tkeep;
  logic conv_y_tvalid, conv_y_tready;

  packing_accel dut (.*);

  function automatic int sx(input int v, input int w);
    return (v >= (1 << (w - 1))) ? v - (1 << w) : v;
  endfunction

  // ---------------- MVU stimulus and check ----------------
  int wm [NV][MH][MW];
  int xv [NV][MW];
  initial begin
    mvu_w_tvalid = 0; mvu_w_tdata = '0;
    for (int v = 0; v < NV; v++) for (int r = 0; r < MH; r++) for (int c = 0; c < MW; c++) begin
      wm[v][r][c] = (v == 0) ? 8 : (v == 1) ? 7 : $urandom_range(0, 15);
      xv[v][c]    = (v < 2) ? 15 : $urandom_range(0, 15);
    end
    wait (!rst);
    for (int v = 0; v < NV; v++) for (int nf = 0; nf < NF; nf++) for (int sf = 0; sf < SF; sf++) begin
      while (0) begin mvu_w_tvalid <= 0; @(posedge clk); end
      mvu_w_tvalid <= 1;
      for (int pe = 0; pe < PE; pe++) for (int s = 0; s < SI; s++)
        mvu_w_tdata[pe][s] <= 4'(wm[v][nf * PE + pe][sf * SI + s]);
      @(posedge clk);
      while (!mvu_w_tready) @(posedge clk);
    end
    mvu_w_tvalid <= 0;
  end
  initial begin
    mvu_x_tvalid = 0; mvu_x_tdata = '0;
    wait (!rst);
    for (int v = 0; v < NV; v++) for (int sf = 0; sf < SF; sf++) begin
      while (0) begin mvu_x_tvalid <= 0; @(posedge clk); end
      mvu_x_tvalid <= 1;
      for (int s = 0; s < SI; s++) mvu_x_tdata[s] <= 4'(xv[v][sf * SI + s]);
      @(posedge clk);
      while (!mvu_x_tready) @(posedge clk);
    end
    mvu_x_tvalid <= 0;
  end
  int ov = 0, onf = 0;
  always @(posedge clk) begin
    mvu_y_tready <= 1'b1;
    if (!rst && mvu_y_tvalid && mvu_y_tready && ov < NV) begin
      for (int pe = 0; pe < PE; pe++) begin
        int e;
        e = 0;
        for (int c = 0; c < MW; c++) e += sx(wm[ov][onf * PE + pe][c], WA) * xv[ov][c];
        checks++;
        if (int'(signed'(mvu_y_tdata[pe])) != e) begin
          failures++;
          if (failures < 10) $display("mvu v%0d row %0d: %0d exp %0d", ov, onf * PE + pe,
                                      signed'(mvu_y_tdata[pe]), e);
        end
      end
      if (onf == NF - 1) begin onf = 0; ov++; if (ov == NV) done_mvu = 1; end
      else onf++;
    end
  end

  // ---------------- conv stimulus and check ----------------
  int kern [C][D][KW];
  int img  [NFR][W_I][D];
  function automatic int ref_y(input int f, input int p, input int c);
    int s = 0;
    for (int q = 0; q < KW; q++) for (int d = 0; d < D; d++) s += sx(kern[c][d][q], 4) * img[f][p + q][d];
    return s;
  endfunction

  initial begin
    conv_k_we = 0; conv_k_ch = '0; conv_k_data = '0; conv_x_tvalid = 0; conv_x_tdata = '0;
    for (int c = 0; c < C; c++) for (int d = 0; d < D; d++) for (int q = 0; q < KW; q++)
      kern[c][d][q] = (c == 0) ? 8 : $urandom_range(0, 15);
    for (int f = 0; f < NFR; f++) for (int i = 0; i < W_I; i++) for (int d = 0; d < D; d++)
      img[f][i][d] = (i < 40) ? 15 : $urandom_range(0, 15);
    wait (!rst);
    for (int c = 0; c < C; c++) begin
      conv_k_we <= 1; conv_k_ch <= CHW'(c);
      for (int d = 0; d < D; d++) for (int q = 0; q < KW; q++) conv_k_data[d][q] <= 4'(kern[c][d][q]);
      @(posedge clk);
    end
    conv_k_we <= 0;
    t_frame_start = cyc;
    for (int f = 0; f < NFR; f++) begin
      for (int i = 0; i < W_I; i++) begin
        while (0) begin conv_x_tvalid <= 0; @(posedge clk); end
        conv_x_tvalid <= 1;
        for (int d = 0; d < D; d++) conv_x_tdata[d] <= 4'(img[f][i][d]);
        @(posedge clk);
        while (!conv_x_tready) @(posedge clk);
      end
      conv_x_tvalid <= 0;
    end
  end

  int frame_o = 0, exp_r = 0, p0 = 0, nout = 0;
  bit in_frame = 0;
  always @(posedge clk) begin
    conv_y_tready <= 1'b1;
    if (!rst && conv_y_tvalid && conv_y_tready && frame_o < NFR) begin
      if (!in_frame) begin
        in_frame = 1; exp_r = 0; p0 = 0;
        for (int j = NI - 1; j >= 0; j--) if (conv_y_tkeep[j]) p0 = -j;
      end
      for (int j = 0; j < NI; j++) begin
        checks++;
        if (conv_y_tkeep[j] != ((p0 + j >= 0) && (p0 + j <= P_MAX))) failures++;
        if (conv_y_tkeep[j]) for (int pc = 0; pc < PAR_C; pc++) begin
          checks++; nout++;
          if (int'(signed'(conv_y_tdata[j][pc])) != ref_y(frame_o, p0 + j, exp_r * PAR_C + pc)) begin
            failures++;
            if (failures < 10) $display("conv f%0d p%0d c%0d: %0d exp %0d", frame_o, p0 + j,
              exp_r * PAR_C + pc, signed'(conv_y_tdata[j][pc]), ref_y(frame_o, p0 + j, exp_r * PAR_C + pc));
          end
        end
      end
      if (exp_r == R - 1) begin
        exp_r = 0;
        if (p0 + NI > P_MAX) begin
          checks++;
          if (nout != C * (P_MAX + 1)) begin failures++; $display("frame %0d: %0d outputs", frame_o, nout); end
          nout = 0; in_frame = 0; frame_o++;
          if (frame_o == NFR) begin done_conv = 1; t_frame_end = cyc; end
        end
        p0 += NI;
      end else exp_r++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    wait (done_mvu && done_conv);
    checks++;
    if (t_frame_end - t_frame_start > NB_FEED * R + (G - 1) * R + 40) begin
      failures++;
      $display("frame took %0d cycles, expected at most %0d", t_frame_end - t_frame_start, NB_FEED * R + (G - 1) * R + 40);
    end
    $display("frame: %0d cycles for %0d outputs", t_frame_end - t_frame_start, C * (P_MAX + 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired: mvu %0d conv %0d", done_mvu, done_conv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
