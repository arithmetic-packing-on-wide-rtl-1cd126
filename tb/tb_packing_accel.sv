// End-to-end test of packing_accel at reduced sizes.
//
// Both operators run at once. The matrix-vector unit (12x12 matrix,
// PE=6, SIMD=3, so two row folds) computes NV random products with random
// input gaps and output back-pressure; the convolution layer (1x21x3
// input, 6 kernels of 1x5x3, PAR_C=2, R=3 slots) processes two frames with
// a pause between them, random input gaps and back-pressure. All results
// are checked against references computed here.
//
// The mechanisms of the design are counted and each must occur:
//   SDV:  positive and negative lane spill-overs corrected by the tracker,
//         row-fold replay of the vector buffer, output stall;
//   BSEG: a non-zero high part sliced off a guard-biased lane, input
//         starvation stall, idle periods between frames, output stall,
//         output beats with only part of their positions valid.
module tb_packing_accel;
  // MVU
  localparam int MW = 12, MH = 12, PE = 6, SI = 3, WA = 4, WB = 4;
  localparam int SF = MW / SI, NF = MH / PE, ACC_W = WA + WB + $clog2(MW) + 1;
  localparam int NV = 10;
  // conv
  localparam int W_I = 21, D = 3, C = 6, KW = 5, PAR_C = 2, R = C / PAR_C;
  localparam int NI = 2, NK = 3, G = (KW + NK - 1) / NK;
  localparam int OUT_W = 4 + 4 + 1 + $clog2(G * NK) + $clog2(D);
  localparam int P_MAX = W_I - KW, NFR = 2;
  localparam int CHW = $clog2(C);

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

  packing_accel #(
    .MVU_MW(MW), .MVU_MH(MH), .MVU_PE(PE), .MVU_SIMD(SI),
    .CONV_W_I(W_I), .CONV_D(D), .CONV_C(C), .CONV_KW(KW), .CONV_PAR_C(PAR_C)
  ) dut (.*);

  function automatic int sx(input int v, input int w);
    return (v >= (1 << (w - 1))) ? v - (1 << w) : v;
  endfunction

  // ---------------- mechanism counters ----------------
  int n_spill_pos = 0, n_spill_neg = 0, n_replay = 0, n_mvu_stall = 0;
  int n_hi = 0, n_starve = 0, n_idle = 0, n_conv_stall = 0, n_partial = 0;

  for (genvar s = 0; s < SI; s++) begin : g_spy
    always @(posedge clk) if (!rst && dut.u_mvu.ce && dut.u_mvu.g_grp[0].g_col[s].u_unit.u_trk.v4)
      for (int i = 0; i < 3; i++) begin
        automatic logic signed [7:0] b, n;
        b = dut.u_mvu.g_grp[0].g_col[s].u_unit.u_trk.first4 ? 8'sd0 :
            8'(dut.u_mvu.g_grp[0].g_col[s].u_unit.u_trk.s_q[i]);
        n = 8'(dut.u_mvu.g_grp[0].g_col[s].u_unit.u_trk.s_new[i]);
        if (n > b) n_spill_pos++;
        if (n < b) n_spill_neg++;
      end
  end
  always @(posedge clk) if (!rst) begin
    if (dut.u_mvu.fire && dut.u_mvu.use_buf) n_replay++;
    if (mvu_y_tvalid && !mvu_y_tready) n_mvu_stall++;
    if (dut.u_conv.ce && dut.u_conv.g_ch[0].g_d[0].g_tag.u_eng.xs[0][0].hi != 0) n_hi++;
    if (!dut.u_conv.run) n_starve++;
    if (dut.u_conv.ce && dut.u_conv.slot == 0 && !dut.u_conv.real_now) n_idle++;
    if (conv_y_tvalid && !conv_y_tready) n_conv_stall++;
    if (conv_y_tvalid && conv_y_tready && conv_y_tkeep != '1) n_partial++;
  end

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
      while ($urandom_range(0, 4) == 0) begin mvu_w_tvalid <= 0; @(posedge clk); end
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
      while ($urandom_range(0, 4) == 0) begin mvu_x_tvalid <= 0; @(posedge clk); end
      mvu_x_tvalid <= 1;
      for (int s = 0; s < SI; s++) mvu_x_tdata[s] <= 4'(xv[v][sf * SI + s]);
      @(posedge clk);
      while (!mvu_x_tready) @(posedge clk);
    end
    mvu_x_tvalid <= 0;
  end
  int ov = 0, onf = 0;
  always @(posedge clk) begin
    mvu_y_tready <= ($urandom_range(0, 3) != 0);
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
      img[f][i][d] = (f == 0) ? 15 : $urandom_range(0, 15);
    wait (!rst);
    for (int c = 0; c < C; c++) begin
      conv_k_we <= 1; conv_k_ch <= CHW'(c);
      for (int d = 0; d < D; d++) for (int q = 0; q < KW; q++) conv_k_data[d][q] <= 4'(kern[c][d][q]);
      @(posedge clk);
    end
    conv_k_we <= 0;
    for (int f = 0; f < NFR; f++) begin
      for (int i = 0; i < W_I; i++) begin
        while ($urandom_range(0, 3) == 0) begin conv_x_tvalid <= 0; @(posedge clk); end
        conv_x_tvalid <= 1;
        for (int d = 0; d < D; d++) conv_x_tdata[d] <= 4'(img[f][i][d]);
        @(posedge clk);
        while (!conv_x_tready) @(posedge clk);
      end
      conv_x_tvalid <= 0;
      repeat (150) @(posedge clk);    // pause between frames
    end
  end

  int frame_o = 0, exp_r = 0, p0 = 0, nout = 0;
  bit in_frame = 0;
  always @(posedge clk) begin
    conv_y_tready <= ($urandom_range(0, 3) != 0);
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
          if (frame_o == NFR) done_conv = 1;
        end
        p0 += NI;
      end else exp_r++;
    end
  end

  task automatic need(input string name, input int n);
    checks++;
    $display("mechanism %-28s %0d", name, n);
    if (n == 0) begin failures++; $display("  never happened: %s", name); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    wait (done_mvu && done_conv);
    need("sdv positive spill-over", n_spill_pos);
    need("sdv negative spill-over", n_spill_neg);
    need("sdv row-fold replay", n_replay);
    need("sdv output stall", n_mvu_stall);
    need("bseg high part sliced", n_hi);
    need("bseg input starvation", n_starve);
    need("bseg idle period", n_idle);
    need("bseg output stall", n_conv_stall);
    need("bseg partial beat", n_partial);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired: mvu %0d conv %0d", done_mvu, done_conv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
