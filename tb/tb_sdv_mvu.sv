// Self-checking test of the SDV matrix-vector unit (sdv_mvu).
//
// Configuration 0 is the default unit (24x24 matrix, 4-bit signed weights,
// 4-bit unsigned activations, PE=24, SIMD=8) fed back-to-back; it must
// accept one vector every MW/SIMD = 3 cycles and its first result must
// appear 5 + log2(SIMD) cycles after the last step. Configuration 1
// (12x12 matrix, PE=6, SIMD=3, 3-bit x 5-bit, both signed) has two row folds,
// so the vector buffer is replayed, and a partly used DSP; it runs with
// random input gaps and output back-pressure. Every result is compared
// with y = W x computed here; extreme operands come first.
module tb_sdv_mvu;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int done = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  localparam int NV = 12;     // vectors per configuration

  localparam int MW  [2] = '{24, 12};
  localparam int MH  [2] = '{24, 12};
  localparam int PE  [2] = '{24, 6};
  localparam int SI  [2] = '{8, 3};
  localparam int WA  [2] = '{4, 3};
  localparam int WB  [2] = '{4, 5};
  localparam bit AS  [2] = '{1, 1};
  localparam bit BS  [2] = '{0, 1};

  function automatic int sval(input int v, input int wd, input bit s);
    return (s && v >= (1 << (wd - 1))) ? v - (1 << wd) : v;
  endfunction

  for (genvar u = 0; u < 2; u++) begin : g_cfg
    localparam int SF = MW[u] / SI[u];
    localparam int NF = MH[u] / PE[u];
    localparam int ACC_W = WA[u] + WB[u] + $clog2(MW[u]) + 1;
    logic [PE[u]-1:0][SI[u]-1:0][WA[u]-1:0] w_tdata;
    logic w_tvalid, w_tready;
    logic [SI[u]-1:0][WB[u]-1:0] x_tdata;
    logic x_tvalid, x_tready;
    logic signed [PE[u]-1:0][ACC_W-1:0] y_tdata;
    logic y_tvalid, y_tready;

    sdv_mvu #(.MW(MW[u]), .MH(MH[u]), .PE(PE[u]), .SIMD(SI[u]), .WA(WA[u]), .WB(WB[u]),
              .A_SIGNED(AS[u]), .B_SIGNED(BS[u])) dut (
      .clk, .rst, .s_w_tdata(w_tdata), .s_w_tvalid(w_tvalid), .s_w_tready(w_tready),
      .s_x_tdata(x_tdata), .s_x_tvalid(x_tvalid), .s_x_tready(x_tready),
      .m_y_tdata(y_tdata), .m_y_tvalid(y_tvalid), .m_y_tready(y_tready));

    int wm [NV][MH[u]][MW[u]];
    int xv [NV][MW[u]];
    int t_first_x = -1, t_last_x = -1, t_first_y = -1;

    // weight driver: one tile per step, vector v, fold nf, step sf
    initial begin
      w_tvalid = 0; w_tdata = '0;
      for (int v = 0; v < NV; v++)
        for (int r = 0; r < MH[u]; r++)
          for (int c = 0; c < MW[u]; c++) begin
            wm[v][r][c] = (v == 0) ? (1 << (WA[u] - 1)) : $urandom_range(0, (1 << WA[u]) - 1);
            xv[v][c]    = (v == 0) ? (BS[u] ? (1 << (WB[u] - 1)) : (1 << WB[u]) - 1)
                                   : $urandom_range(0, (1 << WB[u]) - 1);
          end
      wait (!rst);
      @(posedge clk);
      for (int v = 0; v < NV; v++)
        for (int nf = 0; nf < NF; nf++)
          for (int sf = 0; sf < SF; sf++) begin
            while (u == 1 && $urandom_range(0, 3) == 0) begin
              w_tvalid <= 0; @(posedge clk);
            end
            w_tvalid <= 1;
            for (int pe = 0; pe < PE[u]; pe++)
              for (int s = 0; s < SI[u]; s++)
                w_tdata[pe][s] <= WA[u]'(wm[v][nf * PE[u] + pe][sf * SI[u] + s]);
            @(posedge clk);
            while (!w_tready) @(posedge clk);
          end
      w_tvalid <= 0;
    end

    // activation driver: SF beats per vector
    initial begin
      x_tvalid = 0; x_tdata = '0;
      wait (!rst);
      @(posedge clk);
      for (int v = 0; v < NV; v++)
        for (int sf = 0; sf < SF; sf++) begin
          while (u == 1 && $urandom_range(0, 3) == 0) begin
            x_tvalid <= 0; @(posedge clk);
          end
          x_tvalid <= 1;
          for (int s = 0; s < SI[u]; s++) x_tdata[s] <= WB[u]'(xv[v][sf * SI[u] + s]);
          @(posedge clk);
          while (!x_tready) @(posedge clk);
          if (v == 0 && sf == 0) t_first_x = cyc;
          if (v == NV - 1 && sf == SF - 1) t_last_x = cyc;
        end
      x_tvalid <= 0;
    end

    // checker
    int ov = 0, onf = 0;
    always @(posedge clk) begin
      y_tready <= (u == 1) ? ($urandom_range(0, 2) != 0) : 1'b1;
      if (!rst && y_tvalid && y_tready && ov < NV) begin
        if (t_first_y < 0) t_first_y = cyc;
        for (int pe = 0; pe < PE[u]; pe++) begin
          longint e;
          e = 0;
          for (int c = 0; c < MW[u]; c++)
            e += sval(wm[ov][onf * PE[u] + pe][c], WA[u], AS[u]) * sval(xv[ov][c], WB[u], BS[u]);
          checks++;
          if (longint'(signed'(y_tdata[pe])) != e) begin
            failures++;
            if (failures < 10) $display("cfg%0d v%0d row%0d got %0d exp %0d", u, ov,
                                        onf * PE[u] + pe, signed'(y_tdata[pe]), e);
          end
        end
        if (onf == NF - 1) begin
          onf = 0;
          ov++;
          if (ov == NV) done++;
        end else onf++;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    wait (done == 2);
    // throughput and latency of the default unit
    checks++;
    if (g_cfg[0].t_last_x - g_cfg[0].t_first_x != NV * 3 - 1) begin
      failures++;
      $display("cfg0: %0d cycles for %0d vectors", g_cfg[0].t_last_x - g_cfg[0].t_first_x + 1, NV);
    end
    checks++;
    if (g_cfg[0].t_first_y - (g_cfg[0].t_first_x + 2) != 5 + 3) begin
      failures++;
      $display("cfg0: latency %0d", g_cfg[0].t_first_y - (g_cfg[0].t_first_x + 2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
