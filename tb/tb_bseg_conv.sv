// Self-checking test of the BSEG convolution layer (bseg_conv).
//
// A reduced layer (W_I=21, D=3, C=6 channels, 1x5 kernels, PAR_C=2, so
// R=3 round-robin slots) is loaded with random signed kernels (the most
// negative value in one channel) and fed two frames of random unsigned
// pixels (all 15 in the first). Phase 1 streams without gaps and checks the
// throughput: a frame must take no more than NB_FEED*R cycles plus the
// pipeline latency. Phase 2 inserts random input gaps and output
// back-pressure. Every output is compared with a direct convolution, and
// the number of outputs per frame must be C*(W_I-KW+1).
module tb_bseg_conv;
  localparam int W_I = 21, D = 3, C = 6, KW = 5, PAR_C = 2, R = C / PAR_C;
  localparam int NI = 2, NK = 3, G = 2, EW = 4 + 4 + 1 + $clog2(6), OUT_W = EW + $clog2(D);
  localparam int P_MAX = W_I - KW;
  localparam int NB_FEED = (P_MAX + G * NK - 1) / NI + G;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic k_we;
  logic [2:0] k_ch;
  logic [D-1:0][KW-1:0][3:0] k_data;
  logic [D-1:0][3:0] s_x_tdata;
  logic s_x_tvalid, s_x_tready;
  logic signed [NI-1:0][PAR_C-1:0][OUT_W-1:0] m_y_tdata;
  logic [NI-1:0] m_y_tkeep;
  logic m_y_tvalid, m_y_tready;

  bseg_conv #(.W_I(W_I), .D(D), .C(C), .KW(KW), .PAR_C(PAR_C)) dut (
    .clk, .rst, .k_we, .k_ch, .k_data, .s_x_tdata, .s_x_tvalid, .s_x_tready,
    .m_y_tdata, .m_y_tkeep, .m_y_tvalid, .m_y_tready);

  int kern [C][D][KW];
  int img  [2][W_I][D];
  bit gaps = 0;

  function automatic int sx4(input int v);
    return (v >= 8) ? v - 16 : v;
  endfunction
  function automatic int ref_y(input int f, input int p, input int c);
    int s = 0;
    for (int q = 0; q < KW; q++) for (int d = 0; d < D; d++) s += sx4(kern[c][d][q]) * img[f][p+q][d];
    return s;
  endfunction

  // output checker: beats come block by block, slot by slot
  int frame_o = 0, nout = 0, exp_r = 0, p0 = 0;
  bit in_frame = 0;
  int cyc = 0;
  int cnt_at_end [2];
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (!rst) begin
    m_y_tready <= gaps ? ($urandom_range(0, 2) != 0) : 1'b1;
    if (m_y_tvalid && m_y_tready) begin
      if (!in_frame) begin
        // first beat of a frame: position 0 is the lowest kept lane
        in_frame = 1;
        p0 = 0;
        for (int j = NI - 1; j >= 0; j--) if (m_y_tkeep[j]) p0 = -j;
        exp_r = 0;
      end
      for (int j = 0; j < NI; j++) begin
        bit want;
        want = (p0 + j >= 0) && (p0 + j <= P_MAX);
        checks++;
        if (m_y_tkeep[j] != want) begin
          failures++; $display("keep mismatch p=%0d", p0 + j);
        end
        if (m_y_tkeep[j]) for (int pc = 0; pc < PAR_C; pc++) begin
          int c;
          c = exp_r * PAR_C + pc;
          checks++;
          nout++;
          if (signed'(m_y_tdata[j][pc]) != ref_y(frame_o, p0 + j, c)) begin
            failures++;
            if (failures < 10) $display("f%0d p=%0d c=%0d got %0d exp %0d", frame_o, p0 + j, c,
                                        signed'(m_y_tdata[j][pc]), ref_y(frame_o, p0 + j, c));
          end
        end
      end
      if (exp_r == R - 1) begin
        exp_r = 0;
        if (p0 + NI > P_MAX) begin
          cnt_at_end[frame_o] = nout;
          nout = 0;
          in_frame = 0;
          frame_o <= frame_o + 1;
        end
        p0 += NI;
      end else exp_r++;
    end
  end

  task automatic send_frame(input int f);
    for (int i = 0; i < W_I; i++) begin
      while (gaps && $urandom_range(0, 3) == 0) begin
        s_x_tvalid <= 0; @(posedge clk);
      end
      s_x_tvalid <= 1;
      for (int d = 0; d < D; d++) s_x_tdata[d] <= 4'(img[f][i][d]);
      @(posedge clk);
      while (!s_x_tready) @(posedge clk);
    end
    s_x_tvalid <= 0;
  endtask

  initial begin
    int t0;
    k_we = 0; k_ch = 0; k_data = '0; s_x_tvalid = 0; s_x_tdata = '0; m_y_tready = 1;
    // first position of frame: lane offset of p = 0
    for (int c = 0; c < C; c++) for (int d = 0; d < D; d++) for (int q = 0; q < KW; q++)
      kern[c][d][q] = (c == 0) ? 8 : $urandom_range(0, 15);
    for (int f = 0; f < 2; f++) for (int i = 0; i < W_I; i++) for (int d = 0; d < D; d++)
      img[f][i][d] = (f == 0) ? 15 : $urandom_range(0, 15);
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int c = 0; c < C; c++) begin
      k_we <= 1; k_ch <= 3'(c);
      for (int d = 0; d < D; d++) for (int q = 0; q < KW; q++) k_data[d][q] <= 4'(kern[c][d][q]);
      @(posedge clk);
    end
    k_we <= 0;
    @(posedge clk);
    t0 = cyc;
    send_frame(0);
    wait (frame_o == 1);
    checks++;
    if (cyc - t0 > NB_FEED * R + 20) begin
      failures++; $display("frame took %0d cycles, bound %0d", cyc - t0, NB_FEED * R + 20);
    end
    checks++;
    if (cnt_at_end[0] != C * (P_MAX + 1)) begin
      failures++; $display("frame 0: %0d outputs", cnt_at_end[0]);
    end
    gaps = 1;
    send_frame(1);
    wait (frame_o == 2);
    checks++;
    if (cnt_at_end[1] != C * (P_MAX + 1)) begin
      failures++; $display("frame 1: %0d outputs", cnt_at_end[1]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
