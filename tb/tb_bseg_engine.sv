// Self-checking test of bseg_engine.
//
// Two engines run side by side on random data with random clock-enable
// gaps: one with the default geometry (WK=WI=4, L=9, NK=3, NI=2, KW=8,
// G=3) and R=1, one with R=3 round-robin slots and a kernel of 5 taps.
// Every output lane whose position has all of its inputs known is compared
// with a direct correlation computed here. The latency (G-1)*R+5 enabled
// cycles is checked through the tag, which carries the cycle index.
module tb_bseg_engine;
  localparam int NB = 120;           // blocks per slot
  localparam int NI = 2, NK = 3;

  logic clk = 0, rst = 1, ce = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // stimulus memories: [slot][input index]
  int xin0 [NB*NI];
  int kk0  [8];
  int xin1 [3][NB*NI];
  int kk1  [3][5];

  logic [NI-1:0][3:0] x0, x1;
  logic [7:0][3:0]    k0;
  logic [4:0][3:0]    k1;
  logic [31:0] tag0_in, tag0_out, tag1_in, tag1_out;
  logic signed [NI-1:0][4+4+1+$clog2(9)-1:0] y0;
  logic signed [NI-1:0][4+4+1+$clog2(6)-1:0] y1;

  bseg_engine #(.KW(8), .R(1), .TAG_W(32)) dut0 (
    .clk, .rst, .ce, .x(x0), .k(k0), .in_tag(tag0_in), .y(y0), .out_tag(tag0_out));
  bseg_engine #(.KW(5), .R(3), .TAG_W(32)) dut1 (
    .clk, .rst, .ce, .x(x1), .k(k1), .in_tag(tag1_in), .y(y1), .out_tag(tag1_out));

  int step = 0;        // enabled-cycle counter
  int ostep = 0;

  function automatic int sx4(input int v);
    return (v >= 8) ? v - 16 : v;
  endfunction

  // expected correlation value
  function automatic int ref0(input int p);
    int s = 0;
    for (int q = 0; q < 8; q++) s += sx4(kk0[q]) * xin0[p + q];
    return s;
  endfunction
  function automatic int ref1(input int r, input int p);
    int s = 0;
    for (int q = 0; q < 5; q++) s += sx4(kk1[r][q]) * xin1[r][p + q];
    return s;
  endfunction

  always_comb begin
    int b0, b1, r1;
    b0 = step;
    r1 = step % 3;
    b1 = step / 3;
    for (int j = 0; j < NI; j++) begin
      x0[j] = (b0 < NB) ? 4'(xin0[b0 * NI + j]) : 4'd0;
      x1[j] = (b1 < NB) ? 4'(xin1[r1][b1 * NI + j]) : 4'd0;
    end
    for (int q = 0; q < 8; q++) k0[q] = 4'(kk0[q]);
    for (int q = 0; q < 5; q++) k1[q] = 4'(kk1[r1][q]);
    tag0_in = step;
    tag1_in = step;
  end

  // output checking
  always @(posedge clk) if (!rst && ce) begin
    ostep <= ostep + 1;
    // engine 0: latency 2*1+5 = 7
    if (ostep >= 7) begin
      int b, p;
      checks++;
      if (tag0_out != ostep - 7) begin
        failures++; $display("tag0 latency mismatch %0d vs %0d", tag0_out, ostep - 7);
      end
      b = tag0_out;
      for (int j = 0; j < NI; j++) begin
        p = b * NI + j + 1 - 9;
        if (p >= 0 && p + 8 <= NB * NI) begin
          checks++;
          if (signed'(y0[j]) != ref0(p)) begin
            failures++;
            if (failures < 10) $display("e0 p=%0d got %0d exp %0d", p, signed'(y0[j]), ref0(p));
          end
        end
      end
    end
    // engine 1: G=2, latency 1*3+5 = 8
    if (ostep >= 8) begin
      int b, r, p;
      checks++;
      if (tag1_out != ostep - 8) begin
        failures++; $display("tag1 latency mismatch");
      end
      r = tag1_out % 3; b = tag1_out / 3;
      for (int j = 0; j < NI; j++) begin
        p = b * NI + j + 1 - 6;
        if (p >= 0 && p + 5 <= NB * NI) begin
          checks++;
          if (signed'(y1[j]) != ref1(r, p)) begin
            failures++;
            if (failures < 10) $display("e1 r=%0d p=%0d got %0d exp %0d", r, p, signed'(y1[j]), ref1(r, p));
          end
        end
      end
    end
  end

  always @(posedge clk) if (!rst && ce) step <= step + 1;

  initial begin
    for (int i = 0; i < NB * NI; i++) begin
      xin0[i] = $urandom_range(0, 15);
      for (int r = 0; r < 3; r++) xin1[r][i] = $urandom_range(0, 15);
    end
    // extreme values first to exercise the guard range
    for (int i = 0; i < 20; i++) xin0[i] = 15;
    for (int q = 0; q < 8; q++) kk0[q] = (q < 4) ? 8 : $urandom_range(0, 15);
    for (int r = 0; r < 3; r++) for (int q = 0; q < 5; q++) kk1[r][q] = $urandom_range(0, 15);
    kk1[0] = '{8, 8, 8, 8, 8};
    for (int i = 0; i < 12; i++) xin1[0][i] = 15;
    repeat (3) @(posedge clk);
    rst <= 0;
    forever begin
      @(posedge clk);
      ce <= ($urandom_range(0, 3) != 0);
      if (step > NB * 3 + 20) break;
    end
    ce <= 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
