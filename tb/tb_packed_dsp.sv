// Self-checking test of packed_dsp.
//
// Two instances: 4 signed lanes of 4 bits at L = 7 (the SDV weight
// layout) and 3 unsigned lanes of 5 bits at L = 9. Lane values are first
// all combinations of the most negative and most positive values, then
// random, multiplied by random signed B operands, with random C operands,
// accumulation flags and clock-enable gaps. Each P value must equal
// sum_i 2^(i*L) * v_i * b + c (+ previous P), computed here, exactly four
// enabled cycles after the operands; bcout must be b one enabled cycle
// later.
module tb_packed_dsp;
  logic clk = 0, rst = 1, ce = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0][3:0]    v0;
  logic [2:0][4:0]    v1;
  logic signed [17:0] b, bc0, bc1;
  logic signed [47:0] c, p0, p1;
  logic               acc;

  packed_dsp #(.N(4), .W(4), .L(7), .SIGNED(1'b1)) dut0 (
    .clk, .rst, .ce, .v(v0), .b, .acc, .c, .bcout(bc0), .p(p0)
  );
  packed_dsp #(.N(3), .W(5), .L(9), .SIGNED(1'b0)) dut1 (
    .clk, .rst, .ce, .v(v1), .b, .acc, .c, .bcout(bc1), .p(p1)
  );

  // operands sampled per enabled cycle: products and flags
  longint m0 [$], m1 [$], cq [$];
  bit     aq [$];
  longint bq [$];
  longint e0 = 0, e1 = 0;

  initial begin
    v0 = '0; v1 = '0; b = '0; c = '0; acc = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 800; n++) begin
      logic [3:0][3:0] nv0;
      logic [2:0][4:0] nv1;
      logic signed [17:0] nb;
      logic signed [47:0] nc;
      logic nce, nacc;
      longint s0, s1;
      if (n < 16) for (int i = 0; i < 4; i++) nv0[i] = n[i] ? 4'h8 : 4'h7;
      else nv0 = 16'($urandom);
      if (n < 8) for (int i = 0; i < 3; i++) nv1[i] = n[i] ? 5'h1f : 5'h00;
      else nv1 = 15'($urandom);
      nb   = (n < 16) ? -18'sd131072 : 18'($urandom);
      nc   = 48'(signed'(32'($urandom))) <<< 4;
      nacc = ($urandom_range(0, 2) != 0);
      nce  = ($urandom_range(0, 4) != 0);
      s0 = 0; s1 = 0;
      for (int i = 0; i < 4; i++) s0 += longint'(signed'(nv0[i])) * (longint'(1) << (7 * i));
      for (int i = 0; i < 3; i++) s1 += longint'(nv1[i]) * (longint'(1) << (9 * i));
      v0 <= nv0; v1 <= nv1; b <= nb; c <= nc; acc <= nacc; ce <= nce;
      @(posedge clk);
      #1;
      if (nce) begin
        m0.push_back(s0 * longint'(nb)); m1.push_back(s1 * longint'(nb));
        aq.push_back(nacc); bq.push_back(longint'(nb));
        // c is added at the P stage, three enabled cycles after the operands
        cq.push_back(longint'(nc));
        if (bq.size() >= 2) begin
          checks++;
          if (longint'(bc0) != bq[bq.size() - 1] || longint'(bc1) != bq[bq.size() - 1]) failures++;
        end
        if (m0.size() >= 4) begin
          int k;
          k = m0.size() - 4;
          // the C value is the one presented in the cycle the P adder works, i.e. the latest
          e0 = m0[k] + cq[cq.size() - 1] + (aq[k] ? e0 : 0);
          e1 = m1[k] + cq[cq.size() - 1] + (aq[k] ? e1 : 0);
          e0 = longint'(48'(e0)); e0 = (e0 << 16) >>> 16;
          e1 = longint'(48'(e1)); e1 = (e1 << 16) >>> 16;
          checks += 2;
          if (longint'(p0) != e0) begin
            failures++;
            if (failures < 8) $display("signed lanes: p %0d exp %0d", p0, e0);
          end
          if (longint'(p1) != e1) begin
            failures++;
            if (failures < 8) $display("unsigned lanes: p %0d exp %0d", p1, e1);
          end
        end
      end
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
