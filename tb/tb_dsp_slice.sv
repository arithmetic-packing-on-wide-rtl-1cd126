// Self-checking test of dsp_slice.
//
// Random signed A, D, B and C operands with random accumulate and
// clock-enable patterns; a reference model here computes
// P = (D - A) * B + C (+ P) four enabled cycles after the operands, and the
// B cascade output one enabled cycle after B. A second slice checks the
// D + A pre-adder setting. Extreme operand values are included.
module tb_dsp_slice;
  logic clk = 0, rst = 1, ce = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [26:0] a, d;
  logic signed [17:0] b, bc0, bc1;
  logic signed [47:0] c, p0, p1;
  logic acc;

  dsp_slice #(.PREADD_SUB(1'b1)) dut0 (.clk, .rst, .ce, .a, .d, .b, .acc, .c, .bcout(bc0), .p(p0));
  dsp_slice #(.PREADD_SUB(1'b0)) dut1 (.clk, .rst, .ce, .a, .d, .b, .acc, .c, .bcout(bc1), .p(p1));

  // reference pipeline in enabled-cycle steps
  longint ra [4], rd [4], rb [4];
  bit     racc [4];
  longint rc, ref0 = 0, ref1 = 0, rbc = 0;

  function automatic longint wrap48(input longint v);
    return (v << 16) >>> 16;
  endfunction
  function automatic longint wrap27(input longint v);
    return (v << 37) >>> 37;
  endfunction

  initial begin
    int n;
    a = 0; d = 0; b = 0; c = 0; acc = 0;
    for (int i = 0; i < 4; i++) begin ra[i] = 0; rd[i] = 0; rb[i] = 0; racc[i] = 0; end
    repeat (2) @(posedge clk);
    rst <= 0;
    for (n = 0; n < 400; n++) begin
      logic signed [26:0] na, nd;
      logic signed [17:0] nb;
      logic signed [47:0] nc;
      logic nacc, nce;
      nce  = ($urandom_range(0, 3) != 0);
      na   = (n < 10) ? -27'sd33554432 : 27'($urandom);
      nd   = (n < 10) ? 27'sd33554431 : 27'($urandom);
      nb   = (n < 10) ? -18'sd131072 : 18'($urandom);
      nc   = {16'($urandom), 32'($urandom)};
      nacc = $urandom_range(0, 1);
      a <= na; d <= nd; b <= nb; c <= nc; acc <= nacc; ce <= nce;
      @(posedge clk);
      // the operands just sampled (if enabled)
      if (nce) begin
        // P update uses stage-3 data and the current C
        if (racc[2]) begin
          ref0 = wrap48(ref0 + wrap27(rd[2] - ra[2]) * rb[2] + longint'(nc));
          ref1 = wrap48(ref1 + wrap27(rd[2] + ra[2]) * rb[2] + longint'(nc));
        end else begin
          ref0 = wrap48(wrap27(rd[2] - ra[2]) * rb[2] + longint'(nc));
          ref1 = wrap48(wrap27(rd[2] + ra[2]) * rb[2] + longint'(nc));
        end
        for (int s = 2; s > 0; s--) begin
          ra[s] = ra[s-1]; rd[s] = rd[s-1]; rb[s] = rb[s-1]; racc[s] = racc[s-1];
        end
        ra[0] = na; rd[0] = nd; rb[0] = nb; racc[0] = nacc;
        rbc = nb;
      end
      #1;
      if (n >= 4) begin
        checks += 3;
        if (longint'(p0) != ref0) begin
          failures++; if (failures < 8) $display("n=%0d p0 %0d exp %0d", n, p0, ref0);
        end
        if (longint'(p1) != ref1) begin
          failures++; if (failures < 8) $display("n=%0d p1 %0d exp %0d", n, p1, ref1);
        end
        if (longint'(bc0) != rbc) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
