// Self-checking test of adder_tree.
//
// Trees of 16, 5 and 1 inputs receive random and extreme signed operands
// with random clock-enable gaps; each sum must appear with its valid bit
// exactly $clog2(N) enabled cycles later (1 for N = 1).
module tb_adder_tree;
  logic clk = 0, rst = 1, ce = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [15:0][12:0] in16;
  logic signed [4:0][12:0]  in5;
  logic signed [0:0][12:0]  in1;
  logic v_in, v16, v5, v1;
  logic signed [16:0] o16;
  logic signed [15:0] o5;
  logic signed [12:0] o1;

  adder_tree #(.N(16), .IW(13), .OW(17)) d16 (.clk, .rst, .ce, .in_valid(v_in), .in(in16), .out_valid(v16), .out(o16));
  adder_tree #(.N(5),  .IW(13), .OW(16)) d5  (.clk, .rst, .ce, .in_valid(v_in), .in(in5),  .out_valid(v5),  .out(o5));
  adder_tree #(.N(1),  .IW(13))          d1  (.clk, .rst, .ce, .in_valid(v_in), .in(in1),  .out_valid(v1),  .out(o1));

  longint h16 [$], h5 [$], h1 [$];
  bit     hv [$];

  initial begin
    in16 = '0; in5 = '0; in1 = '0; v_in = 0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 300; n++) begin
      longint s16, s5;
      logic nce, nv;
      logic signed [15:0][12:0] a;
      s16 = 0; s5 = 0;
      nce = ($urandom_range(0, 3) != 0);
      nv  = $urandom_range(0, 1);
      for (int i = 0; i < 16; i++) a[i] = (n < 5) ? -13'sd4096 : 13'($urandom);
      for (int i = 0; i < 16; i++) s16 += longint'(signed'(a[i]));
      for (int i = 0; i < 5; i++) s5 += longint'(signed'(a[i]));
      in16 <= a; in5 <= a[4:0]; in1 <= a[0]; v_in <= nv; ce <= nce;
      @(posedge clk);
      #1;
      if (nce) begin
        h16.push_back(s16); h5.push_back(s5); h1.push_back(longint'(signed'(a[0]))); hv.push_back(nv);
        // outputs reflect the inputs sampled 3, 2 and 0 enables before the latest
        if (h16.size() > 4) begin
          checks += 3;
          if (longint'(o16) != h16[h16.size() - 4] || v16 != hv[hv.size() - 4]) failures++;
          if (longint'(o5) != h5[h5.size() - 3] || v5 != hv[hv.size() - 3]) failures++;
          if (longint'(o1) != h1[h1.size() - 1] || v1 != hv[hv.size() - 1]) failures++;
        end
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
