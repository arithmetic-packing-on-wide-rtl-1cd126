// Self-checking test of sdv_dsp_unit.
//
// Three units cover the signedness cases: signed weights with unsigned
// activations (4x4 bits, 4 lanes), signed x signed (4x4) and unsigned x
// unsigned (3x5 bits). Each runs accumulations of random length (1..40
// steps) with random operand values, extreme values first, and random gaps
// between steps. Every lane result is compared with an exact dot product
// kept here, and the result must appear 5 cycles after the last step.
module tb_sdv_dsp_unit;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NU = 3;
  localparam int WA [NU] = '{4, 4, 3};
  localparam int WB [NU] = '{4, 4, 5};
  localparam bit AS [NU] = '{1, 1, 0};
  localparam bit BS [NU] = '{0, 1, 0};

  logic in_valid, first, last;
  logic [7:0][7:0] w;     // up to 8 lanes of up to 8 bits
  logic [7:0]      x;
  logic [NU-1:0]   rv;
  longint          res [NU][8];
  int              nl  [NU];

  for (genvar u = 0; u < NU; u++) begin : g_u
    localparam int N = pack_pkg::sdv_lanes(WA[u], WB[u]);
    localparam int L = pack_pkg::sdv_lane(WA[u], WB[u]);
    localparam int RW = L + $clog2(64) + 3;
    logic [N-1:0][WA[u]-1:0] wu;
    logic signed [N-1:0][RW-1:0] r;
    always_comb for (int i = 0; i < N; i++) wu[i] = w[i][WA[u]-1:0];
    sdv_dsp_unit #(.WA(WA[u]), .WB(WB[u]), .A_SIGNED(AS[u]), .B_SIGNED(BS[u]), .DEPTH(64))
      dut (.clk, .rst, .ce(1'b1), .in_valid, .first, .last, .w(wu), .x(x[WB[u]-1:0]),
           .res_valid(rv[u]), .res(r));
    always_comb for (int i = 0; i < 8; i++) res[u][i] = (i < N) ? longint'(signed'(r[i])) : 0;
    assign nl[u] = N;
  end

  function automatic longint val(input int v, input int wd, input bit s);
    return (s && v >= (1 << (wd - 1))) ? longint'(v) - (longint'(1) << wd) : longint'(v);
  endfunction

  longint acc [NU][8];
  int cyc = 0, last_cyc = -1;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic run_acc(input int len, input bit extreme);
    for (int s = 0; s < len; s++) begin
      while ($urandom_range(0, 3) == 0) begin
        in_valid <= 0; @(posedge clk);
      end
      in_valid <= 1; first <= (s == 0); last <= (s == len - 1);
      for (int i = 0; i < 8; i++) w[i] <= extreme ? 8'h08 : 8'($urandom);
      x <= extreme ? 8'h0f : 8'($urandom);
      @(posedge clk);
      // accumulate the reference from what was driven
      for (int u = 0; u < NU; u++)
        for (int i = 0; i < nl[u]; i++) begin
          if (s == 0) acc[u][i] = 0;
          acc[u][i] += val(int'(w[i]) & ((1 << WA[u]) - 1), WA[u], AS[u]) *
                       val(int'(x) & ((1 << WB[u]) - 1), WB[u], BS[u]);
        end
      if (s == len - 1) last_cyc = cyc;
    end
    in_valid <= 0;
    // wait for the result
    while (rv == '0) @(posedge clk);
    checks++;
    if (cyc - last_cyc != 5) begin
      failures++; $display("latency %0d", cyc - last_cyc);
    end
    for (int u = 0; u < NU; u++) begin
      if (!rv[u]) failures++;
      for (int i = 0; i < nl[u]; i++) begin
        checks++;
        if (res[u][i] != acc[u][i]) begin
          failures++;
          if (failures < 10) $display("u%0d lane%0d got %0d exp %0d", u, i, res[u][i], acc[u][i]);
        end
      end
    end
  endtask

  initial begin
    in_valid = 0; first = 0; last = 0; w = '0; x = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    run_acc(40, 1);
    run_acc(1, 0);
    for (int t = 0; t < 60; t++) run_acc($urandom_range(1, 40), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
