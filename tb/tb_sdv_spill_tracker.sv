// Self-checking test of sdv_spill_tracker, driven by a behavioural
// accumulator instead of a DSP.
//
// The test builds the 48-bit accumulator word P = sum_i 2^(i*L) * T_i from
// random lane products (signed 4x unsigned 4 bits for the first tracker,
// unsigned 4x4 bits for the second, L = 7, 4 lanes), updating P in the
// cycle after each step as the DSP would, and hands the tracker the
// products' two LSBs. The corrected lane results must equal the exact lane
// sums T_i, one cycle after P holds the final sum. Long runs of extreme
// products force spills of every possible size in both directions.
module tb_sdv_spill_tracker;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int N = 4, L = 7, RW = L + $clog2(64) + 3;
  logic upd, first, last;
  logic [N-1:0][1:0] lsb_s, lsb_u;
  logic [47:0] p_s, p_u;
  logic rv_s, rv_u;
  logic signed [N-1:0][RW-1:0] res_s, res_u;

  sdv_spill_tracker #(.N(N), .L(L), .SIGNED_SPILL(1'b1), .DEPTH(64)) dut_s (
    .clk, .rst, .ce(1'b1), .upd, .first, .last, .lsb(lsb_s), .p(p_s),
    .res_valid(rv_s), .res(res_s));
  sdv_spill_tracker #(.N(N), .L(L), .SIGNED_SPILL(1'b0), .DEPTH(64)) dut_u (
    .clk, .rst, .ce(1'b1), .upd, .first, .last, .lsb(lsb_u), .p(p_u),
    .res_valid(rv_u), .res(res_u));

  longint ts [N], tu [N];

  function automatic logic [47:0] pack(input longint t [N]);
    longint s = 0;
    for (int i = 0; i < N; i++) s += t[i] <<< (i * L);
    return 48'(s);
  endfunction

  task automatic run(input int len, input int mode);
    for (int s = 0; s < len; s++) begin
      longint ps [N], pu [N];
      for (int i = 0; i < N; i++) begin
        int wa, xb;
        wa = (mode == 1) ? -8 : (mode == 2) ? 7 : $urandom_range(0, 15) - 8;
        xb = (mode != 0) ? 15 : $urandom_range(0, 15);
        ps[i] = wa * xb;
        pu[i] = (mode != 0) ? 225 : $urandom_range(0, 15) * $urandom_range(0, 15);
        lsb_s[i] <= 2'(ps[i]);
        lsb_u[i] <= 2'(pu[i]);
        if (s == 0) begin ts[i] = 0; tu[i] = 0; end
        ts[i] += ps[i];
        tu[i] += pu[i];
      end
      upd <= 1; first <= (s == 0); last <= (s == len - 1);
      @(posedge clk);
      p_s <= pack(ts);
      p_u <= pack(tu);
    end
    upd <= 0; first <= 0; last <= 0;
    @(posedge clk);
    #1;
    checks += 2;
    if (!rv_s || !rv_u) begin
      failures++; $display("result not valid one cycle after P");
    end
    for (int i = 0; i < N; i++) begin
      checks += 2;
      if (longint'(signed'(res_s[i])) != ts[i]) begin
        failures++; if (failures < 8) $display("signed lane %0d got %0d exp %0d", i, signed'(res_s[i]), ts[i]);
      end
      if (longint'(signed'(res_u[i])) != tu[i]) begin
        failures++; if (failures < 8) $display("unsigned lane %0d got %0d exp %0d", i, signed'(res_u[i]), tu[i]);
      end
    end
    @(posedge clk);
  endtask

  initial begin
    upd = 0; first = 0; last = 0; lsb_s = '0; lsb_u = '0; p_s = '0; p_u = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    run(40, 1);
    run(40, 2);
    run(1, 0);
    for (int t = 0; t < 100; t++) run($urandom_range(1, 50), 0);
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
