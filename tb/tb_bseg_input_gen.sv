// Self-checking test of bseg_input_gen.
//
// Frames of W_I = 7 pixels of D = 3 channels are streamed with random gaps;
// the consumer takes each presented block after a random delay. Every
// block must hold, per channel, the NI = 2 consecutive pixels of its index
// (zeros past the end of the frame), the block index must run 0..NB_FEED-1
// with NB_FEED = 6 (two zero flush blocks), and frame_idle must be high
// only between frames.
module tb_bseg_input_gen;
  localparam int D = 3, NI = 2, W_I = 7, NB = 6, NFR = 3;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [D-1:0][3:0] s_x_tdata;
  logic s_x_tvalid, s_x_tready, blk_valid, blk_take, frame_idle;
  logic [D-1:0][NI-1:0][3:0] blk;
  logic [2:0] blk_idx;

  bseg_input_gen #(.D(D), .WI(4), .NI(NI), .W_I(W_I), .NB_FEED(NB)) dut (
    .clk, .rst, .s_x_tdata, .s_x_tvalid, .s_x_tready, .blk_valid, .blk, .blk_idx,
    .blk_take, .frame_idle);

  int img [NFR][W_I][D];
  int nblk = 0;

  // producer
  initial begin
    s_x_tvalid = 0; s_x_tdata = '0;
    for (int f = 0; f < NFR; f++) for (int i = 0; i < W_I; i++) for (int d = 0; d < D; d++)
      img[f][i][d] = $urandom_range(0, 15);
    wait (!rst);
    for (int f = 0; f < NFR; f++) for (int i = 0; i < W_I; i++) begin
      while ($urandom_range(0, 2) == 0) begin s_x_tvalid <= 0; @(posedge clk); end
      s_x_tvalid <= 1;
      for (int d = 0; d < D; d++) s_x_tdata[d] <= 4'(img[f][i][d]);
      @(posedge clk);
      while (!s_x_tready) @(posedge clk);
    end
    s_x_tvalid <= 0;
  end

  // consumer
  always @(posedge clk) begin
    blk_take <= 1'b0;
    if (!rst && blk_valid && !blk_take && $urandom_range(0, 2) == 0) begin
      int f, b;
      f = nblk / NB; b = nblk % NB;
      blk_take <= 1'b1;
      checks++;
      if (int'(blk_idx) != b) begin
        failures++; $display("block %0d: index %0d", nblk, blk_idx);
      end
      for (int d = 0; d < D; d++) for (int j = 0; j < NI; j++) begin
        int px, e;
        px = b * NI + j;
        e = (px < W_I) ? img[f][px][d] : 0;
        checks++;
        if (int'(blk[d][j]) != e) begin
          failures++; $display("frame %0d block %0d d%0d j%0d: %0d exp %0d", f, b, d, j, blk[d][j], e);
        end
      end
      checks++;
      if (frame_idle) begin failures++; $display("idle while a block is presented"); end
      nblk++;
    end
  end

  initial begin
    blk_take = 0;
    repeat (2) @(posedge clk);
    checks++;
    if (!frame_idle) failures++;
    rst <= 0;
    wait (nblk == NFR * NB);
    repeat (3) @(posedge clk);
    checks++;
    if (!frame_idle) begin failures++; $display("not idle after the last frame"); end
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
