// tb_hpipe_mean: three random images through the global-average stage; each of the C
// outputs per image must equal (sum * round(2^24 / (H*W))) >> 24, and the results of an
// image must not be sent while the consumer backpressures. The producer obeys the stage's
// own backpressure, which must rise while a result waits.
module tb_hpipe_mean;
  import hpipe_pkg::*;
  localparam int W = 5, H = 3, C = 4, NIMG = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  act_t in_data [W], out_data [1];
  logic v = 0, bp, vo, out_bp = 1;

  hpipe_mean #(.W(W), .H(H), .C(C)) dut (.clk, .rst_n, .in_data, .in_new_oc(v),
    .coarse_backpressure(bp), .out_data, .out_new_oc(vo), .out_backpressure(out_bp));

  int checks = 0, failures = 0, held = 0;
  int img [NIMG][H][C][W];

  initial begin
    foreach (img[n, y, c, x]) img[n][y][c][x] = int'($urandom % 65536) - 32768;
    for (int x = 0; x < W; x++) in_data[x] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NIMG; n++)
      for (int y = 0; y < H; y++) begin
        #1; while (bp) begin held++; @(posedge clk); #1; end
        #1;
        for (int c = 0; c < C; c++) begin
          for (int x = 0; x < W; x++) in_data[x] = act_t'(img[n][y][c][x]);
          v = 1; @(posedge clk); #1; v = 0;
        end
      end
  end

  initial forever begin @(posedge clk); #1; if ($urandom % 10 == 0) out_bp = ~out_bp; end

  int n = 0, c = 0;
  logic [2:0] bp_hist = '1;   // out_bp one, two and three cycles ago
  always @(negedge clk) begin
    if (vo) begin
      longint s, recip;
      int e;
      recip = ((longint'(1) << 24) + (H * W) / 2) / (H * W);
      s = 0;
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) s += img[n][y][c][x];
      e = int'((s * recip) >>> 24);
      checks++;
      if (int'(out_data[0]) != e) begin failures++; $display("img %0d c %0d: %0d want %0d", n, c, out_data[0], e); end
      if (c == 0) begin checks++; if (bp_hist[1]) begin failures++; $display("sent under backpressure"); end end
      if (c == C - 1) begin c = 0; n++; end else c++;
      if (n == NIMG) begin
        checks++;
        if (held == 0) failures++;
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
    bp_hist <= {bp_hist[1:0], out_bp};
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
