// tb_hpipe_maxpool: 3x3 stride-2 max pooling with bottom and right padding (TensorFlow
// SAME on an odd size) over two random images, with a producer that obeys coarse
// backpressure and a consumer that toggles its own at random. Every output beat is
// compared with a direct max pool in which padding never wins, and beats of one line
// must be exactly KH = 3 cycles apart.
module tb_hpipe_maxpool;
  import hpipe_pkg::*;
  localparam int W = 9, H = 7, C = 3, K = 3, S = 2, PT = 0, PB = 1, PL = 0, PR = 1, NIMG = 2;
  localparam int WO = (W + PL + PR - K) / S + 1, HO = (H + PT + PB - K) / S + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  act_t in_data [W], out_data [WO];
  logic v = 0, bp, vo, out_bp = 0;

  hpipe_maxpool #(.W_IN(W), .H_IN(H), .C(C), .KH(K), .KW(K), .STRIDE(S), .PAD_T(PT),
    .PAD_B(PB), .PAD_L(PL), .PAD_R(PR)) dut (.clk, .rst_n, .in_data, .in_new_oc(v),
    .coarse_backpressure(bp), .out_data, .out_new_oc(vo), .out_backpressure(out_bp));

  int checks = 0, failures = 0;
  int img [NIMG][H][W][C];

  initial begin
    for (int x = 0; x < W; x++) in_data[x] = '0;
    foreach (img[n, y, x, c]) img[n][y][x][c] = int'($urandom % 60000) - 30000;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NIMG; n++)
      for (int y = 0; y < H; y++) begin
        #1; while (bp) begin @(posedge clk); #1; end
        #1;
        for (int c = 0; c < C; c++) begin
          for (int x = 0; x < W; x++) in_data[x] = act_t'(img[n][y][x][c]);
          v = 1; @(posedge clk); #1; v = 0;
          if ($urandom % 3 == 0) begin @(posedge clk); #1; end
        end
      end
  end

  initial forever begin @(posedge clk); #1; if ($urandom % 6 == 0) out_bp = ~out_bp; end

  int n = 0, oy = 0, c = 0, last_t = 0, cyc = 0;
  always @(negedge clk) begin
    cyc++;
    if (vo) begin
      for (int ox = 0; ox < WO; ox++) begin
        int m;
        m = -32768;
        for (int ky = 0; ky < K; ky++)
          for (int kx = 0; kx < K; kx++) begin
            int y, x;
            y = oy * S + ky - PT; x = ox * S + kx - PL;
            if (y >= 0 && y < H && x >= 0 && x < W && img[n][y][x][c] > m) m = img[n][y][x][c];
          end
        checks++;
        if (int'(out_data[ox]) != m) begin failures++; $display("img %0d oy %0d c %0d ox %0d: %0d want %0d", n, oy, c, ox, out_data[ox], m); end
      end
      if (c > 0) begin checks++; if (cyc - last_t != K) failures++; end
      last_t = cyc;
      if (c == C - 1) begin c = 0; if (oy == HO - 1) begin oy = 0; n++; end else oy++; end
      else c++;
      if (n == NIMG) begin
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
