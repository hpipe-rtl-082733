// tb_hpipe_line_buffer: a 4-wide, 5-channel, 3-line image with one pad line and one pad
// column on every side, stored in two banks in a ring of three lines, for two images. The
// reader takes one complete line at a time, reads every channel from its bank and compares
// the whole padded word (pad value -5 in the pad columns, in the pad lines) with the
// expected line, then advances and releases it a few cycles later. The producer obeys
// coarse_backpressure, which must have held it off at least once.
module tb_hpipe_line_buffer;
  import hpipe_pkg::*;
  localparam int W = 4, C = 5, H = 3, P = 1, NB = 2, LINES = 3, NIMG = 2;
  localparam int WP = W + 2 * P, CB = (C + NB - 1) / NB, DEPTH = LINES * CB;
  localparam int AW = $clog2(DEPTH), LW = $clog2(LINES + 1) + 1;
  localparam act_t PV = -16'sd5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  act_t in_data [W];
  logic v = 0, bp, adv = 0, rel = 0;
  logic [AW-1:0] rd_addr [NB];
  logic [WP-1:0][DATA_W-1:0] rd_q [NB];
  logic [AW-1:0] base_addr;
  logic [LW-1:0] avail;

  hpipe_line_buffer #(.W(W), .C(C), .H(H), .PAD_T(P), .PAD_B(P), .PAD_L(P), .PAD_R(P),
    .PAD_VAL(PV), .N_BANKS(NB), .LINES(LINES)) dut (.clk, .rst_n, .in_data, .in_new_oc(v),
    .coarse_backpressure(bp), .rd_addr, .rd_q, .base_addr, .avail, .advance(adv),
    .advance_n(LW'(1)), .release_lines(rel), .release_n(LW'(1)));

  int checks = 0, failures = 0, held = 0;
  int img [NIMG][H][C][W];

  initial begin
    for (int x = 0; x < W; x++) in_data[x] = '0;
    foreach (img[n, y, c, x]) img[n][y][c][x] = int'($urandom % 1000);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NIMG; n++)
      for (int y = 0; y < H; y++) begin
        #1; while (bp) begin held++; @(posedge clk); #1; end
        for (int c = 0; c < C; c++) begin
          for (int x = 0; x < W; x++) in_data[x] = act_t'(img[n][y][c][x]);
          v = 1; @(posedge clk); #1; v = 0;
        end
      end
  end

  // reader: expected padded rows are pad, image rows, pad, for each image
  initial begin
    for (int n = 0; n < NIMG; n++)
      for (int r = 0; r < H + 2 * P; r++) begin
        @(posedge clk); #1;
        while (avail == 0) begin @(posedge clk); #1; end
        for (int c = 0; c < C; c++) begin
          for (int b = 0; b < NB; b++) rd_addr[b] = '0;
          rd_addr[c % NB] = AW'((int'(base_addr) + c / NB) % DEPTH);
          @(posedge clk); #1;
          for (int x = 0; x < WP; x++) begin
            int e;
            if (r < P || r >= H + P || x < P || x >= W + P) e = int'(PV);
            else e = img[n][r - P][c][x - P];
            checks++;
            if (int'(act_t'(rd_q[c % NB][x])) != e) begin
              failures++; $display("img %0d row %0d c %0d x %0d: %0d want %0d", n, r, c, x, act_t'(rd_q[c % NB][x]), e);
            end
          end
        end
        adv = 1; @(posedge clk); #1; adv = 0;
        repeat (2) @(posedge clk);
        #1 rel = 1; @(posedge clk); #1; rel = 0;
      end
    checks++;
    if (held == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
