// tb_hpipe_conv: self-checking test of the sparse convolution stage.
//
// Draws a random sparse weight tensor (about 60% zeros), compresses it the way the stage
// expects (per split: non-zero weights ordered by kernel row, channel and column, each with
// its kernel column and the runlength from the previous weight; splits padded with zero
// weights to equal length), loads it over the cfg bus and streams two random images through
// the stage while the consumer toggles backpressure at random. Every output beat is
// compared with a direct convolution computed here. The spacing of the beats of one line
// is checked against the weight-line counts: output channel oc must follow oc-1 by exactly
// its count of cycles. A 5x5 input with stride 2 and padding 1 exercises the pad lines and
// columns, the ring wrap and the image boundary.
module tb_hpipe_conv;
  import hpipe_pkg::*;

  localparam int W_IN = 7, H_IN = 5, C_IN = 5, C_OUT = 4, KH = 3, KW = 3, S = 2;
  localparam int PT = 1, PB = 1, PL = 1, PR = 1, NS = 4, SHIFT = 3, NIMG = 2;
  localparam int W_OUT = (W_IN + PL + PR - KW) / S + 1;
  localparam int H_OUT = (H_IN + PT + PB - KH) / S + 1;
  localparam int CB = (C_IN + NS - 1) / NS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_t cfg;
  act_t in_data [W_IN];
  logic in_new_oc = 0, bp, out_new_oc, out_bp = 0;
  act_t out_data [W_OUT];

  hpipe_conv #(.LAYER_ID(3), .W_IN(W_IN), .H_IN(H_IN), .C_IN(C_IN), .C_OUT(C_OUT), .KH(KH),
    .KW(KW), .STRIDE(S), .PAD_T(PT), .PAD_B(PB), .PAD_L(PL), .PAD_R(PR), .N_SPLITS(NS),
    .WB_DEPTH(64), .SHIFT(SHIFT)) dut (
    .clk, .rst_n, .cfg, .in_data, .in_new_oc, .coarse_backpressure(bp),
    .out_data, .out_new_oc, .out_backpressure(out_bp));

  int checks = 0, failures = 0;
  int wt [C_OUT][KH][KW][C_IN];
  int img [NIMG][H_IN][W_IN][C_IN];
  int lines_oc [C_OUT];

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  function automatic int golden(int n, int oy, int ox, int oc);
    longint acc = 0;
    for (int ky = 0; ky < KH; ky++)
      for (int kx = 0; kx < KW; kx++)
        for (int ic = 0; ic < C_IN; ic++) begin
          int y, x;
          y = oy * S + ky - PT; x = ox * S + kx - PL;
          if (y >= 0 && y < H_IN && x >= 0 && x < W_IN)
            acc += longint'(wt[oc][ky][kx][ic]) * img[n][y][x][ic];
        end
    acc = acc >>> SHIFT;
    if (acc > 32767) acc = 32767;
    if (acc < -32768) acc = -32768;
    return int'(acc);
  endfunction

  task automatic cfg_write(mem_sel_e m, int bank, int addr, logic [31:0] data);
    cfg.we = 1; cfg.layer = 3; cfg.mem = m; cfg.bank = 8'(bank); cfg.addr = 16'(addr);
    cfg.data = data;
    @(posedge clk); #1;
    cfg.we = 0;
  endtask

  // compress and load the weights
  task automatic load_weights();
    int addr [NS];
    for (int s = 0; s < NS; s++) addr[s] = 0;
    for (int oc = 0; oc < C_OUT; oc++) begin
      int n [NS];
      int L;
      L = 1;
      for (int s = 0; s < NS; s++) begin
        n[s] = 0;
        for (int ky = 0; ky < KH; ky++)
          for (int ic = s; ic < C_IN; ic += NS)
            for (int kx = 0; kx < KW; kx++) if (wt[oc][ky][kx][ic] != 0) n[s]++;
        if (n[s] > L) L = n[s];
      end
      lines_oc[oc] = L;
      cfg_write(MEM_OCLEN, 0, oc, 32'(L));
      for (int s = 0; s < NS; s++) begin
        int prev, k;
        prev = 0; k = 0;
        for (int ky = 0; ky < KH; ky++)
          for (int ic = s; ic < C_IN; ic += NS)
            for (int kx = 0; kx < KW; kx++)
              if (wt[oc][ky][kx][ic] != 0) begin
                int yz = ky * CB + ic / NS;
                cfg_write(MEM_WEIGHT, s, addr[s],
                          {12'(yz - prev), 4'(kx), 16'(wt[oc][ky][kx][ic])});
                prev = yz; addr[s]++; k++;
              end
        for (; k < L; k++) begin
          cfg_write(MEM_WEIGHT, s, addr[s], {12'd0, 4'd0, 16'd0});
          addr[s]++;
        end
      end
    end
  endtask

  // producer: one line = C_IN beats, started only without backpressure
  initial begin
    cfg = '0;
    for (int x = 0; x < W_IN; x++) in_data[x] = '0;
    for (int oc = 0; oc < C_OUT; oc++)
      for (int ky = 0; ky < KH; ky++)
        for (int kx = 0; kx < KW; kx++)
          for (int ic = 0; ic < C_IN; ic++)
            begin
              int r;
              r = rnd(0, 9);
              if (r < 6) wt[oc][ky][kx][ic] = 0;
              else       wt[oc][ky][kx][ic] = rnd(-60, 60);
            end
    for (int n = 0; n < NIMG; n++)
      for (int y = 0; y < H_IN; y++)
        for (int x = 0; x < W_IN; x++)
          for (int c = 0; c < C_IN; c++) img[n][y][x][c] = rnd(-100, 100);
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_weights();
    for (int n = 0; n < NIMG; n++)
      for (int y = 0; y < H_IN; y++) begin
        #1; while (bp) begin @(posedge clk); #1; end
        #1;
        for (int c = 0; c < C_IN; c++) begin
          for (int x = 0; x < W_IN; x++) in_data[x] = act_t'(img[n][y][x][c]);
          in_new_oc = 1;
          @(posedge clk); #1;
          in_new_oc = 0;
          if ($urandom % 4 == 0) begin @(posedge clk); #1; end
        end
      end
  end

  // consumer: random coarse backpressure
  initial forever begin
    @(posedge clk); #1;
    if ($urandom % 8 == 0) out_bp = ~out_bp;
  end

  // monitor
  int n_img = 0, n_oy = 0, n_oc = 0, last_t = 0, cyc = 0, stalls = 0;
  always @(negedge clk) begin
    cyc++;
    if (out_bp && rst_n) stalls++;
    if (out_new_oc) begin
      for (int ox = 0; ox < W_OUT; ox++) begin
        int g;
        g = golden(n_img, n_oy, ox, n_oc);
        checks++;
        if (int'(out_data[ox]) != g) begin
          failures++;
          $display("MISMATCH img %0d oy %0d oc %0d ox %0d: got %0d want %0d",
                   n_img, n_oy, n_oc, ox, out_data[ox], g);
        end
      end
      if (n_oc > 0) begin
        checks++;
        if (cyc - last_t != lines_oc[n_oc]) begin
          failures++;
          $display("RATE oc %0d: %0d cycles, expected %0d", n_oc, cyc - last_t, lines_oc[n_oc]);
        end
      end
      last_t = cyc;
      if (n_oc == C_OUT - 1) begin
        n_oc = 0;
        if (n_oy == H_OUT - 1) begin n_oy = 0; n_img++; end
        else n_oy++;
      end else n_oc++;
      if (n_img == NIMG) begin
        checks++;
        if (stalls == 0) begin failures++; $display("consumer backpressure never applied"); end
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog: %0d of %0d images done", n_img, NIMG);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
