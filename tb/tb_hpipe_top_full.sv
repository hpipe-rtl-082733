// tb_hpipe_top_full: one complete ResNet-50 head-and-classifier inference at the
// design's default sizes (224x224x3 image, 64 and 256 channels, 1000 classes). Weights are
// random with about 85% zeros; the 1000 logits are compared with a reference model of the
// same network computed here with the same fixed-point rules. Mechanism counts are only
// reported; the reduced-size end-to-end test requires each of them.
module tb_hpipe_top_full;
  import hpipe_pkg::*;

  localparam int IMG_W = 224, IMG_H = 224, IMG_C = 3, C1 = 64, C2 = 256, NCL = 1000;
  localparam int SHIFT = 8, NIMG = 1;
  localparam int NS1 = 4, NSB = 4, NSF = 4;
  localparam int W1 = (IMG_W + 6 - 7) / 2 + 1, H1 = (IMG_H + 6 - 7) / 2 + 1;
  localparam int W2 = (W1 + 1) / 2, H2 = (H1 + 1) / 2;
  localparam int MPW = ((W2 - 1) * 2 + 3 > W1) ? (W2 - 1) * 2 + 3 - W1 : 0;
  localparam int MPH = ((H2 - 1) * 2 + 3 > H1) ? (H2 - 1) * 2 + 3 - H1 : 0;
  localparam int WATCHDOG = 2000000, HOLD = 1000;
  localparam bit REQUIRE_ALL_MECH = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_t cfg;
  act_t host_data;
  logic host_valid = 0, host_ready, out_new_oc, out_bp = 0;
  act_t out_data [1];

  hpipe_top dut (
    .clk, .rst_n, .cfg, .host_data, .host_valid, .host_ready, .out_data, .out_new_oc,
    .out_backpressure(out_bp));

  int checks = 0, failures = 0, n_out = 0;

  // ------------------------------------------------------------------ reference network
  int img  [NIMG][IMG_H][IMG_W][IMG_C];
  int w1   [C1][7][7][IMG_C];
  int b1   [C1];
  int wa   [C2][C1];
  int ba   [C2];
  int wb   [C2][C1];
  int wf   [NCL][C2];
  int bf   [NCL];
  int expect_q [$];
  int dense_lines = 0, sparse_lines = 0;

  function automatic int sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int rw();
    int r;
    r = int'($urandom % 100);
    if (r < 85) return 0;
    return int'($urandom % 255) - 127;
  endfunction

  task automatic reference(int n);
    int c1 [H1][W1][C1];
    int r1 [H2][W2][C1];
    int r2 [H2][W2][C2];
    longint msum [C2];
    int mean_v [C2];
    longint recip;
    recip = ((longint'(1) << 24) + longint'(H2 * W2) / 2) / longint'(H2 * W2);
    for (int y = 0; y < H1; y++)
      for (int x = 0; x < W1; x++)
        for (int oc = 0; oc < C1; oc++) begin
          longint acc;
          acc = 0;
          for (int ky = 0; ky < 7; ky++)
            for (int kx = 0; kx < 7; kx++) begin
              int iy, ix;
              iy = 2 * y + ky - 3; ix = 2 * x + kx - 3;
              if (iy >= 0 && iy < IMG_H && ix >= 0 && ix < IMG_W)
                for (int ic = 0; ic < IMG_C; ic++)
                  if (w1[oc][ky][kx][ic] != 0) acc += longint'(w1[oc][ky][kx][ic]) * img[n][iy][ix][ic];
            end
          c1[y][x][oc] = sat(longint'(sat(acc >>> SHIFT)) + b1[oc]);
        end
    for (int y = 0; y < H2; y++)
      for (int x = 0; x < W2; x++)
        for (int c = 0; c < C1; c++) begin
          int m;
          m = -32768;
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++) begin
              int iy, ix;
              iy = 2 * y + ky - MPH / 2; ix = 2 * x + kx - MPW / 2;
              if (iy >= 0 && iy < H1 && ix >= 0 && ix < W1 && c1[iy][ix][c] > m) m = c1[iy][ix][c];
            end
          r1[y][x][c] = (m < 0) ? 0 : m;
        end
    for (int c = 0; c < C2; c++) msum[c] = 0;
    for (int y = 0; y < H2; y++)
      for (int x = 0; x < W2; x++)
        for (int oc = 0; oc < C2; oc++) begin
          longint sa, sb;
          int a, b, s;
          sa = 0; sb = 0;
          for (int ic = 0; ic < C1; ic++) begin
            sa += longint'(wa[oc][ic]) * r1[y][x][ic];
            sb += longint'(wb[oc][ic]) * r1[y][x][ic];
          end
          a = sat(longint'(sat(sa >>> SHIFT)) + ba[oc]);
          if (a < 0) a = 0;
          b = sat(sb >>> SHIFT);
          s = sat(longint'(a) + b);
          r2[y][x][oc] = (s < 0) ? 0 : s;
          msum[oc] += r2[y][x][oc];
        end
    for (int c = 0; c < C2; c++) mean_v[c] = sat((msum[c] * recip) >>> 24);
    for (int k = 0; k < NCL; k++) begin
      longint acc;
      acc = 0;
      for (int c = 0; c < C2; c++) acc += longint'(wf[k][c]) * mean_v[c];
      expect_q.push_back(sat(longint'(sat(acc >>> SHIFT)) + bf[k]));
    end
  endtask

  // ------------------------------------------------------------------ loading
  task automatic cfg_write(int layer, mem_sel_e m, int bank, int addr, logic [31:0] data);
    cfg.we = 1; cfg.layer = 8'(layer); cfg.mem = m; cfg.bank = 8'(bank);
    cfg.addr = 16'(addr); cfg.data = data;
    @(posedge clk); #1;
    cfg.we = 0;
  endtask

  // compress one layer: wt holds [oc][ky][kx][ic] flattened
  task automatic load_conv(int layer, int ns, int cin, int cout, int kh, int kw, ref int wt []);
    int addr [];
    int cb;
    addr = new[ns];
    cb = (cin + ns - 1) / ns;
    for (int s = 0; s < ns; s++) addr[s] = 0;
    for (int oc = 0; oc < cout; oc++) begin
      int L;
      L = 1;
      for (int s = 0; s < ns; s++) begin
        int n;
        n = 0;
        for (int i = 0; i < kh * kw * cin; i++)
          if (wt[oc * kh * kw * cin + i] != 0 && (i % cin) % ns == s) n++;
        if (n > L) L = n;
      end
      sparse_lines += L;
      dense_lines += (kh * kw * cb);
      cfg_write(layer, MEM_OCLEN, 0, oc, 32'(L));
      for (int s = 0; s < ns; s++) begin
        int prev, k;
        prev = 0; k = 0;
        for (int ky = 0; ky < kh; ky++)
          for (int ic = s; ic < cin; ic += ns)
            for (int kx = 0; kx < kw; kx++) begin
              int v;
              v = wt[((oc * kh + ky) * kw + kx) * cin + ic];
              if (v != 0) begin
                int yz;
                yz = ky * cb + ic / ns;
                cfg_write(layer, MEM_WEIGHT, s, addr[s], {12'(yz - prev), 4'(kx), 16'(v)});
                prev = yz; addr[s]++; k++;
              end
            end
        for (; k < L; k++) begin
          cfg_write(layer, MEM_WEIGHT, s, addr[s], 32'd0);
          addr[s]++;
        end
      end
    end
  endtask

  task automatic load_all();
    int t [];
    t = new[C1 * 49 * IMG_C];
    foreach (w1[oc, ky, kx, ic]) begin
      w1[oc][ky][kx][ic] = rw();
      t[((oc * 7 + ky) * 7 + kx) * IMG_C + ic] = w1[oc][ky][kx][ic];
    end
    load_conv(1, NS1, IMG_C, C1, 7, 7, t);
    t = new[C2 * C1];
    foreach (wa[oc, ic]) begin wa[oc][ic] = rw(); t[oc * C1 + ic] = wa[oc][ic]; end
    load_conv(3, NSB, C1, C2, 1, 1, t);
    foreach (wb[oc, ic]) begin wb[oc][ic] = rw(); t[oc * C1 + ic] = wb[oc][ic]; end
    load_conv(5, NSB, C1, C2, 1, 1, t);
    t = new[NCL * C2];
    foreach (wf[oc, ic]) begin wf[oc][ic] = rw(); t[oc * C2 + ic] = wf[oc][ic]; end
    load_conv(6, NSF, C2, NCL, 1, 1, t);
    foreach (b1[c]) begin b1[c] = int'($urandom % 200) - 100; cfg_write(2, MEM_BIAS, 0, c, 32'(b1[c])); end
    foreach (ba[c]) begin ba[c] = int'($urandom % 200) - 100; cfg_write(4, MEM_BIAS, 0, c, 32'(ba[c])); end
    foreach (bf[c]) begin bf[c] = int'($urandom % 200) - 100; cfg_write(7, MEM_BIAS, 0, c, 32'(bf[c])); end
  endtask

  // ------------------------------------------------------------------ mechanism counters
  int m_host_stall = 0, m_ph_bp = 0, m_pad_conv = 0, m_pad_pool = 0, m_conv_bp = 0;
  int m_join_wait = 0, m_out_bp = 0, m_release = 0, m_relu_clamp = 0, m_mean_hold = 0;
  always @(posedge clk) if (rst_n) begin
    if (host_valid && !host_ready) m_host_stall++;
    if (dut.u_input.full_lines != 0 && !dut.u_input.sending && dut.c1_bp) m_ph_bp++;
    if (dut.u_conv1.u_buf.pad_we) m_pad_conv++;
    if (dut.u_pool.u_buf.pad_we) m_pad_pool++;
    if (!dut.u_conv_a.running && dut.u_conv_a.avail >= 1 && dut.u_conv_a.out_backpressure) m_conv_bp++;
    if (32'(dut.u_add.avail_a) != 32'(dut.u_add.avail_b)) m_join_wait++;
    if (out_bp && dut.u_fc.avail != 0) m_out_bp++;
    if (dut.u_conv1.release_lines) m_release++;
    if (dut.u_relu1.in_new_oc) foreach (dut.mp_d[x]) if (dut.mp_d[x] < 0) m_relu_clamp++;
    if (dut.u_mean.pending && !dut.u_mean.sending && dut.fc_bp) m_mean_hold++;
  end

  task automatic mech(string name, int n);
    $display("mechanism %-28s %0d", name, n);
    if (REQUIRE_ALL_MECH) begin
      checks++;
      if (n == 0) begin failures++; $display("  never exercised: %s", name); end
    end
  endtask

  // ------------------------------------------------------------------ stimulus
  // the receiver refuses results until the backpressure has rippled back through the
  // classifier to the convolutions (or for HOLD cycles at most), then toggles at random
  logic host_done = 0;
  initial begin
    out_bp = 1;
    for (int i = 0; i < HOLD && !(m_conv_bp > 0 && m_mean_hold > 0); i++) @(posedge clk);
    forever begin
      @(posedge clk); #1;
      if ($urandom % 16 == 0) out_bp = ~out_bp;
    end
  end

  always @(posedge clk) if (out_new_oc) begin
    int e;
    e = expect_q.pop_front();
    checks++;
    if (int'(out_data[0]) != e) begin
      failures++;
      if (failures < 20) $display("logit %0d: got %0d want %0d", n_out, out_data[0], e);
    end
    n_out++;
  end

  task automatic run_all();
    int t0;
    cfg = '0; host_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_all();
    checks++;
    if (sparse_lines >= dense_lines) begin failures++; $display("no zero weights skipped"); end
    $display("weight lines: %0d sparse vs %0d dense", sparse_lines, dense_lines);
    m_host_stall = 0;
    foreach (img[n, y, x, c]) img[n][y][x][c] = int'($urandom % 256) - 128;
    for (int n = 0; n < NIMG; n++) reference(n);
    t0 = $time;
    @(posedge clk); #1;
    for (int n = 0; n < NIMG; n++)
      for (int y = 0; y < IMG_H; y++)
        for (int x = 0; x < IMG_W; x++)
          for (int c = 0; c < IMG_C; c++) begin
            host_data = act_t'(img[n][y][x][c]);
            host_valid = 1;
            @(posedge clk);
            while (!host_ready) @(posedge clk);
            #1;
            host_valid = 0;
            if (NIMG > 1 && $urandom % 8 == 0) begin @(posedge clk); #1; end
          end
    host_done = 1;
    wait (n_out == NIMG * NCL);
    repeat (5) @(posedge clk);
    $display("cycles from first pixel to last logit: %0d", ($time - t0) / 10);
    mech("host port stalled", m_host_stall);
    mech("placeholder held by backpressure", m_ph_bp);
    mech("conv pad lines written", m_pad_conv);
    mech("max-pool pad lines written", m_pad_pool);
    mech("conv held by consumer", m_conv_bp);
    mech("residual join waiting", m_join_wait);
    mech("result held by receiver", m_out_bp);
    mech("ring lines released", m_release);
    mech("relu clamped", m_relu_clamp);
    mech("mean result held", m_mean_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    run_all();
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog: %0d logits of %0d received", n_out, NIMG * NCL);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
