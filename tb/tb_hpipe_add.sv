// tb_hpipe_add: two producers with independent random timing feed the two buffers of the
// Add stage (each obeying only its own backpressure) for three images, while the consumer
// toggles backpressure. Every output is compared with the saturated element-wise sum of
// the matching lines, and the test checks that each producer was held off at least once.
module tb_hpipe_add;
  import hpipe_pkg::*;
  localparam int W = 4, H = 3, C = 3, NIMG = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  act_t a_data [W], b_data [W], out_data [W];
  logic av = 0, bv = 0, abp, bbp, vo, out_bp = 0;

  hpipe_add #(.W(W), .H(H), .C(C), .LINES_A(2), .LINES_B(3)) dut (.clk, .rst_n,
    .a_data, .a_new_oc(av), .a_backpressure(abp), .b_data, .b_new_oc(bv),
    .b_backpressure(bbp), .out_data, .out_new_oc(vo), .out_backpressure(out_bp));

  int checks = 0, failures = 0, a_held = 0, b_held = 0;
  int la [NIMG * H][C][W], lb [NIMG * H][C][W];

  initial begin
    foreach (la[l, c, x]) begin
      la[l][c][x] = int'($urandom % 65536) - 32768;
      lb[l][c][x] = int'($urandom % 65536) - 32768;
    end
    for (int x = 0; x < W; x++) begin a_data[x] = '0; b_data[x] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      for (int l = 0; l < NIMG * H; l++) begin
        #1; while (abp) begin a_held++; @(posedge clk); #1; end
        #1;
        for (int c = 0; c < C; c++) begin
          for (int x = 0; x < W; x++) a_data[x] = act_t'(la[l][c][x]);
          av = 1; @(posedge clk); #1; av = 0;
        end
        repeat ($urandom % 4) @(posedge clk);
      end
      for (int l = 0; l < NIMG * H; l++) begin
        #1; while (bbp) begin b_held++; @(posedge clk); #1; end
        #1;
        for (int c = 0; c < C; c++) begin
          for (int x = 0; x < W; x++) b_data[x] = act_t'(lb[l][c][x]);
          bv = 1; @(posedge clk); #1; bv = 0;
          repeat ($urandom % 3) @(posedge clk);
          #1;
        end
      end
    join
  end

  initial forever begin @(posedge clk); #1; if ($urandom % 5 == 0) out_bp = ~out_bp; end

  int l = 0, c = 0;
  always @(negedge clk) if (vo) begin
    for (int x = 0; x < W; x++) begin
      int e;
      e = la[l][c][x] + lb[l][c][x];
      if (e > 32767) e = 32767;
      if (e < -32768) e = -32768;
      checks++;
      if (int'(out_data[x]) != e) begin failures++; $display("line %0d c %0d x %0d: %0d want %0d", l, c, x, out_data[x], e); end
    end
    if (c == C - 1) begin c = 0; l++; end else c++;
    if (l == NIMG * H) begin
      checks += 2;
      if (a_held == 0) failures++;
      if (b_held == 0) failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
