// tb_hpipe_placeholder: sends two random images serially (height, width, channel order)
// with random gaps, while the consumer toggles backpressure. Every output beat must carry
// one channel of a whole line in order, no line may start while backpressure was high when
// the stage decided to send it, and the host port must have been stalled at least once by
// the full FIFO.
module tb_hpipe_placeholder;
  import hpipe_pkg::*;
  localparam int W = 5, H = 4, C = 3, NIMG = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  act_t host_data, out_data [W];
  logic host_valid = 0, host_ready, vo, out_bp;

  hpipe_placeholder #(.W(W), .C(C)) dut (.clk, .rst_n, .host_data, .host_valid, .host_ready,
    .out_data, .out_new_oc(vo), .out_backpressure(out_bp));

  int checks = 0, failures = 0, stalls = 0;
  int img [NIMG][H][W][C];

  initial begin
    host_data = '0;
    foreach (img[n, y, x, c]) img[n][y][x][c] = int'($urandom % 65536) - 32768;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    for (int n = 0; n < NIMG; n++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          for (int c = 0; c < C; c++) begin
            host_data = act_t'(img[n][y][x][c]);
            host_valid = 1;
            @(posedge clk);
            while (!host_ready) begin stalls++; @(posedge clk); end
            #1 host_valid = 0;
            if ($urandom % 4 == 0) begin @(posedge clk); #1; end
          end
  end

  initial begin
    out_bp = 1;
    repeat (100) @(posedge clk);
    forever begin @(posedge clk); #1; if ($urandom % 25 == 0) out_bp = ~out_bp; end
  end

  int n = 0, y = 0, c = 0;
  logic [1:0] bp_hist = '1;
  always @(negedge clk) begin
    if (vo) begin
      for (int x = 0; x < W; x++) begin
        checks++;
        if (int'(out_data[x]) != img[n][y][x][c]) begin failures++; $display("img %0d y %0d c %0d x %0d wrong", n, y, c, x); end
      end
      if (c == 0) begin checks++; if (bp_hist[1]) begin failures++; $display("line sent under backpressure"); end end
      if (c == C - 1) begin c = 0; if (y == H - 1) begin y = 0; n++; end else y++; end
      else c++;
      if (n == NIMG) begin
        checks++;
        if (stalls == 0) begin failures++; $display("host never stalled"); end
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
    bp_hist <= {bp_hist[0], out_bp};
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
