// tb_hpipe_bias_add: loads random biases for C channels, streams random lines (C beats
// each, with gaps) and checks every output against the saturated sum with the bias of the
// beat's channel, one cycle after the input; also checks the backpressure pass-through.
module tb_hpipe_bias_add;
  import hpipe_pkg::*;
  localparam int W = 3, C = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_t cfg;
  act_t in_data [W], out_data [W];
  logic v = 0, bp_in = 0, bp, vo;
  int bias [C];

  hpipe_bias_add #(.LAYER_ID(9), .W(W), .C(C)) dut (.clk, .rst_n, .cfg, .in_data,
    .in_new_oc(v), .coarse_backpressure(bp), .out_data, .out_new_oc(vo), .out_backpressure(bp_in));

  int checks = 0, failures = 0;
  int exp_q [$];

  initial begin
    cfg = '0;
    for (int x = 0; x < W; x++) in_data[x] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    for (int c = 0; c < C; c++) begin
      bias[c] = (c == 0) ? 32000 : int'($urandom % 2000) - 1000;
      cfg = '{we: 1'b1, layer: 8'd9, mem: MEM_BIAS, bank: 8'd0, addr: 16'(c), data: 32'(bias[c])};
      @(posedge clk); #1;
    end
    // a write to another layer must not disturb the biases
    cfg = '{we: 1'b1, layer: 8'd8, mem: MEM_BIAS, bank: 8'd0, addr: 16'd1, data: 32'd7};
    @(posedge clk); #1;
    cfg = '0;
    for (int line = 0; line < 6; line++)
      for (int c = 0; c < C; c++) begin
        for (int x = 0; x < W; x++) begin
          int a, e;
          a = int'($urandom % 4000) - 2000;
          in_data[x] = act_t'(a);
          e = a + bias[c];
          if (e > 32767) e = 32767;
          exp_q.push_back(e);
        end
        v = 1; bp_in = $urandom % 2;
        #1; checks++; if (bp != bp_in) failures++;
        @(posedge clk); #1;
        v = 0;
        if ($urandom % 3 == 0) begin @(posedge clk); #1; end
      end
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (vo)
    for (int x = 0; x < W; x++) begin
      int e;
      e = exp_q.pop_front();
      checks++;
      if (int'(out_data[x]) != e) begin failures++; $display("got %0d want %0d", out_data[x], e); end
    end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
