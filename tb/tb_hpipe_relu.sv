// tb_hpipe_relu: drives random beats through a Relu and a Relu6 instance and checks every
// output against max(0, x) and min(max(0, x), 6.0), one cycle after the input, and that
// the consumer's backpressure is passed straight back.
module tb_hpipe_relu;
  import hpipe_pkg::*;
  localparam int W = 4;
  localparam act_t SIX = 16'sd1536;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  act_t in_data [W], o0 [W], o1 [W];
  logic v = 0, bp_in = 0, bp0, bp1, v0, v1;

  hpipe_relu #(.W(W)) u0 (.clk, .rst_n, .in_data, .in_new_oc(v), .coarse_backpressure(bp0),
    .out_data(o0), .out_new_oc(v0), .out_backpressure(bp_in));
  hpipe_relu #(.W(W), .RELU6(1'b1), .SIX(SIX)) u1 (.clk, .rst_n, .in_data, .in_new_oc(v),
    .coarse_backpressure(bp1), .out_data(o1), .out_new_oc(v1), .out_backpressure(bp_in));

  int checks = 0, failures = 0;
  int prev [W];
  logic pv = 0;

  initial begin
    for (int x = 0; x < W; x++) in_data[x] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      #1;
      v = ($urandom % 3 != 0);
      bp_in = $urandom % 2;
      for (int x = 0; x < W; x++) in_data[x] = act_t'($urandom % 8192 - 4096);
      #1;
      checks++;
      if (bp0 != bp_in || bp1 != bp_in) failures++;
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && pv) begin
      checks++;
      if (!v0 || !v1) failures++;
      for (int x = 0; x < W; x++) begin
        int e0, e1;
        e0 = (prev[x] < 0) ? 0 : prev[x];
        e1 = (e0 > 1536) ? 1536 : e0;
        checks += 2;
        if (int'(o0[x]) != e0) begin failures++; $display("relu %0d -> %0d", prev[x], o0[x]); end
        if (int'(o1[x]) != e1) begin failures++; $display("relu6 %0d -> %0d", prev[x], o1[x]); end
      end
    end else if (rst_n) begin
      checks++;
      if (v0 || v1) failures++;
    end
    pv = v;
    for (int x = 0; x < W; x++) prev[x] = int'(in_data[x]);
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
