// hpipe_add: buffered element-wise Add of two producers (the residual join).
//
// Each producer writes into an input activation buffer of its own (an hpipe_line_buffer
// without padding) and sees that buffer's coarse_backpressure only. When both buffers
// hold a complete line and the consumer is not backpressuring, the stage reads the two
// lines channel by channel, one channel per cycle, and emits the saturated sums one cycle
// after each read. The buffer depths LINES_A and LINES_B are parameters so that the
// buffering on a skip path can be made to match the buffering on the other path, which is
// how the paper keeps the pipeline from deadlocking at an Add; choosing those depths for a
// given network is left to whoever instantiates the stage.
module hpipe_add
  import hpipe_pkg::*;
#(
  parameter int unsigned W        = 8,
  parameter int unsigned H        = 8,
  parameter int unsigned C        = 4,
  parameter int unsigned LINES_A  = 2,
  parameter int unsigned LINES_B  = 2,
  parameter int unsigned BP_GUARD = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  act_t a_data [W],
  input  logic a_new_oc,
  output logic a_backpressure,
  input  act_t b_data [W],
  input  logic b_new_oc,
  output logic b_backpressure,
  output act_t out_data [W],
  output logic out_new_oc,
  input  logic out_backpressure
);

  localparam int unsigned AWA = (LINES_A * C > 1) ? $clog2(LINES_A * C) : 1;
  localparam int unsigned AWB = (LINES_B * C > 1) ? $clog2(LINES_B * C) : 1;
  localparam int unsigned LWA = $clog2(LINES_A + 1) + 1;
  localparam int unsigned LWB = $clog2(LINES_B + 1) + 1;
  localparam int unsigned CW  = (C > 1) ? $clog2(C) : 1;
  localparam int unsigned PIPE = 3;

  logic [AWA-1:0]          ra [1];
  logic [AWB-1:0]          rb [1];
  logic [W-1:0][DATA_W-1:0] qa [1];
  logic [W-1:0][DATA_W-1:0] qb [1];
  logic [AWA-1:0]          base_a;
  logic [AWB-1:0]          base_b;
  logic [LWA-1:0]          avail_a;
  logic [LWB-1:0]          avail_b;
  logic                    advance, release_lines;

  hpipe_line_buffer #(.W(W), .C(C), .H(H), .N_BANKS(1), .LINES(LINES_A)) u_buf_a (
    .clk, .rst_n, .in_data(a_data), .in_new_oc(a_new_oc), .coarse_backpressure(a_backpressure),
    .rd_addr(ra), .rd_q(qa), .base_addr(base_a), .avail(avail_a), .advance,
    .advance_n(LWA'(1)), .release_lines, .release_n(LWA'(1)));

  hpipe_line_buffer #(.W(W), .C(C), .H(H), .N_BANKS(1), .LINES(LINES_B)) u_buf_b (
    .clk, .rst_n, .in_data(b_data), .in_new_oc(b_new_oc), .coarse_backpressure(b_backpressure),
    .rd_addr(rb), .rd_q(qb), .base_addr(base_b), .avail(avail_b), .advance,
    .advance_n(LWB'(1)), .release_lines, .release_n(LWB'(1)));

  logic          running, line_open, v1;
  logic [CW-1:0] ch;
  logic [7:0]    guard;
  logic [15:0]   ocnt;   // beats of the current output line already sent
  logic          row_start;

  assign row_start = !running && !line_open && guard == '0 && avail_a != '0 &&
                     avail_b != '0 && !out_backpressure;
  assign advance   = running && ch == CW'(C - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      ch      <= '0;
      v1      <= 1'b0;
    end else begin
      v1 <= running;
      if (row_start) begin
        running <= 1'b1;
        ch      <= '0;
      end else if (running) begin
        if (ch == CW'(C - 1)) running <= 1'b0;
        else                  ch <= ch + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      line_open <= 1'b0;
      guard     <= '0;
      ocnt      <= '0;
    end else begin
      if (out_new_oc) ocnt <= (ocnt == 16'(C - 1)) ? '0 : ocnt + 16'd1;
      if (row_start) line_open <= 1'b1;
      else if (out_new_oc && ocnt == '0 && line_open) begin
        line_open <= 1'b0;
        guard     <= 8'(BP_GUARD);
      end else if (guard != '0) guard <= guard - 8'd1;
    end
  end

  logic [PIPE-1:0] rel_v;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rel_v <= '0;
    else        rel_v <= {rel_v[PIPE-2:0], advance};
  assign release_lines = rel_v[PIPE-1];

  always_comb begin
    logic [AWA:0] sa;
    logic [AWB:0] sb;
    sa    = (AWA+1)'(base_a) + (AWA+1)'(ch);
    sb    = (AWB+1)'(base_b) + (AWB+1)'(ch);
    ra[0] = (sa >= (AWA+1)'(LINES_A * C)) ? AWA'(sa - (AWA+1)'(LINES_A * C)) : AWA'(sa);
    rb[0] = (sb >= (AWB+1)'(LINES_B * C)) ? AWB'(sb - (AWB+1)'(LINES_B * C)) : AWB'(sb);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_new_oc <= 1'b0;
      for (int x = 0; x < int'(W); x++) out_data[x] <= '0;
    end else begin
      out_new_oc <= v1;
      if (v1)
        for (int x = 0; x < int'(W); x++)
          out_data[x] <= sat16(ACC_W'(act_t'(qa[0][x])) + ACC_W'(act_t'(qb[0][x])));
    end
  end

endmodule
