// hpipe_mean: global average pooling (the Mean over height and width before the
// classifier).
//
// For every beat of every line the stage adds the W activations of the beat to the running
// sum of that channel. After the last beat of the image the C sums are copied into an
// output register file and the stage emits one 1x1xC line, one channel per cycle, as soon
// as its consumer is not backpressuring; the sum is multiplied by RECIP = round(2^24 /
// (H*W)) and shifted right by 24, a rounding-free approximation of the division. Accepting
// the next image can start immediately because the results sit in their own registers;
// coarse_backpressure is held high only while a result is waiting to be sent. The paper
// only names the Mean operation; its insides here are this design's choice.
//
// Lint note: rst_n also appears in the 'disable iff' of the handshake assertions, which the
// lint reports as a reset used both asynchronously and synchronously. It feeds no logic
// there, only the checkers, so it stands.
module hpipe_mean
  import hpipe_pkg::*;
#(
  parameter int unsigned W = 7,
  parameter int unsigned H = 7,
  parameter int unsigned C = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  act_t in_data [W],
  input  logic in_new_oc,
  output logic coarse_backpressure,
  output act_t out_data [1],
  output logic out_new_oc,
  input  logic out_backpressure
);

  localparam int unsigned  CW    = (C > 1) ? $clog2(C) : 1;
  localparam int unsigned  HW    = $clog2(H + 1);
  localparam int unsigned  SW    = DATA_W + $clog2(H * W + 1) + 1;
  localparam longint       RECIP = ((longint'(1) << 24) + longint'(H * W) / 2) / longint'(H * W);

  logic signed [SW-1:0] sum [C];
  logic signed [SW-1:0] res [C];
  logic [CW-1:0]        ch, och;
  logic [HW-1:0]        row;
  logic                 pending, sending;
  logic signed [SW-1:0] beat_sum;

  always_comb begin
    beat_sum = '0;
    for (int x = 0; x < int'(W); x++) beat_sum += SW'(in_data[x]);
  end

  logic img_done;
  assign img_done = in_new_oc && ch == CW'(C - 1) && row == HW'(H - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ch  <= '0;
      row <= '0;
      for (int c = 0; c < int'(C); c++) sum[c] <= '0;
    end else if (in_new_oc) begin
      sum[ch] <= (row == '0) ? beat_sum : sum[ch] + beat_sum;
      if (ch == CW'(C - 1)) begin
        ch  <= '0;
        row <= (row == HW'(H - 1)) ? '0 : row + 1'b1;
      end else ch <= ch + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (img_done) begin
      for (int c = 0; c < int'(C) - 1; c++) res[c] <= sum[c];
      res[C-1] <= sum[C-1] + beat_sum;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending    <= 1'b0;
      sending    <= 1'b0;
      och        <= '0;
      out_new_oc <= 1'b0;
      out_data[0] <= '0;
    end else begin
      out_new_oc <= 1'b0;
      if (img_done) pending <= 1'b1;
      else if (pending && !sending && !out_backpressure) begin
        sending <= 1'b1;
        och     <= '0;
      end
      if (sending) begin
        out_new_oc  <= 1'b1;
        out_data[0] <= sat16(ACC_W'((64'(res[och]) * RECIP) >>> 24));
        if (och == CW'(C - 1)) begin
          sending <= 1'b0;
          pending <= 1'b0;
        end else och <= och + 1'b1;
      end
    end
  end

  assign coarse_backpressure = pending;

  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) img_done |-> !pending);

endmodule
