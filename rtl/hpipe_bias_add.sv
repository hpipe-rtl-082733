// hpipe_bias_add: unbuffered BiasAdd stage.
//
// Adds the bias of the current output channel to every activation of the beat and
// saturates the sum to 16 bits. The stage counts the beats of a line to know which of the
// C channels is passing; the biases are written over the cfg bus (mem MEM_BIAS,
// addr = channel). It holds no line buffer, so, as in the paper, it forwards its consumers'
// coarse backpressure straight to its producer. One register stage (the pipelined wire
// between stages) gives a latency of one cycle. The bias memory, its load bus and the
// saturation are this design's choices.
//
// Lint notes: the bank field and the upper address and data bits of the shared cfg bus are
// unused here; they serve the wider weight memories of the convolution stage.
module hpipe_bias_add
  import hpipe_pkg::*;
#(
  parameter int unsigned LAYER_ID = 0,
  parameter int unsigned W        = 8,
  parameter int unsigned C        = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  cfg_t cfg,
  input  act_t in_data [W],
  input  logic in_new_oc,
  output logic coarse_backpressure,
  output act_t out_data [W],
  output logic out_new_oc,
  input  logic out_backpressure
);

  localparam int unsigned CW = (C > 1) ? $clog2(C) : 1;

  act_t          bias [C];
  logic [CW-1:0] ch;

  always_ff @(posedge clk)
    if (cfg.we && cfg.layer == 8'(LAYER_ID) && cfg.mem == MEM_BIAS)
      bias[cfg.addr[CW-1:0]] <= act_t'(cfg.data[15:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ch         <= '0;
      out_new_oc <= 1'b0;
      for (int x = 0; x < int'(W); x++) out_data[x] <= '0;
    end else begin
      out_new_oc <= in_new_oc;
      if (in_new_oc) begin
        ch <= (ch == CW'(C - 1)) ? '0 : ch + 1'b1;
        for (int x = 0; x < int'(W); x++)
          out_data[x] <= sat16(ACC_W'(in_data[x]) + ACC_W'(bias[ch]));
      end
    end
  end

  assign coarse_backpressure = out_backpressure;

endmodule
