// hpipe_relu: unbuffered Relu / Relu6 stage.
//
// Clamps every activation of a beat at zero from below and, when RELU6 is set, at the
// fixed-point value SIX from above (6.0 in the layer's format). Like the other unbuffered
// stages it passes its consumers' coarse backpressure straight to its producer, and its
// one register stage gives a latency of one cycle. Both operations are named by the paper;
// putting them in one module with a RELU6 switch is this design's choice.
module hpipe_relu
  import hpipe_pkg::*;
#(
  parameter int unsigned W     = 8,
  parameter bit          RELU6 = 1'b0,
  parameter act_t        SIX   = 16'sd1536
) (
  input  logic clk,
  input  logic rst_n,
  input  act_t in_data [W],
  input  logic in_new_oc,
  output logic coarse_backpressure,
  output act_t out_data [W],
  output logic out_new_oc,
  input  logic out_backpressure
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_new_oc <= 1'b0;
      for (int x = 0; x < int'(W); x++) out_data[x] <= '0;
    end else begin
      out_new_oc <= in_new_oc;
      if (in_new_oc)
        for (int x = 0; x < int'(W); x++) begin
          if (in_data[x] < 0)                 out_data[x] <= '0;
          else if (RELU6 && in_data[x] > SIX) out_data[x] <= SIX;
          else                                out_data[x] <= in_data[x];
        end
    end
  end

  assign coarse_backpressure = out_backpressure;

endmodule
