// hpipe_dsp_chain: the chained DSP blocks that compute one output column of a
// convolution stage.
//
// Each DSP block holds two 16x16 multipliers whose products are summed and then added to
// the chain-in value coming from the previous block. Every block except the last one ends
// in a delay register that drives the next block's chain-in; the last block ends in the
// accumulator, which starts again from zero (the zero mux) on the first weight line of an
// output channel. With N_SPLITS multipliers there are N_SPLITS/2 blocks, so a sum travels
// N_SPLITS/2 - 1 cycles along the chain before it reaches the accumulator. The inputs of
// block d must therefore be presented d cycles after those of block 0 for the same weight
// line (the staircase of weights, x indices and runlengths); acc_valid, acc_first and
// acc_last travel with the inputs of the last block.
//
// Timing: acc_out is valid and done is high one cycle after the acc_last input of the last
// block. Structure, chaining and zero-mux accumulation follow the paper's convolution
// diagram; the single register per block (the paper omits non-essential registers) and the
// 48-bit accumulator are this design's choices.
module hpipe_dsp_chain
  import hpipe_pkg::*;
#(
  parameter int unsigned N_SPLITS = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  act_t                    act [N_SPLITS],
  input  act_t                    wgt [N_SPLITS],
  input  logic                    acc_valid,
  input  logic                    acc_first,
  input  logic                    acc_last,
  output logic signed [ACC_W-1:0] acc_out,
  output logic                    done
);

  localparam int unsigned ND = N_SPLITS / 2;

  logic signed [ACC_W-1:0] pair_sum [ND];
  logic signed [ACC_W-1:0] chain_q  [ND];   // delay registers (index ND-1 unused)

  always_comb
    for (int d = 0; d < int'(ND); d++)
      pair_sum[d] = ACC_W'(act[2*d])   * ACC_W'(wgt[2*d])
                  + ACC_W'(act[2*d+1]) * ACC_W'(wgt[2*d+1]);

  always_ff @(posedge clk) begin
    chain_q[0] <= pair_sum[0];
    for (int d = 1; d < int'(ND); d++) chain_q[d] <= pair_sum[d] + chain_q[d-1];
  end

  logic signed [ACC_W-1:0] chain_in, acc_base;
  assign chain_in = (ND > 1) ? chain_q[(ND > 1) ? ND-2 : 0] : '0;
  assign acc_base = acc_first ? '0 : acc_out;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_out <= '0;
      done    <= 1'b0;
    end else begin
      if (acc_valid) acc_out <= acc_base + pair_sum[ND-1] + chain_in;
      done <= acc_valid && acc_last;
    end
  end

  initial assert (N_SPLITS >= 2 && N_SPLITS % 2 == 0)
    else $error("N_SPLITS must be even: two multipliers per DSP block");

endmodule
