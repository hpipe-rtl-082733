// hpipe_pkg: types and constants shared by all stages of the layer pipeline.
//
// Every stage exchanges activations one output channel group at a time: a line of
// W activations for one channel travels in a single beat, qualified by new_oc, and a
// full line (all channels) takes C beats. Activations are 16-bit signed fixed point,
// the precision used for every evaluated network. The memory load bus (cfg_t) is this
// design's own addition: it lets weights, per-channel weight-line counts and biases be
// written at start-up instead of being baked in from generated initialisation files.
package hpipe_pkg;

  localparam int unsigned DATA_W = 16;
  localparam int unsigned ACC_W  = 48;

  typedef logic signed [DATA_W-1:0] act_t;

  localparam act_t ACT_MAX = 16'sh7fff;
  localparam act_t ACT_MIN = 16'sh8000;

  // memory select on the load bus
  typedef enum logic [1:0] {
    MEM_WEIGHT = 2'd0,  // {runlength[11:0], x_index[3:0], weight[15:0]}
    MEM_OCLEN  = 2'd1,  // weight lines for one output channel (accum/valid controller)
    MEM_BIAS   = 2'd2   // bias for one output channel
  } mem_sel_e;

  typedef struct packed {
    logic        we;
    logic [7:0]  layer;
    mem_sel_e    mem;
    logic [7:0]  bank;
    logic [15:0] addr;
    logic [31:0] data;
  } cfg_t;

  // saturate a wide value into an activation
  function automatic act_t sat16(input logic signed [ACC_W-1:0] v);
    if (v > ACC_W'(signed'(ACT_MAX))) return ACT_MAX;
    if (v < ACC_W'(signed'(ACT_MIN))) return ACT_MIN;
    return act_t'(v);
  endfunction

endpackage
