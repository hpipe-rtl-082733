// hpipe_conv: sparse, gather-based convolution stage (Conv2D, MatMul, and depthwise
// convolutions written as block-diagonal weights).
//
// The stage computes one output line (all C_OUT channels of one output row) at a time.
// Input lines are kept in hpipe_line_buffer, split into N_SPLITS banks by input channel
// (channel c lives in split c mod N_SPLITS). Each split owns a weight buffer holding only
// the non-zero weights of its channels, each stored with an x index (kernel column) and a
// runlength: the distance, in (kernel row, channel) word addresses of the split's bank,
// from the previous weight of the same output channel. All splits hold the same number of
// entries per output channel (shorter lists padded with zero weights); that number, the
// weight lines of the channel, sits in the accum/valid controller's memory.
//
// Once KH lines from the current output row are buffered and the consumer is not
// backpressuring, the accum/valid controller walks the weight lines of every output
// channel, one line per cycle, loading each channel's count into a down counter. Per
// split, the input buffer controller reads the entry, decodes the runlength into a bank
// address (base line + accumulated offset, wrapped around the ring) and reads that word,
// a full padded input line of one channel. For output column ox, the X mux of each split
// picks column ox*STRIDE + x_index, the multiplier multiplies it with the weight, and the
// DSP chain of that column sums the splits and accumulates over the weight lines. When the
// counter reaches zero the accumulator holds the output, which is shifted right by SHIFT,
// saturated to 16 bits and sent with out_new_oc. Because every further DSP block of a
// chain adds one cycle, split pair d runs d cycles behind pair 0 (the staircase shift of
// weights, x indices and runlengths).
//
// Throughput: one output line every sum(weight lines) cycles, i.e. the sparse work divided
// by N_SPLITS; zero weights that were pruned cost nothing. Latency from a row start to the
// first out_new_oc is (weight lines of channel 0) + N_SPLITS/2 + 3 cycles.
//
// Interface: in_data/in_new_oc/coarse_backpressure towards the producer, out_data/
// out_new_oc/out_backpressure towards the consumers, cfg to load the weight buffers
// (mem MEM_WEIGHT, bank = split, data {runlength[11:0], x_index[3:0], weight[15:0]}) and
// the weight-line counts (MEM_OCLEN, addr = output channel). The paper loads these memories
// from compiler-generated initialisation files; the load bus, the SHIFT requantisation, the
// ring depth LINES and the BP_GUARD wait before re-sampling out_backpressure are this
// design's choices.
module hpipe_conv
  import hpipe_pkg::*;
#(
  parameter int unsigned LAYER_ID = 0,
  parameter int unsigned W_IN     = 8,
  parameter int unsigned H_IN     = 8,
  parameter int unsigned C_IN     = 8,
  parameter int unsigned C_OUT    = 8,
  parameter int unsigned KH       = 3,
  parameter int unsigned KW       = 3,
  parameter int unsigned STRIDE   = 1,
  parameter int unsigned PAD_T    = 1,
  parameter int unsigned PAD_B    = 1,
  parameter int unsigned PAD_L    = 1,
  parameter int unsigned PAD_R    = 1,
  parameter int unsigned N_SPLITS = 4,
  parameter int unsigned LINES    = KH + STRIDE,
  parameter int unsigned WB_DEPTH = 256,
  parameter int unsigned SHIFT    = 8,
  parameter int unsigned BP_GUARD = 4,
  localparam int unsigned W_OUT   = (W_IN + PAD_L + PAD_R - KW) / STRIDE + 1,
  localparam int unsigned H_PAD   = H_IN + PAD_T + PAD_B,
  localparam int unsigned H_OUT   = (H_PAD - KH) / STRIDE + 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  cfg_t  cfg,
  input  act_t  in_data [W_IN],
  input  logic  in_new_oc,
  output logic  coarse_backpressure,
  output act_t  out_data [W_OUT],
  output logic  out_new_oc,
  input  logic  out_backpressure
);

  localparam int unsigned ND    = N_SPLITS / 2;
  localparam int unsigned WP    = W_IN + PAD_L + PAD_R;
  localparam int unsigned CB    = (C_IN + N_SPLITS - 1) / N_SPLITS;
  localparam int unsigned DEPTH = LINES * CB;
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned LW    = $clog2(LINES + 1) + 1;
  localparam int unsigned WAW   = (WB_DEPTH > 1) ? $clog2(WB_DEPTH) : 1;
  localparam int unsigned OCW   = (C_OUT > 1) ? $clog2(C_OUT) : 1;
  localparam int unsigned XW    = 4;
  localparam int unsigned RLW   = 12;
  localparam int unsigned PIPE  = ND + 4;

  typedef struct packed {
    logic           valid;
    logic           first;
    logic           last;
    logic [WAW-1:0] wa;
    logic [AW-1:0]  base;
  } issue_t;

  typedef struct packed {
    logic [RLW-1:0]    rl;
    logic [XW-1:0]     xi;
    logic [DATA_W-1:0] w;
  } wentry_t;

  // ---------------------------------------------------------------- input buffers
  logic [AW-1:0]             rd_addr [N_SPLITS];
  logic [WP-1:0][DATA_W-1:0] rd_q    [N_SPLITS];
  logic [AW-1:0]             base_addr;
  logic [LW-1:0]             avail;
  logic                      advance, release_lines;
  logic [LW-1:0]             advance_n, release_n;

  hpipe_line_buffer #(
    .W(W_IN), .C(C_IN), .H(H_IN), .PAD_T(PAD_T), .PAD_B(PAD_B), .PAD_L(PAD_L),
    .PAD_R(PAD_R), .PAD_VAL('0), .N_BANKS(N_SPLITS), .LINES(LINES)
  ) u_buf (
    .clk, .rst_n, .in_data, .in_new_oc, .coarse_backpressure,
    .rd_addr, .rd_q, .base_addr, .avail, .advance, .advance_n,
    .release_lines, .release_n
  );

  // ---------------------------------------------------------------- memories
  wentry_t         wmem  [N_SPLITS][WB_DEPTH];
  logic [15:0]     ocmem [C_OUT];

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.layer == 8'(LAYER_ID) && cfg.mem == MEM_WEIGHT)
      wmem[cfg.bank[$clog2(N_SPLITS)-1:0]][cfg.addr[WAW-1:0]] <= cfg.data;
    if (cfg.we && cfg.layer == 8'(LAYER_ID) && cfg.mem == MEM_OCLEN)
      ocmem[cfg.addr[OCW-1:0]] <= cfg.data[15:0];
  end

  // ---------------------------------------------------------------- accum/valid controller
  logic            running, line_open;
  logic [OCW-1:0]  oc;
  logic [15:0]     cnt;
  logic            first_q;
  logic [WAW-1:0]  wa;
  logic [15:0]     oy;
  logic [7:0]      guard;
  logic [15:0]     ocnt;   // beats of the current output line already sent
  logic            row_start, row_end;
  issue_t          hist [ND];

  assign row_start = !running && !line_open && guard == '0 &&
                     avail >= LW'(KH) && !out_backpressure;
  assign row_end   = running && cnt == '0 && oc == OCW'(C_OUT - 1);

  assign advance   = row_end;
  assign advance_n = (oy == 16'(H_OUT - 1)) ? LW'(H_PAD - (H_OUT - 1) * STRIDE) : LW'(STRIDE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      oc      <= '0;
      cnt     <= '0;
      first_q <= 1'b0;
      wa      <= '0;
      oy      <= '0;
    end else if (row_start) begin
      running <= 1'b1;
      oc      <= '0;
      cnt     <= ocmem[0] - 16'd1;
      first_q <= 1'b1;
      wa      <= '0;
    end else if (running) begin
      wa <= wa + 1'b1;
      if (cnt == '0) begin
        first_q <= 1'b1;
        if (oc == OCW'(C_OUT - 1)) begin
          running <= 1'b0;
          oy      <= (oy == 16'(H_OUT - 1)) ? '0 : oy + 16'd1;
        end else begin
          oc  <= oc + 1'b1;
          cnt <= ocmem[oc + 1'b1] - 16'd1;
        end
      end else begin
        first_q <= 1'b0;
        cnt     <= cnt - 16'd1;
      end
    end
  end

  // the next line may only be started once the consumers have seen the first beat of the
  // previous one, so that their coarse_backpressure accounts for it
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      line_open <= 1'b0;
      guard     <= '0;
      ocnt      <= '0;
    end else begin
      if (out_new_oc) ocnt <= (ocnt == 16'(C_OUT - 1)) ? '0 : ocnt + 16'd1;
      if (row_start) line_open <= 1'b1;
      else if (out_new_oc && ocnt == '0 && line_open) begin
        line_open <= 1'b0;
        guard     <= 8'(BP_GUARD);
      end else if (guard != '0) guard <= guard - 8'd1;
    end
  end

  // slots are freed once the reads of the finished row have left the pipeline
  logic [PIPE-1:0]          rel_v;
  logic [PIPE-1:0][LW-1:0]  rel_n;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rel_v <= '0;
      rel_n <= '0;
    end else begin
      rel_v <= {rel_v[PIPE-2:0], advance};
      rel_n <= {rel_n[PIPE-2:0], advance_n};
    end
  end
  assign release_lines = rel_v[PIPE-1];
  assign release_n     = rel_n[PIPE-1];

  // issue history: hist[d] is what pair 0 issued d cycles ago
  assign hist[0] = '{valid: running, first: first_q, last: (cnt == '0), wa: wa, base: base_addr};
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int d = 1; d < int'(ND); d++) hist[d] <= '0;
    else        for (int d = 1; d < int'(ND); d++) hist[d] <= hist[d-1];
  end

  // ---------------------------------------------------------------- input buffer controllers
  issue_t            ctl1 [N_SPLITS];
  issue_t            ctl2 [N_SPLITS];
  wentry_t           we1  [N_SPLITS];
  logic [XW-1:0]     xi2  [N_SPLITS];
  act_t              w2   [N_SPLITS];
  logic [AW:0]       yz   [N_SPLITS];
  logic [AW:0]       yz_next [N_SPLITS];
  logic [AW:0]       addr_sum [N_SPLITS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(N_SPLITS); s++) begin
        ctl1[s] <= '0;
        ctl2[s] <= '0;
        yz[s]   <= '0;
      end
    end else begin
      for (int s = 0; s < int'(N_SPLITS); s++) begin
        ctl1[s] <= hist[s/2];
        ctl2[s] <= ctl1[s];
        if (ctl1[s].valid) yz[s] <= yz_next[s];
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int s = 0; s < int'(N_SPLITS); s++) begin
      we1[s] <= wmem[s][hist[s/2].wa];
      xi2[s] <= we1[s].xi;
      w2[s]  <= ctl1[s].valid ? act_t'(we1[s].w) : '0;
    end
  end

  // runlength decode into a ring address
  always_comb begin
    for (int s = 0; s < int'(N_SPLITS); s++) begin
      yz_next[s]  = ctl1[s].first ? (AW+1)'(we1[s].rl) : yz[s] + (AW+1)'(we1[s].rl);
      addr_sum[s] = (AW+1)'(ctl1[s].base) + yz_next[s];
      rd_addr[s]  = (addr_sum[s] >= (AW+1)'(DEPTH)) ? AW'(addr_sum[s] - (AW+1)'(DEPTH))
                                                     : AW'(addr_sum[s]);
    end
  end

  // ---------------------------------------------------------------- X muxes and DSP chains
  logic signed [ACC_W-1:0] acc   [W_OUT];
  logic                    done  [W_OUT];

  for (genvar ox = 0; ox < int'(W_OUT); ox++) begin : g_col
    act_t a_sel [N_SPLITS];
    always_comb
      for (int s = 0; s < int'(N_SPLITS); s++)
        a_sel[s] = act_t'(rd_q[s][ox * STRIDE + int'(xi2[s])]);

    hpipe_dsp_chain #(.N_SPLITS(N_SPLITS)) u_chain (
      .clk, .rst_n,
      .act       (a_sel),
      .wgt       (w2),
      .acc_valid (ctl2[N_SPLITS-1].valid),
      .acc_first (ctl2[N_SPLITS-1].first),
      .acc_last  (ctl2[N_SPLITS-1].last),
      .acc_out   (acc[ox]),
      .done      (done[ox])
    );
  end

  // ---------------------------------------------------------------- output
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_new_oc <= 1'b0;
      for (int ox = 0; ox < int'(W_OUT); ox++) out_data[ox] <= '0;
    end else begin
      out_new_oc <= done[0];
      if (done[0])
        for (int ox = 0; ox < int'(W_OUT); ox++) out_data[ox] <= sat16(acc[ox] >>> SHIFT);
    end
  end

  initial begin
    assert (N_SPLITS % 2 == 0) else $error("N_SPLITS must be even");
    assert (KW <= 16) else $error("x index field is 4 bits");
    assert (KH * CB < 4096) else $error("runlength field is 12 bits");
  end

endmodule
