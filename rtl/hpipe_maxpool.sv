// hpipe_maxpool: buffered MaxPool stage for any kernel size and stride.
//
// Input lines are kept in an hpipe_line_buffer whose pad muxes fill padding rows and
// columns with the most negative activation, so padding never wins the maximum. Once KH
// lines of the next output row are buffered and the consumer is not backpressuring, the
// controller produces the output line channel by channel: for each channel it reads the KH
// buffered lines one per cycle, keeps the column-wise running maximum, and after the last
// one takes, for every output column ox, the maximum over columns ox*STRIDE ..
// ox*STRIDE+KW-1. One output beat therefore leaves every KH cycles, two cycles after the
// last read of its channel. After the row the read base moves by STRIDE lines (by the
// rest of the image after the last row) and the slots are released once the last read
// has left the pipeline.
//
// The paper names MaxPool as a buffered stage with arbitrary kernel and stride; the
// row-by-row vertical-then-horizontal reduction and its timing are this design's choices.
module hpipe_maxpool
  import hpipe_pkg::*;
#(
  parameter int unsigned W_IN     = 8,
  parameter int unsigned H_IN     = 8,
  parameter int unsigned C        = 4,
  parameter int unsigned KH       = 3,
  parameter int unsigned KW       = 3,
  parameter int unsigned STRIDE   = 2,
  parameter int unsigned PAD_T    = 0,
  parameter int unsigned PAD_B    = 1,
  parameter int unsigned PAD_L    = 0,
  parameter int unsigned PAD_R    = 1,
  parameter int unsigned LINES    = KH + STRIDE,
  parameter int unsigned BP_GUARD = 4,
  localparam int unsigned W_OUT   = (W_IN + PAD_L + PAD_R - KW) / STRIDE + 1,
  localparam int unsigned H_PAD   = H_IN + PAD_T + PAD_B,
  localparam int unsigned H_OUT   = (H_PAD - KH) / STRIDE + 1
) (
  input  logic clk,
  input  logic rst_n,
  input  act_t in_data [W_IN],
  input  logic in_new_oc,
  output logic coarse_backpressure,
  output act_t out_data [W_OUT],
  output logic out_new_oc,
  input  logic out_backpressure
);

  localparam int unsigned WP    = W_IN + PAD_L + PAD_R;
  localparam int unsigned DEPTH = LINES * C;
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned LW    = $clog2(LINES + 1) + 1;
  localparam int unsigned CW    = (C > 1) ? $clog2(C) : 1;
  localparam int unsigned KW_   = (KH > 1) ? $clog2(KH) : 1;
  localparam int unsigned PIPE  = 3;

  logic [AW-1:0]             rd_addr [1];
  logic [WP-1:0][DATA_W-1:0] rd_q    [1];
  logic [AW-1:0]             base_addr;
  logic [LW-1:0]             avail;
  logic                      advance, release_lines;
  logic [LW-1:0]             advance_n, release_n;

  hpipe_line_buffer #(
    .W(W_IN), .C(C), .H(H_IN), .PAD_T(PAD_T), .PAD_B(PAD_B), .PAD_L(PAD_L), .PAD_R(PAD_R),
    .PAD_VAL(ACT_MIN), .N_BANKS(1), .LINES(LINES)
  ) u_buf (
    .clk, .rst_n, .in_data, .in_new_oc, .coarse_backpressure,
    .rd_addr, .rd_q, .base_addr, .avail, .advance, .advance_n, .release_lines, .release_n
  );

  // ---------------------------------------------------------------- controller
  logic           running, line_open;
  logic [CW-1:0]  ch;
  logic [KW_-1:0] ky;
  logic [15:0]    oy;
  logic [7:0]     guard;
  logic [15:0]    ocnt;   // beats of the current output line already sent
  logic           row_start, row_end;

  assign row_start = !running && !line_open && guard == '0 &&
                     avail >= LW'(KH) && !out_backpressure;
  assign row_end   = running && ky == KW_'(KH - 1) && ch == CW'(C - 1);
  assign advance   = row_end;
  assign advance_n = (oy == 16'(H_OUT - 1)) ? LW'(H_PAD - (H_OUT - 1) * STRIDE) : LW'(STRIDE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      ch      <= '0;
      ky      <= '0;
      oy      <= '0;
    end else if (row_start) begin
      running <= 1'b1;
      ch      <= '0;
      ky      <= '0;
    end else if (running) begin
      if (ky == KW_'(KH - 1)) begin
        ky <= '0;
        if (ch == CW'(C - 1)) begin
          running <= 1'b0;
          oy      <= (oy == 16'(H_OUT - 1)) ? '0 : oy + 16'd1;
        end else ch <= ch + 1'b1;
      end else ky <= ky + 1'b1;
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

  logic [PIPE-1:0]         rel_v;
  logic [PIPE-1:0][LW-1:0] rel_n;
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

  // read address: line ky of the window, channel ch, wrapped around the ring
  logic [AW:0] addr_sum;
  always_comb begin
    addr_sum   = (AW+1)'(base_addr) + (AW+1)'(ky * C) + (AW+1)'(ch);
    rd_addr[0] = (addr_sum >= (AW+1)'(DEPTH)) ? AW'(addr_sum - (AW+1)'(DEPTH)) : AW'(addr_sum);
  end

  // ---------------------------------------------------------------- datapath
  logic  v1, first1, last1;
  act_t  vmax [WP];
  act_t  vnew [WP];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0;
    end else begin
      v1     <= running;
      first1 <= (ky == '0);
      last1  <= (ky == KW_'(KH - 1));
    end
  end

  always_comb
    for (int x = 0; x < int'(WP); x++) begin
      act_t r;
      r = act_t'(rd_q[0][x]);
      vnew[x] = (first1 || r > vmax[x]) ? r : vmax[x];
    end

  always_ff @(posedge clk) if (v1) vmax <= vnew;

  // horizontal maximum over the KW columns of each window
  act_t hmax [W_OUT];
  always_comb
    for (int ox = 0; ox < int'(W_OUT); ox++) begin
      hmax[ox] = vnew[ox * STRIDE];
      for (int kx = 1; kx < int'(KW); kx++)
        if (vnew[ox * STRIDE + kx] > hmax[ox]) hmax[ox] = vnew[ox * STRIDE + kx];
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_new_oc <= 1'b0;
      for (int ox = 0; ox < int'(W_OUT); ox++) out_data[ox] <= '0;
    end else begin
      out_new_oc <= v1 && last1;
      if (v1 && last1) out_data <= hmax;
    end
  end

endmodule
