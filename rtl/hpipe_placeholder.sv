// hpipe_placeholder: network input stage (TensorFlow Placeholder).
//
// The host delivers the image serialised in height, width, channel order, one activation
// per cycle on a valid/ready handshake. The stage collects it into a FIFO of DEPTH lines
// (where buffered stages have an input activation buffer, the paper gives this stage a
// FIFO). A completed line is sent to the consumers as C beats, one channel of all W
// columns per beat with out_new_oc, as soon as the consumers' coarse backpressure is low;
// while a line is sent the host can already fill the next slot. After the first beat of a
// line has left, the stage waits BP_GUARD cycles before it samples the backpressure again
// so that the consumer has accounted for that line. The serial host order, the valid/ready
// handshake and DEPTH = 2 are this design's choices; the paper only says that a serialized
// image enters the Placeholder.
module hpipe_placeholder
  import hpipe_pkg::*;
#(
  parameter int unsigned W        = 8,
  parameter int unsigned C        = 3,
  parameter int unsigned DEPTH    = 2,
  parameter int unsigned BP_GUARD = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  act_t host_data,
  input  logic host_valid,
  output logic host_ready,
  output act_t out_data [W],
  output logic out_new_oc,
  input  logic out_backpressure
);

  localparam int unsigned XW = (W > 1) ? $clog2(W) : 1;
  localparam int unsigned CW = (C > 1) ? $clog2(C) : 1;
  localparam int unsigned SW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned UW = $clog2(DEPTH + 1);

  act_t          mem [DEPTH * C][W];
  logic [XW-1:0] wx;
  logic [CW-1:0] wc, rc;
  logic [SW-1:0] wslot, rslot;
  logic [UW-1:0] used, full_lines;
  logic          sending, line_open;
  logic [7:0]    guard;

  logic wr, wr_first, wr_last, send_start, send_end;
  assign host_ready = (wx != '0 || wc != '0) || used < UW'(DEPTH);
  assign wr         = host_valid && host_ready;
  assign wr_first   = wr && wx == '0 && wc == '0;
  assign wr_last    = wr && wx == XW'(W - 1) && wc == CW'(C - 1);
  assign send_start = !sending && !line_open && guard == '0 && full_lines != '0 &&
                      !out_backpressure;
  assign send_end   = sending && rc == CW'(C - 1);

  always_ff @(posedge clk)
    if (wr) mem[int'(wslot) * C + int'(wc)][wx] <= host_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wx <= '0; wc <= '0; wslot <= '0; rslot <= '0; rc <= '0;
      used <= '0; full_lines <= '0; sending <= 1'b0; line_open <= 1'b0; guard <= '0;
      out_new_oc <= 1'b0;
      for (int x = 0; x < int'(W); x++) out_data[x] <= '0;
    end else begin
      // host side, (y, x, c) order
      if (wr) begin
        if (wc == CW'(C - 1)) begin
          wc <= '0;
          if (wx == XW'(W - 1)) begin
            wx    <= '0;
            wslot <= (wslot == SW'(DEPTH - 1)) ? '0 : wslot + 1'b1;
          end else wx <= wx + 1'b1;
        end else wc <= wc + 1'b1;
      end
      used       <= used + UW'(wr_first) - UW'(send_end);
      full_lines <= full_lines + UW'(wr_last) - UW'(send_start);

      // consumer side
      out_new_oc <= sending;
      if (sending) begin
        for (int x = 0; x < int'(W); x++) out_data[x] <= mem[int'(rslot) * C + int'(rc)][x];
        if (send_end) begin
          sending <= 1'b0;
          rc      <= '0;
          rslot   <= (rslot == SW'(DEPTH - 1)) ? '0 : rslot + 1'b1;
        end else rc <= rc + 1'b1;
      end else if (send_start) begin
        sending   <= 1'b1;
        line_open <= 1'b1;
      end
      if (out_new_oc && line_open) begin
        line_open <= 1'b0;
        guard     <= 8'(BP_GUARD);
      end else if (guard != '0) guard <= guard - 8'd1;
    end
  end

endmodule
