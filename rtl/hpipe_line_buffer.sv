// hpipe_line_buffer: input activation buffers, pad muxes and the write half of the input
// buffer controller of a buffered HPIPE stage.
//
// A producer delivers one line of the input tensor as C beats; each beat carries the W
// activations of one channel and is marked by in_new_oc. The line is written, widened by
// the pad muxes with PAD_L/PAD_R pad values, into a ring of LINES line slots. Channel c is
// stored in bank (c mod N_BANKS) at word slot*CB + c/N_BANKS, so every bank (one per
// channel split of a convolution) holds a whole line of its channels and can be read
// independently. Before the first input line of an image the controller writes PAD_T
// lines of pad values on its own, and after the last one PAD_B lines, as the paper
// describes for vertical padding.
//
// coarse_backpressure is high whenever a producer may not start a new line: the ring has
// no free slot for a full line, padding is being written, or the whole image has already
// been received. It is only sampled by producers at line boundaries; a line, once started,
// is always sent to the end. A line occupies its slot from its first beat until the reader
// releases it.
//
// Reader side: avail counts the complete lines from the read base; base_addr is the word
// address of the base line. The reader reads any bank with a one-cycle registered read,
// moves the base forward with advance/advance_n when it is done with lines, and frees the
// slots with release/release_n once no read of them is still in flight. The ring depth,
// the bank layout and this reader handshake are choices of this design; the paper gives
// the ring buffers, the pad muxes and the space rule for coarse_backpressure.
//
// Lint note: rst_n also appears in the 'disable iff' of the handshake assertions, which the
// lint reports as a reset used both asynchronously and synchronously. It feeds no logic
// there, only the checkers, so it stands.
module hpipe_line_buffer
  import hpipe_pkg::*;
#(
  parameter int unsigned W       = 8,
  parameter int unsigned C       = 4,
  parameter int unsigned H       = 8,
  parameter int unsigned PAD_T   = 0,
  parameter int unsigned PAD_B   = 0,
  parameter int unsigned PAD_L   = 0,
  parameter int unsigned PAD_R   = 0,
  parameter act_t        PAD_VAL = '0,
  parameter int unsigned N_BANKS = 1,
  parameter int unsigned LINES   = 4,
  localparam int unsigned WP     = W + PAD_L + PAD_R,
  localparam int unsigned CB     = (C + N_BANKS - 1) / N_BANKS,
  localparam int unsigned DEPTH  = LINES * CB,
  localparam int unsigned AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned LW     = $clog2(LINES + 1) + 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // producer side
  input  act_t                       in_data [W],
  input  logic                       in_new_oc,
  output logic                       coarse_backpressure,
  // reader side
  input  logic [AW-1:0]              rd_addr [N_BANKS],
  output logic [WP-1:0][DATA_W-1:0]  rd_q    [N_BANKS],
  output logic [AW-1:0]              base_addr,
  output logic [LW-1:0]              avail,
  input  logic                       advance,
  input  logic [LW-1:0]              advance_n,
  input  logic                       release_lines,
  input  logic [LW-1:0]              release_n
);

  typedef enum logic [1:0] {PH_PAD_TOP, PH_INPUT, PH_PAD_BOT} phase_e;

  localparam int unsigned SW = (LINES > 1) ? $clog2(LINES) : 1;
  localparam int unsigned CW = $clog2(C + 1);
  localparam int unsigned HW = $clog2(H + PAD_T + PAD_B + 1);
  localparam int unsigned BW = (N_BANKS > 1) ? $clog2(N_BANKS) : 1;
  localparam int unsigned LCW = $clog2(CB + 1);

  logic [WP-1:0][DATA_W-1:0] mem [N_BANKS][DEPTH];

  phase_e          phase;
  logic [SW-1:0]   wr_slot, base_slot;
  logic [CW-1:0]   wr_ch;          // channel of the next input beat
  logic [BW-1:0]   wr_bank;        // wr_ch mod N_BANKS
  logic [LCW-1:0]  wr_local;       // wr_ch / N_BANKS, or word counter of a pad line
  logic            pad_active;
  logic [HW-1:0]   pad_cnt, in_started;
  logic [LW-1:0]   occ;            // slots in use (started, not released)

  // ---------------------------------------------------------------- pad muxes
  logic [WP-1:0][DATA_W-1:0] in_word, pad_word;
  always_comb begin
    for (int x = 0; x < int'(WP); x++) begin
      pad_word[x] = PAD_VAL;
      if (x >= int'(PAD_L) && x < int'(PAD_L + W)) in_word[x] = in_data[x - PAD_L];
      else                                         in_word[x] = PAD_VAL;
    end
  end

  // ---------------------------------------------------------------- write control
  logic pad_phase, pad_start, pad_we, pad_done;
  logic in_start, in_done;
  logic [AW-1:0] wr_addr;

  assign pad_phase = (phase != PH_INPUT);
  assign pad_start = pad_phase && !pad_active && (occ < LW'(LINES));
  assign pad_we    = pad_phase && (pad_active || pad_start);
  assign pad_done  = pad_we && (wr_local == LCW'(CB - 1));
  assign in_start  = in_new_oc && (wr_ch == '0);
  assign in_done   = in_new_oc && (wr_ch == CW'(C - 1));
  assign wr_addr   = AW'(wr_slot * CB) + AW'(wr_local);

  assign coarse_backpressure = !(phase == PH_INPUT && in_started < HW'(H) && occ < LW'(LINES));

  always_ff @(posedge clk) begin
    if (in_new_oc)
      mem[wr_bank][wr_addr] <= in_word;
    if (pad_we)
      for (int b = 0; b < int'(N_BANKS); b++) mem[b][wr_addr] <= pad_word;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase      <= (PAD_T > 0) ? PH_PAD_TOP : PH_INPUT;
      wr_slot    <= '0;
      wr_ch      <= '0;
      wr_bank    <= '0;
      wr_local   <= '0;
      pad_active <= 1'b0;
      pad_cnt    <= '0;
      in_started <= '0;
    end else begin
      // padding lines
      if (pad_we) begin
        pad_active <= !pad_done;
        wr_local   <= pad_done ? '0 : wr_local + 1'b1;
        if (pad_done) begin
          wr_slot <= (wr_slot == SW'(LINES - 1)) ? '0 : wr_slot + 1'b1;
          if (phase == PH_PAD_TOP && pad_cnt == HW'(PAD_T - 1)) begin
            phase   <= PH_INPUT;
            pad_cnt <= '0;
          end else if (phase == PH_PAD_BOT && pad_cnt == HW'(PAD_B - 1)) begin
            phase   <= (PAD_T > 0) ? PH_PAD_TOP : PH_INPUT;
            pad_cnt <= '0;
          end else begin
            pad_cnt <= pad_cnt + 1'b1;
          end
        end
      end
      // input lines
      if (in_new_oc) begin
        if (in_start) in_started <= in_started + 1'b1;
        if (in_done) begin
          wr_ch    <= '0;
          wr_bank  <= '0;
          wr_local <= '0;
          wr_slot  <= (wr_slot == SW'(LINES - 1)) ? '0 : wr_slot + 1'b1;
          if (in_started + HW'(in_start) == HW'(H)) begin
            in_started <= '0;
            phase      <= (PAD_B > 0) ? PH_PAD_BOT : ((PAD_T > 0) ? PH_PAD_TOP : PH_INPUT);
          end
        end else begin
          wr_ch <= wr_ch + 1'b1;
          if (wr_bank == BW'(N_BANKS - 1)) begin
            wr_bank  <= '0;
            wr_local <= wr_local + 1'b1;
          end else begin
            wr_bank <= wr_bank + 1'b1;
          end
        end
      end
    end
  end

  // ---------------------------------------------------------------- occupancy
  logic line_start, line_done;
  assign line_start = pad_start || in_start;
  assign line_done  = pad_done  || in_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      occ       <= '0;
      avail     <= '0;
      base_slot <= '0;
    end else begin
      occ   <= occ + LW'(line_start) - (release_lines ? release_n : '0);
      avail <= avail + LW'(line_done) - (advance ? advance_n : '0);
      if (advance)
        base_slot <= SW'((int'(base_slot) + int'(advance_n)) % int'(LINES));
    end
  end

  assign base_addr = AW'(base_slot * CB);

  // ---------------------------------------------------------------- read ports
  always_ff @(posedge clk)
    for (int b = 0; b < int'(N_BANKS); b++) rd_q[b] <= mem[b][rd_addr[b]];

  // ---------------------------------------------------------------- protocol rules
  // a producer starts a line only while coarse_backpressure is low
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    in_start |-> !coarse_backpressure);
  a_release_ok: assert property (@(posedge clk) disable iff (!rst_n)
    release_lines |-> (release_n <= occ));
  a_advance_ok: assert property (@(posedge clk) disable iff (!rst_n)
    advance |-> (advance_n <= avail + LW'(line_done)));

endmodule
