// tb_hpipe_dsp_chain: checks the chained DSP blocks with three blocks (six multipliers).
// Random output channels of 1 to 6 weight lines are fed with the staircase timing the
// chain requires (block d sees a line d cycles after block 0); each accumulated result is
// compared with the dot product worked out here, and done must rise exactly one cycle
// after the last line reaches the last block.
module tb_hpipe_dsp_chain;
  import hpipe_pkg::*;
  localparam int NS = 6, ND = NS / 2, NOC = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  act_t act [NS], wgt [NS];
  logic v = 0, first = 0, last = 0, done;
  logic signed [ACC_W-1:0] acc;

  hpipe_dsp_chain #(.N_SPLITS(NS)) dut (.clk, .rst_n, .act, .wgt, .acc_valid(v),
    .acc_first(first), .acc_last(last), .acc_out(acc), .done);

  int checks = 0, failures = 0;
  // a flat list of lines; line i of block d is applied at cycle i + d
  int  la [2000][NS], lw [2000][NS];
  bit  lfirst [2000], llast [2000];
  longint expect_q [$];
  int nlines = 0;

  initial begin
    for (int s = 0; s < NS; s++) begin act[s] = '0; wgt[s] = '0; end
    for (int oc = 0; oc < NOC; oc++) begin
      int L;
      longint e;
      L = 1 + int'($urandom % 6);
      e = 0;
      for (int l = 0; l < L; l++) begin
        for (int s = 0; s < NS; s++) begin
          la[nlines][s] = int'($urandom % 65536) - 32768;
          lw[nlines][s] = int'($urandom % 65536) - 32768;
          e += longint'(la[nlines][s]) * lw[nlines][s];
        end
        lfirst[nlines] = (l == 0); llast[nlines] = (l == L - 1);
        nlines++;
      end
      expect_q.push_back(e);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < nlines + ND; t++) begin
      #1;
      for (int s = 0; s < NS; s++) begin
        int i;
        i = t - s / 2;
        act[s] = (i >= 0 && i < nlines) ? act_t'(la[i][s]) : '0;
        wgt[s] = (i >= 0 && i < nlines) ? act_t'(lw[i][s]) : '0;
      end
      begin
        int i;
        i = t - (ND - 1);
        v = (i >= 0 && i < nlines);
        first = v && lfirst[i];
        last = v && llast[i];
      end
      @(posedge clk);
    end
    #1 v = 0;
    repeat (4) @(posedge clk);
    checks++;
    if (expect_q.size() != 0) begin failures++; $display("%0d results missing", expect_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // done must follow the last line at the last block by one cycle
  logic last_seen = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (done != last_seen) begin failures++; $display("done timing wrong at %0t", $time); end
      if (done) begin
        longint e;
        e = expect_q.pop_front();
        checks++;
        if (acc != ACC_W'(e)) begin failures++; $display("acc %0d want %0d", acc, e); end
      end
    end
    last_seen = v && last;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
