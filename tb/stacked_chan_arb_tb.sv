// stacked_chan_arb_tb: self-checking test of the die-stacked channel arbiter.
//
// Two sources offer commands with random frames, each holding its command
// until accepted; channels accept at random. A reference model in the test
// checks each cycle that every channel carries the command of the source that
// round-robin priority selects, that a source is ready only when its channel
// accepts it, and that every command leaves on channel frame % 4, exactly
// once, in per-source order. A contended phase checks strict alternation.
`timescale 1ns/1ps
module stacked_chan_arb_tb;
  import memcache_pkg::*;

  localparam int NS = 2, NC = 4;

  logic clk = 0, rst_n = 0;
  logic     src_valid [NS];
  logic     src_ready [NS];
  stk_cmd_t src_cmd   [NS];
  logic     ch_valid  [NC];
  logic     ch_ready  [NC];
  stk_cmd_t ch_cmd    [NC];

  int checks = 0, failures = 0;
  int rr_model [NC];
  int sent [NS], recv [NS];
  int alt_last, alternations;

  stacked_chan_arb #(.NUM_SRC(NS), .NUM_CH(NC)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  function automatic stk_cmd_t mk(int s, int seq, int ch);
    stk_cmd_t c;
    c = '0;
    c.kind  = K_DATA;
    c.frame = 20'(($urandom_range(0, 262143) * NC) + ch);
    c.blk   = 6'(seq);
    c.id    = 8'(s * 128 + (seq % 128));
    return c;
  endfunction

  // reference check at the falling edge, after inputs settle
  task automatic model_check();
    for (int ch = 0; ch < NC; ch++) begin
      int win;
      win = -1;
      for (int k = 0; k < NS; k++) begin
        int s;
        s = (rr_model[ch] + k) % NS;
        if (win < 0 && src_valid[s] && int'(src_cmd[s].frame % NC) == ch) win = s;
      end
      check(ch_valid[ch] == (win >= 0), $sformatf("ch%0d valid", ch));
      if (win >= 0) check(ch_cmd[ch] == src_cmd[win], $sformatf("ch%0d carries src%0d", ch, win));
      for (int s = 0; s < NS; s++)
        if (src_valid[s] && int'(src_cmd[s].frame % NC) == ch)
          check(src_ready[s] == (win == s && ch_ready[ch]), $sformatf("src%0d ready", s));
    end
  endtask

  int seq [NS];
  bit acc [NS];
  int tgt [NS];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < NS; s++) begin src_valid[s] = 0; src_cmd[s] = '0; seq[s] = 0; sent[s] = 0; recv[s] = 0; end
    for (int c = 0; c < NC; c++) begin ch_ready[c] = 0; rr_model[c] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // random phase
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      for (int s = 0; s < NS; s++)
        if (!src_valid[s] && $urandom_range(0, 3) != 0) begin
          tgt[s] = $urandom_range(0, NC - 1);
          src_cmd[s] = mk(s, seq[s], tgt[s]);
          src_valid[s] = 1;
        end
      for (int c = 0; c < NC; c++) ch_ready[c] = 1'($urandom_range(0, 2) != 0);
      #1;
      model_check();
      // record the handshakes of this cycle; the DUT commits them at the edge
      for (int c = 0; c < NC; c++)
        if (ch_valid[c] && ch_ready[c]) begin
          int w;
          w = int'(ch_cmd[c].id) / 128;
          check(int'(ch_cmd[c].frame % NC) == c, "frame interleaving");
          check(int'(ch_cmd[c].blk) == (recv[w] % 64), "in-order per source");
          recv[w]++;
          rr_model[c] = (w + 1) % NS;
        end
      for (int s = 0; s < NS; s++) acc[s] = src_valid[s] && src_ready[s];
      @(posedge clk);
      #1;
      for (int s = 0; s < NS; s++)
        if (acc[s]) begin
          src_valid[s] = 0;
          seq[s]++;
          sent[s]++;
        end
    end
    @(negedge clk);
    for (int s = 0; s < NS; s++) src_valid[s] = 0;
    for (int s = 0; s < NS; s++) check(sent[s] == recv[s], $sformatf("src%0d all delivered", s));
    check(sent[0] > 1000 && sent[1] > 1000, "both sources served");

    // contended phase: both sources hammer channel 2, which is always ready
    alt_last = -1; alternations = 0;
    for (int c = 0; c < NC; c++) ch_ready[c] = 1;
    for (int i = 0; i < 40; i++) begin
      @(negedge clk);
      for (int s = 0; s < NS; s++) begin
        src_cmd[s] = mk(s, 0, 2);
        src_valid[s] = 1;
      end
      #1;
      check(ch_valid[2] && src_ready[0] != src_ready[1], "one winner on contention");
      if (alt_last >= 0 && src_ready[alt_last] == 0) alternations++;
      alt_last = src_ready[0] ? 0 : 1;
    end
    check(alternations == 39, $sformatf("round robin alternates (%0d)", alternations));
    @(negedge clk);
    for (int s = 0; s < NS; s++) src_valid[s] = 0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end


endmodule
