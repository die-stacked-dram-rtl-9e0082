// banshee_cache_ctrl_tb: self-checking test of the cache-portion controller.
//
// Instance u_full samples every access (SAMPLE_PCT=100) on a small cache of
// 8 sets x 4 ways, so every replacement decision can be predicted. A reference
// model (written separately from the RTL, with the policy stated in the RTL
// header) keeps each set's ways and candidates and, for every request, lists
// the exact commands that must follow, in order: the demand access (die-stacked
// on a hit, off-chip on a miss), the metadata read and write, and for a
// replacement the two Tag Buffer records, the dirty victim write-back and the
// page fill. All ready inputs toggle at random, and the Tag Buffer port is
// sometimes held off for long stretches to make the controller stall.
// Directed checks cover the metadata-clearing time after reset and the cycle
// count of a request with every port ready (5 cycles when sampled).
// A repartition phase then moves the boundary twice: the cache shrinks to 4
// sets and then switches off; the model expects every dirty page written back
// set by set, the controller busy meanwhile, and the new geometry afterwards
// (with the cache off every request goes straight off-chip).
// Instance u_smp uses the default 10% sampling; the test counts how many of
// 4000 requests update metadata and expects 7% to 13%.
`timescale 1ns/1ps
module banshee_cache_ctrl_tb;
  import memcache_pkg::*;

  localparam int CF = 32, WAYS = 4, SETS = CF / WAYS, NCAND = 4, CNT_W = 5;
  int mbase = (1 << 20) - CF;   // model geometry: first cache frame
  int msets = SETS;             // and active sets (0: cache off)
  logic [STACK_FRAME_W:0] mem_frames = 21'((1 << 20) - CF);
  localparam int CMAX = (1 << CNT_W) - 1;
  localparam int NREQ = 4000;

  logic clk = 0, rst_n = 0;

  // ---- full-sampling DUT ----
  logic       init_done, req_valid = 0, req_ready;
  llsc_req_t  req = '0;
  logic       stk_valid, stk_ready = 0, off_valid, off_ready = 0, tb_valid, tb_ready = 0;
  stk_cmd_t   stk_cmd;
  off_cmd_t   off_cmd;
  remap_t     tb_rec;
  cache_evt_t evt;

  banshee_cache_ctrl #(.CACHE_FRAMES(CF), .WAYS(WAYS), .NCAND(NCAND),
                       .CNT_W(CNT_W), .SAMPLE_PCT(100)) u_full (
    .clk, .rst_n, .init_done, .mem_frames, .req_valid, .req_ready, .req,
    .stk_valid, .stk_ready, .stk_cmd, .off_valid, .off_ready, .off_cmd,
    .tb_valid, .tb_ready, .tb_rec, .evt);

  // ---- 10% sampling DUT (default sampling), always ready ----
  logic       s_init_done, s_req_valid = 0, s_req_ready;
  llsc_req_t  s_req = '0;
  logic       s_stk_valid, s_off_valid, s_tb_valid;
  stk_cmd_t   s_stk_cmd;
  off_cmd_t   s_off_cmd;
  remap_t     s_tb_rec;
  cache_evt_t s_evt;

  banshee_cache_ctrl #(.CACHE_FRAMES(CF)) u_smp (
    .clk, .rst_n, .init_done(s_init_done), .mem_frames(21'((1 << 20) - CF)), .req_valid(s_req_valid), .req_ready(s_req_ready),
    .req(s_req), .stk_valid(s_stk_valid), .stk_ready(1'b1), .stk_cmd(s_stk_cmd),
    .off_valid(s_off_valid), .off_ready(1'b1), .off_cmd(s_off_cmd),
    .tb_valid(s_tb_valid), .tb_ready(1'b1), .tb_rec(s_tb_rec), .evt(s_evt));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  // ---- reference model ----------------------------------------------------
  int m_valid [SETS][WAYS], m_dirty [SETS][WAYS], m_tag [SETS][WAYS], m_cnt [SETS][WAYS];
  int c_valid [SETS][NCAND], c_tag [SETS][NCAND], c_cnt [SETS][NCAND];

  typedef struct packed { logic [1:0] port; logic [63:0] bits; } ev_t;  // 0 stk, 1 off, 2 tb
  ev_t exp_q [$];
  int n_hit, n_miss, n_repl, n_wb, n_stall_cycles, n_halve;

  function automatic ev_t ev_stk(cmd_kind_e k, bit w, bit pg, int frame, int blk, int id);
    stk_cmd_t c;
    c.kind = k; c.write = w; c.page = pg; c.frame = 20'(frame); c.blk = 6'(blk); c.id = 8'(id);
    return '{port: 2'd0, bits: 64'(c)};
  endfunction
  function automatic ev_t ev_off(cmd_kind_e k, bit w, bit pg, longint pn, int blk, int id);
    off_cmd_t c;
    c.kind = k; c.write = w; c.page = pg; c.pn = PN_W'(pn); c.blk = 6'(blk); c.id = 8'(id);
    return '{port: 2'd1, bits: 64'(c)};
  endfunction
  function automatic ev_t ev_tb(longint pn, bit cached, int way);
    remap_t r;
    r.pn = PN_W'(pn); r.cached = cached; r.way = 2'(way);
    return '{port: 2'd2, bits: 64'(r)};
  endfunction

  // Apply one request to the model and queue the commands it must produce.
  task automatic model_req(longint pn, bit wr, int blk, int id);
    int s, t, hw, ci, vw, old;
    bit hit, sat;
    if (msets == 0) begin
      // cache off: straight to off-chip, no metadata
      n_miss++;
      exp_q.push_back(ev_off(K_DATA, wr, 0, pn, blk, id));
      return;
    end
    s = int'(pn % msets);
    t = int'(pn / msets);
    hit = 0; hw = 0;
    for (int w = 0; w < WAYS; w++)
      if (!hit && m_valid[s][w] && m_tag[s][w] == t) begin hit = 1; hw = w; end
    if (hit) begin
      n_hit++;
      exp_q.push_back(ev_stk(K_DATA, wr, 0, mbase + s * WAYS + hw, blk, id));
      if (wr) m_dirty[s][hw] = 1;
    end else begin
      n_miss++;
      exp_q.push_back(ev_off(K_DATA, wr, 0, pn, blk, id));
    end
    exp_q.push_back(ev_stk(K_META, 0, 0, mbase + s * WAYS, 0, 0));
    exp_q.push_back(ev_stk(K_META, 1, 0, mbase + s * WAYS, 0, 0));
    if (hit) begin
      if (m_cnt[s][hw] < CMAX) m_cnt[s][hw]++;
    end else begin
      ci = -1;
      for (int c = 0; c < NCAND; c++) if (ci < 0 && c_valid[s][c] && c_tag[s][c] == t) ci = c;
      if (ci >= 0) begin
        if (c_cnt[s][ci] < CMAX) c_cnt[s][ci]++;
      end else begin
        for (int c = 0; c < NCAND; c++) if (ci < 0 && !c_valid[s][c]) ci = c;
        if (ci < 0) begin
          ci = 0;
          for (int c = 1; c < NCAND; c++) if (c_cnt[s][c] < c_cnt[s][ci]) ci = c;
        end
        c_valid[s][ci] = 1; c_tag[s][ci] = t; c_cnt[s][ci] = 1;
      end
      vw = -1;
      for (int w = 0; w < WAYS; w++) if (vw < 0 && !m_valid[s][w]) vw = w;
      if (vw < 0) begin
        vw = 0;
        for (int w = 1; w < WAYS; w++) if (m_cnt[s][w] < m_cnt[s][vw]) vw = w;
      end
      if (!m_valid[s][vw] || c_cnt[s][ci] > m_cnt[s][vw]) begin
        longint epn;
        n_repl++;
        epn = longint'(m_tag[s][vw]) * msets + s;
        if (m_valid[s][vw]) exp_q.push_back(ev_tb(epn, 0, vw));
        exp_q.push_back(ev_tb(pn, 1, vw));
        if (m_valid[s][vw] && m_dirty[s][vw]) begin
          n_wb++;
          exp_q.push_back(ev_stk(K_REPL, 0, 1, mbase + s * WAYS + vw, 0, 0));
          exp_q.push_back(ev_off(K_REPL, 1, 1, epn, 0, 0));
        end
        exp_q.push_back(ev_off(K_REPL, 0, 1, pn, 0, 0));
        exp_q.push_back(ev_stk(K_REPL, 1, 1, mbase + s * WAYS + vw, 0, 0));
        old = m_cnt[s][vw];
        c_valid[s][ci] = m_valid[s][vw];
        c_tag[s][ci]   = m_tag[s][vw];
        m_cnt[s][vw]   = c_cnt[s][ci];
        c_cnt[s][ci]   = old;
        m_valid[s][vw] = 1; m_dirty[s][vw] = 0; m_tag[s][vw] = t;
      end
    end
    sat = 0;
    for (int w = 0; w < WAYS; w++) if (m_cnt[s][w] == CMAX) sat = 1;
    for (int c = 0; c < NCAND; c++) if (c_cnt[s][c] == CMAX) sat = 1;
    if (sat) begin
      n_halve++;
      for (int w = 0; w < WAYS; w++) m_cnt[s][w] = m_cnt[s][w] / 2;
      for (int c = 0; c < NCAND; c++) c_cnt[s][c] = c_cnt[s][c] / 2;
    end
  endtask

  // ---- monitor: compare every handshake with the expected sequence ---------
  always @(posedge clk) if (rst_n) begin
    ev_t got [$];
    got.delete();
    if (stk_valid && stk_ready) got.push_back('{port: 2'd0, bits: 64'(stk_cmd)});
    if (off_valid && off_ready) got.push_back('{port: 2'd1, bits: 64'(off_cmd)});
    if (tb_valid && tb_ready)   got.push_back('{port: 2'd2, bits: 64'(tb_rec)});
    if (tb_valid && !tb_ready)  n_stall_cycles++;
    checks++;
    if (got.size() > 1) begin failures++; $display("FAIL: two commands in one cycle"); end
    foreach (got[i]) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        if (failures < 20) $display("FAIL: unexpected command port %0d %h", got[i].port, got[i].bits);
      end else begin
        ev_t e;
        e = exp_q.pop_front();
        if (e != got[i]) begin
          failures++;
          if (failures < 20) $display("FAIL: port %0d got %h expected port %0d %h (t=%0t)",
                                      got[i].port, got[i].bits, e.port, e.bits, $time);
        end
      end
    end
  end

  // times of the last two accepted requests
  longint acc_t [2];
  always @(posedge clk) if (req_valid && req_ready) begin
    acc_t[0] <= acc_t[1];
    acc_t[1] <= $time;
  end

  // random readies, with long Tag Buffer hold-offs
  int tb_hold = 0;
  bit all_ready = 0;
  always @(negedge clk) begin
    if (all_ready) begin
      stk_ready <= 1; off_ready <= 1; tb_ready <= 1;
    end else begin
      stk_ready <= 1'($urandom_range(0, 3) != 0);
      off_ready <= 1'($urandom_range(0, 3) != 0);
      if (tb_hold > 0) begin
        tb_hold  <= tb_hold - 1;
        tb_ready <= 0;
      end else begin
        tb_ready <= 1'($urandom_range(0, 3) != 0);
        if ($urandom_range(0, 200) == 0) tb_hold <= $urandom_range(10, 60);
      end
    end
  end

  function automatic longint pick_pn(int i);
    int s, t, r;
    s = $urandom_range(0, (msets > 0 ? msets : SETS) - 1);
    r = $urandom_range(0, 99);
    if (r < 60)      t = $urandom_range(0, 2);     // hot pages
    else if (r < 85) t = $urandom_range(3, 7);     // warm
    else             t = $urandom_range(8, 40);    // streaming
    return longint'(1 << 20) + longint'(t) * (msets > 0 ? msets : SETS) + s;  // off-chip pages start at 4 GB
  endfunction

  // Change the boundary; the model expects every dirty page of the active
  // sets to be written back (set by set, lowest way first), then uses the
  // new geometry: nsets sets at the top of the stacked DRAM.
  int n_rs_wb = 0;
  task automatic resize(logic [STACK_FRAME_W:0] frames, int nsets);
    int cyc;
    for (int s2 = 0; s2 < msets; s2++)
      for (int w = 0; w < WAYS; w++)
        if (m_valid[s2][w] && m_dirty[s2][w]) begin
          exp_q.push_back(ev_stk(K_REPL, 0, 1, mbase + s2 * WAYS + w, 0, 0));
          exp_q.push_back(ev_off(K_REPL, 1, 1, longint'(m_tag[s2][w]) * msets + s2, 0, 0));
          n_rs_wb++;
        end
    for (int s2 = 0; s2 < SETS; s2++) begin
      for (int w = 0; w < WAYS; w++) begin m_valid[s2][w] = 0; m_dirty[s2][w] = 0; m_tag[s2][w] = 0; m_cnt[s2][w] = 0; end
      for (int c = 0; c < NCAND; c++) begin c_valid[s2][c] = 0; c_tag[s2][c] = 0; c_cnt[s2][c] = 0; end
    end
    @(negedge clk);
    mem_frames = frames;
    #1;
    check(!init_done && !req_ready, "busy as soon as the boundary moves");
    cyc = 0;
    while (!init_done) begin
      check(!req_ready, "not ready while resizing");
      @(negedge clk); #1;
      cyc++;
    end
    check(exp_q.size() == 0, "resize wrote back every dirty page");
    check(cyc >= 2 * msets, $sformatf("sweep visits every set (%0d cycles)", cyc));
    msets = nsets;
    mbase = (1 << 20) - nsets * WAYS;
  endtask

  task automatic send(longint pn, bit wr, int blk, int id);
    @(negedge clk);
    req.addr  = PA_W'(pn) << PAGE_OFF_W | PA_W'(blk) << BLK_OFF_W;
    req.write = wr;
    req.id    = 8'(id);
    req_valid = 1;
    #1;
    while (!req_ready) begin
      @(negedge clk);
      #1;
    end
    model_req(pn, wr, blk, id);
    @(posedge clk);
    #1;
    req_valid = 0;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sampling-rate check on the 10% instance
  int s_sampled = 0, s_done = 0;
  always @(posedge clk) if (s_evt.sampled) s_sampled++;
  initial begin
    wait (rst_n);
    for (int i = 0; i < NREQ; i++) begin
      @(negedge clk);
      s_req.addr  = PA_W'(pick_pn(i)) << PAGE_OFF_W;
      s_req.write = 1'($urandom);
      s_req_valid = 1;
      #1;
      while (!s_req_ready) begin @(negedge clk); #1; end
      @(posedge clk); #1;
      s_req_valid = 0;
    end
    s_done = 1;
  end

  initial begin
    int t0, t1;
    longint pn;
    for (int s = 0; s < SETS; s++) begin
      for (int w = 0; w < WAYS; w++) begin m_valid[s][w] = 0; m_dirty[s][w] = 0; m_tag[s][w] = 0; m_cnt[s][w] = 0; end
      for (int c = 0; c < NCAND; c++) begin c_valid[s][c] = 0; c_tag[s][c] = 0; c_cnt[s][c] = 0; end
    end
    n_hit = 0; n_miss = 0; n_repl = 0; n_wb = 0; n_stall_cycles = 0; n_halve = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // metadata clearing: SETS cycles with req_ready low
    t0 = 0;
    while (!init_done) begin
      check(!req_ready, "not ready while clearing");
      @(posedge clk); #1;
      t0++;
    end
    check(t0 == SETS, $sformatf("clearing takes %0d cycles (%0d)", SETS, t0));

    for (int i = 0; i < NREQ; i++)
      send(pick_pn(i), 1'($urandom_range(0, 2) == 0), $urandom_range(0, 63), i % 256);
    wait (exp_q.size() == 0);
    repeat (20) @(posedge clk);

    // directed timing: every port ready, repeated hits take 5 cycles each
    all_ready = 1;
    repeat (2) @(posedge clk);
    pn = longint'(1 << 20) + 3;   // make sure it is cached
    for (int k = 0; k < 4; k++) send(pn, 0, 0, 1);
    wait (exp_q.size() == 0);
    repeat (3) @(posedge clk);
    send(pn, 0, 1, 2);
    send(pn, 0, 2, 3);
    t1 = int'(acc_t[1] - acc_t[0]);
    check(t1 == 10 * 5, $sformatf("sampled hit every 5 cycles (%0d ns)", t1));
    wait (exp_q.size() == 0);
    repeat (10) @(posedge clk);

    // repartition: the cache shrinks from 8 to 4 sets (16 frames), then to
    // nothing (2 frames above the boundary), writing back every dirty page
    all_ready = 0;
    resize(21'((1 << 20) - 16), 4);
    for (int i = 0; i < 1000; i++)
      send(pick_pn(i), 1'($urandom_range(0, 2) == 0), $urandom_range(0, 63), i % 256);
    wait (exp_q.size() == 0);
    repeat (20) @(posedge clk);
    resize(21'((1 << 20) - 2), 0);
    for (int i = 0; i < 200; i++)
      send(pick_pn(i), 1'($urandom_range(0, 2) == 0), $urandom_range(0, 63), i % 256);
    wait (exp_q.size() == 0);
    repeat (20) @(posedge clk);

    check(exp_q.size() == 0, "all expected commands seen");
    check(n_rs_wb > 0, $sformatf("resize write-backs %0d", n_rs_wb));
    check(n_hit > 100 && n_miss > 100, $sformatf("hits %0d misses %0d", n_hit, n_miss));
    check(n_repl > 50, $sformatf("replacements %0d", n_repl));
    check(n_wb > 10, $sformatf("dirty write-backs %0d", n_wb));
    check(n_halve > 0, $sformatf("counter halvings %0d", n_halve));
    check(n_stall_cycles > 0, $sformatf("tag buffer stall cycles %0d", n_stall_cycles));
    wait (s_done);
    check(s_sampled > NREQ * 7 / 100 && s_sampled < NREQ * 13 / 100,
          $sformatf("10%% sampling: %0d of %0d", s_sampled, NREQ));
    $display("hits=%0d misses=%0d repl=%0d wb=%0d halvings=%0d tb_stall_cycles=%0d sampled10=%0d",
             n_hit, n_miss, n_repl, n_wb, n_halve, n_stall_cycles, s_sampled);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
