// memcache_top_harness: end-to-end test bench body for memcache_top, shared by
// the reduced-size test (memcache_top_tb) and the full-size one
// (memcache_top_full_tb). With DEFAULTS=1 the design is instantiated with no
// parameter override at all; the harness's own geometry parameters must then
// equal the design defaults. With OWN_FINISH=0 the harness does not print its
// result or end the simulation but sets `done`, so that one test can run
// several harnesses side by side and add up their `checks` and `failures`.
// With MEM_FRAMES=0 (no memory portion) the memory-path and contention
// mechanisms cannot happen and are not required.
//
// Traffic: a mix of last-level SRAM cache misses and write-backs to the memory
// portion, to the cache frames' own range (must be refused), and to off-chip
// pages drawn from a hot/warm/streaming pool plus scattered pages. Every
// channel and the off-chip port accept at random. A host-software model
// drains the Tag Buffer whenever it raises its flush interrupt, and the
// memory/cache boundary is reprogrammed twice during the run: to ALT_FRAMES
// after a third of the requests and back to MEM_FRAMES after two thirds. A
// repartition follows the software sequence: wait for outstanding requests,
// empty the Tag Buffer, write the boundary, wait for init_done, and forget
// all cache residency. The cache portion's geometry for a boundary is worked
// out independently (frames above it, rounded down to a power-of-two number
// of sets, at most CACHE_FRAMES).
//
// Checks, all against a model built from the command streams only:
//  - each request leaves exactly once, with its id: memory-portion requests on
//    die-stacked channel frame % 4 at the frame of their address; cache-portion
//    requests on the die-stacked frame the page was last filled into (hit) or
//    off-chip at their own page (miss, only if the page is not cached);
//  - every die-stacked command arrives on the channel of its frame;
//  - page fills and dirty write-backs name the right pages and frames;
//  - each drained Tag Buffer record agrees with the current residency (a
//    victim's "uncached" record may come before its page leaves the frame;
//    the page must then be evicted before the run or the repartition ends);
//  - cache frames lie in the active cache and above the boundary, and a
//    repartition writes back exactly the pages written since their fill;
//  - each mechanism happened at least once: memory-portion access, refused
//    address, cache hit, cache miss, sampled update, replacement, dirty
//    write-back, Tag Buffer stall, flush interrupt and drain, boundary change
//    with its write-back sweep, channel contention between the two paths.
`timescale 1ns/1ps
module memcache_top_harness
  import memcache_pkg::*;
#(
  parameter bit          DEFAULTS     = 0,
  parameter int unsigned MEM_FRAMES   = 786432,
  parameter int unsigned CACHE_FRAMES = 64,
  parameter int unsigned SAMPLE_PCT   = 50,
  parameter int unsigned TB_ENTRIES   = 16,
  parameter int unsigned TB_WAYS      = 2,
  parameter int unsigned NREQ         = 6000,
  parameter int unsigned WATCHDOG     = 400000,
  parameter bit          OWN_FINISH   = 1,
  parameter int unsigned ALT_FRAMES   = MEM_FRAMES / 2, // boundary in the middle third
  parameter int unsigned STACKED      = 1 << 20         // die-stacked frames
) ();

  localparam int unsigned WAYS = 4;
  localparam int unsigned SETS = CACHE_FRAMES / WAYS;
  // first frame of the active cache for a boundary: the frames above it,
  // rounded down to a power-of-two number of sets, at most CACHE_FRAMES
  function automatic int base_for(int unsigned b);
    int unsigned avail, pow;
    avail = (STACKED - b) / WAYS;
    pow = 0;
    for (int i = 0; i < 21; i++) if (avail >= (1 << i)) pow = 1 << i;
    if (pow > SETS) pow = SETS;
    return int'(STACKED - pow * WAYS);
  endfunction
  int cbase = base_for(MEM_FRAMES);
  int cbound = int'(MEM_FRAMES);   // boundary the current geometry was set up for
  localparam int unsigned HOT_SETS = (SETS < 16) ? SETS : 16;

  logic clk = 0, rst_n = 0;
  logic init_done;
  logic cfg_we = 0;
  logic [STACK_FRAME_W:0] cfg_mem_frames = '0, mem_frames;
  logic req_valid = 0, req_ready;
  llsc_req_t req = '0;
  logic bad_valid;
  logic     stk_valid [NUM_STACK_CH];
  logic     stk_ready [NUM_STACK_CH];
  stk_cmd_t stk_cmd   [NUM_STACK_CH];
  logic     off_valid, off_ready = 0;
  off_cmd_t off_cmd;
  logic     flush_irq, drain_en = 0, drain_valid, drain_ready = 0;
  remap_t   drain_rec;
  logic [$clog2(TB_ENTRIES):0] tb_occupancy;
  cache_evt_t evt;

  if (DEFAULTS) begin : g_dut
    memcache_top dut (.*);
  end else begin : g_dut
    memcache_top #(
      .STACKED_FRAMES (STACKED),
      .MEM_FRAMES   (MEM_FRAMES),
      .CACHE_FRAMES (CACHE_FRAMES),
      .SAMPLE_PCT   (SAMPLE_PCT),
      .TB_ENTRIES   (TB_ENTRIES),
      .TB_WAYS      (TB_WAYS)
    ) dut (.*);
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  bit done = 0;  // set when the run has finished (OWN_FINISH=0)
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  // ---- scoreboard ------------------------------------------------------------
  typedef struct { logic [PA_W-1:0] addr; bit write; bit to_mem; } pend_t;
  pend_t pend [int];                          // by request id
  int    frame_of_pn [longint];               // residency seen from the fills
  longint pn_of_frame [int];
  longint fill_pn = -1, wb_pn = -1;
  int    wb_frame = -1;
  longint cur_pn = -1;                        // page of the request in the cache path
  bit    dirty_pn [longint];                  // cached pages written since their fill
  bit    want_drain = 0;                      // software empties the Tag Buffer
  bit    evict_due [longint];                 // drained as uncached, still resident

  int n_rswb = 0;   // write-backs by a repartition sweep
  int n_mem, n_bad, n_hit, n_miss, n_smp, n_repl, n_wb, n_stall, n_irq, n_drain, n_cfg, n_contend;

  always @(posedge clk) if (rst_n) begin
    // die-stacked channels
    for (int ch = 0; ch < NUM_STACK_CH; ch++) begin
      if (stk_valid[ch] && stk_ready[ch]) begin
        stk_cmd_t c;
        c = stk_cmd[ch];
        check(int'(c.frame % NUM_STACK_CH) == ch, "channel follows 4 KB interleaving");
        if (c.kind == K_DATA) begin
          int id;
          id = int'(c.id);
          check(pend.exists(id), $sformatf("stacked data command for pending id %0d", id));
          if (pend.exists(id)) begin
            check(c.write == pend[id].write && c.blk == pend[id].addr[11:6], "stacked data fields");
            if (pend[id].to_mem) begin
              check(c.frame == pend[id].addr[31:12], "memory-portion frame");
              n_mem++;
            end else begin
              longint pn;
              pn = longint'(pend[id].addr >> 12);
              check(frame_of_pn.exists(pn) && frame_of_pn[pn] == int'(c.frame),
                    $sformatf("hit served from the frame page %h was filled into", pn));
              if (c.write) dirty_pn[pn] = 1;
              n_hit++;
            end
            pend.delete(id);
          end
        end else if (c.kind == K_REPL) begin
          check(int'(c.frame) >= cbase, "page moves stay in the cache frames");
          check(int'(c.frame) >= cbound, "page moves stay above the boundary");
          if (c.write) begin
            int f;
            f = int'(c.frame);
            check(fill_pn >= 0, "fill write follows a fill read");
            if (pn_of_frame.exists(f)) begin
              if (evict_due.exists(pn_of_frame[f])) evict_due.delete(pn_of_frame[f]);
              frame_of_pn.delete(pn_of_frame[f]);
            end
            frame_of_pn[fill_pn] = f;
            if (dirty_pn.exists(fill_pn)) dirty_pn.delete(fill_pn);
            pn_of_frame[f] = fill_pn;
            fill_pn = -1;
          end else begin
            wb_frame = int'(c.frame);
            check(pn_of_frame.exists(wb_frame), "write-back reads a resident frame");
            wb_pn = pn_of_frame.exists(wb_frame) ? pn_of_frame[wb_frame] : -1;
          end
        end else begin
          check(int'(c.frame) >= cbase, "metadata lives in the cache frames");
        end
      end
      // both paths want the same channel in the same cycle
      if (g_dut.dut.src_valid[0] && g_dut.dut.src_valid[1] &&
          g_dut.dut.src_cmd[0].frame[1:0] == g_dut.dut.src_cmd[1].frame[1:0] && ch == 0)
        n_contend++;
    end
    // off-chip channel
    if (off_valid && off_ready) begin
      if (off_cmd.kind == K_DATA) begin
        int id;
        id = int'(off_cmd.id);
        check(pend.exists(id) && !pend[id].to_mem, "off-chip data command for a cache-path id");
        if (pend.exists(id)) begin
          check(longint'(off_cmd.pn) == longint'(pend[id].addr >> 12) &&
                off_cmd.blk == pend[id].addr[11:6] && off_cmd.write == pend[id].write,
                "off-chip data fields");
          check(!frame_of_pn.exists(longint'(off_cmd.pn)), "miss only for a page not cached");
          pend.delete(id);
          n_miss++;
        end
      end else if (off_cmd.write) begin
        check(longint'(off_cmd.pn) == wb_pn, "write-back names the victim page");
        check(dirty_pn.exists(wb_pn), "only dirty pages are written back");
        if (dirty_pn.exists(wb_pn)) dirty_pn.delete(wb_pn);
        if (!init_done) n_rswb++;
        n_wb++;
      end else begin
        check(longint'(off_cmd.pn) == cur_pn, "fill reads the requested page");
        fill_pn = longint'(off_cmd.pn);
      end
    end
    if (evt.sampled)  n_smp++;
    if (evt.replace)  n_repl++;
    if (evt.tb_stall) n_stall++;
    if (bad_valid && req_ready) n_bad++;
  end

  // ---- random readies ----------------------------------------------------------
  always @(negedge clk) begin
    for (int ch = 0; ch < NUM_STACK_CH; ch++) stk_ready[ch] <= 1'($urandom_range(0, 3) != 0);
    off_ready <= 1'($urandom_range(0, 2) != 0);
  end

  // ---- host software: drains the Tag Buffer on its interrupt ----------------------
  initial begin
    forever begin
      @(posedge clk);
      if ((flush_irq || want_drain) && !drain_en) begin
        if (flush_irq) n_irq++;
        repeat ($urandom_range(0, 20)) @(posedge clk);
        @(negedge clk);
        drain_en = 1;
        while (tb_occupancy != 0 || flush_irq) begin
          drain_ready = 1'($urandom_range(0, 3) != 0);
          #1;
          if (drain_valid && drain_ready) begin
            longint pn;
            n_drain++;
            pn = longint'(drain_rec.pn);
            if (pn != cur_pn) begin
              if (drain_rec.cached)
                check(frame_of_pn.exists(pn) &&
                      (frame_of_pn[pn] % WAYS) == int'(drain_rec.way),
                      $sformatf("drained record: page %h cached in way %0d", pn, drain_rec.way));
              else if (frame_of_pn.exists(pn))
                // the record of a victim precedes its page move: the page
                // must leave its frame before the run ends
                evict_due[pn] = 1;
            end
          end
          @(negedge clk);
        end
        drain_en = 0;
        drain_ready = 0;
        want_drain = 0;
      end
    end
  end

  // ---- request generator ------------------------------------------------------------
  function automatic logic [PA_W-1:0] pick_addr(int unsigned boundary, output bit to_mem, output bit bad);
    int r;
    longint pn;
    r = $urandom_range(0, 99);
    to_mem = 0; bad = 0;
    if (r < 35 && boundary > 0) begin
      to_mem = 1;
      pn = longint'($urandom_range(0, boundary - 1));
    end else if (r < 38 && boundary < STACK_FRAMES) begin
      bad = 1;
      pn = longint'(boundary) + longint'($urandom_range(0, STACK_FRAMES - boundary - 1));
    end else if (r < 85) begin
      int s, t, q;
      s = $urandom_range(0, HOT_SETS - 1);
      q = $urandom_range(0, 99);
      if (q < 60)      t = $urandom_range(0, 2);
      else if (q < 85) t = $urandom_range(3, 7);
      else             t = $urandom_range(8, 60);
      pn = longint'(STACK_FRAMES) + longint'(t) * SETS + s;
    end else begin
      pn = longint'(STACK_FRAMES) + longint'({$urandom, $urandom} % (longint'(1) << 27));
    end
    return (PA_W'(pn) << 12) | PA_W'($urandom_range(0, 63) << 6);
  endfunction

  // Repartition as the OS does it: quiesce, flush the Tag Buffer, announce
  // the new boundary, and wait until the cache portion has written back its
  // dirty pages and restarted with its new geometry (the page table then
  // forgets every cached page).
  task automatic program_boundary(int unsigned frames);
    while (pend.num() != 0) @(posedge clk);
    repeat (20) @(posedge clk);
    want_drain = 1;
    while (want_drain || drain_en) @(posedge clk);
    @(negedge clk);
    cfg_we = 1;
    cfg_mem_frames = (STACK_FRAME_W+1)'(frames);
    @(negedge clk);
    cfg_we = 0;
    check(mem_frames == (STACK_FRAME_W+1)'(frames), "boundary reprogrammed");
    check(!init_done, "cache portion busy after a repartition");
    while (!init_done) @(posedge clk);
    check(dirty_pn.num() == 0, $sformatf("all dirty pages written back (%0d left)", dirty_pn.num()));
    check(evict_due.num() == 0, "pages drained as uncached were evicted before the repartition");
    frame_of_pn.delete();
    pn_of_frame.delete();
    evict_due.delete();
    dirty_pn.delete();
    cbase = base_for(frames);
    cbound = int'(frames);
    n_cfg++;
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned boundary;
    int id;
    n_mem = 0; n_bad = 0; n_hit = 0; n_miss = 0; n_smp = 0; n_repl = 0; n_wb = 0;
    n_stall = 0; n_irq = 0; n_drain = 0; n_cfg = 0; n_contend = 0;
    for (int ch = 0; ch < NUM_STACK_CH; ch++) stk_ready[ch] = 0;
    boundary = MEM_FRAMES;
    id = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    check(mem_frames == (STACK_FRAME_W+1)'(MEM_FRAMES), "boundary after reset");
    wait (init_done);

    for (int i = 0; i < NREQ; i++) begin
      bit to_mem, bad, w;
      logic [PA_W-1:0] a;
      if (i == NREQ / 3)     begin program_boundary(ALT_FRAMES); boundary = ALT_FRAMES; end
      if (i == 2 * NREQ / 3) begin program_boundary(MEM_FRAMES);     boundary = MEM_FRAMES;     end
      a = pick_addr(boundary, to_mem, bad);
      w = ($urandom_range(0, 2) == 0);
      // never reuse an id still in flight
      while (pend.exists(id)) id = (id + 1) % 256;
      @(negedge clk);
      req.addr = a; req.write = w; req.id = 8'(id);
      req_valid = 1;
      #1;
      check(bad_valid == bad, "refused exactly the cache-frame range");
      while (!req_ready) begin
        @(negedge clk);
        #1;
      end
      if (!bad) begin
        pend[id] = '{addr: a, write: w, to_mem: to_mem};
        if (!to_mem) cur_pn = longint'(a >> 12);
      end
      @(posedge clk);
      #1;
      req_valid = 0;
      id = (id + 1) % 256;
    end
    while (pend.num() != 0) @(posedge clk);
    repeat (200) @(posedge clk);

    check(pend.num() == 0, "every request served");
    check(evict_due.num() == 0, $sformatf("pages drained as uncached were evicted (%0d not)", evict_due.num()));
    // a split with no memory portion (full cache) has no memory-path traffic
    if (MEM_FRAMES > 0) check(n_mem > 0, $sformatf("memory-portion accesses: %0d", n_mem));
    check(n_bad > 0,     $sformatf("refused addresses: %0d", n_bad));
    check(n_hit > 0,     $sformatf("cache hits: %0d", n_hit));
    check(n_miss > 0,    $sformatf("cache misses: %0d", n_miss));
    check(n_smp > 0,     $sformatf("sampled metadata updates: %0d", n_smp));
    check(n_repl > 0,    $sformatf("replacements: %0d", n_repl));
    check(n_wb > 0,      $sformatf("dirty write-backs: %0d", n_wb));
    check(n_stall > 0,   $sformatf("Tag Buffer stall cycles: %0d", n_stall));
    check(n_irq > 0,     $sformatf("flush interrupts: %0d", n_irq));
    check(n_drain > 0,   $sformatf("drained records: %0d", n_drain));
    check(n_cfg == 2,    $sformatf("boundary changes: %0d", n_cfg));
    check(n_rswb > 0,    $sformatf("repartition write-backs: %0d", n_rswb));
    if (MEM_FRAMES > 0) check(n_contend > 0, $sformatf("channel contention cycles: %0d", n_contend));
    $display("repartition write-backs=%0d", n_rswb);
    $display("mem=%0d bad=%0d hit=%0d miss=%0d sampled=%0d repl=%0d wb=%0d tb_stall=%0d irq=%0d drained=%0d cfg=%0d contend=%0d",
             n_mem, n_bad, n_hit, n_miss, n_smp, n_repl, n_wb, n_stall, n_irq, n_drain, n_cfg, n_contend);
    if (OWN_FINISH) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
    done = 1;
  end
endmodule
