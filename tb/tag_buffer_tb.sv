// tag_buffer_tb: self-checking test of the Tag Buffer at its full size
// (1024 entries, 8 ways, flush above 70% occupancy).
//
// A model keeps the expected records in an associative array keyed by page
// number. The test checks: coalescing of repeated pages, occupancy counting,
// that the flush interrupt stays low up to 716 records and rises at 717, that
// a ninth page of a full set is held and raises the interrupt, and that a
// drain returns exactly the modelled records (last write wins), one per
// handshake, leaving the buffer empty with the interrupt cleared.
`timescale 1ns/1ps
module tag_buffer_tb;
  import memcache_pkg::*;

  localparam int ENTRIES = 1024, WAYS = 8, SETS = ENTRIES / WAYS;

  logic clk = 0, rst_n = 0;
  logic ins_valid = 0, ins_ready;
  remap_t ins = '0;
  logic flush_irq, drain_en = 0, drain_valid, drain_ready = 0;
  remap_t drain_rec;
  logic [10:0] occupancy;

  int checks = 0, failures = 0;
  remap_t model [logic [PN_W-1:0]];
  int per_set [SETS];

  tag_buffer dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  // insert one record, waiting at most `patience` cycles; returns accepted
  task automatic insert(remap_t r, int patience, output bit ok);
    ok = 0;
    @(negedge clk);
    ins = r;
    ins_valid = 1;
    for (int i = 0; i <= patience; i++) begin
      #1;
      if (ins_ready) begin
        ok = 1;
        break;
      end
      @(negedge clk);
    end
    @(posedge clk);
    #1;
    ins_valid = 0;
    if (ok) begin
      if (!model.exists(r.pn)) per_set[int'(r.pn % SETS)]++;
      model[r.pn] = r;
    end
  endtask

  function automatic remap_t rnd_rec(int set, int k);
    remap_t r;
    r.pn     = PN_W'(((k + 1) * SETS) + set);
    r.cached = 1'($urandom);
    r.way    = 2'($urandom);
    return r;
  endfunction

  task automatic drain_all();
    int got;
    got = 0;
    @(negedge clk);
    drain_en = 1;
    for (int cyc = 0; cyc < 4 * ENTRIES; cyc++) begin
      drain_ready = 1'($urandom_range(0, 3) != 0);
      #1;
      if (drain_valid && drain_ready) begin
        check(model.exists(drain_rec.pn), $sformatf("drained pn %h expected", drain_rec.pn));
        if (model.exists(drain_rec.pn)) begin
          check(model[drain_rec.pn] == drain_rec, "drained record matches last write");
          model.delete(drain_rec.pn);
        end
        got++;
      end
      check(!ins_ready, "no inserts while draining");
      @(negedge clk);
      if (occupancy == 0) break;
    end
    drain_en = 0;
    drain_ready = 0;
    check(model.num() == 0, $sformatf("all records drained (%0d left)", model.num()));
    for (int s = 0; s < SETS; s++) per_set[s] = 0;
    @(negedge clk);
    check(occupancy == 0, "empty after drain");
    check(!flush_irq, "interrupt cleared after drain");
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ok;
    int n;
    for (int s = 0; s < SETS; s++) per_set[s] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(occupancy == 0 && !flush_irq, "empty after reset");

    // 1. fill to exactly 716 records spread over the sets; irq must stay low
    n = 0;
    for (int k = 0; n < 716; k++)
      for (int s = 0; s < SETS && n < 716; s++)
        if (per_set[s] < 6) begin
          insert(rnd_rec(s, k), 0, ok);
          check(ok, "insert into set with space");
          n++;
        end
    @(negedge clk);
    check(occupancy == 716, $sformatf("occupancy 716 (%0d)", occupancy));
    check(!flush_irq, "no interrupt at 70% exactly");

    // 2. coalescing: rewrite an existing page, occupancy unchanged
    begin
      remap_t r;
      r = rnd_rec(5, 0);
      r.cached = ~model[r.pn].cached;
      insert(r, 0, ok);
      check(ok, "coalescing insert accepted");
      @(negedge clk);
      check(occupancy == 716, "coalescing keeps occupancy");
    end

    // 3. one more distinct record crosses the threshold
    insert(rnd_rec(7, 6), 0, ok);
    check(ok, "717th insert");
    @(negedge clk);
    check(occupancy == 717, "occupancy 717");
    check(!flush_irq, "interrupt is registered: not yet");
    @(negedge clk);
    check(flush_irq, "interrupt above 70%, one cycle later");

    drain_all();

    // 4. a full set holds the ninth page and raises the interrupt
    for (int k = 0; k < WAYS; k++) begin
      insert(rnd_rec(3, k), 0, ok);
      check(ok, "fill one set");
    end
    @(negedge clk);
    check(!flush_irq, "8 records: no interrupt");
    insert(rnd_rec(3, WAYS), 5, ok);
    check(!ok, "ninth page of a full set is held");
    @(negedge clk);
    check(flush_irq, "held insert raises interrupt");
    check(occupancy == WAYS, "occupancy unchanged by held insert");
    // a page of another set still goes in
    insert(rnd_rec(4, 0), 0, ok);
    check(ok, "other set accepted");

    drain_all();

    // 5. random mix with coalescing, then drain
    for (int i = 0; i < 600; i++) begin
      int s;
      s = $urandom_range(0, SETS - 1);
      insert(rnd_rec(s, $urandom_range(0, 5)), 0, ok);
      check(ok == 1, "random insert accepted");
    end
    @(negedge clk);
    check(int'(occupancy) == model.num(), $sformatf("occupancy %0d vs model %0d", occupancy, model.num()));
    drain_all();

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
