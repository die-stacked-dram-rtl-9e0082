// memcache_top_partition_tb: end-to-end test of the memory/cache splits of a
// 4 GB die-stacked DRAM other than the default 3 GB memory / 1 GB cache, each
// reached at run time on the design with every parameter at its default.
//
// Four copies of the design run side by side, each driven by its own
// memcache_top_harness. Each starts at the default 3/1 split, is repartitioned
// after a third of its requests and returns to 3/1 after two thirds:
//  - h22: 2 GB memory / 2 GB cache (boundary 524288 frames, 131072 sets);
//  - h13: 1 GB memory / 3 GB free; the cache takes 2 GB of it (131072 sets,
//         the largest power-of-two set count), 1 GB stays unused;
//  - h04: no memory portion, 4 GB cache (262144 sets);
//  - h40: 4 GB memory, no cache (every off-chip request bypasses).
// Every harness applies its full scoreboard and requires every mechanism
// over the whole run. The test ends when all four are done and reports the
// sum of their checks and failures. Each harness has its own watchdog; this
// module adds one more.
`timescale 1ns/1ps
module memcache_top_partition_tb;
  localparam int unsigned NREQ = 30000, WD = 6000000;

  memcache_top_harness #(.DEFAULTS(1), .MEM_FRAMES(786432), .CACHE_FRAMES(1048576),
    .SAMPLE_PCT(10), .TB_ENTRIES(1024), .TB_WAYS(8), .NREQ(NREQ), .WATCHDOG(WD),
    .OWN_FINISH(0), .ALT_FRAMES(524288)) h22 ();
  memcache_top_harness #(.DEFAULTS(1), .MEM_FRAMES(786432), .CACHE_FRAMES(1048576),
    .SAMPLE_PCT(10), .TB_ENTRIES(1024), .TB_WAYS(8), .NREQ(NREQ), .WATCHDOG(WD),
    .OWN_FINISH(0), .ALT_FRAMES(262144)) h13 ();
  memcache_top_harness #(.DEFAULTS(1), .MEM_FRAMES(786432), .CACHE_FRAMES(1048576),
    .SAMPLE_PCT(10), .TB_ENTRIES(1024), .TB_WAYS(8), .NREQ(NREQ), .WATCHDOG(WD),
    .OWN_FINISH(0), .ALT_FRAMES(0)) h04 ();
  memcache_top_harness #(.DEFAULTS(1), .MEM_FRAMES(786432), .CACHE_FRAMES(1048576),
    .SAMPLE_PCT(10), .TB_ENTRIES(1024), .TB_WAYS(8), .NREQ(NREQ), .WATCHDOG(WD),
    .OWN_FINISH(0), .ALT_FRAMES(1048576)) h40 ();

  int checks, failures;

  function automatic int sum_checks();
    return h22.checks + h13.checks + h04.checks + h40.checks;
  endfunction
  function automatic int sum_failures();
    return h22.failures + h13.failures + h04.failures + h40.failures;
  endfunction

  initial begin
    #100ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", sum_checks(), sum_failures() + 1);
    $finish;
  end

  initial begin
    wait (h22.done && h13.done && h04.done && h40.done);
    checks   = sum_checks();
    failures = sum_failures();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
