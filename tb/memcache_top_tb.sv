// memcache_top_tb: end-to-end test of the MemCache front end at reduced cache
// size (64 cache frames, i.e. 16 sets) with a 16-entry 2-way Tag Buffer and
// 50% sampling, so that replacements, write-backs, Tag Buffer stalls and
// flushes occur often within a short run. The memory portion keeps its full
// 3 GB default; the run repartitions to 1.5 GB memory and back (the cache
// stays at its 16-set maximum, but each repartition writes back its dirty
// pages). All checking lives in memcache_top_harness.
`timescale 1ns/1ps
module memcache_top_tb;
  memcache_top_harness #(
    .DEFAULTS     (0),
    .MEM_FRAMES   (786432),
    .CACHE_FRAMES (64),
    .SAMPLE_PCT   (50),
    .TB_ENTRIES   (16),
    .TB_WAYS      (2),
    .NREQ         (6000),
    .WATCHDOG     (400000)
  ) h ();
endmodule
