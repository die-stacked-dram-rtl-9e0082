// memcache_top_full_tb: end-to-end test of the MemCache front end with every
// parameter at its default: 4 GB die-stacked DRAM split 3 GB memory / 1 GB
// cache (65536 active sets of 4 ways, metadata room for 262144), 10%
// sampling, 1K-entry 8-way Tag Buffer flushed above 70%. After the
// 262144-cycle metadata clearing it runs a request mix through all
// mechanisms, with the checks of memcache_top_harness, including a
// repartition to 1.5 GB memory (the cache grows to 2 GB, 131072 sets) and
// back to 3 GB.
`timescale 1ns/1ps
module memcache_top_full_tb;
  memcache_top_harness #(
    .DEFAULTS     (1),
    .MEM_FRAMES   (786432),
    .CACHE_FRAMES (1048576),
    .SAMPLE_PCT   (10),
    .TB_ENTRIES   (1024),
    .TB_WAYS      (8),
    .NREQ         (40000),
    .WATCHDOG     (4000000)
  ) h ();
endmodule
