// tag_buffer: SRAM record of recently remapped pages of the DRAM cache.
//
// The cache portion keeps page residency in the page table and TLBs instead of
// tag-checking in DRAM. Whenever a page enters or leaves the cache, the new
// mapping (page number, cached bit, way) is first written here; software later
// copies the records into the page table and shoots down the TLBs. This
// coalesces page-table updates so that the costly software interrupt is taken
// rarely.
//
// Organisation: ENTRIES records, WAYS-way set-associative, set index = low
// bits of the page number. An insert for a page already present overwrites
// its record (coalescing); otherwise it takes a free way. When the set is full
// the insert is held (ins_ready low) until software drains the buffer.
//
// Flush interrupt: flush_irq rises when occupancy exceeds THRESH_PCT percent
// of ENTRIES, or when an insert is held on a full set, and stays high until
// the buffer is empty. Software raises drain_en, reads every valid record on
// the drain port (valid/ready; one record per accepted cycle, scanning all
// entries in order) and drops drain_en once flush_irq falls. No inserts are
// accepted while drain_en is high.
//
// Size (1K entries, 8 ways) and the 70% flush threshold follow the evaluated
// configuration; the record format, the held-insert behaviour on a full set
// and the drain port are this design's choices. Inserts complete in the cycle
// they are accepted; a drained record is removed on its handshake.
module tag_buffer
  import memcache_pkg::*;
#(
  parameter int unsigned ENTRIES    = 1024,
  parameter int unsigned WAYS       = 8,
  parameter int unsigned THRESH_PCT = 70
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // insert port (from the cache-portion controller)
  input  logic                       ins_valid,
  output logic                       ins_ready,
  input  remap_t                     ins,
  // software flush
  output logic                       flush_irq,
  input  logic                       drain_en,
  output logic                       drain_valid,
  input  logic                       drain_ready,
  output remap_t                     drain_rec,
  output logic [$clog2(ENTRIES):0]   occupancy
);

  localparam int unsigned SETS   = ENTRIES / WAYS;
  localparam int unsigned SET_W  = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WIDX_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned IDX_W  = $clog2(ENTRIES);
  localparam int unsigned THRESH = (ENTRIES * THRESH_PCT) / 100;

  remap_t           rec [SETS][WAYS];
  logic [WAYS-1:0]  vld [SETS];
  logic [IDX_W-1:0] scan;          // drain pointer: {set, way}
  logic             irq_q;

  logic [SET_W-1:0]  iset;
  logic              hit, free;
  logic [WIDX_W-1:0] hit_way, free_way;
  logic [SET_W-1:0]  sset;
  logic [WIDX_W-1:0] sway;
  logic              ins_fire, blocked;

  always_comb begin
    iset     = SET_W'(ins.pn % SETS);
    hit      = 1'b0;
    free     = 1'b0;
    hit_way  = '0;
    free_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (vld[iset][w] && rec[iset][w].pn == ins.pn) begin
        hit     = 1'b1;
        hit_way = WIDX_W'(w);
      end
      if (!vld[iset][w]) begin
        free     = 1'b1;
        free_way = WIDX_W'(w);
      end
    end
    ins_ready = !drain_en && (hit || free);
    ins_fire  = ins_valid && ins_ready;
    blocked   = ins_valid && !drain_en && !hit && !free;

    sset        = SET_W'(scan / WAYS);
    sway        = WIDX_W'(scan % WAYS);
    drain_valid = drain_en && vld[sset][sway];
    drain_rec   = rec[sset][sway];
  end

  always_ff @(posedge clk) begin
    if (ins_fire)
      rec[iset][hit ? hit_way : free_way] <= ins;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) vld[s] <= '0;
      occupancy <= '0;
      scan      <= '0;
      irq_q     <= 1'b0;
    end else begin
      if (ins_fire && !hit) begin
        vld[iset][free_way] <= 1'b1;
        occupancy           <= occupancy + 1'b1;
      end
      if (drain_en) begin
        if (drain_valid && drain_ready) begin
          vld[sset][sway] <= 1'b0;
          occupancy       <= occupancy - 1'b1;
          scan            <= scan + 1'b1;
        end else if (!drain_valid) begin
          scan <= scan + 1'b1;
        end
      end else begin
        scan <= '0;
      end
      if (occupancy > ($clog2(ENTRIES)+1)'(THRESH) || blocked)
        irq_q <= 1'b1;
      else if (occupancy == '0)
        irq_q <= 1'b0;
    end
  end

  assign flush_irq = irq_q;

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    occupancy <= ($clog2(ENTRIES)+1)'(ENTRIES));
  a_no_insert_in_drain: assert property (@(posedge clk) disable iff (!rst_n)
    drain_en |-> !ins_ready);

endmodule
