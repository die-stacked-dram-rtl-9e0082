// stacked_chan_arb: steers die-stacked DRAM commands to the four channels.
//
// The die-stacked DRAM is interleaved across its channels at 4 KB granularity,
// so consecutive frames sit on consecutive channels and a command's channel is
// the low CH_W bits of its frame number. Several sources (the memory-portion
// path and the cache-portion controller) may target the same channel in one
// cycle; each channel grants one of them with its own round-robin pointer,
// which moves past the winner after every accepted command. A source whose
// channel is busy or granted elsewhere sees src_ready low and holds its
// command (valid/ready handshake).
//
// The channel count and 4 KB interleaving follow the evaluated system; the
// round-robin policy is this design's choice, as the channel controllers and
// their DRAM scheduling lie outside this block.
//
// Timing: combinational from src_valid/ch_ready to ch_valid/src_ready; the
// round-robin pointers update on the clock edge of an accepted command.
module stacked_chan_arb
  import memcache_pkg::*;
#(
  parameter int unsigned NUM_SRC = 2,
  parameter int unsigned NUM_CH  = NUM_STACK_CH
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     src_valid [NUM_SRC],
  output logic     src_ready [NUM_SRC],
  input  stk_cmd_t src_cmd   [NUM_SRC],
  output logic     ch_valid  [NUM_CH],
  input  logic     ch_ready  [NUM_CH],
  output stk_cmd_t ch_cmd    [NUM_CH]
);

  localparam int unsigned SRC_W = (NUM_SRC > 1) ? $clog2(NUM_SRC) : 1;
  localparam int unsigned SEL_W = (NUM_CH > 1) ? $clog2(NUM_CH) : 1;

  logic [SRC_W-1:0] rr    [NUM_CH];   // highest-priority source per channel
  logic [SRC_W-1:0] grant [NUM_CH];
  logic             any   [NUM_CH];

  function automatic logic [SEL_W-1:0] chan_of(stk_cmd_t c);
    return SEL_W'(c.frame % NUM_CH);
  endfunction

  always_comb begin
    for (int ch = 0; ch < NUM_CH; ch++) begin
      any[ch]   = 1'b0;
      grant[ch] = '0;
      // search from rr[ch] upwards, wrapping
      for (int k = NUM_SRC - 1; k >= 0; k--) begin
        int unsigned s;
        s = (int'(rr[ch]) + k) % NUM_SRC;
        if (src_valid[s] && chan_of(src_cmd[s]) == SEL_W'(ch)) begin
          any[ch]   = 1'b1;
          grant[ch] = SRC_W'(s);
        end
      end
      ch_valid[ch] = any[ch];
      ch_cmd[ch]   = src_cmd[grant[ch]];
    end
    for (int s = 0; s < NUM_SRC; s++) begin
      src_ready[s] = 1'b0;
      for (int ch = 0; ch < NUM_CH; ch++)
        if (any[ch] && grant[ch] == SRC_W'(s) && ch_ready[ch]) src_ready[s] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int ch = 0; ch < NUM_CH; ch++) rr[ch] <= '0;
    end else begin
      for (int ch = 0; ch < NUM_CH; ch++)
        if (any[ch] && ch_ready[ch])
          rr[ch] <= SRC_W'((int'(grant[ch]) + 1) % NUM_SRC);
    end
  end

endmodule
