// icache_perf_counters: access, hit, miss and stall counters of one shared cache.
//
// The two figures of merit of a shared instruction cache are its miss rate and
// its stall rate: the share of fetch attempts that are refused because the one
// read port is busy with another processor or with a miss, even when the line
// is present. This block counts the events those rates are formed from:
//   miss rate  = misses / accesses
//   stall rate = stalls / (accesses + stalls)
// The two rates are the paper's metrics; the formulas, the counting rule and the
// counters themselves are this design's choice of how to expose them in hardware.
//
// Interface: ev_hit_i and ev_miss_i are one-cycle pulses from the cache (at most
// one per cycle); ev_stalls_i is how many processors were refused this cycle.
// clear_i zeroes all counters at the next edge, as does reset. Counters are
// 32 bits wide and wrap.
module icache_perf_counters
  import sphynx_pkg::*;
#(
  parameter int unsigned NUM_CORES = 16
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  input  logic                         clear_i,
  input  logic                         ev_hit_i,
  input  logic                         ev_miss_i,
  input  logic [$clog2(NUM_CORES+1)-1:0] ev_stalls_i,
  output perf_t                        perf_o
);
  perf_t cnt_q;

  always_ff @(posedge clk_i) begin
    if (!rst_ni || clear_i) begin
      cnt_q <= '0;
    end else begin
      cnt_q.accesses <= cnt_q.accesses + cnt_t'(ev_hit_i || ev_miss_i);
      cnt_q.hits     <= cnt_q.hits     + cnt_t'(ev_hit_i);
      cnt_q.misses   <= cnt_q.misses   + cnt_t'(ev_miss_i);
      cnt_q.stalls   <= cnt_q.stalls   + cnt_t'(ev_stalls_i);
    end
  end

  assign perf_o = cnt_q;

  a_one_event: assert property (@(posedge clk_i) disable iff (!rst_ni) !(ev_hit_i && ev_miss_i));
endmodule
