// tb_icache_perf_counters: self-checking test of the cache event counters.
//
// Applies random hit, miss and stall-count events for many cycles, keeps its
// own totals and compares all four counters after every cycle; pulses clear
// part-way and checks that every counter restarts from zero.
module tb_icache_perf_counters;
  import sphynx_pkg::*;
  localparam int unsigned NC = 16;

  logic clk = 0, rst_n = 0, clear;
  logic ev_hit, ev_miss;
  logic [$clog2(NC+1)-1:0] ev_stalls;
  perf_t perf;
  int checks = 0, failures = 0;
  longint acc, hit, miss, stl;

  icache_perf_counters #(.NUM_CORES(NC)) dut (
    .clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .ev_hit_i(ev_hit),
    .ev_miss_i(ev_miss), .ev_stalls_i(ev_stalls), .perf_o(perf));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string where);
    checks++;
    if (perf.accesses != cnt_t'(acc) || perf.hits != cnt_t'(hit) ||
        perf.misses != cnt_t'(miss) || perf.stalls != cnt_t'(stl)) begin
      failures++;
      $display("FAIL %s: got a=%0d h=%0d m=%0d s=%0d expected a=%0d h=%0d m=%0d s=%0d", where,
               perf.accesses, perf.hits, perf.misses, perf.stalls, acc, hit, miss, stl);
    end
  endtask

  initial begin
    clear = 0; ev_hit = 0; ev_miss = 0; ev_stalls = 0;
    acc = 0; hit = 0; miss = 0; stl = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    compare("after reset");
    for (int t = 0; t < 4000; t++) begin
      int r;
      r = $urandom % 3;
      ev_hit    = (r == 1);
      ev_miss   = (r == 2);
      ev_stalls = ($clog2(NC+1))'($urandom % (NC + 1));
      clear     = (t == 2000);
      @(negedge clk);
      if (clear) begin
        acc = 0; hit = 0; miss = 0; stl = 0;
      end else begin
        acc  += (ev_hit || ev_miss);
        hit  += ev_hit;
        miss += ev_miss;
        stl  += ev_stalls;
      end
      compare("running");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
