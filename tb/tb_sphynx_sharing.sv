// tb_sphynx_sharing: the sharing sweep, 1, 2, 4, 8 and 16 processors per cache.
//
// Five copies of the 16-processor fetch side run side by side, one per sharing
// degree of the study (16, 8, 4, 2 and 1 caches of 4 sets x 4 ways x 128 B).
// All processors run the same program over a 12-line footprint, which fits in
// one cache (three lines per set, four ways). For every copy the testbench
// checks that every instruction was right and that the counters agree with the
// processors' tallies and the L2 requests. Across copies it checks the two
// effects the design is about: with private caches nobody is ever refused
// (stalls = 0) while shared caches stall, and shared caches take fewer
// compulsory misses, since a line fetched for one processor serves the others
// (one cache: exactly 12 misses; sixteen private caches: 16 x 12). It prints
// the miss and stall rate of each copy. A second set of five copies runs a
// 64-line footprint, four times one cache: there the miss rate of one cache
// shared by sixteen must exceed that of private caches, as the shared cache
// cannot hold what all processors need at once.
module tb_sphynx_sharing;
  import sphynx_pkg::*;
  localparam int NCFG = 5;
  localparam int unsigned FOOT = 12;
  localparam int unsigned BIG  = 64;   // four times the capacity of one cache

  logic clk = 0, rst_n = 0, run = 0;
  int done [NCFG], err [NCFG], fast [NCFG], slow [NCFG], stall [NCFG], l2 [NCFG];
  perf_t perf [NCFG];
  logic busy [NCFG];
  int bdone [NCFG], berr [NCFG], bfast [NCFG], bslow [NCFG], bstall [NCFG], bl2 [NCFG];
  perf_t bperf [NCFG];
  logic bbusy [NCFG];
  int checks = 0, failures = 0;

  for (genvar i = 0; i < NCFG; i++) begin : g_cfg
    sharing_harness #(.CPC(1 << i), .FOOT_LINES(FOOT)) u_h (
      .clk_i(clk), .rst_ni(rst_n), .run_i(run),
      .done_o(done[i]), .err_o(err[i]), .fast_o(fast[i]), .slow_o(slow[i]), .stall_o(stall[i]),
      .l2_o(l2[i]), .perf_sum_o(perf[i]), .busy_o(busy[i]));
    sharing_harness #(.CPC(1 << i), .FOOT_LINES(BIG)) u_big (
      .clk_i(clk), .rst_ni(rst_n), .run_i(run),
      .done_o(bdone[i]), .err_o(berr[i]), .fast_o(bfast[i]), .slow_o(bslow[i]), .stall_o(bstall[i]),
      .l2_o(bl2[i]), .perf_sum_o(bperf[i]), .busy_o(bbusy[i]));
  end

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    bit any_busy;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run = 1;
    repeat (6000) @(negedge clk);
    run = 0;
    do begin
      @(negedge clk);
      any_busy = 0;
      foreach (busy[i]) any_busy |= busy[i] | bbusy[i];
    end while (any_busy);
    repeat (2) @(negedge clk);
    for (int i = 0; i < NCFG; i++) begin
      real mr, sr;
      mr = real'(perf[i].misses) / real'(perf[i].accesses);
      sr = real'(perf[i].stalls) / real'(perf[i].accesses + perf[i].stalls);
      $display("%2d per cache: fetches=%0d misses=%0d stalls=%0d miss rate=%f stall rate=%f",
               1 << i, done[i], perf[i].misses, perf[i].stalls, mr, sr);
      expect_eq(err[i] == 0, $sformatf("cfg %0d wrong instructions %0d", i, err[i]));
      expect_eq(done[i] > 1000, $sformatf("cfg %0d made progress", i));
      expect_eq(perf[i].accesses == cnt_t'(done[i]), $sformatf("cfg %0d accesses", i));
      expect_eq(perf[i].hits == cnt_t'(fast[i]), $sformatf("cfg %0d hits", i));
      expect_eq(perf[i].misses == cnt_t'(slow[i]) && slow[i] == l2[i], $sformatf("cfg %0d misses", i));
      expect_eq(perf[i].stalls == cnt_t'(stall[i]), $sformatf("cfg %0d stalls", i));
      if (i > 0) begin
        expect_eq(perf[i].stalls > perf[i-1].stalls, $sformatf("stalls grow with sharing at cfg %0d", i));
        expect_eq(perf[i].misses <= perf[i-1].misses, $sformatf("misses do not grow with sharing at cfg %0d", i));
      end
    end
    expect_eq(perf[0].stalls == 0, "private caches never stall");
    expect_eq(perf[0].misses == 16 * FOOT, $sformatf("private caches: %0d compulsory misses", perf[0].misses));
    expect_eq(perf[NCFG-1].misses == FOOT, $sformatf("one shared cache: %0d compulsory misses", perf[NCFG-1].misses));
    // large footprint: the cache no longer holds what all the processors need
    for (int i = 0; i < NCFG; i++) begin
      $display("%2d per cache, %0d-line footprint: fetches=%0d misses=%0d stalls=%0d miss rate=%f stall rate=%f",
               1 << i, BIG, bdone[i], bperf[i].misses, bperf[i].stalls,
               real'(bperf[i].misses) / real'(bperf[i].accesses),
               real'(bperf[i].stalls) / real'(bperf[i].accesses + bperf[i].stalls));
      expect_eq(berr[i] == 0, $sformatf("big cfg %0d wrong instructions %0d", i, berr[i]));
      expect_eq(bperf[i].accesses == cnt_t'(bdone[i]) && bperf[i].hits == cnt_t'(bfast[i]) &&
                bperf[i].misses == cnt_t'(bslow[i]) && bslow[i] == bl2[i] &&
                bperf[i].stalls == cnt_t'(bstall[i]), $sformatf("big cfg %0d counters", i));
    end
    expect_eq(bperf[NCFG-1].misses * bperf[0].accesses > bperf[0].misses * bperf[NCFG-1].accesses,
              "large footprint: miss rate higher with one shared cache than with private caches");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
