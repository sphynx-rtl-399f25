// tb_sphynx_top: end-to-end test of the chip's instruction-fetch side at its
// default configuration: 16 processors sharing one 4-set, 4-way, 128-byte-line
// instruction cache, backed by an L2 model with random back-pressure.
//
// Sixteen processor models run the same program and check every instruction
// they receive. The testbench watches the ports each cycle and checks: at most
// one grant per cycle, and exactly one whenever the cache is ready and someone
// requests (the single read port is never idle while there is work); no
// requester waits more than 15 ready cycles in a row (round-robin bound); the
// cache's counters equal what the testbench saw (grants = accesses, responses
// one cycle after the grant = hits, slower ones = misses = L2 requests,
// refused requester-cycles = stalls). It runs two phases with a counter clear
// between them, the second with a footprint larger than the cache. Each
// mechanism must occur at least once: hit, miss, refill of a line evicted
// earlier, a stall from port contention, a stall behind a miss, L2
// back-pressure, the counter clear, and service of every processor.
module tb_sphynx_top;
  import sphynx_pkg::*;
  localparam int unsigned NC     = 16;   // sphynx_top default NUM_CORES
  localparam int unsigned NCACHE = 1;    // NUM_CORES / CORES_PER_CACHE at the defaults

  logic clk = 0, rst_n = 0;
  fetch_req_t core_req [NC];
  logic       core_gnt [NC];
  fetch_rsp_t core_rsp [NC];
  logic       l2_req_valid [NCACHE];
  addr_t      l2_req_addr  [NCACHE];
  logic       l2_req_ready [NCACHE];
  logic       l2_rsp_valid [NCACHE];
  line_t      l2_rsp_data  [NCACHE];
  logic       perf_clear;
  perf_t      perf [NCACHE];

  logic run [2];
  int n_done [2][NC], n_err [2][NC], n_fast [2][NC], n_slow [2][NC], n_stall [2][NC];
  logic busy [2][NC];
  int n_l2 [2], n_bp [2];
  int phase;

  int checks = 0, failures = 0;

  sphynx_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_i(core_req), .core_gnt_o(core_gnt), .core_rsp_o(core_rsp),
    .l2_req_valid_o(l2_req_valid), .l2_req_addr_o(l2_req_addr), .l2_req_ready_i(l2_req_ready),
    .l2_rsp_valid_i(l2_rsp_valid), .l2_rsp_data_i(l2_rsp_data),
    .perf_clear_i(perf_clear), .perf_o(perf));

  // two sets of processor models, one per phase, sharing the fetch ports
  fetch_req_t m_req [2][NC];
  for (genvar p = 0; p < 2; p++) begin : g_phase
    for (genvar c = 0; c < NC; c++) begin : g_core
      core_fetch_model #(
        .BASE       (32'h0010_0000 + p * 32'h0001_0000),
        .FOOT_LINES (p == 0 ? 12 : 40),
        .JUMP_PCT   (p == 0 ? 8 : 20),
        .IDLE_PCT   (p == 0 ? 5 : 30)
      ) u_core (
        .clk_i(clk), .rst_ni(rst_n), .run_i(run[p]),
        .req_o(m_req[p][c]), .gnt_i(core_gnt[c] && phase == p), .rsp_i(core_rsp[c]),
        .n_done_o(n_done[p][c]), .n_err_o(n_err[p][c]), .n_fast_o(n_fast[p][c]),
        .n_slow_o(n_slow[p][c]), .n_stall_o(n_stall[p][c]), .busy_o(busy[p][c]));
    end
  end
  always_comb for (int c = 0; c < NC; c++) core_req[c] = m_req[phase][c];

  for (genvar g = 0; g < NCACHE; g++) begin : g_l2
    l2_model #(.LATENCY(8), .READY_PCT(60)) u_l2 (
      .clk_i(clk), .rst_ni(rst_n), .req_valid_i(l2_req_valid[g]), .req_addr_i(l2_req_addr[g]),
      .req_ready_o(l2_req_ready[g]), .rsp_valid_o(l2_rsp_valid[g]), .rsp_data_o(l2_rsp_data[g]),
      .n_req_o(n_l2[g]), .n_backpressure_o(n_bp[g]));
  end

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  // ------------------------------------------------------------ cycle monitor
  int grants, ref_stalls, worst_wait;
  int ev_contention, ev_blocked, ev_refetch;
  int wait_run [NC];
  bit seen_line [addr_t];
  logic cache_idle;
  logic l2_busy;

  // the cache is idle unless a miss is open; a miss opens when L2 is asked and
  // closes the cycle after the L2 answer
  always @(posedge clk) begin
    if (!rst_n) l2_busy <= 0;
    else if (l2_req_valid[0]) l2_busy <= 1;
    else if (l2_rsp_valid[0]) l2_busy <= 0;
  end

  always @(negedge clk) begin
    if (rst_n) begin
      int ng, nreq;
      ng = 0; nreq = 0;
      cache_idle = !l2_busy && !l2_req_valid[0];
      for (int c = 0; c < NC; c++) begin
        ng   += core_gnt[c];
        nreq += core_req[c].valid;
        if (core_req[c].valid && !core_gnt[c]) begin
          ref_stalls++;
          if (cache_idle) begin
            wait_run[c]++;
            if (wait_run[c] > worst_wait) worst_wait = wait_run[c];
          end
        end else wait_run[c] = 0;
      end
      grants += ng;
      checks++;
      if (ng > 1) begin failures++; $display("FAIL: %0d grants in one cycle", ng); end
      if (cache_idle && nreq > 0 && ng != 1 && !l2_rsp_valid[0]) begin
        // a lookup that misses raises the L2 request only a cycle later
        failures++; $display("FAIL at %0t: requests but no grant while idle", $time);
      end
      if (ng == 1 && nreq > 1) ev_contention++;
      if (!cache_idle && nreq > 0) ev_blocked++;
      if (l2_req_valid[0] && l2_req_ready[0]) begin
        if (seen_line.exists(l2_req_addr[0])) ev_refetch++;
        seen_line[l2_req_addr[0]] = 1;
      end
    end
  end

  // ------------------------------------------------------------ phases
  int base_grants, base_stalls, base_l2;

  task automatic run_phase(int p, int cycles);
    int fast, slow, stall, done, err, busy_n;
    phase = p;
    base_grants = grants; base_stalls = ref_stalls; base_l2 = n_l2[0];
    run[p] = 1;
    repeat (cycles) @(negedge clk);
    run[p] = 0;
    do begin
      @(negedge clk);
      busy_n = 0;
      for (int c = 0; c < NC; c++) busy_n += busy[p][c];
    end while (busy_n != 0);
    repeat (2) @(negedge clk);
    fast = 0; slow = 0; stall = 0; done = 0; err = 0;
    for (int c = 0; c < NC; c++) begin
      fast += n_fast[p][c]; slow += n_slow[p][c]; stall += n_stall[p][c];
      done += n_done[p][c]; err += n_err[p][c];
      expect_eq(n_done[p][c] > 0, $sformatf("phase %0d processor %0d served", p, c));
    end
    $display("phase %0d: fetches=%0d hits=%0d misses=%0d stalls=%0d | counters a=%0d h=%0d m=%0d s=%0d",
             p, done, fast, slow, stall, perf[0].accesses, perf[0].hits, perf[0].misses, perf[0].stalls);
    expect_eq(err == 0, $sformatf("phase %0d: %0d wrong instructions", p, err));
    expect_eq(perf[0].accesses == cnt_t'(grants - base_grants), "accesses counter = grants");
    expect_eq(perf[0].accesses == cnt_t'(done), "accesses counter = completed fetches");
    expect_eq(perf[0].hits == cnt_t'(fast), "hits counter = one-cycle responses");
    expect_eq(perf[0].misses == cnt_t'(slow), "misses counter = slow responses");
    expect_eq(perf[0].misses == cnt_t'(n_l2[0] - base_l2), "misses counter = L2 requests");
    expect_eq(perf[0].stalls == cnt_t'(ref_stalls - base_stalls), "stalls counter = refused requests");
    expect_eq(perf[0].stalls == cnt_t'(stall), "stalls counter = processor wait cycles");
  endtask

  initial begin
    run[0] = 0; run[1] = 0; phase = 0; perf_clear = 0;
    grants = 0; ref_stalls = 0; worst_wait = 0;
    ev_contention = 0; ev_blocked = 0; ev_refetch = 0;
    foreach (wait_run[c]) wait_run[c] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run_phase(0, 3000);
    perf_clear = 1;
    @(negedge clk);
    perf_clear = 0;
    @(negedge clk);
    expect_eq(perf[0] == '0, "counters cleared");
    run_phase(1, 4000);
    expect_eq(worst_wait <= int'(NC) - 1, $sformatf("longest wait behind others %0d cycles", worst_wait));
    $display("mechanisms: contention=%0d blocked_by_miss=%0d refetch_after_evict=%0d l2_backpressure=%0d worst_wait=%0d",
             ev_contention, ev_blocked, ev_refetch, n_bp[0], worst_wait);
    expect_eq(ev_contention > 0, "port contention stall happened");
    expect_eq(ev_blocked > 0, "stall behind a miss happened");
    expect_eq(ev_refetch > 0, "evicted line fetched again");
    expect_eq(n_bp[0] > 0, "L2 back-pressure happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
