// tb_shared_icache: self-checking test of the shared instruction cache.
//
// Drives the cache's lookup port directly, one fetch at a time, with an L2
// model behind it. A reference model of the cache (per set, a list of tags from
// most to least recently used, at most NUM_WAYS long) predicts hit or miss for
// every fetch. Checked: the returned instruction and id; a hit answers exactly
// one cycle after the lookup and sends nothing to L2; a miss sends the line
// address to L2 and answers exactly one cycle after the L2 response; the
// hit/miss event pulses; ready is low for the whole miss. A directed part fills
// one set with NUM_WAYS + 1 lines to check least-recently-used eviction, then
// a random part fetches from a footprint of 24 lines (six per set).
module tb_shared_icache;
  import sphynx_pkg::*;
  import sphynx_tb_pkg::*;
  localparam int unsigned NC = 16, SETS = 4, WAYS = 4;
  localparam int unsigned IDW = idx_w(NC);

  logic clk = 0, rst_n = 0;
  logic req_valid, ready, rsp_valid;
  addr_t req_addr;
  logic [IDW-1:0] req_id, rsp_id;
  inst_t rsp_inst;
  logic l2_req_valid, l2_req_ready, l2_rsp_valid;
  addr_t l2_req_addr;
  line_t l2_rsp_data;
  logic ev_hit, ev_miss;
  int n_l2_req, n_l2_bp;
  int checks = 0, failures = 0;
  int n_hits = 0, n_misses = 0, n_evictions = 0;

  shared_icache #(.NUM_CORES(NC), .NUM_SETS(SETS), .NUM_WAYS(WAYS)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(req_valid), .req_addr_i(req_addr), .req_id_i(req_id), .ready_o(ready),
    .rsp_valid_o(rsp_valid), .rsp_id_o(rsp_id), .rsp_inst_o(rsp_inst),
    .l2_req_valid_o(l2_req_valid), .l2_req_addr_o(l2_req_addr), .l2_req_ready_i(l2_req_ready),
    .l2_rsp_valid_i(l2_rsp_valid), .l2_rsp_data_i(l2_rsp_data),
    .ev_hit_o(ev_hit), .ev_miss_o(ev_miss));

  l2_model #(.LATENCY(5), .READY_PCT(60)) l2 (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(l2_req_valid), .req_addr_i(l2_req_addr),
    .req_ready_o(l2_req_ready), .rsp_valid_o(l2_rsp_valid), .rsp_data_o(l2_rsp_data),
    .n_req_o(n_l2_req), .n_backpressure_o(n_l2_bp));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model
  addr_t lru [SETS][$];   // line addresses, most recently used first

  function automatic bit model_access(input addr_t a, output bit evicted);
    int unsigned s;
    addr_t line;
    line = a >> OFF_W;
    s = line % SETS;
    evicted = 0;
    foreach (lru[s][i]) begin
      if (lru[s][i] == line) begin
        lru[s].delete(i);
        lru[s].push_front(line);
        return 1;
      end
    end
    lru[s].push_front(line);
    if (lru[s].size() > WAYS) begin
      void'(lru[s].pop_back());
      evicted = 1;
    end
    return 0;
  endfunction

  task automatic expect_eq(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  task automatic fetch(input addr_t a, input logic [IDW-1:0] id);
    bit exp_hit, evicted;
    int l2_before, cyc;
    l2_before = n_l2_req;
    req_valid = 1; req_addr = a; req_id = id;
    #1;
    expect_eq(ready, "cache ready when idle");
    exp_hit = model_access(a, evicted);
    expect_eq(ev_hit == exp_hit && ev_miss == !exp_hit,
              $sformatf("hit/miss pulse for %h (expected hit=%0b)", a, exp_hit));
    @(negedge clk);
    req_valid = 0; req_addr = $urandom; req_id = IDW'($urandom);
    if (exp_hit) begin
      n_hits++;
      expect_eq(rsp_valid, $sformatf("hit on %h answered after one cycle", a));
    end else begin
      n_misses++;
      if (evicted) n_evictions++;
      cyc = 0;
      while (!l2_rsp_valid) begin
        expect_eq(!ready && !rsp_valid, "not ready and silent during a miss");
        if (l2_req_valid) expect_eq(l2_req_addr == {a[ADDR_W-1:OFF_W], OFF_W'(0)}, "L2 line address");
        @(negedge clk);
        cyc++;
        if (cyc > 100) break;
      end
      @(negedge clk);
      expect_eq(rsp_valid, $sformatf("miss on %h answered one cycle after refill", a));
    end
    expect_eq(rsp_id == id, "response id");
    expect_eq(rsp_inst == inst_at(a), $sformatf("instruction at %h: got %h expected %h", a, rsp_inst, inst_at(a)));
    expect_eq(n_l2_req == l2_before + (exp_hit ? 0 : 1), "one L2 request per miss, none per hit");
    @(negedge clk);
    expect_eq(!rsp_valid, "response is a single-cycle pulse");
  endtask

  initial begin
    req_valid = 0; req_addr = '0; req_id = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // directed: five lines of set 1, then revisit in LRU order
    for (int k = 0; k < 5; k++) fetch(addr_t'(32'h0001_0080 + k * 512 + 8 * k), IDW'(k));
    fetch(32'h0001_0088, 3);          // line 0 was evicted: miss
    fetch(32'h0001_08A0, 4);          // line 4 still present: hit
    fetch(32'h0001_0290, 5);          // line 1 evicted by the previous miss: miss
    // random fetches over 24 lines
    for (int t = 0; t < 3000; t++) begin
      addr_t a;
      a = 32'h0040_0000 + addr_t'(($urandom % 24) * LINE_BYTES) + addr_t'(($urandom % WORDS) * 8);
      fetch(a, IDW'($urandom));
    end
    expect_eq(n_hits > 100 && n_misses > 100 && n_evictions > 50 && n_l2_bp > 0,
              $sformatf("mechanisms seen: hits=%0d misses=%0d evictions=%0d L2 backpressure=%0d",
                        n_hits, n_misses, n_evictions, n_l2_bp));
    $display("hits=%0d misses=%0d evictions=%0d l2_backpressure=%0d", n_hits, n_misses, n_evictions, n_l2_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
