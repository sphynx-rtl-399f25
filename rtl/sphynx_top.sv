// sphynx_top: instruction-fetch side of a many-core chip with shared L1 instruction caches.
//
// NUM_CORES processors (16, the streaming multiprocessors of a GTX580-class GPU)
// fetch instructions from NUM_CACHES = NUM_CORES / CORES_PER_CACHE shared caches.
// Processor c belongs to sharing group c / CORES_PER_CACHE. CORES_PER_CACHE = 1
// gives the conventional private cache per processor, 2 the paired arrangement,
// and the default, 16, one cache shared by the whole chip, the limit the paper
// proposes; 4 and 8 are the steps between. Every cache keeps the per-processor
// geometry (4 sets, 4 ways, 128-byte lines), so storage shrinks by
// CORES_PER_CACHE while the fetch load per cache grows by the same factor.
//
// The processors and the L2 cache are outside this block: each group's fetch
// ports and its L2 refill port are brought out as arrays, and each group's
// event counters are readable on perf_o. Timing and handshakes are those of
// icache_cluster and shared_icache.
module sphynx_top
  import sphynx_pkg::*;
#(
  parameter int unsigned NUM_CORES       = 16,
  parameter int unsigned CORES_PER_CACHE = 16,
  parameter int unsigned NUM_SETS        = 4,
  parameter int unsigned NUM_WAYS        = 4,
  localparam int unsigned NUM_CACHES     = NUM_CORES / CORES_PER_CACHE
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // processor fetch ports
  input  fetch_req_t  core_req_i [NUM_CORES],
  output logic        core_gnt_o [NUM_CORES],
  output fetch_rsp_t  core_rsp_o [NUM_CORES],
  // one L2 refill port per cache
  output logic        l2_req_valid_o [NUM_CACHES],
  output addr_t       l2_req_addr_o  [NUM_CACHES],
  input  logic        l2_req_ready_i [NUM_CACHES],
  input  logic        l2_rsp_valid_i [NUM_CACHES],
  input  line_t       l2_rsp_data_i  [NUM_CACHES],
  // event counters
  input  logic        perf_clear_i,
  output perf_t       perf_o [NUM_CACHES]
);
  if (NUM_CORES % CORES_PER_CACHE != 0) begin : g_bad_cfg
    $error("NUM_CORES must be a multiple of CORES_PER_CACHE");
  end

  for (genvar g = 0; g < NUM_CACHES; g++) begin : g_group
    fetch_req_t req [CORES_PER_CACHE];
    logic       gnt [CORES_PER_CACHE];
    fetch_rsp_t rsp [CORES_PER_CACHE];

    for (genvar k = 0; k < CORES_PER_CACHE; k++) begin : g_port
      assign req[k] = core_req_i[g*CORES_PER_CACHE + k];
      assign core_gnt_o[g*CORES_PER_CACHE + k] = gnt[k];
      assign core_rsp_o[g*CORES_PER_CACHE + k] = rsp[k];
    end

    icache_cluster #(
      .NUM_CORES (CORES_PER_CACHE),
      .NUM_SETS  (NUM_SETS),
      .NUM_WAYS  (NUM_WAYS)
    ) u_cluster (
      .clk_i, .rst_ni,
      .core_req_i     (req),
      .core_gnt_o     (gnt),
      .core_rsp_o     (rsp),
      .l2_req_valid_o (l2_req_valid_o[g]),
      .l2_req_addr_o  (l2_req_addr_o[g]),
      .l2_req_ready_i (l2_req_ready_i[g]),
      .l2_rsp_valid_i (l2_rsp_valid_i[g]),
      .l2_rsp_data_i  (l2_rsp_data_i[g]),
      .perf_clear_i,
      .perf_o         (perf_o[g])
    );
  end
endmodule
