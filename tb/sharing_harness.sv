// sharing_harness: one sphynx_top at a chosen sharing degree, with its processors
// and L2 models, for the sharing sweep testbench.
//
// Instantiates sphynx_top with 16 processors and CORES_PER_CACHE processors per
// cache, sixteen core_fetch_model processors that run the same program from the
// same start address over a FOOT_LINES-line footprint, and one l2_model per
// cache. While run_i is high the processors fetch; the outputs sum the
// processors' own tallies, the caches' counters and the L2 requests, and
// busy_o is high while any fetch is still open.
module sharing_harness
  import sphynx_pkg::*;
#(
  parameter int unsigned CPC        = 16,
  parameter int unsigned FOOT_LINES = 12
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic run_i,
  output int   done_o,
  output int   err_o,
  output int   fast_o,
  output int   slow_o,
  output int   stall_o,
  output int   l2_o,
  output perf_t perf_sum_o,
  output logic busy_o
);
  localparam int unsigned NC = 16;
  localparam int unsigned NCACHE = NC / CPC;

  fetch_req_t core_req [NC];
  logic       core_gnt [NC];
  fetch_rsp_t core_rsp [NC];
  logic       l2_req_valid [NCACHE];
  addr_t      l2_req_addr  [NCACHE];
  logic       l2_req_ready [NCACHE];
  logic       l2_rsp_valid [NCACHE];
  line_t      l2_rsp_data  [NCACHE];
  perf_t      perf [NCACHE];
  int n_done [NC], n_err [NC], n_fast [NC], n_slow [NC], n_stall [NC];
  logic busy [NC];
  int n_l2 [NCACHE], n_bp [NCACHE];

  sphynx_top #(.NUM_CORES(NC), .CORES_PER_CACHE(CPC)) dut (
    .clk_i, .rst_ni,
    .core_req_i(core_req), .core_gnt_o(core_gnt), .core_rsp_o(core_rsp),
    .l2_req_valid_o(l2_req_valid), .l2_req_addr_o(l2_req_addr), .l2_req_ready_i(l2_req_ready),
    .l2_rsp_valid_i(l2_rsp_valid), .l2_rsp_data_i(l2_rsp_data),
    .perf_clear_i(1'b0), .perf_o(perf));

  for (genvar c = 0; c < NC; c++) begin : g_core
    core_fetch_model #(.BASE(32'h0020_0000), .FOOT_LINES(FOOT_LINES), .JUMP_PCT(10), .IDLE_PCT(10)) u_core (
      .clk_i, .rst_ni, .run_i,
      .req_o(core_req[c]), .gnt_i(core_gnt[c]), .rsp_i(core_rsp[c]),
      .n_done_o(n_done[c]), .n_err_o(n_err[c]), .n_fast_o(n_fast[c]),
      .n_slow_o(n_slow[c]), .n_stall_o(n_stall[c]), .busy_o(busy[c]));
  end

  for (genvar g = 0; g < NCACHE; g++) begin : g_l2
    l2_model #(.LATENCY(8), .READY_PCT(80)) u_l2 (
      .clk_i, .rst_ni, .req_valid_i(l2_req_valid[g]), .req_addr_i(l2_req_addr[g]),
      .req_ready_o(l2_req_ready[g]), .rsp_valid_o(l2_rsp_valid[g]), .rsp_data_o(l2_rsp_data[g]),
      .n_req_o(n_l2[g]), .n_backpressure_o(n_bp[g]));
  end

  always_comb begin
    done_o = 0; err_o = 0; fast_o = 0; slow_o = 0; stall_o = 0; l2_o = 0; busy_o = 0;
    perf_sum_o = '0;
    for (int c = 0; c < NC; c++) begin
      done_o += n_done[c]; err_o += n_err[c]; fast_o += n_fast[c];
      slow_o += n_slow[c]; stall_o += n_stall[c]; busy_o |= busy[c];
    end
    for (int g = 0; g < NCACHE; g++) begin
      l2_o += n_l2[g];
      perf_sum_o.accesses += perf[g].accesses;
      perf_sum_o.hits     += perf[g].hits;
      perf_sum_o.misses   += perf[g].misses;
      perf_sum_o.stalls   += perf[g].stalls;
    end
  end
endmodule
