// icache_cluster: one instruction cache shared by a group of processors.
//
// A sharing group is the unit of the shared design: NUM_CORES processors fetch
// from one cache. With NUM_CORES = 2 it is the paired arrangement, with all
// processors of the chip it is the fully shared one. Each cycle fetch_arbiter
// picks one requesting processor if the cache is ready; the chosen request goes
// to the cache's single lookup port and the response is steered back to that
// processor by the id the cache returns. Processors that requested but were not
// chosen are counted as stalls. The group has one refill port towards L2.
//
// The grouping follows the paper; the processor handshake is this design's choice: a processor holds
// core_req_i[c].valid and .addr until core_gnt_o[c] is high in a cycle; it then
// drops the request and waits for core_rsp_o[c].valid, a one-cycle pulse that
// comes one cycle after the grant on a hit and one cycle after the L2 response
// on a miss. It may request again in the cycle of the response.
module icache_cluster
  import sphynx_pkg::*;
#(
  parameter int unsigned NUM_CORES = 16,
  parameter int unsigned NUM_SETS  = 4,
  parameter int unsigned NUM_WAYS  = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  fetch_req_t  core_req_i [NUM_CORES],
  output logic        core_gnt_o [NUM_CORES],
  output fetch_rsp_t  core_rsp_o [NUM_CORES],
  output logic        l2_req_valid_o,
  output addr_t       l2_req_addr_o,
  input  logic        l2_req_ready_i,
  input  logic        l2_rsp_valid_i,
  input  line_t       l2_rsp_data_i,
  input  logic        perf_clear_i,
  output perf_t       perf_o
);
  localparam int unsigned IDW = idx_w(NUM_CORES);
  localparam int unsigned SW  = $clog2(NUM_CORES + 1);

  logic [NUM_CORES-1:0] req_vec, gnt_vec;
  logic                 gnt_valid, cache_ready;
  logic [IDW-1:0]       gnt_idx;
  logic                 rsp_valid;
  logic [IDW-1:0]       rsp_id;
  inst_t                rsp_inst;
  logic                 ev_hit, ev_miss;
  logic [SW-1:0]        ev_stalls;

  always_comb begin
    for (int unsigned c = 0; c < NUM_CORES; c++) req_vec[c] = core_req_i[c].valid;
  end

  fetch_arbiter #(.N(NUM_CORES)) u_arb (
    .clk_i, .rst_ni,
    .req_i       (req_vec),
    .en_i        (cache_ready),
    .gnt_o       (gnt_vec),
    .gnt_valid_o (gnt_valid),
    .gnt_idx_o   (gnt_idx)
  );

  shared_icache #(.NUM_CORES(NUM_CORES), .NUM_SETS(NUM_SETS), .NUM_WAYS(NUM_WAYS)) u_cache (
    .clk_i, .rst_ni,
    .req_valid_i    (gnt_valid),
    .req_addr_i     (core_req_i[gnt_idx].addr),
    .req_id_i       (gnt_idx),
    .ready_o        (cache_ready),
    .rsp_valid_o    (rsp_valid),
    .rsp_id_o       (rsp_id),
    .rsp_inst_o     (rsp_inst),
    .l2_req_valid_o,
    .l2_req_addr_o,
    .l2_req_ready_i,
    .l2_rsp_valid_i,
    .l2_rsp_data_i,
    .ev_hit_o       (ev_hit),
    .ev_miss_o      (ev_miss)
  );

  always_comb begin
    ev_stalls = '0;
    for (int unsigned c = 0; c < NUM_CORES; c++) begin
      core_gnt_o[c]       = gnt_vec[c];
      core_rsp_o[c].valid = rsp_valid && (rsp_id == IDW'(c));
      core_rsp_o[c].inst  = rsp_inst;
      ev_stalls           = ev_stalls + SW'(req_vec[c] && !gnt_vec[c]);
    end
  end

  icache_perf_counters #(.NUM_CORES(NUM_CORES)) u_perf (
    .clk_i, .rst_ni,
    .clear_i     (perf_clear_i),
    .ev_hit_i    (ev_hit),
    .ev_miss_i   (ev_miss),
    .ev_stalls_i (ev_stalls),
    .perf_o
  );

  // handshake rules: a granted processor waits for its answer before asking again
  logic [NUM_CORES-1:0] pending_q;
  always_ff @(posedge clk_i) begin
    if (!rst_ni) pending_q <= '0;
    else begin
      for (int unsigned c = 0; c < NUM_CORES; c++) begin
        if (gnt_vec[c])               pending_q[c] <= 1'b1;
        else if (core_rsp_o[c].valid) pending_q[c] <= 1'b0;
      end
    end
  end
  for (genvar c = 0; c < NUM_CORES; c++) begin : g_chk
    a_no_req_while_pending: assert property (@(posedge clk_i) disable iff (!rst_ni)
      pending_q[c] && !core_rsp_o[c].valid |-> !core_req_i[c].valid);
    a_hold_until_gnt: assert property (@(posedge clk_i) disable iff (!rst_ni)
      core_req_i[c].valid && !core_gnt_o[c] |=> core_req_i[c].valid && $stable(core_req_i[c].addr));
  end
endmodule
