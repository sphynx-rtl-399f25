// shared_icache: single-ported, read-only, set-associative instruction cache.
//
// This is the L1 instruction cache that several processors share. Its geometry
// is the Fermi one the design starts from: NUM_SETS = 4 sets of NUM_WAYS = 4
// ways of 128-byte lines. It has one lookup port, so it performs at most one
// access per cycle whatever the number of processors behind it; arbitration
// happens outside (fetch_arbiter).
//
// How it works. In state IDLE the cache is ready; a request (req_valid_i with
// ready_o) is looked up in the same cycle against the tags, which are held in
// flip-flops. On a hit the instruction word is registered and returned with the
// requester's id on the next cycle (rsp_valid_o, one-cycle pulse), and the way
// becomes most recently used. On a miss the cache goes to MISS_REQ and raises
// l2_req_valid_o with the line address until l2_req_ready_i, then waits in
// MISS_WAIT for l2_rsp_valid_i with the whole 128-byte line. The line is written
// into the victim way (an invalid way if there is one, else the least recently
// used), the waiting request is answered from the incoming line on the next
// cycle, and the cache returns to IDLE. While a miss is outstanding the cache is
// not ready, so every other fetch stalls: the cache is blocking.
//
// Follows the paper: one shared cache, the 4 x 4 x 128 B geometry, one access
// per cycle, misses refilled from L2. This design's own choices: true LRU
// replacement with per-way age counters, a single outstanding miss, a one-cycle
// hit latency, the whole line arriving in one L2 beat, and a synchronous
// active-low reset that clears the valid bits and LRU ages (the data array is
// not reset).
module shared_icache
  import sphynx_pkg::*;
#(
  parameter int unsigned NUM_CORES = 16,
  parameter int unsigned NUM_SETS  = 4,
  parameter int unsigned NUM_WAYS  = 4
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  // lookup port (from the arbiter)
  input  logic                          req_valid_i,
  input  addr_t                         req_addr_i,
  input  logic [idx_w(NUM_CORES)-1:0]   req_id_i,
  output logic                          ready_o,
  // response (to the requesting processor)
  output logic                          rsp_valid_o,
  output logic [idx_w(NUM_CORES)-1:0]   rsp_id_o,
  output inst_t                         rsp_inst_o,
  // refill port towards L2
  output logic                          l2_req_valid_o,
  output addr_t                         l2_req_addr_o,
  input  logic                          l2_req_ready_i,
  input  logic                          l2_rsp_valid_i,
  input  line_t                         l2_rsp_data_i,
  // one-cycle event pulses for the counters
  output logic                          ev_hit_o,
  output logic                          ev_miss_o
);
  localparam int unsigned IDW   = idx_w(NUM_CORES);
  localparam int unsigned SET_W = idx_w(NUM_SETS);
  localparam int unsigned SETB  = $clog2(NUM_SETS);          // set index bits in the address
  localparam int unsigned WAY_W = idx_w(NUM_WAYS);
  localparam int unsigned TAG_W = ADDR_W - OFF_W - SETB;

  typedef enum logic [1:0] {IDLE, MISS_REQ, MISS_WAIT} state_e;

  state_e             state_q;
  logic [TAG_W-1:0]   tag_q   [NUM_SETS][NUM_WAYS];
  logic               valid_q [NUM_SETS][NUM_WAYS];
  logic [WAY_W-1:0]   age_q   [NUM_SETS][NUM_WAYS];   // 0 = most recently used
  line_t              data_q  [NUM_SETS][NUM_WAYS];

  // the miss being serviced
  addr_t              miss_addr_q;
  logic [IDW-1:0]     miss_id_q;

  // ---------------------------------------------------------------- address split
  // addr = {tag, set, word, byte}; the byte offset inside a word is ignored
  logic [TAG_W-1:0]   req_tag, miss_tag;
  logic [SET_W-1:0]   lk_set, fill_set;
  logic [WSEL_W-1:0]  req_word, miss_word;

  assign req_tag   = req_addr_i[ADDR_W-1 -: TAG_W];
  assign miss_tag  = miss_addr_q[ADDR_W-1 -: TAG_W];
  assign req_word  = req_addr_i[WOFF_W +: WSEL_W];
  assign miss_word = miss_addr_q[WOFF_W +: WSEL_W];

  // ---------------------------------------------------------------- lookup
  logic               lookup;
  logic               hit;
  logic [WAY_W-1:0]   hit_way;

  if (NUM_SETS > 1) begin : g_set
    assign lk_set   = req_addr_i[OFF_W +: SETB];
    assign fill_set = miss_addr_q[OFF_W +: SETB];
  end else begin : g_one_set
    assign lk_set   = '0;
    assign fill_set = '0;
  end

  assign ready_o = (state_q == IDLE);
  assign lookup  = req_valid_i && ready_o;

  logic [NUM_WAYS-1:0] match;

  always_comb begin
    hit_way = '0;
    for (int unsigned w = 0; w < NUM_WAYS; w++) begin
      match[w] = valid_q[lk_set][w] && (tag_q[lk_set][w] == req_tag);
      if (match[w]) hit_way = WAY_W'(w);
    end
    hit = |match;
  end

  assign ev_hit_o  = lookup &&  hit;
  assign ev_miss_o = lookup && !hit;

  // ---------------------------------------------------------------- victim choice
  logic [WAY_W-1:0]   victim;


  always_comb begin
    victim = '0;
    for (int unsigned w = 0; w < NUM_WAYS; w++) begin
      if (age_q[fill_set][w] == WAY_W'(NUM_WAYS - 1)) victim = WAY_W'(w);
    end
    for (int i = int'(NUM_WAYS) - 1; i >= 0; i--) begin
      if (!valid_q[fill_set][i]) begin
        victim = WAY_W'(i);
      end
    end
  end

  logic fill;
  assign fill = (state_q == MISS_WAIT) && l2_rsp_valid_i;

  // ---------------------------------------------------------------- L2 port
  assign l2_req_valid_o = (state_q == MISS_REQ);
  assign l2_req_addr_o  = {miss_addr_q[ADDR_W-1:OFF_W], OFF_W'(0)};

  // ---------------------------------------------------------------- state, tags, LRU
  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      state_q     <= IDLE;
      miss_addr_q <= '0;
      miss_id_q   <= '0;
      for (int unsigned s = 0; s < NUM_SETS; s++) begin
        for (int unsigned w = 0; w < NUM_WAYS; w++) begin
          valid_q[s][w] <= 1'b0;
          tag_q[s][w]   <= '0;
          age_q[s][w]   <= WAY_W'(w);
        end
      end
    end else begin
      unique case (state_q)
        IDLE: begin
          if (lookup && hit) begin
            for (int unsigned w = 0; w < NUM_WAYS; w++) begin
              if (age_q[lk_set][w] < age_q[lk_set][hit_way]) age_q[lk_set][w] <= age_q[lk_set][w] + 1'b1;
            end
            age_q[lk_set][hit_way] <= '0;
          end else if (lookup) begin
            miss_addr_q <= req_addr_i;
            miss_id_q   <= req_id_i;
            state_q     <= MISS_REQ;
          end
        end
        MISS_REQ: begin
          if (l2_req_ready_i) state_q <= MISS_WAIT;
        end
        MISS_WAIT: begin
          if (l2_rsp_valid_i) begin
            valid_q[fill_set][victim] <= 1'b1;
            tag_q[fill_set][victim]   <= miss_tag;
            for (int unsigned w = 0; w < NUM_WAYS; w++) begin
              if (age_q[fill_set][w] < age_q[fill_set][victim]) age_q[fill_set][w] <= age_q[fill_set][w] + 1'b1;
            end
            age_q[fill_set][victim] <= '0;
            state_q <= IDLE;
          end
        end
        default: state_q <= IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- data array
  always_ff @(posedge clk_i) begin
    if (fill) data_q[fill_set][victim] <= l2_rsp_data_i;
  end

  // ---------------------------------------------------------------- response
  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      rsp_valid_o <= 1'b0;
      rsp_id_o    <= '0;
      rsp_inst_o  <= '0;
    end else begin
      rsp_valid_o <= (lookup && hit) || fill;
      if (lookup && hit) begin
        rsp_id_o   <= req_id_i;
        rsp_inst_o <= data_q[lk_set][hit_way][req_word*INST_W +: INST_W];
      end else if (fill) begin
        rsp_id_o   <= miss_id_q;
        rsp_inst_o <= l2_rsp_data_i[miss_word*INST_W +: INST_W];
      end
    end
  end

  // a line is never held in two ways of a set
  a_single_copy: assert property (@(posedge clk_i) disable iff (!rst_ni) lookup |-> $onehot0(match));
  a_l2_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
    l2_req_valid_o && !l2_req_ready_i |=> l2_req_valid_o && $stable(l2_req_addr_o));
endmodule
