// fetch_arbiter: round-robin choice of one fetch request per cycle.
//
// The shared instruction cache has one read port, so when several processors
// fetch in the same cycle only one can be served; the rest see no grant and
// retry the next cycle, which is what the paper's stall rate counts. Which
// processor is chosen the paper does not say; this design's choice is
// round-robin, starting after the processor granted last, so that every
// requester is served within N cycles.
//
// Interface: req_i has one bit per processor; en_i says the cache can take an
// access this cycle. gnt_o (one-hot), gnt_valid_o and gnt_idx_o are
// combinational in req_i, en_i and the pointer. The pointer moves to the granted
// index at the clock edge of a grant; reset points it at N-1, so processor 0 has
// priority first.
module fetch_arbiter #(
  parameter int unsigned N = 16
) (
  input  logic                                clk_i,
  input  logic                                rst_ni,
  input  logic [N-1:0]                        req_i,
  input  logic                                en_i,
  output logic [N-1:0]                        gnt_o,
  output logic                                gnt_valid_o,
  output logic [sphynx_pkg::idx_w(N)-1:0]     gnt_idx_o
);
  localparam int unsigned IW = sphynx_pkg::idx_w(N);

  logic [IW-1:0] last_q;   // processor granted most recently

  always_comb begin
    logic        found;
    logic [IW-1:0] cand;
    found     = 1'b0;
    gnt_idx_o = '0;
    gnt_o     = '0;
    for (int unsigned k = 1; k <= N; k++) begin
      cand = IW'((int'(last_q) + k) % N);
      if (!found && req_i[cand]) begin
        found     = 1'b1;
        gnt_idx_o = cand;
      end
    end
    gnt_valid_o = found && en_i;
    if (gnt_valid_o) gnt_o[gnt_idx_o] = 1'b1;
  end

  always_ff @(posedge clk_i) begin
    if (!rst_ni)          last_q <= IW'(N - 1);
    else if (gnt_valid_o) last_q <= gnt_idx_o;
  end

  a_onehot: assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(gnt_o));
  a_gnt_req: assert property (@(posedge clk_i) disable iff (!rst_ni) (gnt_o & ~req_i) == '0);
endmodule
