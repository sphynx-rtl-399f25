// core_fetch_model: behavioural model of one processor's instruction fetch.
//
// Not part of the design: it stands in for a streaming multiprocessor. All
// models run the same program (same start address), as in a single parallel
// application, and diverge through random jumps. While run_i is high the model
// fetches: it raises a request for its program counter, holds it until granted,
// waits for the response and checks the instruction against
// sphynx_tb_pkg::inst_at. The next fetch is the following word or, with
// probability JUMP_PCT percent, the first word of a random line of a
// FOOT_LINES-line footprint starting at BASE. It reports how many fetches it
// completed, how many returned a wrong word, how many answered one cycle after
// the grant (hits) or later (misses), and how many cycles it was refused.
module core_fetch_model
  import sphynx_pkg::*;
#(
  parameter addr_t       BASE       = 32'h0010_0000,
  parameter int unsigned FOOT_LINES = 16,
  parameter int unsigned JUMP_PCT   = 10,
  parameter int unsigned IDLE_PCT   = 10
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       run_i,
  output fetch_req_t req_o,
  input  logic       gnt_i,
  input  fetch_rsp_t rsp_i,
  output int         n_done_o,
  output int         n_err_o,
  output int         n_fast_o,
  output int         n_slow_o,
  output int         n_stall_o,
  output logic       busy_o
);
  addr_t pc;
  logic  waiting;
  int    lat;

  assign busy_o = req_o.valid || waiting;

  always @(posedge clk_i) begin
    if (!rst_ni) begin
      pc <= BASE; req_o <= '0; waiting <= 0; lat <= 0;
      n_done_o <= 0; n_err_o <= 0; n_fast_o <= 0; n_slow_o <= 0; n_stall_o <= 0;
    end else begin
      if (req_o.valid) begin
        if (gnt_i) begin
          req_o.valid <= 1'b0;
          waiting     <= 1'b1;
          lat         <= 0;
        end else begin
          n_stall_o <= n_stall_o + 1;
        end
      end else if (waiting) begin
        lat <= lat + 1;
        if (rsp_i.valid) begin
          waiting  <= 1'b0;
          n_done_o <= n_done_o + 1;
          if (rsp_i.inst != sphynx_tb_pkg::inst_at(pc)) begin
            n_err_o <= n_err_o + 1;
            $display("core at %h: got %h expected %h", pc, rsp_i.inst, sphynx_tb_pkg::inst_at(pc));
          end
          if (lat == 0) n_fast_o <= n_fast_o + 1;
          else          n_slow_o <= n_slow_o + 1;
          if (($urandom % 100) < JUMP_PCT)
            pc <= BASE + addr_t'(($urandom % FOOT_LINES) * LINE_BYTES);
          else if (pc + 8 >= BASE + addr_t'(FOOT_LINES * LINE_BYTES))
            pc <= BASE;
          else
            pc <= pc + 8;
        end
      end else if (run_i && (($urandom % 100) >= IDLE_PCT)) begin
        req_o.valid <= 1'b1;
        req_o.addr  <= pc;
      end
    end
  end
endmodule
