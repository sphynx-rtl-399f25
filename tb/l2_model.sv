// l2_model: behavioural model of the L2 cache as seen by one instruction cache.
//
// Not synthesizable logic of the design: it stands in for the chip's L2 and
// memory system. It accepts one line request at a time, holding l2_req_ready
// low on a random share of cycles (READY_PCT percent of cycles ready), and
// returns the whole 128-byte line LATENCY cycles after acceptance as a
// one-cycle rsp_valid pulse. Line contents come from sphynx_tb_pkg::line_at.
// It counts the requests it accepted and records the cycle of its last response.
module l2_model
  import sphynx_pkg::*;
#(
  parameter int unsigned LATENCY   = 6,
  parameter int unsigned READY_PCT = 70
) (
  input  logic  clk_i,
  input  logic  rst_ni,
  input  logic  req_valid_i,
  input  addr_t req_addr_i,
  output logic  req_ready_o,
  output logic  rsp_valid_o,
  output line_t rsp_data_o,
  output int    n_req_o,
  output int    n_backpressure_o
);
  logic  busy;
  int    wait_cnt;
  addr_t addr_q;

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      busy             <= 1'b0;
      wait_cnt         <= 0;
      rsp_valid_o      <= 1'b0;
      rsp_data_o       <= '0;
      req_ready_o      <= 1'b0;
      n_req_o          <= 0;
      n_backpressure_o <= 0;
      addr_q           <= '0;
    end else begin
      rsp_valid_o <= 1'b0;
      if (req_valid_i && req_ready_o && !busy) begin
        busy     <= 1'b1;
        wait_cnt <= int'(LATENCY) - 1;
        addr_q   <= req_addr_i;
        n_req_o  <= n_req_o + 1;
      end else if (req_valid_i && !req_ready_o) begin
        n_backpressure_o <= n_backpressure_o + 1;
      end
      if (busy) begin
        if (wait_cnt == 0) begin
          busy        <= 1'b0;
          rsp_valid_o <= 1'b1;
          rsp_data_o  <= sphynx_tb_pkg::line_at(addr_q);
        end else begin
          wait_cnt <= wait_cnt - 1;
        end
      end
      req_ready_o <= !busy && (($urandom % 100) < READY_PCT);
    end
  end
endmodule
