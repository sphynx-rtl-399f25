// tb_fetch_arbiter: self-checking test of the round-robin fetch arbiter.
//
// Drives random request vectors and enables into a 16-input arbiter and
// compares every cycle with a reference that scans the requesters upward from
// the one granted last. Then holds all requests high and checks that each
// processor is served exactly once in every 16 consecutive cycles (one grant
// per cycle, the read-port rate of the shared cache).
module tb_fetch_arbiter;
  localparam int unsigned N  = 16;
  localparam int unsigned IW = sphynx_pkg::idx_w(N);

  logic          clk = 0, rst_n = 0;
  logic [N-1:0]  req;
  logic          en;
  logic [N-1:0]  gnt;
  logic          gnt_valid;
  logic [IW-1:0] gnt_idx;
  int            checks = 0, failures = 0;
  int            ref_last;

  fetch_arbiter #(.N(N)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .en_i(en),
    .gnt_o(gnt), .gnt_valid_o(gnt_valid), .gnt_idx_o(gnt_idx));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_pick(input logic [N-1:0] r, input int last);
    int i;
    i = (last + 1) % N;
    repeat (N) begin
      if (r[i]) return i;
      i = (i + 1) % N;
    end
    return -1;
  endfunction

  task automatic check_cycle();
    int exp;
    exp = ref_pick(req, ref_last);
    checks++;
    if (!en || exp < 0) begin
      if (gnt_valid || gnt != '0) begin
        failures++;
        $display("FAIL: grant with en=%0b req=%h", en, req);
      end
    end else begin
      if (!gnt_valid || int'(gnt_idx) != exp || gnt != (N'(1) << exp)) begin
        failures++;
        $display("FAIL: req=%h last=%0d expected %0d got valid=%0b idx=%0d gnt=%h",
                 req, ref_last, exp, gnt_valid, gnt_idx, gnt);
      end
      ref_last = exp;
    end
  endtask

  int served [N];
  initial begin
    req = '0; en = 0; ref_last = N - 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // random traffic
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      req = N'($urandom) & N'($urandom);
      en  = ($urandom % 4) != 0;
      #1 check_cycle();
    end
    // saturated traffic: every processor served once per N cycles
    for (int round = 0; round < 8; round++) begin
      foreach (served[i]) served[i] = 0;
      for (int t = 0; t < N; t++) begin
        @(negedge clk);
        req = '1; en = 1;
        #1 check_cycle();
        if (gnt_valid) served[gnt_idx]++;
      end
      foreach (served[i]) begin
        checks++;
        if (served[i] != 1) begin
          failures++;
          $display("FAIL: round %0d processor %0d served %0d times", round, i, served[i]);
        end
      end
    end
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
