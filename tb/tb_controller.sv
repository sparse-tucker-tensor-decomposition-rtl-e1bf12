// tb_controller: self-checking test of the iteration sequencer.
// The clear, Kronecker, CPU and TTM units are modelled by responders that
// answer after random delays. The testbench records the sequence of
// requests and compares it with the expected order for 1, 2 and 3
// iterations: for every mode 1..3 a clear, a Kronecker pass and a QR
// hand-off of that mode, then one TTM per iteration, then a single done.
module tb_controller;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy, done, ttm_phase;
  logic [7:0] cfg_iters, iter;
  logic [1:0] mode;
  logic clr_start, clr_busy, kron_start, kron_done, qrp_req, qrp_done, ttm_start, ttm_done;
  int checks = 0, failures = 0;
  string got [$];
  string want [$];
  int clr_cnt, kron_cnt, ttm_cnt, qrp_wait;
  bit qrp_seen;

  controller dut (.*);

  always #5 clk = ~clk;

  // responders
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clr_busy <= 0; kron_done <= 0; ttm_done <= 0; qrp_done <= 0;
      clr_cnt <= 0; kron_cnt <= 0; ttm_cnt <= 0; qrp_wait <= 0; qrp_seen <= 0;
    end else begin
      kron_done <= 0; ttm_done <= 0; qrp_done <= 0;
      if (clr_start) begin clr_busy <= 1; clr_cnt <= 3 + $urandom % 6; end
      else if (clr_busy) begin clr_cnt <= clr_cnt - 1; if (clr_cnt == 1) clr_busy <= 0; end
      if (kron_start) kron_cnt <= 2 + $urandom % 9;
      else if (kron_cnt != 0) begin kron_cnt <= kron_cnt - 1; if (kron_cnt == 1) kron_done <= 1; end
      if (ttm_start) ttm_cnt <= 2 + $urandom % 9;
      else if (ttm_cnt != 0) begin ttm_cnt <= ttm_cnt - 1; if (ttm_cnt == 1) ttm_done <= 1; end
      if (!qrp_req) qrp_seen <= 0;
      else if (!qrp_seen) begin qrp_seen <= 1; qrp_wait <= 1 + $urandom % 9; end
      else if (qrp_wait != 0) begin
        qrp_wait <= qrp_wait - 1;
        if (qrp_wait == 1) qrp_done <= 1;
      end
    end
  end

  // event recorder
  always @(posedge clk) if (rst_n) begin
    if (clr_start)  got.push_back($sformatf("C%0d", mode));
    if (kron_start) got.push_back($sformatf("K%0d", mode));
    if (qrp_req && !qrp_seen) got.push_back($sformatf("Q%0d", mode));
    if (ttm_start)  got.push_back("T");
    if (done)       got.push_back("D");
    if (qrp_seen && !qrp_req && qrp_wait != 0) begin failures++; $display("qrp_req dropped before qrp_done"); end
    if (ttm_phase && !(ttm_cnt != 0 || ttm_start || ttm_done)) begin
      failures++; $display("ttm_phase outside TTM");
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; cfg_iters = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int iters = 1; iters <= 3; iters++) begin
      got.delete(); want.delete();
      for (int it = 0; it < iters; it++) begin
        for (int m = 0; m < 3; m++) begin
          want.push_back($sformatf("C%0d", m));
          want.push_back($sformatf("K%0d", m));
          want.push_back($sformatf("Q%0d", m));
        end
        want.push_back("T");
      end
      want.push_back("D");
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("busy before start"); end
      cfg_iters = 8'(iters); start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("busy after done"); end
      checks++;
      if (got.size() != want.size()) begin
        failures++;
        $display("iters=%0d: %0d events, expected %0d", iters, got.size(), want.size());
      end
      for (int e = 0; e < want.size() && e < got.size(); e++) begin
        checks++;
        if (got[e] != want[e]) begin
          failures++;
          $display("iters=%0d event %0d: %s, expected %s", iters, e, got[e], want[e]);
        end
      end
      checks++;
      if (iters > 1 && iter != 8'(iters - 1)) begin failures++; $display("iter counter %0d", iter); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
