// tb_colibri_system: end-to-end test of the Colibri memory system.
//
// Eight behavioural cores (colibri_core_models) run a contended histogram
// with LRwait/SCwait, a reservation broken by a store, and an Mwait
// producer/consumer hand-over on a system of 8 cores and 16 banks with one
// queue slot per bank. Besides the results checked by the core models, the
// test counts, by watching the Qnodes, how often each Colibri mechanism
// happened: SuccessorUpdates, WakeUpRequests sent after an SCwait or an Mwait
// response, SuccessorUpdates bounced by a Qnode whose core had already left,
// LRwaits that waited in a queue, SCwaits failing because the controller was
// full or the reservation was broken, and Mwaits answered at once or after a
// write. Each must happen at least once.
module tb_colibri_system;
  import colibri_pkg::*;

  localparam int unsigned NumCores = 8;
  localparam int unsigned NumBanks = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [NumCores-1:0] req_valid, req_ready, rsp_valid, rsp_ready;
  req_t [NumCores-1:0] req;
  rsp_t [NumCores-1:0] rsp;
  logic done;
  int   m_checks, m_failures, queued, sc_full, sc_store, mw_now, mw_woken;
  int   succupd_cnt = 0, wakeup_cnt = 0, bounce_cnt = 0;
  int   checks = 0, failures = 0;
  int   cycles = 0;

  colibri_system #(
    .NumCores  (NumCores),
    .NumBanks  (NumBanks),
    .BankWords (256),
    .NumQueues (1)
  ) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_valid_i(req_valid), .core_req_ready_o(req_ready), .core_req_i(req),
    .core_rsp_valid_o(rsp_valid), .core_rsp_ready_i(rsp_ready), .core_rsp_o(rsp)
  );

  colibri_core_models #(
    .NumCores (NumCores),
    .NumBanks (NumBanks),
    .NumBins  (4),
    .NumIncs  (12)
  ) i_cores (
    .clk_i(clk), .rst_ni(rst_n),
    .req_valid_o(req_valid), .req_ready_i(req_ready), .req_o(req),
    .rsp_valid_i(rsp_valid), .rsp_ready_o(rsp_ready), .rsp_i(rsp),
    .done_o(done), .checks_o(m_checks), .failures_o(m_failures),
    .queued_lrwait_o(queued), .sc_fail_full_o(sc_full), .sc_fail_store_o(sc_store),
    .mwait_now_o(mw_now), .mwait_woken_o(mw_woken)
  );

  always #5 clk = ~clk;

  // Mechanism counters, taken at the Qnodes.
  for (genvar c = 0; c < NumCores; c++) begin : gen_mon
    always @(posedge clk) begin
      if (rst_n) begin
        if (dut.gen_core[c].i_qnode.succupd_fire) begin
          succupd_cnt++;
          if (!dut.gen_core[c].i_qnode.succ_valid_d) bounce_cnt++;
        end
        if (dut.net_req_valid[c] && dut.net_req_ready[c] && dut.net_req[c].op == REQ_WAKEUP)
          wakeup_cnt++;
      end
    end
  end

  always @(posedge clk) cycles++;

  task automatic count(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + m_checks, failures + m_failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done);
    $display("cycles=%0d succupd=%0d wakeup=%0d bounce=%0d queued_lrwait=%0d sc_fail_full=%0d sc_fail_store=%0d mwait_now=%0d mwait_woken=%0d",
             cycles, succupd_cnt, wakeup_cnt, bounce_cnt, queued, sc_full, sc_store, mw_now, mw_woken);
    count(succupd_cnt > 0, "a SuccessorUpdate was sent");
    count(wakeup_cnt > 0, "a WakeUpRequest was sent");
    count(bounce_cnt > 0, "a SuccessorUpdate was bounced");
    count(queued > 0, "an LRwait waited in a queue");
    count(sc_full > 0, "an LRwait found its controller full");
    count(sc_store > 0, "a store broke a reservation");
    count(mw_now > 0, "an Mwait returned at once");
    count(mw_woken == NumCores - 1, "every Mwait sleeper woke");
    $display("TB_RESULT checks=%0d failures=%0d", checks + m_checks, failures + m_failures);
    $finish;
  end
endmodule
