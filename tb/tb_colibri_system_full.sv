// tb_colibri_system_full: the Colibri memory system at its default size.
//
// 256 behavioural cores on 1024 banks of 256 words (1 MiB) with one queue slot
// per bank: every core increments two randomly chosen bins out of two (each
// in its own bank, so all 256 cores queue on two words) with LRwait/SCwait, one reservation is broken by a store, and 255 cores sleep on
// a flag with Mwait until core 0 writes it. The core models check every
// result; this test adds that the whole queue of 255 Mwait sleepers is woken.
module tb_colibri_system_full;
  import colibri_pkg::*;

  localparam int unsigned NumCores = 256;
  localparam int unsigned NumBanks = 1024;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [NumCores-1:0] req_valid, req_ready, rsp_valid, rsp_ready;
  req_t [NumCores-1:0] req;
  rsp_t [NumCores-1:0] rsp;
  logic done;
  int   m_checks, m_failures, queued, sc_full, sc_store, mw_now, mw_woken;
  int   checks = 0, failures = 0;
  int   cycles = 0;

  colibri_system dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_valid_i(req_valid), .core_req_ready_o(req_ready), .core_req_i(req),
    .core_rsp_valid_o(rsp_valid), .core_rsp_ready_i(rsp_ready), .core_rsp_o(rsp)
  );

  colibri_core_models #(
    .NumCores (NumCores),
    .NumBanks (NumBanks),
    .NumBins  (2),
    .NumIncs  (2)
  ) i_cores (
    .clk_i(clk), .rst_ni(rst_n),
    .req_valid_o(req_valid), .req_ready_i(req_ready), .req_o(req),
    .rsp_valid_i(rsp_valid), .rsp_ready_o(rsp_ready), .rsp_i(rsp),
    .done_o(done), .checks_o(m_checks), .failures_o(m_failures),
    .queued_lrwait_o(queued), .sc_fail_full_o(sc_full), .sc_fail_store_o(sc_store),
    .mwait_now_o(mw_now), .mwait_woken_o(mw_woken)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + m_checks, failures + m_failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done);
    $display("cycles=%0d queued_lrwait=%0d sc_fail_full=%0d sc_fail_store=%0d mwait_now=%0d mwait_woken=%0d",
             cycles, queued, sc_full, sc_store, mw_now, mw_woken);
    checks++;
    if (mw_woken != NumCores - 1) begin
      failures++;
      $display("FAIL only %0d of %0d Mwait sleepers woke", mw_woken, NumCores - 1);
    end
    checks++;
    if (queued == 0) begin
      failures++;
      $display("FAIL no LRwait waited in a queue");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks + m_checks, failures + m_failures);
    $finish;
  end
endmodule
