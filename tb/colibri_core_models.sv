// colibri_core_models: behavioural cores driving the Colibri memory system.
//
// One process per core issues requests on the system's core ports, one at a
// time, and waits for each response, as an in-order core with a single
// outstanding LRwait does. The program, run by all cores together:
//   0. Core 0 clears the bins.
//   1. Histogram: every core increments NumIncs randomly chosen bins with an
//      LRwait / add / SCwait sequence, retrying when the SCwait fails. Bins are
//      placed so that pairs of them share a bank: with one queue slot per bank
//      the second address finds the controller full and its LRwait fails.
//   2. Reservation loss: core 0 takes a reservation, core 1 overwrites the
//      word, core 0's SCwait must fail.
//   3. Mwait: the other cores sleep on a flag with Mwait; core 0 first checks
//      that an Mwait with a stale expected value returns at once, then writes
//      the flag, and every sleeper must wake with the new value.
// At the end the bins are read back and compared with a model of the
// increments. The results are reported through the output ports: checks,
// failures, and how often each mechanism was seen. This module is part of the
// test environment, not of the design.
module colibri_core_models
  import colibri_pkg::*;
#(
  parameter int unsigned NumCores = 8,
  parameter int unsigned NumBanks = 16,
  parameter int unsigned NumBins  = 4,
  parameter int unsigned NumIncs  = 8
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  output logic [NumCores-1:0] req_valid_o,
  input  logic [NumCores-1:0] req_ready_i,
  output req_t [NumCores-1:0] req_o,
  input  logic [NumCores-1:0] rsp_valid_i,
  output logic [NumCores-1:0] rsp_ready_o,
  input  rsp_t [NumCores-1:0] rsp_i,
  output logic                done_o,
  output int                  checks_o,
  output int                  failures_o,
  output int                  queued_lrwait_o,   // LRwait answered only after waiting in a queue
  output int                  sc_fail_full_o,    // SCwait failed after an LRwait to a full controller
  output int                  sc_fail_store_o,   // SCwait failed after a store broke the reservation
  output int                  mwait_now_o,       // Mwait answered at once (value already changed)
  output int                  mwait_woken_o      // Mwait answered after a write
);

  // Bin k sits at word k * (NumBanks / 2): bins 2j and 2j+1 alternate between
  // bank 0 and bank NumBanks/2, so bins 0 and 2 share bank 0, and so on.
  function automatic addr_t bin_addr(int k);
    return addr_t'(k * (NumBanks / 2) * 4);
  endfunction
  localparam addr_t ResvAddr = addr_t'((NumBins * (NumBanks / 2) + 1) * 4);
  localparam addr_t FlagAddr = addr_t'((NumBins * (NumBanks / 2) + 2) * 4);

  int expected_bins [NumBins];
  int phase_done [3];
  int mwait_issued;
  int init_done;
  int checks, failures;

  assign checks_o    = checks;
  assign failures_o  = failures;
  assign rsp_ready_o = '1;

  function automatic void check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endfunction

  for (genvar c = 0; c < NumCores; c++) begin : gen_core
    int waited;

    task automatic access(req_op_e op, addr_t addr, data_t data, output rsp_t rsp);
      @(negedge clk_i);
      req_valid_o[c] = 1'b1;
      req_o[c] = '{op: op, addr: addr, data: data, src: core_id_t'(c), succ: '0};
      @(posedge clk_i);
      while (!req_ready_i[c]) @(posedge clk_i);
      @(negedge clk_i);
      req_valid_o[c] = 1'b0;
      waited = 0;
      while (!rsp_valid_i[c]) begin
        @(posedge clk_i);
        waited++;
      end
      rsp = rsp_i[c];
      @(posedge clk_i);
    endtask

    initial begin
      rsp_t r;
      req_valid_o[c] = 1'b0;
      req_o[c] = '0;
      wait (rst_ni);
      repeat (2) @(posedge clk_i);

      // ---- 0. core 0 clears the bins (the banks are not reset) ----
      if (c == 0) begin
        for (int k = 0; k < NumBins; k++) access(REQ_STORE, bin_addr(k), '0, r);
        init_done = 1;
      end
      wait (init_done == 1);

      // ---- 1. histogram ----
      for (int i = 0; i < NumIncs; i++) begin
        int  k;
        bit  ok;
        bit  full;
        k  = $urandom_range(NumBins - 1);
        ok = 0;
        while (!ok) begin
          access(REQ_LRWAIT, bin_addr(k), '0, r);
          check(r.op == RSP_LRWAIT, "LRwait answered with an LRwait response");
          if (waited > 4) queued_lrwait_o++;
          full = (waited <= 1);  // maybe served at once (empty queue or full controller)
          access(REQ_SCWAIT, bin_addr(k), r.data + 1, r);
          check(r.op == RSP_SCWAIT, "SCwait answered with an SCwait response");
          ok = (r.data == 0);
          if (!ok) begin
            check(full, "only an LRwait served at once can fail (full controller)");
            sc_fail_full_o++;
            repeat ($urandom_range(3)) @(posedge clk_i);
          end
        end
        expected_bins[k]++;
      end
      phase_done[0]++;
      wait (phase_done[0] == NumCores);

      // ---- 2. a store breaks a reservation ----
      if (c == 0) begin
        access(REQ_LRWAIT, ResvAddr, '0, r);
        phase_done[1] = 1;
        wait (phase_done[1] == 2);
        access(REQ_SCWAIT, ResvAddr, 32'hdead, r);
        check(r.data == 1, "SCwait after a foreign store fails");
        if (r.data == 1) sc_fail_store_o++;
        access(REQ_LOAD, ResvAddr, '0, r);
        check(r.data == 32'h55, "the foreign store is kept");
        access(REQ_STORE, FlagAddr, '0, r);
        phase_done[1] = 3;
      end else if (c == 1) begin
        wait (phase_done[1] == 1);
        access(REQ_STORE, ResvAddr, 32'h55, r);
        phase_done[1] = 2;
      end
      wait (phase_done[1] == 3);

      // ---- 3. Mwait ----
      if (c == 0) begin
        wait (mwait_issued == NumCores - 1);
        repeat (30) @(posedge clk_i);
        check(phase_done[2] == 0, "no sleeper wakes before the write");
        access(REQ_MWAIT, FlagAddr, 32'h5, r);
        check(r.op == RSP_MWAIT && r.data == 0, "Mwait with a stale value returns at once");
        if (r.op == RSP_MWAIT && waited <= 2) mwait_now_o++;  // two-cycle Mwait
        access(REQ_STORE, FlagAddr, 32'h1, r);
      end else begin
        @(negedge clk_i);
        req_valid_o[c] = 1'b1;
        req_o[c] = '{op: REQ_MWAIT, addr: FlagAddr, data: '0, src: core_id_t'(c), succ: '0};
        @(posedge clk_i);
        while (!req_ready_i[c]) @(posedge clk_i);
        mwait_issued++;
        @(negedge clk_i);
        req_valid_o[c] = 1'b0;
        while (!rsp_valid_i[c]) @(posedge clk_i);
        r = rsp_i[c];
        check(r.op == RSP_MWAIT && r.data == 1, "sleeper woken with the new flag value");
        mwait_woken_o++;
        phase_done[2]++;
        @(posedge clk_i);
      end
    end
  end

  initial begin
    done_o = 1'b0;
    checks = 0;
    failures = 0;
    queued_lrwait_o = 0;
    sc_fail_full_o = 0;
    sc_fail_store_o = 0;
    mwait_now_o = 0;
    mwait_woken_o = 0;
    mwait_issued = 0;
    init_done = 0;
    foreach (expected_bins[k]) expected_bins[k] = 0;
    foreach (phase_done[p]) phase_done[p] = 0;
    wait (rst_ni);
    wait (phase_done[2] == NumCores - 1 && phase_done[1] == 3);
    repeat (5) @(posedge clk_i);
    // read back the bins through core 0's port
    for (int k = 0; k < NumBins; k++) begin
      rsp_t r;
      gen_core[0].access(REQ_LOAD, bin_addr(k), '0, r);
      check(int'(r.data) == expected_bins[k],
            $sformatf("bin %0d holds %0d, expected %0d", k, r.data, expected_bins[k]));
    end
    done_o = 1'b1;
  end

endmodule
