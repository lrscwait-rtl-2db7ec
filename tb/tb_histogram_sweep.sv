// tb_histogram_sweep: the concurrent histogram at varying contention.
//
// Sixteen behavioural cores on 64 banks (one queue slot per bank) increment
// randomly chosen bins with LRwait / add / SCwait, no backoff, for bin counts
// from 1 (every core on one word) to 32. Each bin lies in its own bank. For
// each bin count the test checks the final bin values against a model of the
// increments, checks that no SCwait failed (with one word per bank no
// controller is ever full, so Colibri needs no retries), and reports the
// throughput in histogram updates per cycle. It also checks that the
// throughput grows from 1 bin to 32 bins, as lower contention should allow.
module tb_histogram_sweep;
  import colibri_pkg::*;

  localparam int unsigned NumCores = 16;
  localparam int unsigned NumBanks = 64;
  localparam int unsigned NumIncs  = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [NumCores-1:0] req_valid, req_ready, rsp_valid;
  req_t [NumCores-1:0] req;
  rsp_t [NumCores-1:0] rsp;
  int checks = 0, failures = 0;

  colibri_system #(
    .NumCores  (NumCores),
    .NumBanks  (NumBanks),
    .BankWords (256),
    .NumQueues (1)
  ) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_valid_i(req_valid), .core_req_ready_o(req_ready), .core_req_i(req),
    .core_rsp_valid_o(rsp_valid), .core_rsp_ready_i('1), .core_rsp_o(rsp)
  );

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int num_bins;
  int start_run;
  int finished;
  int expected [NumBanks];
  int sc_fails;

  for (genvar c = 0; c < NumCores; c++) begin : gen_core
    task automatic access(req_op_e op, addr_t addr, data_t data, output rsp_t r);
      @(negedge clk);
      req_valid[c] = 1'b1;
      req[c] = '{op: op, addr: addr, data: data, src: core_id_t'(c), succ: '0};
      @(posedge clk);
      while (!req_ready[c]) @(posedge clk);
      @(negedge clk);
      req_valid[c] = 1'b0;
      while (!rsp_valid[c]) @(posedge clk);
      r = rsp[c];
      @(posedge clk);
    endtask

    initial begin
      int last_run;
      req_valid[c] = 1'b0;
      req[c] = '0;
      last_run = 0;
      forever begin
        wait (start_run > last_run);
        last_run = start_run;
        for (int i = 0; i < NumIncs; i++) begin
          int   k;
          bit   ok;
          rsp_t r;
          k  = $urandom_range(num_bins - 1);
          ok = 0;
          while (!ok) begin
            access(REQ_LRWAIT, addr_t'(k * 4), '0, r);
            access(REQ_SCWAIT, addr_t'(k * 4), r.data + 1, r);
            ok = (r.data == 0);
            if (!ok) sc_fails++;
          end
          expected[k]++;
        end
        finished++;
      end
    end
  end

  real tput [6];

  initial begin
    int bins_list [6] = '{1, 2, 4, 8, 16, 32};
    start_run = 0;
    finished = 0;
    sc_fails = 0;
    for (int s = 0; s < 6; s++) begin
      int   t0, t1;
      rsp_t r;
      num_bins = bins_list[s];
      rst_n = 1'b0;
      repeat (3) @(posedge clk);
      rst_n = 1'b1;
      for (int k = 0; k < NumBanks; k++) expected[k] = 0;
      for (int k = 0; k < num_bins; k++) gen_core[0].access(REQ_STORE, addr_t'(k * 4), '0, r);
      finished = 0;
      t0 = $time;
      start_run++;
      wait (finished == NumCores);
      t1 = $time;
      for (int k = 0; k < num_bins; k++) begin
        gen_core[0].access(REQ_LOAD, addr_t'(k * 4), '0, r);
        check(int'(r.data) == expected[k], $sformatf("%0d bins: bin %0d = %0d, expected %0d",
                                                     num_bins, k, r.data, expected[k]));
      end
      tput[s] = real'(NumCores * NumIncs) / (real'(t1 - t0) / 10.0);
      $display("bins=%0d updates/cycle=%f", num_bins, tput[s]);
    end
    check(sc_fails == 0, $sformatf("no SCwait failed (%0d did)", sc_fails));
    check(tput[5] > 2.0 * tput[0], "throughput grows with the number of bins");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
