// tb_lock_workload: locks built on LRwait/SCwait and Mwait.
//
// Sixteen behavioural cores on 64 banks protect a non-atomic critical section
// (load a shared counter, add one, store it back) with a lock word, in two
// variants:
//   spin lock  - LRwait the lock; if it is free, SCwait 1 to take it,
//                otherwise SCwait the unchanged value (every LRwait must be
//                closed by an SCwait) and back off 128 cycles before retrying;
//   Mwait lock - the same test-and-set, but a core that finds the lock taken
//                sleeps with Mwait on the lock word until the holder's
//                releasing store wakes it, instead of backing off.
// Release is a plain store of 0. The test checks mutual exclusion (the
// counter equals the number of critical sections, and a core never finds
// another inside) and reports cycles per critical section for each variant.
module tb_lock_workload;
  import colibri_pkg::*;

  localparam int unsigned NumCores = 16;
  localparam int unsigned NumBanks = 64;
  localparam int unsigned NumIters = 6;
  localparam int unsigned Backoff  = 128;
  localparam addr_t LockAddr = 32'h0000_0004;
  localparam addr_t CntAddr  = 32'h0000_0008;

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
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int  run_id;
  bit  use_mwait;
  int  finished;
  int  in_cs;
  int  sleeps;

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
      int last;
      req_valid[c] = 1'b0;
      req[c] = '0;
      last = 0;
      forever begin
        wait (run_id > last);
        last = run_id;
        for (int i = 0; i < NumIters; i++) begin
          rsp_t r;
          bit   got;
          got = 0;
          while (!got) begin
            access(REQ_LRWAIT, LockAddr, '0, r);
            if (r.data == 0) begin
              access(REQ_SCWAIT, LockAddr, 32'd1, r);
              got = (r.data == 0);
            end else begin
              data_t seen;
              seen = r.data;
              access(REQ_SCWAIT, LockAddr, seen, r);
              if (use_mwait) begin
                access(REQ_MWAIT, LockAddr, seen, r);
                sleeps++;
              end else begin
                repeat (Backoff) @(posedge clk);
              end
            end
          end
          // critical section
          in_cs++;
          check(in_cs == 1, "mutual exclusion");
          access(REQ_LOAD, CntAddr, '0, r);
          access(REQ_STORE, CntAddr, r.data + 1, r);
          in_cs--;
          access(REQ_STORE, LockAddr, '0, r);
        end
        finished++;
      end
    end
  end

  initial begin
    run_id = 0;
    in_cs = 0;
    sleeps = 0;
    for (int v = 0; v < 2; v++) begin
      int   t0, t1;
      rsp_t r;
      use_mwait = (v == 1);
      rst_n = 1'b0;
      repeat (3) @(posedge clk);
      rst_n = 1'b1;
      gen_core[0].access(REQ_STORE, LockAddr, '0, r);
      gen_core[0].access(REQ_STORE, CntAddr, '0, r);
      finished = 0;
      t0 = $time;
      run_id++;
      wait (finished == NumCores);
      t1 = $time;
      gen_core[0].access(REQ_LOAD, CntAddr, '0, r);
      check(int'(r.data) == NumCores * NumIters,
            $sformatf("%s lock: counter %0d, expected %0d", use_mwait ? "Mwait" : "spin",
                      r.data, NumCores * NumIters));
      $display("%s lock: %0d cycles per critical section", use_mwait ? "Mwait" : "spin",
               (t1 - t0) / 10 / (NumCores * NumIters));
    end
    check(sleeps > 0, "some core slept on the lock with Mwait");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
