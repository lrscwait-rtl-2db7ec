// tb_colibri_controller: self-checking test of one Colibri controller with its bank.
//
// The testbench plays several cores and drives the controller's request port
// directly, so it also sends the WakeUpRequests a Qnode would send. Every
// response is logged by a monitor and compared in order with the expected
// message. Scenarios: plain load/store and their one-cycle latency; the
// two-core LRwait/SCwait sequence of the Colibri example (LRwait, LRwait,
// SuccessorUpdate, SCwait, WakeUpRequest, delayed LRwait response); an
// LRwait to a full controller failing at once; a store breaking a
// reservation; SCwait from a core that is not the head; Mwait with a
// mismatching and a matching expected value, a queue of two Mwaits woken by
// a store and a WakeUpRequest. The whole sequence runs twice, the second time
// with a randomly stalled response port.
module tb_colibri_controller;
  import colibri_pkg::*;

  localparam int unsigned BankWords = 256;
  localparam int unsigned NumBanks  = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid, req_ready, rsp_valid, rsp_ready;
  req_t req;
  rsp_t rsp;
  int   checks = 0, failures = 0;
  int   cycle = 0;
  bit   random_stall = 0;

  colibri_controller #(.NumQueues(1), .BankWords(BankWords), .NumBanks(NumBanks)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req),
    .rsp_valid_o(rsp_valid), .rsp_ready_i(rsp_ready), .rsp_o(rsp)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // Response monitor: records each response and the cycle it was taken.
  rsp_t got_q[$];
  int   got_cyc_q[$];
  always @(posedge clk) begin
    if (rst_n && rsp_valid && rsp_ready) begin
      got_q.push_back(rsp);
      got_cyc_q.push_back(cycle);
    end
  end
  always @(negedge clk) rsp_ready <= random_stall ? ($urandom_range(3) != 0) : 1'b1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic addr_t row_addr(int row);
    return addr_t'(row) << (2 + $clog2(NumBanks));
  endfunction

  int last_accept;

  task automatic send(req_op_e op, int row, data_t data, int src, int succ = 0);
    @(negedge clk);
    req_valid = 1'b1;
    req = '{op: op, addr: row_addr(row), data: data, src: core_id_t'(src), succ: core_id_t'(succ)};
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    last_accept = cycle;
    @(negedge clk);
    req_valid = 1'b0;
  endtask

  task automatic expect_rsp(rsp_op_e op, int dst, data_t data, int succ = 0, int latency = -1);
    int waited = 0;
    while (got_q.size() == 0 && waited < 20) begin
      @(posedge clk);
      waited++;
    end
    checks++;
    if (got_q.size() == 0) begin
      failures++;
      $display("FAIL no response, expected %s to core %0d", op.name(), dst);
      return;
    end
    begin
      rsp_t r;
      int   c;
      r = got_q.pop_front();
      c = got_cyc_q.pop_front();
      if (r.op != op || r.dst != core_id_t'(dst) || r.data != data ||
          (op == RSP_SUCCUPD && r.succ != core_id_t'(succ))) begin
        failures++;
        $display("FAIL got %s dst=%0d data=%0h succ=%0d, expected %s dst=%0d data=%0h succ=%0d",
                 r.op.name(), r.dst, r.data, r.succ, op.name(), dst, data, succ);
      end
      if (latency >= 0 && !random_stall) begin
        checks++;
        if (c - last_accept != latency) begin
          failures++;
          $display("FAIL latency %0d, expected %0d", c - last_accept, latency);
        end
      end
    end
  endtask

  task automatic expect_none(int cycles);
    repeat (cycles) @(posedge clk);
    checks++;
    if (got_q.size() != 0) begin
      failures++;
      $display("FAIL unexpected response %s to core %0d", got_q[0].op.name(), got_q[0].dst);
      got_q.delete();
      got_cyc_q.delete();
    end
  endtask

  task automatic run_sequence(int base);
    int x, y;
    x = base;
    y = base + 1;
    // plain store / load, one-cycle latency
    send(REQ_STORE, x, 32'h10, 9);   expect_rsp(RSP_STORE, 9, 0, 0, 1);
    send(REQ_LOAD, x, 0, 9);         expect_rsp(RSP_LOAD, 9, 32'h10, 0, 1);

    // Colibri example: cores A=1 and B=2 contend for x
    send(REQ_LRWAIT, x, 0, 1);       expect_rsp(RSP_LRWAIT, 1, 32'h10, 0, 1);
    send(REQ_LRWAIT, x, 0, 2);       expect_rsp(RSP_SUCCUPD, 1, 0, 2, 1);
    expect_none(4);                  // B sleeps
    send(REQ_SCWAIT, x, 32'h11, 1);  expect_rsp(RSP_SCWAIT, 1, 0, 0, 1);
    send(REQ_WAKEUP, x, 0, 1, 2);    expect_rsp(RSP_LRWAIT, 2, 32'h11, 0, 1);
    // the old head cannot succeed again
    send(REQ_SCWAIT, x, 32'h99, 1);  expect_rsp(RSP_SCWAIT, 1, 1);
    send(REQ_SCWAIT, x, 32'h12, 2);  expect_rsp(RSP_SCWAIT, 2, 0);
    send(REQ_LOAD, x, 0, 9);         expect_rsp(RSP_LOAD, 9, 32'h12);

    // the slot is free again; with it taken, an LRwait to y fails at once
    send(REQ_LRWAIT, x, 0, 3);       expect_rsp(RSP_LRWAIT, 3, 32'h12);
    send(REQ_STORE, y, 32'h20, 9);   expect_rsp(RSP_STORE, 9, 0);
    send(REQ_LRWAIT, y, 0, 4);       expect_rsp(RSP_LRWAIT, 4, 32'h20);
    send(REQ_SCWAIT, y, 32'h21, 4);  expect_rsp(RSP_SCWAIT, 4, 1);
    // a store breaks core 3's reservation; its SCwait fails and frees the slot
    send(REQ_STORE, x, 32'h30, 9);   expect_rsp(RSP_STORE, 9, 0);
    send(REQ_SCWAIT, x, 32'h31, 3);  expect_rsp(RSP_SCWAIT, 3, 1);
    send(REQ_LOAD, x, 0, 9);         expect_rsp(RSP_LOAD, 9, 32'h30);
    send(REQ_LRWAIT, y, 0, 4);       expect_rsp(RSP_LRWAIT, 4, 32'h20);
    send(REQ_SCWAIT, y, 32'h21, 5);  expect_rsp(RSP_SCWAIT, 5, 1);  // not the head
    send(REQ_SCWAIT, y, 32'h22, 4);  expect_rsp(RSP_SCWAIT, 4, 0);
    send(REQ_LOAD, y, 0, 9);         expect_rsp(RSP_LOAD, 9, 32'h22);

    // Mwait: value already differs -> answered at once
    send(REQ_MWAIT, x, 32'h7, 3);    expect_rsp(RSP_MWAIT, 3, 32'h30, 0, 2);
    // matching value -> core 3 sleeps, core 4 queues behind it
    send(REQ_MWAIT, x, 32'h30, 3);   expect_none(4);
    send(REQ_MWAIT, x, 32'h30, 4);   expect_rsp(RSP_SUCCUPD, 3, 0, 4);
    // an LRwait to the monitored word is answered at once
    send(REQ_LRWAIT, x, 0, 6);       expect_rsp(RSP_LRWAIT, 6, 32'h30);
    send(REQ_SCWAIT, x, 32'h0, 6);   expect_rsp(RSP_SCWAIT, 6, 1);
    // a store wakes the head, the head's WakeUpRequest wakes core 4
    send(REQ_STORE, x, 32'h40, 5);   expect_rsp(RSP_STORE, 5, 0);
                                     expect_rsp(RSP_MWAIT, 3, 32'h40);
    send(REQ_WAKEUP, x, 0, 3, 4);    expect_rsp(RSP_MWAIT, 4, 32'h40);
    // slot free again: a fresh LRwait is served at once
    send(REQ_LRWAIT, x, 0, 7);       expect_rsp(RSP_LRWAIT, 7, 32'h40);
    send(REQ_SCWAIT, x, 32'h41, 7);  expect_rsp(RSP_SCWAIT, 7, 0);
    expect_none(3);
  endtask

  initial begin
    req_valid = 1'b0;
    req = '0;
    rsp_ready = 1'b1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_sequence(5);
    random_stall = 1;
    run_sequence(40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
