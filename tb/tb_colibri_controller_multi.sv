// tb_colibri_controller_multi: Colibri controller with four queue slots.
//
// The same request/response scaffolding as tb_colibri_controller, with the
// controller configured for four monitored addresses, one of the sizes the
// design was characterised at. Four words of one bank are queued on at the
// same time (three LRwait queues and one Mwait queue), a fifth address finds
// the controller full, queues are torn down out of order and slots are
// reused. The sequence runs twice, the second time with a randomly stalled
// response port.
module tb_colibri_controller_multi;
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

  colibri_controller #(.NumQueues(4), .BankWords(BankWords), .NumBanks(NumBanks)) dut (
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
    int a, b, c, d, e;
    a = base; b = base + 1; c = base + 2; d = base + 3; e = base + 4;
    send(REQ_STORE, a, 32'hA0, 9);   expect_rsp(RSP_STORE, 9, 0);
    send(REQ_STORE, b, 32'hB0, 9);   expect_rsp(RSP_STORE, 9, 0);
    send(REQ_STORE, c, 32'hC0, 9);   expect_rsp(RSP_STORE, 9, 0);
    send(REQ_STORE, d, 32'hD0, 9);   expect_rsp(RSP_STORE, 9, 0);
    send(REQ_STORE, e, 32'hE0, 9);   expect_rsp(RSP_STORE, 9, 0);
    // three LRwait queues and one Mwait queue in four slots
    send(REQ_LRWAIT, a, 0, 1);       expect_rsp(RSP_LRWAIT, 1, 32'hA0, 0, 1);
    send(REQ_LRWAIT, b, 0, 2);       expect_rsp(RSP_LRWAIT, 2, 32'hB0, 0, 1);
    send(REQ_LRWAIT, c, 0, 3);       expect_rsp(RSP_LRWAIT, 3, 32'hC0, 0, 1);
    send(REQ_MWAIT, d, 32'hD0, 4);   expect_none(3);
    // the fifth address finds all slots taken
    send(REQ_LRWAIT, e, 0, 5);       expect_rsp(RSP_LRWAIT, 5, 32'hE0);
    send(REQ_SCWAIT, e, 32'hE1, 5);  expect_rsp(RSP_SCWAIT, 5, 1);
    // successors on a, b and the Mwait queue
    send(REQ_LRWAIT, a, 0, 6);       expect_rsp(RSP_SUCCUPD, 1, 0, 6);
    send(REQ_LRWAIT, b, 0, 7);       expect_rsp(RSP_SUCCUPD, 2, 0, 7);
    send(REQ_MWAIT, d, 32'hD0, 8);   expect_rsp(RSP_SUCCUPD, 4, 0, 8);
    // tear down out of order: c (alone), then b, then a
    send(REQ_SCWAIT, c, 32'hC1, 3);  expect_rsp(RSP_SCWAIT, 3, 0);
    send(REQ_LRWAIT, e, 0, 5);       expect_rsp(RSP_LRWAIT, 5, 32'hE0);   // reuses c's slot
    send(REQ_SCWAIT, b, 32'hB1, 2);  expect_rsp(RSP_SCWAIT, 2, 0);
    send(REQ_WAKEUP, b, 0, 2, 7);    expect_rsp(RSP_LRWAIT, 7, 32'hB1);
    send(REQ_STORE, a, 32'hA5, 9);   expect_rsp(RSP_STORE, 9, 0);        // breaks core 1's reservation
    send(REQ_SCWAIT, a, 32'hA1, 1);  expect_rsp(RSP_SCWAIT, 1, 1);
    send(REQ_WAKEUP, a, 0, 1, 6);    expect_rsp(RSP_LRWAIT, 6, 32'hA5);
    send(REQ_SCWAIT, a, 32'hA6, 6);  expect_rsp(RSP_SCWAIT, 6, 0);
    send(REQ_SCWAIT, b, 32'hB2, 7);  expect_rsp(RSP_SCWAIT, 7, 0);
    send(REQ_SCWAIT, e, 32'hE1, 5);  expect_rsp(RSP_SCWAIT, 5, 0);
    // a store to d wakes the Mwait queue
    send(REQ_STORE, d, 32'hD1, 9);   expect_rsp(RSP_STORE, 9, 0);
                                     expect_rsp(RSP_MWAIT, 4, 32'hD1);
    send(REQ_WAKEUP, d, 0, 4, 8);    expect_rsp(RSP_MWAIT, 8, 32'hD1);
    // final values
    send(REQ_LOAD, a, 0, 9);         expect_rsp(RSP_LOAD, 9, 32'hA6);
    send(REQ_LOAD, b, 0, 9);         expect_rsp(RSP_LOAD, 9, 32'hB2);
    send(REQ_LOAD, c, 0, 9);         expect_rsp(RSP_LOAD, 9, 32'hC1);
    send(REQ_LOAD, e, 0, 9);         expect_rsp(RSP_LOAD, 9, 32'hE1);
    // all four slots free again
    send(REQ_LRWAIT, a, 0, 1);       expect_rsp(RSP_LRWAIT, 1, 32'hA6);
    send(REQ_LRWAIT, b, 0, 2);       expect_rsp(RSP_LRWAIT, 2, 32'hB2);
    send(REQ_LRWAIT, c, 0, 3);       expect_rsp(RSP_LRWAIT, 3, 32'hC1);
    send(REQ_LRWAIT, d, 0, 4);       expect_rsp(RSP_LRWAIT, 4, 32'hD1);
    send(REQ_LRWAIT, d, 0, 5);       expect_rsp(RSP_SUCCUPD, 4, 0, 5);
    send(REQ_SCWAIT, a, 32'h1, 1);   expect_rsp(RSP_SCWAIT, 1, 0);
    send(REQ_SCWAIT, b, 32'h2, 2);   expect_rsp(RSP_SCWAIT, 2, 0);
    send(REQ_SCWAIT, c, 32'h3, 3);   expect_rsp(RSP_SCWAIT, 3, 0);
    send(REQ_SCWAIT, d, 32'h4, 4);   expect_rsp(RSP_SCWAIT, 4, 0);
    send(REQ_WAKEUP, d, 0, 4, 5);    expect_rsp(RSP_LRWAIT, 5, 32'h4);
    send(REQ_SCWAIT, d, 32'h5, 5);   expect_rsp(RSP_SCWAIT, 5, 0);
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
