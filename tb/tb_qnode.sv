// tb_qnode: self-checking test of the Colibri queue node.
//
// The testbench plays the core on one side and the interconnect on the other.
// A monitor logs every request the Qnode sends into the network and every
// response it hands to the core; the test compares them with the expected
// messages. Scenarios: plain traffic passes unchanged; a SuccessorUpdate
// received while the core waits is kept from the core and released as a
// WakeUpRequest right after the SCwait; a SuccessorUpdate arriving after the
// SCwait bounces back; the Mwait response releases the successor; a
// WakeUpRequest waits for a stalled network and blocks the core meanwhile.
module tb_qnode;
  import colibri_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic core_req_valid, core_req_ready, core_rsp_valid, core_rsp_ready;
  logic net_req_valid, net_req_ready, net_rsp_valid, net_rsp_ready;
  req_t core_req, net_req;
  rsp_t core_rsp, net_rsp;
  int   checks = 0, failures = 0;

  qnode dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_valid_i(core_req_valid), .core_req_ready_o(core_req_ready), .core_req_i(core_req),
    .core_rsp_valid_o(core_rsp_valid), .core_rsp_ready_i(core_rsp_ready), .core_rsp_o(core_rsp),
    .net_req_valid_o(net_req_valid), .net_req_ready_i(net_req_ready), .net_req_o(net_req),
    .net_rsp_valid_i(net_rsp_valid), .net_rsp_ready_o(net_rsp_ready), .net_rsp_i(net_rsp)
  );

  always #5 clk = ~clk;

  req_t sent_q[$];
  rsp_t core_got_q[$];
  always @(posedge clk) begin
    if (rst_n && net_req_valid && net_req_ready) sent_q.push_back(net_req);
    if (rst_n && core_rsp_valid && core_rsp_ready) core_got_q.push_back(core_rsp);
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam addr_t A = 32'h0000_1230;
  localparam addr_t B = 32'h0000_4560;
  localparam core_id_t Self = 8'd1;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic core_send(req_op_e op, addr_t addr, data_t data = 0);
    @(negedge clk);
    core_req_valid = 1'b1;
    core_req = '{op: op, addr: addr, data: data, src: Self, succ: '0};
    @(posedge clk);
    while (!core_req_ready) @(posedge clk);
    @(negedge clk);
    core_req_valid = 1'b0;
  endtask

  task automatic net_send(rsp_op_e op, data_t data = 0, int succ = 0);
    @(negedge clk);
    net_rsp_valid = 1'b1;
    net_rsp = '{op: op, data: data, dst: Self, succ: core_id_t'(succ)};
    @(posedge clk);
    while (!net_rsp_ready) @(posedge clk);
    @(negedge clk);
    net_rsp_valid = 1'b0;
  endtask

  // Waits a few cycles, then checks the next request taken by the network.
  task automatic expect_sent(req_op_e op, addr_t addr, int succ = 0);
    repeat (3) @(posedge clk);
    check(sent_q.size() != 0, $sformatf("%s sent to the network", op.name()));
    if (sent_q.size() != 0) begin
      req_t r;
      r = sent_q.pop_front();
      check(r.op == op && r.addr == addr && r.src == Self &&
            (op != REQ_WAKEUP || r.succ == core_id_t'(succ)),
            $sformatf("sent %s addr=%h succ=%0d, expected %s addr=%h succ=%0d",
                      r.op.name(), r.addr, r.succ, op.name(), addr, succ));
    end
  endtask

  task automatic expect_nothing_sent();
    repeat (3) @(posedge clk);
    check(sent_q.size() == 0, "no request sent");
    sent_q.delete();
  endtask

  task automatic expect_core(rsp_op_e op, data_t data);
    repeat (2) @(posedge clk);
    check(core_got_q.size() == 1, $sformatf("one %s handed to the core", op.name()));
    if (core_got_q.size() != 0) begin
      rsp_t r;
      r = core_got_q.pop_front();
      check(r.op == op && r.data == data, $sformatf("core got %s %h", r.op.name(), r.data));
    end
    core_got_q.delete();
  endtask

  task automatic expect_core_none();
    repeat (2) @(posedge clk);
    check(core_got_q.size() == 0, "SuccessorUpdate kept from the core");
    core_got_q.delete();
  endtask

  initial begin
    core_req_valid = 0; core_req = '0; core_rsp_ready = 1;
    net_rsp_valid = 0; net_rsp = '0; net_req_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // plain traffic
    core_send(REQ_STORE, A, 5);         expect_sent(REQ_STORE, A);
    net_send(RSP_STORE);                expect_core(RSP_STORE, 0);
    core_send(REQ_LOAD, B);             expect_sent(REQ_LOAD, B);
    net_send(RSP_LOAD, 32'h77);         expect_core(RSP_LOAD, 32'h77);

    // SuccessorUpdate while waiting, WakeUpRequest right after the SCwait
    core_send(REQ_LRWAIT, A);           expect_sent(REQ_LRWAIT, A);
    net_send(RSP_SUCCUPD, 0, 2);        expect_core_none();
    net_send(RSP_LRWAIT, 32'h5);        expect_core(RSP_LRWAIT, 32'h5);
    core_send(REQ_SCWAIT, A, 6);        expect_sent(REQ_SCWAIT, A);
                                        expect_sent(REQ_WAKEUP, A, 2);
    net_send(RSP_SCWAIT, 0);            expect_core(RSP_SCWAIT, 0);
    expect_nothing_sent();

    // no successor: no WakeUpRequest; a late SuccessorUpdate bounces
    core_send(REQ_LRWAIT, B);           expect_sent(REQ_LRWAIT, B);
    net_send(RSP_LRWAIT, 32'h9);        expect_core(RSP_LRWAIT, 32'h9);
    core_send(REQ_SCWAIT, B, 10);       expect_sent(REQ_SCWAIT, B);
    expect_nothing_sent();
    net_send(RSP_SUCCUPD, 0, 5);        expect_sent(REQ_WAKEUP, B, 5);
    expect_core_none();
    net_send(RSP_SCWAIT, 0);            expect_core(RSP_SCWAIT, 0);

    // Mwait: the response releases the successor
    core_send(REQ_MWAIT, A, 32'h3);     expect_sent(REQ_MWAIT, A);
    net_send(RSP_SUCCUPD, 0, 6);        expect_core_none();
    expect_nothing_sent();
    net_send(RSP_MWAIT, 32'h4);         expect_core(RSP_MWAIT, 32'h4);
                                        expect_sent(REQ_WAKEUP, A, 6);
    // Mwait answered with no successor: nothing follows
    core_send(REQ_MWAIT, B, 32'h3);     expect_sent(REQ_MWAIT, B);
    net_send(RSP_MWAIT, 32'h8);         expect_core(RSP_MWAIT, 32'h8);
    expect_nothing_sent();

    // a stalled network holds the WakeUpRequest and blocks the core
    core_send(REQ_LRWAIT, A);           expect_sent(REQ_LRWAIT, A);
    net_send(RSP_SUCCUPD, 0, 7);
    net_send(RSP_LRWAIT, 32'h1);        expect_core(RSP_LRWAIT, 32'h1);
    core_send(REQ_SCWAIT, A, 2);        // returns at the falling edge after the SCwait left
    net_req_ready = 1'b0;
    core_req_valid = 1'b1;
    core_req = '{op: REQ_LOAD, addr: B, data: 0, src: Self, succ: 0};
    repeat (4) begin
      @(posedge clk);
      check(net_req_valid && net_req.op == REQ_WAKEUP && net_req.succ == 8'd7,
            "WakeUpRequest held while the network stalls");
      check(!core_req_ready, "core blocked behind the WakeUpRequest");
    end
    @(negedge clk);
    net_req_ready = 1'b1;
    @(posedge clk);
    while (!core_req_ready) @(posedge clk);
    @(negedge clk);
    core_req_valid = 1'b0;
    repeat (2) @(posedge clk);
    check(sent_q.size() == 3, "SCwait, WakeUpRequest and load sent");
    if (sent_q.size() == 3) begin
      check(sent_q[0].op == REQ_SCWAIT, "SCwait first");
      check(sent_q[1].op == REQ_WAKEUP && sent_q[1].succ == 8'd7, "then the WakeUpRequest");
      check(sent_q[2].op == REQ_LOAD, "then the load");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
