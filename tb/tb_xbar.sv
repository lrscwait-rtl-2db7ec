// tb_xbar: self-checking test of the core-to-bank crossbar.
//
// Four cores and four banks exchange random traffic with random back-pressure
// on both sides. Each request carries its source core and a sequence number,
// each response its source bank (in the succ field) and a sequence number. The
// checks: every request reaches the bank its address selects and every
// response the core it names; nothing is lost or duplicated; messages between
// one pair never overtake each other; a bank receives at most one request and
// a core at most one response per cycle (by construction of the ports); and
// under full contention a round-robin arbiter serves each core in turn.
module tb_xbar;
  import colibri_pkg::*;

  localparam int unsigned NC = 4;
  localparam int unsigned NB = 4;
  localparam int unsigned PerPort = 300;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [NC-1:0] creq_valid, creq_ready, crsp_valid, crsp_ready;
  req_t [NC-1:0] creq;
  rsp_t [NC-1:0] crsp;
  logic [NB-1:0] breq_valid, breq_ready, brsp_valid, brsp_ready;
  req_t [NB-1:0] breq;
  rsp_t [NB-1:0] brsp;
  int checks = 0, failures = 0;

  xbar #(.NumCores(NC), .NumBanks(NB)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_valid_i(creq_valid), .core_req_ready_o(creq_ready), .core_req_i(creq),
    .core_rsp_valid_o(crsp_valid), .core_rsp_ready_i(crsp_ready), .core_rsp_o(crsp),
    .bank_req_valid_o(breq_valid), .bank_req_ready_i(breq_ready), .bank_req_o(breq),
    .bank_rsp_valid_i(brsp_valid), .bank_rsp_ready_o(brsp_ready), .bank_rsp_i(brsp)
  );

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sequence counters per (core, bank) pair, on the sending and receiving side
  int req_sent [NC][NB];
  int req_recv [NC][NB];
  int rsp_sent [NB][NC];
  int rsp_recv [NB][NC];
  int req_left [NC];
  int rsp_left [NB];
  bit stall = 1'b1;

  // Drivers: a new message after the previous one was taken.
  always @(negedge clk) begin
    if (rst_n && stall) begin
      for (int c = 0; c < NC; c++) begin
        if (!creq_valid[c] && req_left[c] > 0 && $urandom_range(1) == 1) begin
          int b;
          b = $urandom_range(NB - 1);
          creq_valid[c] = 1'b1;
          creq[c] = '{op: REQ_LOAD, addr: addr_t'((($urandom_range(15) * NB) + b) * 4),
                      data: data_t'(req_sent[c][b]), src: core_id_t'(c), succ: '0};
          req_sent[c][b]++;
          req_left[c]--;
        end
        crsp_ready[c] = stall ? ($urandom_range(2) != 0) : 1'b1;
      end
      for (int b = 0; b < NB; b++) begin
        if (!brsp_valid[b] && rsp_left[b] > 0 && $urandom_range(1) == 1) begin
          int c;
          c = $urandom_range(NC - 1);
          brsp_valid[b] = 1'b1;
          brsp[b] = '{op: RSP_LOAD, data: data_t'(rsp_sent[b][c]), dst: core_id_t'(c),
                      succ: core_id_t'(b)};
          rsp_sent[b][c]++;
          rsp_left[b]--;
        end
        breq_ready[b] = stall ? ($urandom_range(2) != 0) : 1'b1;
      end
    end
  end

  // Monitors and handshake bookkeeping (random-traffic phase only).
  always @(posedge clk) begin
    if (rst_n && stall) begin
      for (int b = 0; b < NB; b++) begin
        if (breq_valid[b] && breq_ready[b]) begin
          int c;
          c = int'(breq[b].src);
          check(int'((breq[b].addr >> 2) % NB) == b, "request reached the bank of its address");
          check(int'(breq[b].data) == req_recv[c][b], $sformatf("request order core %0d bank %0d", c, b));
          req_recv[c][b]++;
        end
      end
      for (int c = 0; c < NC; c++) begin
        if (crsp_valid[c] && crsp_ready[c]) begin
          int b;
          b = int'(crsp[c].succ);
          check(int'(crsp[c].dst) == c, "response reached the core it names");
          check(int'(crsp[c].data) == rsp_recv[b][c], $sformatf("response order bank %0d core %0d", b, c));
          rsp_recv[b][c]++;
        end
      end
      for (int c = 0; c < NC; c++) if (creq_valid[c] && creq_ready[c]) creq_valid[c] <= 1'b0;
      for (int b = 0; b < NB; b++) if (brsp_valid[b] && brsp_ready[b]) brsp_valid[b] <= 1'b0;
    end
  end

  initial begin
    creq_valid = '0; creq = '0; crsp_ready = '0;
    brsp_valid = '0; brsp = '0; breq_ready = '0;
    for (int c = 0; c < NC; c++) begin
      req_left[c] = PerPort;
      for (int b = 0; b < NB; b++) begin
        req_sent[c][b] = 0; req_recv[c][b] = 0; rsp_sent[b][c] = 0; rsp_recv[b][c] = 0;
      end
    end
    for (int b = 0; b < NB; b++) rsp_left[b] = PerPort;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (req_left.sum() == 0 && rsp_left.sum() == 0 && creq_valid == '0 && brsp_valid == '0);
    repeat (5) @(posedge clk);
    for (int c = 0; c < NC; c++)
      for (int b = 0; b < NB; b++) begin
        check(req_recv[c][b] == req_sent[c][b], "every request delivered once");
        check(rsp_recv[b][c] == rsp_sent[b][c], "every response delivered once");
      end

    // Full contention on bank 0, no back-pressure: grants go round robin.
    stall = 1'b0;
    @(negedge clk);
    rst_n = 1'b0;
    for (int b = 0; b < NB; b++) breq_ready[b] = 1'b1;
    @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < NC; c++) begin
      creq_valid[c] = 1'b1;
      creq[c] = '{op: REQ_LOAD, addr: '0, data: '0, src: core_id_t'(c), succ: '0};
    end
    for (int n = 0; n < 2 * NC; n++) begin
      @(posedge clk);
      check(breq_valid[0] && int'(breq[0].src) == n % NC,
            $sformatf("round robin grant %0d got core %0d", n, breq[0].src));
      check($countones(creq_ready) == 1, "one core served per cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
