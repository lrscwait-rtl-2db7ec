// qnode: Colibri queue node, one per core, between the core and the interconnect.
//
// The controllers at the memory banks keep only the head and the tail of each
// waiting queue; the link from one waiting core to the next is stored here.
// A Qnode is "active" from the moment its core's LRwait or Mwait passes until
// the core's SCwait passes or its Mwait response comes back.
//   - A SuccessorUpdate (from a bank, naming the core queued behind this one)
//     is stored while the Qnode is active, even while the core sleeps. It is
//     never passed on to the core.
//   - Right after the core's SCwait passes, or when an Mwait response arrives,
//     a stored successor is sent to the bank in a WakeUpRequest.
//   - A SuccessorUpdate that arrives when the Qnode is no longer active is
//     bounced back at once as a WakeUpRequest.
// The WakeUpRequest goes to the address of the last LRwait/Mwait, which the
// Qnode remembers. These rules follow the paper (Sec. IV, Fig. 2); the
// message formats and the one-entry WakeUpRequest buffer are this
// implementation's choice.
//
// Timing: requests pass through combinationally. A WakeUpRequest is sent from
// a register in the cycle after the event that caused it, and blocks the core's
// next request until the interconnect takes it. SuccessorUpdates are always
// accepted; other responses are passed to the core with its ready.
module qnode
  import colibri_pkg::*;
(
  input  logic clk_i,
  input  logic rst_ni,
  // core side
  input  logic core_req_valid_i,
  output logic core_req_ready_o,
  input  req_t core_req_i,
  output logic core_rsp_valid_o,
  input  logic core_rsp_ready_i,
  output rsp_t core_rsp_o,
  // network side
  output logic net_req_valid_o,
  input  logic net_req_ready_i,
  output req_t net_req_o,
  input  logic net_rsp_valid_i,
  output logic net_rsp_ready_o,
  input  rsp_t net_rsp_i
);

  logic     active_q, active_d;
  logic     succ_valid_q, succ_valid_d;
  core_id_t succ_q, succ_d;
  addr_t    addr_q, addr_d;
  core_id_t self_q, self_d;
  // pending WakeUpRequest
  logic     wk_valid_q, wk_valid_d;
  core_id_t wk_succ_q, wk_succ_d;

  logic core_fire, is_succupd, succupd_fire, rsp_fire;

  // Requests: a pending WakeUpRequest goes first.
  assign core_req_ready_o = !wk_valid_q && net_req_ready_i;
  assign net_req_valid_o  = wk_valid_q || core_req_valid_i;
  always_comb begin
    if (wk_valid_q) begin
      net_req_o = '{op: REQ_WAKEUP, addr: addr_q, data: '0, src: self_q, succ: wk_succ_q};
    end else begin
      net_req_o = core_req_i;
    end
  end
  assign core_fire = core_req_valid_i && core_req_ready_o;

  // Responses: SuccessorUpdates end here, the rest go to the core.
  assign is_succupd       = net_rsp_i.op == RSP_SUCCUPD;
  assign net_rsp_ready_o  = is_succupd || core_rsp_ready_i;
  assign core_rsp_valid_o = net_rsp_valid_i && !is_succupd;
  assign core_rsp_o       = net_rsp_i;
  assign succupd_fire     = net_rsp_valid_i && is_succupd;
  assign rsp_fire         = net_rsp_valid_i && !is_succupd && core_rsp_ready_i;

  always_comb begin
    active_d     = active_q;
    succ_valid_d = succ_valid_q;
    succ_d       = succ_q;
    addr_d       = addr_q;
    self_d       = self_q;
    wk_valid_d   = wk_valid_q && !net_req_ready_i;
    wk_succ_d    = wk_succ_q;

    if (core_fire) begin
      self_d = core_req_i.src;
      unique case (core_req_i.op)
        REQ_LRWAIT, REQ_MWAIT: begin
          active_d     = 1'b1;
          succ_valid_d = 1'b0;
          addr_d       = core_req_i.addr;
        end
        REQ_SCWAIT: begin
          active_d = 1'b0;
          if (succ_valid_q) begin
            wk_valid_d   = 1'b1;
            wk_succ_d    = succ_q;
            succ_valid_d = 1'b0;
          end
        end
        default: ;
      endcase
    end

    if (rsp_fire && net_rsp_i.op == RSP_MWAIT) begin
      active_d = 1'b0;
      if (succ_valid_q) begin
        wk_valid_d   = 1'b1;
        wk_succ_d    = succ_q;
        succ_valid_d = 1'b0;
      end
    end

    if (succupd_fire) begin
      if (active_q && !(core_fire && core_req_i.op == REQ_SCWAIT)) begin
        succ_valid_d = 1'b1;
        succ_d       = net_rsp_i.succ;
      end else begin
        // Core already left the queue: bounce the successor to the bank.
        wk_valid_d = 1'b1;
        wk_succ_d  = net_rsp_i.succ;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q     <= 1'b0;
      succ_valid_q <= 1'b0;
      succ_q       <= '0;
      addr_q       <= '0;
      self_q       <= '0;
      wk_valid_q   <= 1'b0;
      wk_succ_q    <= '0;
    end else begin
      active_q     <= active_d;
      succ_valid_q <= succ_valid_d;
      succ_q       <= succ_d;
      addr_q       <= addr_d;
      self_q       <= self_d;
      wk_valid_q   <= wk_valid_d;
      wk_succ_q    <= wk_succ_d;
    end
  end

  // Only one SuccessorUpdate is ever in flight to a Qnode, so it never meets
  // a stored successor or a WakeUpRequest still waiting to leave.
  succupd_single: assert property (@(posedge clk_i) disable iff (!rst_ni)
    succupd_fire |-> !succ_valid_q && !wk_valid_q);

  // A WakeUpRequest waits until the interconnect takes it.
  wakeup_held: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (net_req_valid_o && !net_req_ready_i && wk_valid_q) |=> wk_valid_q);

endmodule
