// colibri_controller: Colibri reservation controller in front of one memory bank.
//
// Each controller owns NumQueues queue slots. A slot monitors one word of its
// bank and holds the head and the tail of a linked list of waiting cores; the
// links between the cores live in the cores' Qnodes. A slot is either an
// LRwait queue (the head may issue its SCwait) or an Mwait queue (every member
// sleeps until the word is written).
//
// What each request does:
//   load / store   plain access; a store clears the reservation of an LRwait
//                  slot and wakes the sleeping head of an Mwait slot.
//   LRwait         empty queue: the core becomes head and tail, gets a
//                  reservation and the memory value at once. Queue exists: the
//                  core becomes the new tail and the old tail is sent a
//                  SuccessorUpdate; the core gets no response yet. No free
//                  slot: answered at once without reservation, so the
//                  following SCwait fails.
//   SCwait         from the valid head: writes only if the reservation still
//                  holds, answers 0 (success) or 1 (failure). The head leaves:
//                  a lone head frees the slot, otherwise the head is marked
//                  invalid until the WakeUpRequest arrives.
//   WakeUpRequest  makes the named successor the head and sends it its
//                  delayed LRwait response (with a new reservation) or Mwait
//                  response.
//   Mwait          if the word already differs from the expected value (or the
//                  core cannot be queued), answered at once; otherwise queued
//                  like an LRwait and answered after the next write.
// The queue behaviour follows the paper (Sec. III and IV, Fig. 2). This
// implementation's own choices: an SCwait whose reservation was lost still
// dequeues its core; an LRwait or Mwait to an address held by a slot of the
// other kind is answered at once like a full queue; an SCwait from a core that
// is not the valid head fails without touching the queue; a WakeUpRequest
// that matches no slot with an invalid head is dropped.
//
// Timing: one request is taken per cycle over a valid/ready handshake. The
// bank answers one cycle later, so a response appears on rsp_o the cycle after
// its request was taken and is held until rsp_ready_i. A new request is taken
// only while the response register is free or drains in the same cycle. Mwait
// takes two cycles (read, then compare); waking an Mwait head after a store
// takes one extra cycle in which no request is taken.
module colibri_controller
  import colibri_pkg::*;
#(
  parameter int unsigned NumQueues = 1,
  parameter int unsigned BankWords = 256,
  parameter int unsigned NumBanks  = 1024,
  localparam int unsigned RowWidth  = (BankWords > 1) ? $clog2(BankWords) : 1,
  localparam int unsigned BankWidth = (NumBanks > 1) ? $clog2(NumBanks) : 0,
  localparam int unsigned QIdxWidth = (NumQueues > 1) ? $clog2(NumQueues) : 1
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic req_valid_i,
  output logic req_ready_o,
  input  req_t req_i,
  output logic rsp_valid_o,
  input  logic rsp_ready_i,
  output rsp_t rsp_o
);

  typedef logic [RowWidth-1:0] row_t;

  typedef struct packed {
    logic     valid;       // slot in use
    logic     mwait;       // 1: Mwait queue, 0: LRwait queue
    row_t     row;         // monitored word
    core_id_t head;
    logic     head_valid;  // cleared between an SCwait/Mwait response and the WakeUpRequest
    core_id_t tail;
    logic     resv;        // the head's reservation still holds (LRwait queues)
    logic     notify;      // a write hit the sleeping head of an Mwait queue
  } slot_t;

  function automatic row_t row_of(addr_t a);
    return a[2+BankWidth +: RowWidth];
  endfunction

  slot_t [NumQueues-1:0] slot_q, slot_d;

  // Second cycle of an Mwait: the request whose word has just been read.
  logic mw_pend_q, mw_pend_d;
  req_t mw_req_q, mw_req_d;

  // Response register; its data comes from the bank when s1_mem_q is set.
  logic s1_valid_q, s1_valid_d;
  rsp_t s1_rsp_q, s1_rsp_d;
  logic s1_mem_q, s1_mem_d;

  // Bank port.
  logic  mem_req, mem_we;
  row_t  mem_row;
  data_t mem_wdata, mem_rdata;

  spm_bank #(
    .Words     (BankWords),
    .DataWidth (DataWidth)
  ) i_bank (
    .clk_i   (clk_i),
    .req_i   (mem_req),
    .we_i    (mem_we),
    .addr_i  (mem_row),
    .wdata_i (mem_wdata),
    .rdata_o (mem_rdata)
  );

  logic s1_free;
  assign s1_free = !s1_valid_q || rsp_ready_i;

  // Pending Mwait notifications, lowest slot first.
  logic                 notify_any;
  logic [QIdxWidth-1:0] notify_idx;
  always_comb begin
    notify_any = 1'b0;
    notify_idx = '0;
    for (int unsigned i = 0; i < NumQueues; i++) begin
      if (slot_q[i].notify && !notify_any) begin
        notify_any = 1'b1;
        notify_idx = QIdxWidth'(i);
      end
    end
  end

  assign req_ready_o = s1_free && !mw_pend_q && !notify_any;

  // Slot lookup for the address of the operation handled this cycle.
  req_t                 cur;
  row_t                 cur_row;
  logic                 hit, free_avail;
  logic [QIdxWidth-1:0] hit_idx, free_idx;

  assign cur     = mw_pend_q ? mw_req_q : req_i;
  assign cur_row = row_of(cur.addr);

  always_comb begin
    hit        = 1'b0;
    hit_idx    = '0;
    free_avail = 1'b0;
    free_idx   = '0;
    for (int unsigned i = 0; i < NumQueues; i++) begin
      if (slot_q[i].valid && slot_q[i].row == cur_row && !hit) begin
        hit     = 1'b1;
        hit_idx = QIdxWidth'(i);
      end
      if (!slot_q[i].valid && !free_avail) begin
        free_avail = 1'b1;
        free_idx   = QIdxWidth'(i);
      end
    end
  end

  // Main decision logic.
  always_comb begin
    slot_d    = slot_q;
    mw_pend_d = 1'b0;
    mw_req_d  = mw_req_q;
    mem_req   = 1'b0;
    mem_we    = 1'b0;
    mem_row   = cur_row;
    mem_wdata = cur.data;

    // Response register: drains when accepted, loaded below.
    s1_valid_d = s1_valid_q && !rsp_ready_i;
    s1_rsp_d   = s1_rsp_q;
    s1_mem_d   = s1_mem_q;

    if (mw_pend_q) begin
      // ---- Mwait, second cycle: compare the word read in the first cycle ----
      if ((mem_rdata != mw_req_q.data) || (hit && !slot_q[hit_idx].mwait) ||
          (!hit && !free_avail)) begin
        mem_req    = 1'b1;
        s1_valid_d = 1'b1;
        s1_rsp_d   = '{op: RSP_MWAIT, data: '0, dst: mw_req_q.src, succ: '0};
        s1_mem_d   = 1'b1;
      end else if (hit) begin
        s1_valid_d = 1'b1;
        s1_rsp_d   = '{op: RSP_SUCCUPD, data: '0, dst: slot_q[hit_idx].tail,
                       succ: mw_req_q.src};
        s1_mem_d   = 1'b0;
        slot_d[hit_idx].tail = mw_req_q.src;
      end else begin
        slot_d[free_idx] = '{valid: 1'b1, mwait: 1'b1, row: cur_row,
                             head: mw_req_q.src, head_valid: 1'b1,
                             tail: mw_req_q.src, resv: 1'b0, notify: 1'b0};
      end
    end else if (notify_any && s1_free) begin
      // ---- a write hit a sleeping Mwait head: wake it ----
      mem_req    = 1'b1;
      mem_row    = slot_q[notify_idx].row;
      s1_valid_d = 1'b1;
      s1_rsp_d   = '{op: RSP_MWAIT, data: '0, dst: slot_q[notify_idx].head, succ: '0};
      s1_mem_d   = 1'b1;
      slot_d[notify_idx].notify = 1'b0;
      if (slot_q[notify_idx].head == slot_q[notify_idx].tail) begin
        slot_d[notify_idx].valid = 1'b0;
      end else begin
        slot_d[notify_idx].head_valid = 1'b0;
      end
    end else if (req_valid_i && req_ready_o) begin
      unique case (req_i.op)
        REQ_LOAD: begin
          mem_req    = 1'b1;
          s1_valid_d = 1'b1;
          s1_rsp_d   = '{op: RSP_LOAD, data: '0, dst: req_i.src, succ: '0};
          s1_mem_d   = 1'b1;
        end
        REQ_STORE: begin
          mem_req    = 1'b1;
          mem_we     = 1'b1;
          s1_valid_d = 1'b1;
          s1_rsp_d   = '{op: RSP_STORE, data: '0, dst: req_i.src, succ: '0};
          s1_mem_d   = 1'b0;
          if (hit) begin
            if (!slot_q[hit_idx].mwait) slot_d[hit_idx].resv = 1'b0;
            else if (slot_q[hit_idx].head_valid) slot_d[hit_idx].notify = 1'b1;
          end
        end
        REQ_LRWAIT: begin
          if (hit && !slot_q[hit_idx].mwait) begin
            // Append to the queue: link the old tail to the new core.
            s1_valid_d = 1'b1;
            s1_rsp_d   = '{op: RSP_SUCCUPD, data: '0, dst: slot_q[hit_idx].tail,
                           succ: req_i.src};
            s1_mem_d   = 1'b0;
            slot_d[hit_idx].tail = req_i.src;
          end else begin
            mem_req    = 1'b1;
            s1_valid_d = 1'b1;
            s1_rsp_d   = '{op: RSP_LRWAIT, data: '0, dst: req_i.src, succ: '0};
            s1_mem_d   = 1'b1;
            if (!hit && free_avail) begin
              slot_d[free_idx] = '{valid: 1'b1, mwait: 1'b0, row: cur_row,
                                   head: req_i.src, head_valid: 1'b1,
                                   tail: req_i.src, resv: 1'b1, notify: 1'b0};
            end
          end
        end
        REQ_SCWAIT: begin
          s1_valid_d = 1'b1;
          s1_mem_d   = 1'b0;
          if (hit && !slot_q[hit_idx].mwait && slot_q[hit_idx].head_valid &&
              slot_q[hit_idx].head == req_i.src) begin
            mem_req  = slot_q[hit_idx].resv;
            mem_we   = slot_q[hit_idx].resv;
            s1_rsp_d = '{op: RSP_SCWAIT, data: data_t'(!slot_q[hit_idx].resv),
                         dst: req_i.src, succ: '0};
            slot_d[hit_idx].resv = 1'b0;
            if (slot_q[hit_idx].head == slot_q[hit_idx].tail) begin
              slot_d[hit_idx].valid = 1'b0;
            end else begin
              slot_d[hit_idx].head_valid = 1'b0;
            end
          end else begin
            s1_rsp_d = '{op: RSP_SCWAIT, data: data_t'(1), dst: req_i.src, succ: '0};
          end
        end
        REQ_MWAIT: begin
          mem_req   = 1'b1;
          mw_pend_d = 1'b1;
          mw_req_d  = req_i;
        end
        REQ_WAKEUP: begin
          if (hit && !slot_q[hit_idx].head_valid) begin
            mem_req    = 1'b1;
            s1_valid_d = 1'b1;
            s1_mem_d   = 1'b1;
            slot_d[hit_idx].head       = req_i.succ;
            slot_d[hit_idx].head_valid = 1'b1;
            if (!slot_q[hit_idx].mwait) begin
              s1_rsp_d = '{op: RSP_LRWAIT, data: '0, dst: req_i.succ, succ: '0};
              slot_d[hit_idx].resv = 1'b1;
            end else begin
              s1_rsp_d = '{op: RSP_MWAIT, data: '0, dst: req_i.succ, succ: '0};
              if (req_i.succ == slot_q[hit_idx].tail) slot_d[hit_idx].valid = 1'b0;
              else                                   slot_d[hit_idx].head_valid = 1'b0;
            end
          end
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      slot_q     <= '0;
      mw_pend_q  <= 1'b0;
      mw_req_q   <= '0;
      s1_valid_q <= 1'b0;
      s1_rsp_q   <= '0;
      s1_mem_q   <= 1'b0;
    end else begin
      slot_q     <= slot_d;
      mw_pend_q  <= mw_pend_d;
      mw_req_q   <= mw_req_d;
      s1_valid_q <= s1_valid_d;
      s1_rsp_q   <= s1_rsp_d;
      s1_mem_q   <= s1_mem_d;
    end
  end

  assign rsp_valid_o = s1_valid_q;
  always_comb begin
    rsp_o = s1_rsp_q;
    if (s1_mem_q) rsp_o.data = mem_rdata;
  end

  // A response stays put until it is taken.
  rsp_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (rsp_valid_o && !rsp_ready_i) |=> (rsp_valid_o && $stable(rsp_o)));

endmodule
