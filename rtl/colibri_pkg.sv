// colibri_pkg: message formats shared by the Qnodes, the interconnect and the
// Colibri memory controllers.
//
// A core (through its Qnode) sends req_t messages to a memory bank, the bank's
// controller answers with rsp_t messages. Besides plain loads and stores the
// request set holds the three waiting instructions LRwait, SCwait and Mwait and
// the WakeUpRequest a Qnode sends for its successor. The response set holds one
// answer per request kind plus the SuccessorUpdate a controller sends to the old
// tail of a queue. The message kinds follow the paper; field widths, the
// encoding and the address map are this implementation's choice:
//   - 32-bit byte addresses, 32-bit data words;
//   - word-interleaved banks: bank = addr[2 +: log2(NumBanks)], row above it;
//   - an 8-bit core index, enough for 256 cores;
//   - SCwait answers 0 on success and 1 on failure, as RISC-V sc.w does.
package colibri_pkg;

  localparam int unsigned AddrWidth   = 32;
  localparam int unsigned DataWidth   = 32;
  localparam int unsigned CoreIdWidth = 8;   // 2^8 = 256 cores at most

  typedef logic [AddrWidth-1:0]   addr_t;
  typedef logic [DataWidth-1:0]   data_t;
  typedef logic [CoreIdWidth-1:0] core_id_t;

  // Requests travelling from a Qnode to a memory controller.
  typedef enum logic [2:0] {
    REQ_LOAD   = 3'd0,
    REQ_STORE  = 3'd1,
    REQ_LRWAIT = 3'd2,
    REQ_SCWAIT = 3'd3,
    REQ_MWAIT  = 3'd4,  // data carries the expected value
    REQ_WAKEUP = 3'd5   // succ carries the successor to wake
  } req_op_e;

  // Responses travelling from a memory controller to a Qnode.
  typedef enum logic [2:0] {
    RSP_LOAD    = 3'd0,
    RSP_STORE   = 3'd1,
    RSP_LRWAIT  = 3'd2,
    RSP_SCWAIT  = 3'd3,  // data: 0 success, 1 failure
    RSP_MWAIT   = 3'd4,
    RSP_SUCCUPD = 3'd5   // SuccessorUpdate, consumed by the Qnode
  } rsp_op_e;

  typedef struct packed {
    req_op_e  op;
    addr_t    addr;
    data_t    data;
    core_id_t src;   // issuing core
    core_id_t succ;  // successor (WakeUpRequest only)
  } req_t;

  typedef struct packed {
    rsp_op_e  op;
    data_t    data;
    core_id_t dst;   // receiving core
    core_id_t succ;  // new successor (SuccessorUpdate only)
  } rsp_t;

endpackage
