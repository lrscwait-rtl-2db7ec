// colibri_system: a shared-L1 manycore memory system with Colibri.
//
// NumCores core ports, each passing through its own Qnode, reach NumBanks
// word-interleaved scratchpad banks over a crossbar; every bank has a Colibri
// controller in front of it holding NumQueues head/tail queue slots. Together
// they implement LRwait, SCwait and Mwait for every word of the shared memory
// without any per-bank table that grows with the number of cores: a queue of
// waiting cores is a head and a tail at the bank plus one successor link per
// Qnode. The defaults (256 cores, 1024 banks of 256 words = 1 MiB, one queue
// per bank) follow the system evaluated in the paper; the cores themselves are
// outside this module, so their request and response ports are the ports of
// the top.
//
// Interface: per core a valid/ready request port (req_t) and a valid/ready
// response port (rsp_t). The src field of a request is overwritten with the
// index of the port it enters, so a core cannot pose as another. Timing: the
// Qnodes and the crossbar add no register, so a request meeting no contention
// reaches its controller in the cycle it is issued, and the response (load
// data included) is on the core's response port in the next cycle.
module colibri_system
  import colibri_pkg::*;
#(
  parameter int unsigned NumCores  = 256,
  parameter int unsigned NumBanks  = 1024,
  parameter int unsigned BankWords = 256,
  parameter int unsigned NumQueues = 1
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic [NumCores-1:0] core_req_valid_i,
  output logic [NumCores-1:0] core_req_ready_o,
  input  req_t [NumCores-1:0] core_req_i,
  output logic [NumCores-1:0] core_rsp_valid_o,
  input  logic [NumCores-1:0] core_rsp_ready_i,
  output rsp_t [NumCores-1:0] core_rsp_o
);

  logic [NumCores-1:0] net_req_valid, net_req_ready, net_rsp_valid, net_rsp_ready;
  req_t [NumCores-1:0] net_req;
  rsp_t [NumCores-1:0] net_rsp;

  logic [NumBanks-1:0] bank_req_valid, bank_req_ready, bank_rsp_valid, bank_rsp_ready;
  req_t [NumBanks-1:0] bank_req;
  rsp_t [NumBanks-1:0] bank_rsp;

  for (genvar c = 0; c < NumCores; c++) begin : gen_core
    req_t req_tagged;
    always_comb begin
      req_tagged     = core_req_i[c];
      req_tagged.src = core_id_t'(c);
    end

    qnode i_qnode (
      .clk_i            (clk_i),
      .rst_ni           (rst_ni),
      .core_req_valid_i (core_req_valid_i[c]),
      .core_req_ready_o (core_req_ready_o[c]),
      .core_req_i       (req_tagged),
      .core_rsp_valid_o (core_rsp_valid_o[c]),
      .core_rsp_ready_i (core_rsp_ready_i[c]),
      .core_rsp_o       (core_rsp_o[c]),
      .net_req_valid_o  (net_req_valid[c]),
      .net_req_ready_i  (net_req_ready[c]),
      .net_req_o        (net_req[c]),
      .net_rsp_valid_i  (net_rsp_valid[c]),
      .net_rsp_ready_o  (net_rsp_ready[c]),
      .net_rsp_i        (net_rsp[c])
    );
  end

  xbar #(
    .NumCores (NumCores),
    .NumBanks (NumBanks)
  ) i_xbar (
    .clk_i            (clk_i),
    .rst_ni           (rst_ni),
    .core_req_valid_i (net_req_valid),
    .core_req_ready_o (net_req_ready),
    .core_req_i       (net_req),
    .core_rsp_valid_o (net_rsp_valid),
    .core_rsp_ready_i (net_rsp_ready),
    .core_rsp_o       (net_rsp),
    .bank_req_valid_o (bank_req_valid),
    .bank_req_ready_i (bank_req_ready),
    .bank_req_o       (bank_req),
    .bank_rsp_valid_i (bank_rsp_valid),
    .bank_rsp_ready_o (bank_rsp_ready),
    .bank_rsp_i       (bank_rsp)
  );

  for (genvar b = 0; b < NumBanks; b++) begin : gen_bank
    colibri_controller #(
      .NumQueues (NumQueues),
      .BankWords (BankWords),
      .NumBanks  (NumBanks)
    ) i_ctrl (
      .clk_i       (clk_i),
      .rst_ni      (rst_ni),
      .req_valid_i (bank_req_valid[b]),
      .req_ready_o (bank_req_ready[b]),
      .req_i       (bank_req[b]),
      .rsp_valid_o (bank_rsp_valid[b]),
      .rsp_ready_i (bank_rsp_ready[b]),
      .rsp_o       (bank_rsp[b])
    );
  end

endmodule
