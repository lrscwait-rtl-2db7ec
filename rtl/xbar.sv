// xbar: core-to-bank interconnect.
//
// A full crossbar between NumCores Qnodes and NumBanks Colibri controllers.
// Requests are routed by address to bank addr[2 +: log2(NumBanks)] (word
// interleaving); responses are routed to core rsp.dst. Each bank and each core
// has a round-robin arbiter, so one request per bank and one response per core
// pass per cycle. The crossbar is combinational: a message is taken in the
// cycle it is granted and the target is ready, so messages between one core
// and one bank can never overtake each other, which the Colibri protocol
// relies on (a SuccessorUpdate must reach its Qnode before the response that
// lets the core go on). The topology is this implementation's choice: the
// memory system it stands for uses a hierarchical network, which would work
// equally well as long as it keeps that order.
module xbar
  import colibri_pkg::*;
#(
  parameter int unsigned NumCores = 256,
  parameter int unsigned NumBanks = 1024,
  localparam int unsigned CoreIdx = (NumCores > 1) ? $clog2(NumCores) : 1,
  localparam int unsigned BankIdx = (NumBanks > 1) ? $clog2(NumBanks) : 1
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  // from / to the Qnodes
  input  logic [NumCores-1:0] core_req_valid_i,
  output logic [NumCores-1:0] core_req_ready_o,
  input  req_t [NumCores-1:0] core_req_i,
  output logic [NumCores-1:0] core_rsp_valid_o,
  input  logic [NumCores-1:0] core_rsp_ready_i,
  output rsp_t [NumCores-1:0] core_rsp_o,
  // to / from the banks
  output logic [NumBanks-1:0] bank_req_valid_o,
  input  logic [NumBanks-1:0] bank_req_ready_i,
  output req_t [NumBanks-1:0] bank_req_o,
  input  logic [NumBanks-1:0] bank_rsp_valid_i,
  output logic [NumBanks-1:0] bank_rsp_ready_o,
  input  rsp_t [NumBanks-1:0] bank_rsp_i
);

  logic [NumCores-1:0][BankIdx-1:0] bank_sel;
  logic [NumBanks-1:0][CoreIdx-1:0] core_sel;

  always_comb begin
    for (int unsigned c = 0; c < NumCores; c++) begin
      bank_sel[c] = (NumBanks > 1) ? BankIdx'(core_req_i[c].addr >> 2) : '0;
    end
    for (int unsigned b = 0; b < NumBanks; b++) begin
      core_sel[b] = CoreIdx'(bank_rsp_i[b].dst);
    end
  end

  // ---- request path: one arbiter per bank ----
  logic [NumBanks-1:0][NumCores-1:0] breq;
  logic [NumBanks-1:0][CoreIdx-1:0]  bgnt_idx;

  always_comb begin
    for (int unsigned b = 0; b < NumBanks; b++) begin
      for (int unsigned c = 0; c < NumCores; c++) begin
        breq[b][c] = core_req_valid_i[c] && (bank_sel[c] == BankIdx'(b));
      end
    end
  end

  for (genvar b = 0; b < NumBanks; b++) begin : gen_bank_arb
    rr_arbiter #(.NumReq(NumCores)) i_arb (
      .clk_i   (clk_i),
      .rst_ni  (rst_ni),
      .req_i   (breq[b]),
      .ack_i   (bank_req_ready_i[b]),
      .idx_o   (bgnt_idx[b]),
      .valid_o (bank_req_valid_o[b])
    );
    assign bank_req_o[b] = core_req_i[bgnt_idx[b]];
  end

  always_comb begin
    for (int unsigned c = 0; c < NumCores; c++) begin
      core_req_ready_o[c] = bank_req_ready_i[bank_sel[c]] &&
                            (bgnt_idx[bank_sel[c]] == CoreIdx'(c)) &&
                            bank_req_valid_o[bank_sel[c]];
    end
  end

  // ---- response path: one arbiter per core ----
  logic [NumCores-1:0][NumBanks-1:0] creq;
  logic [NumCores-1:0][BankIdx-1:0]  cgnt_idx;

  always_comb begin
    for (int unsigned c = 0; c < NumCores; c++) begin
      for (int unsigned b = 0; b < NumBanks; b++) begin
        creq[c][b] = bank_rsp_valid_i[b] && (core_sel[b] == CoreIdx'(c));
      end
    end
  end

  for (genvar c = 0; c < NumCores; c++) begin : gen_core_arb
    rr_arbiter #(.NumReq(NumBanks)) i_arb (
      .clk_i   (clk_i),
      .rst_ni  (rst_ni),
      .req_i   (creq[c]),
      .ack_i   (core_rsp_ready_i[c]),
      .idx_o   (cgnt_idx[c]),
      .valid_o (core_rsp_valid_o[c])
    );
    assign core_rsp_o[c] = bank_rsp_i[cgnt_idx[c]];
  end

  always_comb begin
    for (int unsigned b = 0; b < NumBanks; b++) begin
      bank_rsp_ready_o[b] = core_rsp_ready_i[core_sel[b]] &&
                            (cgnt_idx[core_sel[b]] == BankIdx'(b)) &&
                            core_rsp_valid_o[core_sel[b]];
    end
  end

endmodule
