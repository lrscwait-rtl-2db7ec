// rr_arbiter: round-robin arbiter.
//
// Grants one of NumReq requesters. The search starts one place after the
// requester granted last, so every requester that keeps asking is served
// within NumReq grants. The grant is combinational from req_i; the priority
// pointer moves only in a cycle where the granted transfer completes
// (ack_i). Interface: req_i (one bit per requester), idx_o (index of the
// grant), valid_o (some requester is granted).
module rr_arbiter #(
  parameter int unsigned NumReq = 4,
  localparam int unsigned IdxWidth = (NumReq > 1) ? $clog2(NumReq) : 1
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic [NumReq-1:0]   req_i,
  input  logic                ack_i,
  output logic [IdxWidth-1:0] idx_o,
  output logic                valid_o
);

  logic [IdxWidth-1:0] ptr_q;

  always_comb begin
    valid_o = 1'b0;
    idx_o   = '0;
    for (int unsigned i = 0; i < NumReq; i++) begin
      logic [IdxWidth-1:0] k;
      k = IdxWidth'((int'(ptr_q) + i) % NumReq);
      if (req_i[k] && !valid_o) begin
        valid_o = 1'b1;
        idx_o   = k;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ptr_q <= '0;
    end else if (valid_o && ack_i) begin
      ptr_q <= (int'(idx_o) + 1 == NumReq) ? '0 : idx_o + 1'b1;
    end
  end

endmodule
