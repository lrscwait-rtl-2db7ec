// spm_bank: one scratchpad memory bank.
//
// A single-port word memory with one cycle of read latency, standing in for
// the SRAM macro of one L1 bank. With the default 256 words of 32 bit, 1024
// banks make up a 1 MiB shared L1 memory. A read (req_i && !we_i) returns the
// word on rdata_o in the next cycle; rdata_o holds that value until the next
// read, so a stalled consumer can still pick it up. A write stores wdata_i and
// leaves rdata_o unchanged. The bank size follows the paper's 1 MiB over 1024
// banks; the latency and the hold behaviour are this implementation's choice.
// The contents are not reset, as an SRAM's are not.
module spm_bank #(
  parameter int unsigned Words     = 256,
  parameter int unsigned DataWidth = 32,
  localparam int unsigned IdxWidth = (Words > 1) ? $clog2(Words) : 1
) (
  input  logic                 clk_i,
  input  logic                 req_i,
  input  logic                 we_i,
  input  logic [IdxWidth-1:0]  addr_i,
  input  logic [DataWidth-1:0] wdata_i,
  output logic [DataWidth-1:0] rdata_o
);

  logic [DataWidth-1:0] mem_q [Words];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) mem_q[addr_i] <= wdata_i;
      else      rdata_o       <= mem_q[addr_i];
    end
  end

endmodule
