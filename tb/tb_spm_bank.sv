// tb_spm_bank: self-checking test of the scratchpad bank.
//
// Writes every word with a value from a reference model, then reads words back
// in random order and checks that each value appears exactly one cycle after
// the read, that it stays on rdata_o while no read follows, and that a write
// does not disturb rdata_o.
module tb_spm_bank;
  localparam int unsigned Words = 256;

  logic        clk = 1'b0;
  logic        req, we;
  logic [7:0]  addr;
  logic [31:0] wdata, rdata;
  logic [31:0] model [Words];
  logic [31:0] last;
  int checks = 0, failures = 0;

  spm_bank #(.Words(Words), .DataWidth(32)) dut (
    .clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr), .wdata_i(wdata), .rdata_o(rdata)
  );

  always #5 clk = ~clk;

  task automatic check(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = 0; we = 0; addr = 0; wdata = 0;
    @(negedge clk);
    for (int i = 0; i < Words; i++) begin
      model[i] = $urandom;
      req = 1; we = 1; addr = 8'(i); wdata = model[i];
      @(negedge clk);
    end
    for (int n = 0; n < 500; n++) begin
      int a;
      a = $urandom_range(Words - 1);
      req = 1; we = 0; addr = 8'(a);
      @(negedge clk);
      check(rdata, model[a], "read after one cycle");
      last = model[a];
      // hold while idle
      req = 0;
      @(negedge clk);
      check(rdata, model[a], "read data held while idle");
      // a write leaves the read data alone and updates the array
      if (n % 3 == 0) begin
        int w;
        w = $urandom_range(Words - 1);
        model[w] = $urandom;
        req = 1; we = 1; addr = 8'(w); wdata = model[w];
        @(negedge clk);
        check(rdata, last, "read data unchanged by a write");
        if (w == a) begin
          req = 1; we = 0; addr = 8'(w);
          @(negedge clk);
          check(rdata, model[w], "read after write");
        end
        req = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
