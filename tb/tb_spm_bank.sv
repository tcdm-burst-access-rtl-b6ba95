// Testbench of spm_bank: random byte-masked writes and reads against a
// reference array; checks one-cycle read latency and that the read port
// holds its value while no read is issued.
module tb_spm_bank;
  localparam int unsigned Words = 64;
  logic clk = 0, rst_n = 0;
  logic req, we;
  logic [5:0] addr;
  logic [31:0] wdata, rdata;
  logic [3:0] be;
  int checks = 0, failures = 0;
  logic [31:0] model [Words];

  spm_bank #(.Words(Words)) dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .we_i(we),
    .addr_i(addr), .wdata_i(wdata), .be_i(be), .rdata_o(rdata));

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  initial begin
    req = 0; we = 0; addr = 0; wdata = 0; be = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fill
    for (int i = 0; i < Words; i++) begin
      @(negedge clk); req = 1; we = 1; addr = 6'(i); be = 4'hf; wdata = $urandom; model[i] = wdata;
    end
    @(negedge clk); req = 0;
    for (int n = 0; n < 600; n++) begin
      logic [31:0] exp;
      @(negedge clk);
      addr = 6'($urandom % Words);
      if ($urandom % 2) begin
        req = 1; we = 1; be = 4'($urandom); wdata = $urandom;
        for (int b = 0; b < 4; b++) if (be[b]) model[addr][8*b +: 8] = wdata[8*b +: 8];
        @(negedge clk); req = 0;
      end else begin
        req = 1; we = 0; exp = model[addr];
        @(negedge clk); req = 0;
        check(rdata, exp, "read");
        @(negedge clk);
        check(rdata, exp, "hold");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
