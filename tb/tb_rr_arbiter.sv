// Testbench of rr_arbiter: random request vectors, random use of the grant;
// a reference pointer model predicts every grant; also checks that with all
// requesters active each one is served exactly once every N grants.
module tb_rr_arbiter;
  localparam int N = 5;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] req, gnt;
  logic [2:0] idx;
  logic adv, vld;
  int checks = 0, failures = 0;
  int ptr = 0;

  rr_arbiter #(.N(N)) dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .advance_i(adv),
    .gnt_o(gnt), .idx_o(idx), .valid_o(vld));

  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int served [N];
    req = 0; adv = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      int exp;
      @(negedge clk);
      req = N'($urandom);
      adv = ($urandom % 4 != 0);
      if (n >= 1500) begin req = '1; adv = 1; end
      #1;
      exp = -1;
      for (int k = 0; k < N; k++) if (exp < 0 && req[(ptr + k) % N]) exp = (ptr + k) % N;
      checks++;
      if (exp < 0) begin
        if (vld || gnt != 0) begin failures++; $display("FAIL grant without request"); end
      end else if (!vld || int'(idx) != exp || gnt != N'(1 << exp)) begin
        failures++; $display("FAIL n=%0d req=%b gnt=%b exp=%0d", n, req, gnt, exp);
      end
      if (exp >= 0 && adv) begin
        ptr = (exp + 1) % N;
        if (n >= 1500 && n < 1500 + 5 * N) served[exp]++;
      end
    end
    for (int i = 0; i < N; i++) begin
      checks++;
      if (served[i] != 5) begin failures++; $display("FAIL fairness %0d served %0d", i, served[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
