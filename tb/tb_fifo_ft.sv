// Testbench of fifo_ft: random push/pop against a queue model; checks data
// order, that an item pushed into an empty FIFO is visible in the same cycle,
// and that the FIFO accepts exactly Depth items while its output is stalled.
module tb_fifo_ft;
  localparam int Depth = 4;
  logic clk = 0, rst_n = 0;
  logic pv, pr, ov, orr;
  logic [31:0] pd, od;
  int checks = 0, failures = 0;
  int unsigned q [$];
  int cnt = 0;

  fifo_ft #(.T(logic [31:0]), .Depth(Depth)) dut (.clk_i(clk), .rst_ni(rst_n),
    .push_valid_i(pv), .push_ready_o(pr), .push_data_i(pd),
    .pop_valid_o(ov), .pop_ready_i(orr), .pop_data_o(od));

  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pv = 0; orr = 0; pd = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Fall-through: empty FIFO shows the pushed word at once.
    @(negedge clk); pv = 1; pd = 32'hCAFE; orr = 1; #1;
    checks++;
    if (!ov || od != 32'hCAFE) begin failures++; $display("FAIL fall-through"); end
    @(negedge clk); pv = 0; orr = 0;
    // Stall output: exactly Depth pushes accepted.
    for (int i = 0; i < Depth + 2; i++) begin
      @(negedge clk); pv = 1; pd = 32'(100 + i); #1;
      if (pr) begin q.push_back(pd); cnt++; end
    end
    @(negedge clk); pv = 0;
    checks++;
    if (cnt != Depth) begin failures++; $display("FAIL capacity %0d", cnt); end
    // Random traffic.
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      pv = ($urandom % 2); pd = $urandom; orr = ($urandom % 2); #1;
      if (ov && orr) begin
        checks++;
        if (q.size() == 0) begin
          if (!(pv && od == pd)) begin failures++; $display("FAIL bypass data"); end
        end else if (od != q[0]) begin failures++; $display("FAIL data %h exp %h", od, q[0]); end
      end
      if (pv && pr) q.push_back(pd);
      if (ov && orr) void'(q.pop_front());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
