// Testbench of vlsu_rob: loads are reserved in order, their data written
// back in random order after random delays, and must come out in reservation
// order.  Also checks that exactly Depth loads can be in flight and that a
// head slot written in a cycle is visible in that cycle.
module tb_vlsu_rob;
  localparam int Depth = 8;
  logic clk = 0, rst_n = 0;
  logic av, ar, wv, ov, orr;
  logic [2:0] atag, wtag;
  logic [31:0] wd, od;
  int checks = 0, failures = 0;

  vlsu_rob #(.Depth(Depth)) dut (.clk_i(clk), .rst_ni(rst_n), .alloc_valid_i(av), .alloc_ready_o(ar),
    .alloc_tag_o(atag), .wr_valid_i(wv), .wr_tag_i(wtag), .wr_data_i(wd),
    .out_valid_o(ov), .out_ready_i(orr), .out_data_o(od));

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned expq [$];     // expected output order
  int pend_tag [$];          // reserved, not yet written
  int unsigned pend_val [$];
  int issued = 0, got = 0;

  initial begin
    av = 0; wv = 0; orr = 0; wtag = 0; wd = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Capacity: Depth reservations, then ready drops.
    for (int i = 0; i < Depth; i++) begin
      @(negedge clk); av = 1; #1;
      checks++; if (!ar || int'(atag) != i) begin failures++; $display("FAIL alloc %0d", i); end
      pend_tag.push_back(atag); pend_val.push_back(1000 + i); expq.push_back(1000 + i); issued++;
    end
    @(negedge clk); av = 1; #1;
    checks++; if (ar) begin failures++; $display("FAIL over-allocation"); end
    av = 0;
    // Write back the head slot and see it at the output in the same cycle.
    @(negedge clk); wv = 1; wtag = 3'(pend_tag[0]); wd = pend_val[0]; orr = 1; #1;
    checks++; if (!ov || od != pend_val[0]) begin failures++; $display("FAIL same-cycle head"); end
    void'(pend_tag.pop_front()); void'(pend_val.pop_front());
    @(negedge clk); wv = 0; orr = 0;
    void'(expq.pop_front()); got++;
    // Random traffic.
    for (int n = 0; n < 4000; n++) begin
      int k;
      @(negedge clk);
      av = (issued < 1500) && ($urandom % 2);
      orr = ($urandom % 4 != 0);
      wv = 0;
      if (pend_tag.size() > 0 && $urandom % 2) begin
        k = $urandom % pend_tag.size();
        wv = 1; wtag = 3'(pend_tag[k]); wd = pend_val[k];
        pend_tag.delete(k); pend_val.delete(k);
      end
      #1;
      if (ov && orr) begin
        checks++;
        if (od != expq[0]) begin failures++; $display("FAIL order %0d exp %0d", od, expq[0]); end
        void'(expq.pop_front()); got++;
      end
      if (av && ar) begin
        pend_tag.push_back(atag); pend_val.push_back(issued * 7 + 5); expq.push_back(issued * 7 + 5); issued++;
      end
    end
    checks++;
    if (got < 1000) begin failures++; $display("FAIL only %0d returned", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
