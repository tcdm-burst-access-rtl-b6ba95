// Testbench of pipe_reg: random valid/ready on both sides; checks that items
// leave in order, none is lost or duplicated, each takes exactly one cycle
// when the output is ready, and a full stream passes at one item per cycle.
module tb_pipe_reg;
  logic clk = 0, rst_n = 0;
  logic iv, ir, ov, orr;
  logic [31:0] id, od;
  int checks = 0, failures = 0;
  int sent = 0, rcvd = 0, cyc = 0;
  int unsigned tin [$];

  pipe_reg #(.T(logic [31:0])) dut (.clk_i(clk), .rst_ni(rst_n), .in_valid_i(iv), .in_ready_o(ir),
    .in_data_i(id), .out_valid_o(ov), .out_ready_i(orr), .out_data_o(od));

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit full_rate;
  int last_in_cyc [$];
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (ov && orr) begin
      checks++;
      if (od !== 32'(rcvd)) begin failures++; $display("FAIL order got %0d exp %0d", od, rcvd); end
      if (full_rate) begin
        checks++;
        if (cyc - last_in_cyc[0] != 1) begin failures++; $display("FAIL latency %0d", cyc - last_in_cyc[0]); end
      end
      void'(last_in_cyc.pop_front());
      rcvd++;
    end
    if (iv && ir) begin sent++; last_in_cyc.push_back(cyc); end
  end

  always @(negedge clk) begin
    if (!rst_n) begin iv <= 0; orr <= 0; id <= 0; end
    else begin
      if (!iv || ir) ; // decide below
      iv  = full_rate ? (sent < 2000) : ((iv && !ir) ? 1'b1 : (sent < 1000 && ($urandom % 3 != 0)));
      id  = 32'(sent);
      orr = full_rate ? 1'b1 : ($urandom % 2 == 0);
    end
  end

  initial begin
    full_rate = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (rcvd == 1000);
    @(negedge clk); full_rate = 1;
    begin
      int c0;
      c0 = cyc;
      wait (rcvd == 2000);
      checks++;
      if (cyc - c0 > 1000 + 3) begin failures++; $display("FAIL rate %0d cycles", cyc - c0); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
