// Testbench of tcdm_xbar: 5 sources, 3 destinations, random destinations and
// random back-pressure.  Every item must reach the destination it names,
// exactly once, in source order; with all sources aiming at distinct
// destinations the crossbar must move one item per destination per cycle;
// with all aiming at one destination it must serialise them one per cycle.
module tb_tcdm_xbar;
  localparam int NI = 5, NO = 3;
  logic clk = 0, rst_n = 0;
  logic iv [NI], ir [NI], ov [NO], orr [NO];
  logic [31:0] id [NI], od [NO];
  logic [1:0] sel [NI];
  int checks = 0, failures = 0;

  tcdm_xbar #(.NumIn(NI), .NumOut(NO), .T(logic [31:0])) dut (.clk_i(clk), .rst_ni(rst_n),
    .in_valid_i(iv), .in_ready_o(ir), .in_data_i(id), .in_sel_i(sel),
    .out_valid_o(ov), .out_ready_i(orr), .out_data_o(od));

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int seq [NI];
  int last [NI];
  int recv = 0, sent = 0;

  // item = {src[3:0], dst[3:0], seq[23:0]}
  task automatic new_item(int i, int mode);
    int d;
    d = (mode == 0) ? ($urandom % NO) : (mode == 1) ? (i % NO) : 1;
    sel[i] = 2'(d);
    id[i]  = {4'(i), 4'(d), 24'(seq[i])};
  endtask

  task automatic step(int mode, output int moved);
    moved = 0;
    #1;
    for (int o = 0; o < NO; o++) if (ov[o] && orr[o]) begin
      int s, d, q;
      s = int'(od[o][31:28]); d = int'(od[o][27:24]); q = int'(od[o][23:0]);
      checks++;
      if (d != o || q != last[s] + 1) begin
        failures++; $display("FAIL out %0d got src %0d dst %0d seq %0d (last %0d)", o, s, d, q, last[s]);
      end
      last[s] = q; recv++; moved++;
    end
    for (int i = 0; i < NI; i++) if (iv[i] && ir[i]) begin
      seq[i]++; sent++; new_item(i, mode);
    end
  endtask

  initial begin
    int moved;
    for (int i = 0; i < NI; i++) begin iv[i] = 0; seq[i] = 0; last[i] = -1; sel[i] = 0; id[i] = 0; end
    for (int o = 0; o < NO; o++) orr[o] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NI; i++) new_item(i, 0);
    // random
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      for (int i = 0; i < NI; i++) iv[i] = ($urandom % 3 != 0) || iv[i] && !ir[i];
      for (int o = 0; o < NO; o++) orr[o] = ($urandom % 2);
      step(0, moved);
    end
    // drain
    @(negedge clk); for (int i = 0; i < NI; i++) iv[i] = 0; for (int o = 0; o < NO; o++) orr[o] = 1;
    repeat (20) begin @(negedge clk); step(0, moved); end
    // distinct destinations: sources 0..2 only, full rate
    for (int i = 0; i < NI; i++) new_item(i, 1);
    for (int n = 0; n < 50; n++) begin
      @(negedge clk);
      for (int i = 0; i < NI; i++) iv[i] = (i < NO);
      step(1, moved);
      checks++; if (moved != NO) begin failures++; $display("FAIL parallel moved %0d", moved); end
    end
    // all to destination 1: one per cycle
    @(negedge clk); for (int i = 0; i < NI; i++) iv[i] = 0; step(1, moved);
    for (int i = 0; i < NI; i++) new_item(i, 2);
    for (int n = 0; n < 50; n++) begin
      @(negedge clk);
      for (int i = 0; i < NI; i++) iv[i] = 1;
      step(2, moved);
      checks++; if (moved != 1) begin failures++; $display("FAIL serial moved %0d", moved); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
