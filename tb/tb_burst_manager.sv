// Testbench of burst_manager with GF real SPM banks behind it.
// Checks: a burst of GF words is answered one cycle after it is accepted,
// as one response holding all words; narrow reads on all ports proceed in
// parallel; bursts arriving together are admitted one per cycle through the
// arbiter and FIFO and all answered; under random read traffic with random
// back-pressure every response carries the right words and origin.
module tb_burst_manager;
  import tcdm_pkg::*;
  localparam int Words = 16;
  localparam int RowLsb = 2 + $clog2(GF);
  logic clk = 0, rst_n = 0;
  logic      rq_v [GF], rq_r [GF];
  tcdm_req_t rq   [GF];
  logic      b_req [GF], b_we [GF];
  logic [3:0] b_addr [GF];
  data_t     b_wd [GF], b_rd [GF];
  strb_t     b_be [GF];
  logic      rs_v [GF], rs_r [GF];
  tcdm_rsp_t rs   [GF];
  int checks = 0, failures = 0;

  burst_manager #(.BankWords(Words), .RowLsb(RowLsb)) dut (.clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(rq_v), .req_ready_o(rq_r), .req_i(rq),
    .bank_req_o(b_req), .bank_we_o(b_we), .bank_addr_o(b_addr), .bank_wdata_o(b_wd),
    .bank_be_o(b_be), .bank_rdata_i(b_rd),
    .rsp_valid_o(rs_v), .rsp_ready_i(rs_r), .rsp_o(rs));

  for (genvar j = 0; j < GF; j++) begin : g_bank
    spm_bank #(.Words(Words)) i_bank (.clk_i(clk), .rst_ni(rst_n), .req_i(b_req[j]), .we_i(b_we[j]),
      .addr_i(b_addr[j]), .wdata_i(b_wd[j]), .be_i(b_be[j]), .rdata_o(b_rd[j]));
  end

  function automatic data_t memval(int word);
    return 32'(word) * 32'h01000193 + 32'h77;
  endfunction

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    $display("watchdog: received=%0d pending=%0d v=%b%b%b%b r=%b%b%b%b busy=%b lead=%b hv=%b start=%0d len=%0d rs_v=%b%b%b%b", received, exp_word.size(), rq_v[0], rq_v[1], rq_v[2], rq_v[3], rq_r[0], rq_r[1], rq_r[2], rq_r[3], dut.busy_q, dut.lead_q, dut.head_valid, dut.head.start, dut.head.req.meta.blen, rs_v[0], rs_v[1], rs_v[2], rs_v[3]);
    foreach (exp_word[k]) $display("pending id %0d word %0d len %0d", k, exp_word[k], exp_len[k]);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  bit rand_ready = 0;
  always @(negedge clk) if (rand_ready) for (int j = 0; j < GF; j++) rs_r[j] = ($urandom % 3 != 0);
  int cyc = 0;
  always @(posedge clk) cyc++;

  // Outstanding reads keyed by id (meta.core), with issue cycle.
  int   exp_word [int];
  int   exp_len  [int];
  int   acc_cyc  [int];
  int   received = 0, bursts_seen = 0, max_lat = 0;
  bit   check_lat = 0;

  always @(posedge clk) if (rst_n) begin
    for (int j = 0; j < GF; j++) begin
      if (rq_v[j] && rq_r[j] && !rq[j].we) begin
        exp_word[rq[j].meta.core] = int'(rq[j].addr >> 2);
        exp_len[rq[j].meta.core]  = int'(rq[j].meta.blen);
        acc_cyc[rq[j].meta.core]  = cyc;
      end
      if (rs_v[j] && rs_r[j]) begin
        int id, w, l;
        id = int'(rs[j].meta.core);
        check(exp_word.exists(id), "response for an issued read");
        if (exp_word.exists(id)) begin
          w = exp_word[id]; l = exp_len[id];
          check(int'(w % GF) == j, "answered on the slot of the first bank");
          for (int k = 0; k < l; k++)
            check(rs[j].data[k] == memval(w + k), $sformatf("word %0d of id %0d", k, id));
          if (l > 1) bursts_seen++;
          if (check_lat) check(cyc - acc_cyc[id] == 1, $sformatf("latency %0d", cyc - acc_cyc[id]));
          exp_word.delete(id);
          received++;
        end
      end
    end
  end

  task automatic drive(int port, bit we, int word, int len, int id);
    rq_v[port] = 1;
    rq[port] = '0;
    rq[port].addr = addr_t'(word * 4);
    rq[port].we = we;
    rq[port].wdata = memval(word);
    rq[port].be = 4'hf;
    rq[port].meta.core = 4'(id);
    rq[port].meta.blen = len_t'(len);
  endtask

  task automatic wait_taken();
    bit done [GF];
    int left;
    left = 0;
    for (int j = 0; j < GF; j++) begin done[j] = !rq_v[j]; if (rq_v[j]) left++; end
    while (left > 0) begin
      @(posedge clk);
      for (int j = 0; j < GF; j++) if (!done[j] && rq_r[j]) begin done[j] = 1; left--; end
      @(negedge clk);
      for (int j = 0; j < GF; j++) if (done[j]) rq_v[j] = 0;
    end
  endtask

  initial begin
    for (int j = 0; j < GF; j++) begin rq_v[j] = 0; rq[j] = '0; rs_r[j] = 1; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Fill all banks with narrow writes, GF in parallel.
    for (int r = 0; r < Words; r++) begin
      @(negedge clk);
      for (int j = 0; j < GF; j++) drive(j, 1, r * GF + j, 1, 0);
      wait_taken();
    end
    check_lat = 1;
    // Full burst, answered after one cycle.
    @(negedge clk); drive(0, 0, 8, GF, 1); #1;
    check(rq_r[0] && b_req[0] && b_req[1] && b_req[2] && b_req[3], "burst hits all banks at once");
    wait_taken();
    repeat (3) @(negedge clk);
    check(received == 1, "burst answered once");
    // Narrow reads in parallel.
    @(negedge clk); for (int j = 0; j < GF; j++) drive(j, 0, 20 + j, 1, 2 + j); #1;
    for (int j = 0; j < GF; j++) check(rq_r[j], "parallel narrow");
    wait_taken();
    repeat (3) @(negedge clk);
    check(received == 1 + GF, "parallel narrow answered");
    // Two bursts together: ports 0 and 2, length 2 each.
    @(negedge clk); drive(0, 0, 32, 2, 6); drive(2, 0, 34, 2, 7); #1;
    check(rq_r[0] != rq_r[2], "one burst admitted per cycle");
    check_lat = 0;
    wait_taken();
    repeat (4) @(negedge clk);
    check(received == 3 + GF, "both bursts answered");
    // Random reads, random back-pressure.
    rand_ready = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      begin
        int id;
        id = 8 + (n % 8);
        if (!exp_word.exists(id)) begin
          int j, len, row;
          j = $urandom % GF;
          len = ($urandom % 2) ? 1 : 1 + ($urandom % (GF - j));
          row = $urandom % Words;
          drive(j, 0, row * GF + j, len, id);
          fork begin
            automatic int jj = j;
            @(posedge clk);
            while (!rq_r[jj]) @(posedge clk);
            @(negedge clk); rq_v[jj] = 0;
          end join_none
          while (rq_v[j]) @(negedge clk);
        end
      end
    end
    rand_ready = 0;
    for (int j = 0; j < GF; j++) rs_r[j] = 1;
    repeat (10) @(negedge clk);
    check(exp_word.size() == 0, "all reads answered");
    check(bursts_seen > 50, "bursts exercised");
    $display("received=%0d bursts=%0d", received, bursts_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
