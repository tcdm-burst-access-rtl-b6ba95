// Testbench of burst_sender.  A reference memory (value = function of the
// address) answers the TCDM requests after random delays and in random
// order.  Checks: (1) four aligned consecutive loads leave as one burst of 4
// on lane 0 in the cycle they are offered; (2) an unaligned group is cut at
// the GF boundary into two bursts; (3) stores and scattered loads stay
// narrow; (4) under random traffic every lane gets the right data in order.
module tb_burst_sender;
  import tcdm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic      vq_v [K], vq_r [K];
  core_req_t vq   [K];
  logic      vs_v [K], vs_r [K];
  data_t     vs_d [K];
  logic      tq_v [K], tq_r [K];
  tcdm_req_t tq   [K];
  logic      ts_v [K], ts_r [K];
  tcdm_rsp_t ts   [K];
  int checks = 0, failures = 0;

  burst_sender dut (.clk_i(clk), .rst_ni(rst_n), .group_id_i(4'd1), .tile_id_i(4'd2), .core_id_i(4'd3),
    .vlsu_req_valid_i(vq_v), .vlsu_req_ready_o(vq_r), .vlsu_req_i(vq),
    .vlsu_rsp_valid_o(vs_v), .vlsu_rsp_ready_i(vs_r), .vlsu_rsp_data_o(vs_d),
    .tcdm_req_valid_o(tq_v), .tcdm_req_ready_i(tq_r), .tcdm_req_o(tq),
    .tcdm_rsp_valid_i(ts_v), .tcdm_rsp_ready_o(ts_r), .tcdm_rsp_i(ts));

  function automatic data_t memval(addr_t a);
    return a * 32'h9E3779B1 ^ 32'h5A5A0000;
  endfunction

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Outstanding TCDM loads, answered by the responder below.
  tcdm_req_t pend [$];
  data_t     expq [K][$];
  int        bursts = 0, narrows = 0, rsp_cnt = 0;
  bit        rsp_on = 1;
  bit dbg = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Downstream: accept requests (random ready), answer loads later.
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < K; i++) if (tq_v[i] && tq_r[i]) begin
      check(tq[i].meta.group == 1 && tq[i].meta.tile == 2 && tq[i].meta.core == 3 && tq[i].meta.lane == 4'(i), "meta ids");
      if (tq[i].meta.blen > 1) bursts++; else narrows++;
      if (dbg) $display("%0t req lane %0d a %h we %0d blen %0d tags %h", $time, i, tq[i].addr, tq[i].we, tq[i].meta.blen, tq[i].meta.tags);
      if (!tq[i].we) pend.push_back(tq[i]);
    end
    for (int i = 0; i < K; i++) if (ts_v[i] && ts_r[i]) begin
      for (int k = 0; k < pend.size(); k++)
        if (pend[k].meta == ts[i].meta && pend[k].addr == ts[i].meta.tags * 0 + pend[k].addr) begin
          if (pend[k] == cur[i]) begin pend.delete(k); break; end
        end
      rsp_cnt++; if (dbg) $display("%0t rsp in %0d lane %0d blen %0d tags %h", $time, i, ts[i].meta.lane, ts[i].meta.blen, ts[i].meta.tags);
    end
  end
  tcdm_req_t cur [K];
  always @(negedge clk) begin
    for (int i = 0; i < K; i++) begin
      if (!(ts_v[i] && !ts_r[i] && rsp_on) || !rst_n) begin
        ts_v[i] = 0;
        if (rsp_on && rst_n && $urandom % 2)
          foreach (pend[k]) if (int'(pend[k].meta.lane) == i && !ts_v[i]) begin
            bit dup = 0;
            for (int j = 0; j < i; j++) if (ts_v[j] && cur[j] == pend[k]) dup = 1;
            if (!dup && ($urandom % 2 || k == 0)) begin
              ts_v[i] = 1; cur[i] = pend[k];
              ts[i].meta = pend[k].meta;
              for (int w = 0; w < GF; w++) ts[i].data[w] = memval(pend[k].addr + addr_t'(4 * w));
            end
          end
      end
    end
  end

  // Random downstream readiness.
  bit all_ready = 0;
  always @(negedge clk) for (int i = 0; i < K; i++) tq_r[i] = all_ready || ($urandom % 3 != 0);

  task automatic offer(addr_t base, int stride, bit we);
    for (int i = 0; i < K; i++) begin
      vq_v[i] = 1; vq[i].addr = base + addr_t'(stride * i); vq[i].we = we;
      vq[i].wdata = $urandom; vq[i].be = 4'hf;
    end
  endtask

  // Drive one group of K lane requests; lanes retire independently.
  task automatic issue(addr_t base, int stride, bit we);
    bit done [K];
    int left;
    offer(base, stride, we);
    left = K;
    for (int i = 0; i < K; i++) done[i] = 0;
    while (left > 0) begin
      @(posedge clk);
      for (int i = 0; i < K; i++) if (!done[i] && vq_v[i] && vq_r[i]) begin
        done[i] = 1; left--;
        if (!we) expq[i].push_back(memval(vq[i].addr));
      end
      @(negedge clk);
      for (int i = 0; i < K; i++) if (done[i]) vq_v[i] = 0;
    end
  endtask

  // Collect VLSU responses.
  always @(negedge clk) for (int i = 0; i < K; i++) vs_r[i] = ($urandom % 4 != 0);
  always @(posedge clk) if (rst_n)
    for (int i = 0; i < K; i++) if (vs_v[i] && vs_r[i]) begin
      check(expq[i].size() > 0 && vs_d[i] == expq[i][0], $sformatf("lane %0d data", i));
      if (expq[i].size() > 0) void'(expq[i].pop_front());
    end

  initial begin
    for (int i = 0; i < K; i++) begin vq_v[i] = 0; vq[i] = '0; ts_v[i] = 0; ts[i] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // (1) aligned unit-stride load: one burst of K words on lane 0.
    rsp_on = 0; all_ready = 1;
    @(negedge clk); offer(32'h100, 4, 0); #1;
    check(tq_v[0] && tq[0].meta.blen == len_t'(K) && !tq_v[1] && !tq_v[2] && !tq_v[3], "aligned burst");
    check(vq_r[0] && vq_r[1] && vq_r[2] && vq_r[3], "all lanes taken together");
    for (int i = 0; i < K; i++) expq[i].push_back(memval(32'h100 + 4 * i));
    @(negedge clk); for (int i = 0; i < K; i++) vq_v[i] = 0;
    // (2) unaligned: start at word 1 -> bursts of 3 (lane 0) and 1 (lane 3).
    @(negedge clk); offer(32'h204, 4, 0); #1;
    check(tq_v[0] && tq[0].meta.blen == 3 && !tq_v[1] && !tq_v[2] && tq_v[3] && tq[3].meta.blen == 1, "split at GF boundary");
    for (int i = 0; i < K; i++) expq[i].push_back(memval(32'h204 + 4 * i));
    @(negedge clk); for (int i = 0; i < K; i++) vq_v[i] = 0;
    // (3) strided loads and stores stay narrow.
    @(negedge clk); offer(32'h300, 8, 0); #1;
    check(tq_v[0] && tq_v[1] && tq_v[2] && tq_v[3] && tq[0].meta.blen == 1, "strided narrow");
    for (int i = 0; i < K; i++) expq[i].push_back(memval(32'h300 + 8 * i));
    @(negedge clk); offer(32'h400, 4, 1); #1;
    check(tq_v[0] && tq_v[1] && tq_v[2] && tq_v[3] && tq[1].meta.blen == 1 && tq[1].we, "stores narrow");
    @(negedge clk); for (int i = 0; i < K; i++) vq_v[i] = 0;
    rsp_on = 1; all_ready = 0;
    // (4) random traffic.
    for (int n = 0; n < 300; n++) begin
      int kind;
      kind = $urandom % 4;
      case (kind)
        0, 1: issue(addr_t'(($urandom % 256) * 4), 4, 0);
        2:    issue(addr_t'(($urandom % 256) * 4), 4 * (2 + $urandom % 3), 0);
        default: issue(addr_t'(($urandom % 256) * 4), 4, 1);
      endcase
    end
    repeat (200) @(posedge clk);
    for (int i = 0; i < K; i++) check(expq[i].size() == 0, $sformatf("lane %0d drained", i));
    check(bursts > 100 && narrows > 100, "both kinds seen");
    $display("bursts=%0d narrow=%0d responses=%0d", bursts, narrows, rsp_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
