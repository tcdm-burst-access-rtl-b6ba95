// End-to-end testbench of the cluster at its default size (4 groups x 4
// tiles x 4 cores, K = 4, GF = 4, 256 banks of 1 KiB).
//
// 64 core drivers fill the low 4096 words of L1 (16 rows of every bank)
// with vector stores, core 0 probes the round-trip load latency to its own
// tile, another tile of its group and another group (1, 3 and 5 cycles),
// then all cores run random vector loads (aligned, unaligned and strided)
// and scalar loads, every word checked.  It counts how often each mechanism
// of the design occurred and fails if one never did: full bursts, bursts cut
// at a GF boundary, narrow requests, requests to other tiles and to other
// groups, bursts waiting in a burst manager's FIFO, bursts meeting at one
// burst manager in the same cycle, two responses colliding at a burst
// sender, loads returning out of order into a reorder buffer, a full
// reorder buffer, and contention at a remote request port.
module tb_cluster;
  import tcdm_pkg::*;
  localparam int NG = DefNumGroups, NT = DefNumTilesPerGroup, NC = DefNumCoresPerTile;
  localparam int NCORE = NG * NT * NC;
  localparam int MemWords = 4096;
  logic clk = 0, rst_n = 0;
  logic      vq_v [NG][NT][NC][K], vq_r [NG][NT][NC][K], vs_v [NG][NT][NC][K], vs_r [NG][NT][NC][K];
  core_req_t vq   [NG][NT][NC][K];
  data_t     vs_d [NG][NT][NC][K];
  logic      sq_v [NG][NT][NC], sq_r [NG][NT][NC], ss_v [NG][NT][NC], ss_r [NG][NT][NC];
  core_req_t sq   [NG][NT][NC];
  data_t     ss_d [NG][NT][NC];
  logic [1:0] phase = 0;
  addr_t probe_addr = 0;
  logic done [NCORE];
  int lat [NCORE], chk [NCORE], fl [NCORE];
  int checks = 0, failures = 0;

  cluster dut (
    .clk_i(clk), .rst_ni(rst_n),
    .vlsu_req_valid_i(vq_v), .vlsu_req_ready_o(vq_r), .vlsu_req_i(vq),
    .vlsu_rsp_valid_o(vs_v), .vlsu_rsp_ready_i(vs_r), .vlsu_rsp_data_o(vs_d),
    .scalar_req_valid_i(sq_v), .scalar_req_ready_o(sq_r), .scalar_req_i(sq),
    .scalar_rsp_valid_o(ss_v), .scalar_rsp_ready_i(ss_r), .scalar_rsp_data_o(ss_d));

  for (genvar g = 0; g < NG; g++) begin : g_g
  for (genvar t = 0; t < NT; t++) begin : g_t
  for (genvar c = 0; c < NC; c++) begin : g_drv
    localparam int Id = (g * NT + t) * NC + c;
    core_driver #(.CoreId(Id), .NumCores(NCORE), .MemWords(MemWords), .NumOps(40)) i_drv (
      .clk_i(clk), .rst_ni(rst_n), .phase_i(Id == 0 || phase != 3 ? phase : 2'd0),
      .probe_addr_i(probe_addr), .done_o(done[Id]),
      .probe_lat_o(lat[Id]), .checks_o(chk[Id]), .failures_o(fl[Id]),
      .vq_v(vq_v[g][t][c]), .vq_r(vq_r[g][t][c]), .vq(vq[g][t][c]),
      .vs_v(vs_v[g][t][c]), .vs_r(vs_r[g][t][c]), .vs_d(vs_d[g][t][c]),
      .sq_v(sq_v[g][t][c]), .sq_r(sq_r[g][t][c]), .sq(sq[g][t][c]),
      .ss_v(ss_v[g][t][c]), .ss_r(ss_r[g][t][c]), .ss_d(ss_d[g][t][c]));
  end
  end
  end

  // ---------------- mechanism counters, one set per tile ----------------
  typedef enum int {
    MFullBurst, MCutBurst, MNarrow, MRemoteTile, MRemoteGroup, MFifoWait, MBurstMeet,
    MRspCollide, MRobReorder, MRobFull, MPortContention, MNum
  } mech_e;
  int cnt [NG*NT][MNum];

  for (genvar g = 0; g < NG; g++) begin : g_cg
  for (genvar t = 0; t < NT; t++) begin : g_ct
    localparam int Tn = g * NT + t;
    initial for (int m = 0; m < MNum; m++) cnt[Tn][m] = 0;
    always @(posedge clk) if (rst_n) begin
      for (int r = 0; r < NC * (K + 1); r++)
        if (dut.g_group[g].i_group.g_tile[t].i_tile.rq_valid[r] &&
            dut.g_group[g].i_group.g_tile[t].i_tile.rq_ready[r]) begin
          if (dut.g_group[g].i_group.g_tile[t].i_tile.rq[r].meta.blen == len_t'(K)) cnt[Tn][MFullBurst]++;
          else if (dut.g_group[g].i_group.g_tile[t].i_tile.rq[r].meta.blen > 1) cnt[Tn][MCutBurst]++;
          else cnt[Tn][MNarrow]++;
        end
      if (dut.g_group[g].i_group.g_tile[t].i_tile.rreq_out_valid_o[0] &&
          dut.g_group[g].i_group.g_tile[t].i_tile.rreq_out_ready_i[0]) cnt[Tn][MRemoteTile]++;
      for (int p = 1; p < NG; p++)
        if (dut.g_group[g].i_group.g_tile[t].i_tile.rreq_out_valid_o[p] &&
            dut.g_group[g].i_group.g_tile[t].i_tile.rreq_out_ready_i[p]) cnt[Tn][MRemoteGroup]++;
      for (int r = 0; r < NC * (K + 1); r++)
        if (dut.g_group[g].i_group.g_tile[t].i_tile.rreq_valid[r] &&
            !dut.g_group[g].i_group.g_tile[t].i_tile.rreq_ready[r]) cnt[Tn][MPortContention]++;
    end
    for (genvar m = 0; m < DefNumBanksPerTile / GF; m++) begin : g_cm
      always @(posedge clk) if (rst_n) begin
        if (dut.g_group[g].i_group.g_tile[t].i_tile.g_bm[m].i_burst_manager.i_fifo.cnt_q != 0)
          cnt[Tn][MFifoWait]++;
        if ($countones(dut.g_group[g].i_group.g_tile[t].i_tile.g_bm[m].i_burst_manager.is_burst) > 1)
          cnt[Tn][MBurstMeet]++;
      end
    end
    for (genvar c = 0; c < NC; c++) begin : g_cc
      for (genvar l = 0; l < K; l++) begin : g_cl
        always @(posedge clk) if (rst_n) begin
          if (dut.g_group[g].i_group.g_tile[t].i_tile.g_core[c].i_burst_sender.tcdm_rsp_valid_i[l] &&
              !dut.g_group[g].i_group.g_tile[t].i_tile.g_core[c].i_burst_sender.tcdm_rsp_ready_o[l])
            cnt[Tn][MRspCollide]++;
          if (dut.g_group[g].i_group.g_tile[t].i_tile.g_core[c].i_burst_sender.rob_wr[l] &&
              dut.g_group[g].i_group.g_tile[t].i_tile.g_core[c].i_burst_sender.rob_wtag[l] !=
              dut.g_group[g].i_group.g_tile[t].i_tile.g_core[c].i_burst_sender.g_rob[l].i_rob.head_q)
            cnt[Tn][MRobReorder]++;
          if (dut.g_group[g].i_group.g_tile[t].i_tile.g_core[c].i_burst_sender.vlsu_req_valid_i[l] &&
              !dut.g_group[g].i_group.g_tile[t].i_tile.g_core[c].i_burst_sender.rob_ready[l])
            cnt[Tn][MRobFull]++;
        end
      end
    end
  end
  end

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_phase(logic [1:0] p, int ncores);
    phase = p;
    for (int c = 0; c < ncores; c++) while (!done[c]) @(negedge clk);
    @(negedge clk); phase = 0;
    repeat (30) @(negedge clk);
  endtask

  task automatic probe(addr_t a, int exp, string what);
    probe_addr = a;
    run_phase(3, 1);
    checks++;
    if (lat[0] != exp) begin failures++; $display("FAIL %s latency %0d, expected %0d", what, lat[0], exp); end
    else $display("%s round trip: %0d cycles", what, lat[0]);
  endtask

  initial begin
    string names [MNum];
    names = '{"full bursts", "bursts cut at GF boundary", "narrow requests", "requests to other tiles",
              "requests to other groups", "cycles with a burst waiting in a FIFO",
              "bursts meeting at one burst manager", "response collisions at a burst sender",
              "out-of-order reorder-buffer writes", "reorder-buffer-full stalls",
              "stalls at the remote request interconnect"};
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    run_phase(1, NCORE);
    // Word w lives in bank w % 16 of tile (w / 16) % 4 of group (w / 64) % 4.
    probe(32'h0000_0000, 1, "own tile");
    probe(32'h0000_0040, 3, "other tile, own group");
    probe(32'h0000_0100, 5, "other group");
    run_phase(2, NCORE);
    for (int c = 0; c < NCORE; c++) begin checks += chk[c]; failures += fl[c]; end
    for (int m = 0; m < MNum; m++) begin
      int sum;
      sum = 0;
      for (int t = 0; t < NG * NT; t++) sum += cnt[t][m];
      $display("%-45s %0d", names[m], sum);
      checks++;
      if (sum == 0) begin failures++; $display("FAIL mechanism never seen: %s", names[m]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
