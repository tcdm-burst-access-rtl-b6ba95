// Testbench of one group of four tiles (a cluster of a single group): 16
// core drivers fill the memory with vector stores, core 0 of tile 0 probes
// the load latency to its own tile (1 cycle) and to another tile (3
// cycles), then all run random vector and scalar loads checked word by word.
// Counts bursts, narrow requests and requests crossing to other tiles, and
// requires each to happen.
module tb_group;
  import tcdm_pkg::*;
  localparam int NT = 4, NC = 4, NB = 16, BW = 16;
  localparam int MemWords = NT * NB * BW;
  logic clk = 0, rst_n = 0;
  logic      vq_v [NT][NC][K], vq_r [NT][NC][K], vs_v [NT][NC][K], vs_r [NT][NC][K];
  core_req_t vq   [NT][NC][K];
  data_t     vs_d [NT][NC][K];
  logic      sq_v [NT][NC], sq_r [NT][NC], ss_v [NT][NC], ss_r [NT][NC];
  core_req_t sq   [NT][NC];
  data_t     ss_d [NT][NC];
  logic      ro_v [1][NT], ro_r [1][NT], ri_v [1][NT], ri_r [1][NT], so_v [1][NT], so_r [1][NT], si_v [1][NT], si_r [1][NT];
  tcdm_req_t ro [1][NT], ri [1][NT];
  tcdm_rsp_t so [1][NT], si [1][NT];
  logic [1:0] phase = 0;
  addr_t probe_addr = 0;
  logic done [NT*NC];
  int lat [NT*NC], chk [NT*NC], fl [NT*NC];
  int checks = 0, failures = 0;

  group #(.NumCoresPerTile(NC), .NumBanksPerTile(NB), .NumTilesPerGroup(NT), .NumGroups(1),
          .BankWords(BW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .group_id_i(4'd0),
    .vlsu_req_valid_i(vq_v), .vlsu_req_ready_o(vq_r), .vlsu_req_i(vq),
    .vlsu_rsp_valid_o(vs_v), .vlsu_rsp_ready_i(vs_r), .vlsu_rsp_data_o(vs_d),
    .scalar_req_valid_i(sq_v), .scalar_req_ready_o(sq_r), .scalar_req_i(sq),
    .scalar_rsp_valid_o(ss_v), .scalar_rsp_ready_i(ss_r), .scalar_rsp_data_o(ss_d),
    .greq_out_valid_o(ro_v), .greq_out_ready_i(ro_r), .greq_out_o(ro),
    .greq_in_valid_i(ri_v), .greq_in_ready_o(ri_r), .greq_in_i(ri),
    .grsp_out_valid_o(so_v), .grsp_out_ready_i(so_r), .grsp_out_o(so),
    .grsp_in_valid_i(si_v), .grsp_in_ready_o(si_r), .grsp_in_i(si));

  for (genvar t = 0; t < NT; t++) begin : g_tie
    assign ro_r[0][t] = 1'b0;
    assign ri_v[0][t] = 1'b0;
    assign ri[0][t]   = '0;
    assign so_r[0][t] = 1'b0;
    assign si_v[0][t] = 1'b0;
    assign si[0][t]   = '0;
  end

  for (genvar t = 0; t < NT; t++) begin : g_t
  for (genvar c = 0; c < NC; c++) begin : g_drv
    core_driver #(.CoreId(t*NC+c), .NumCores(NT*NC), .MemWords(MemWords), .NumOps(100)) i_drv (
      .clk_i(clk), .rst_ni(rst_n), .phase_i((t == 0 && c == 0) || phase != 3 ? phase : 2'd0),
      .probe_addr_i(probe_addr), .done_o(done[t*NC+c]),
      .probe_lat_o(lat[t*NC+c]), .checks_o(chk[t*NC+c]), .failures_o(fl[t*NC+c]),
      .vq_v(vq_v[t][c]), .vq_r(vq_r[t][c]), .vq(vq[t][c]), .vs_v(vs_v[t][c]), .vs_r(vs_r[t][c]), .vs_d(vs_d[t][c]),
      .sq_v(sq_v[t][c]), .sq_r(sq_r[t][c]), .sq(sq[t][c]), .ss_v(ss_v[t][c]), .ss_r(ss_r[t][c]), .ss_d(ss_d[t][c]));
  end
  end

  int n_burst [NT], n_narrow [NT], n_remote [NT];
  for (genvar t = 0; t < NT; t++) begin : g_cnt
    initial begin n_burst[t] = 0; n_narrow[t] = 0; n_remote[t] = 0; end
    always @(posedge clk) if (rst_n) begin
      for (int c = 0; c < NC; c++) for (int l = 0; l < K; l++) begin
        if (dut.g_tile[t].i_tile.rq_valid[c*(K+1)+l] && dut.g_tile[t].i_tile.rq_ready[c*(K+1)+l]) begin
          if (dut.g_tile[t].i_tile.rq[c*(K+1)+l].meta.blen > 1) n_burst[t]++; else n_narrow[t]++;
        end
      end
      if (dut.g_tile[t].i_tile.rreq_out_valid_o[0] && dut.g_tile[t].i_tile.rreq_out_ready_i[0]) n_remote[t]++;
    end
  end
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_phase(logic [1:0] p, int ncores);
    phase = p;
    for (int c = 0; c < ncores; c++) while (!done[c]) @(negedge clk);
    @(negedge clk); phase = 0;
    repeat (20) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    run_phase(1, NT*NC);
    probe_addr = 32'h0;
    run_phase(3, 1);
    checks++;
    if (lat[0] != 1) begin failures++; $display("FAIL local latency %0d", lat[0]); end
    probe_addr = 32'h40;
    run_phase(3, 1);
    checks++;
    if (lat[0] != 3) begin failures++; $display("FAIL remote-tile latency %0d", lat[0]); end
    run_phase(2, NT*NC);
    begin
      int nb, nn, nr;
      nb = 0; nn = 0; nr = 0;
      for (int c = 0; c < NT*NC; c++) begin checks += chk[c]; failures += fl[c]; end
      for (int t = 0; t < NT; t++) begin nb += n_burst[t]; nn += n_narrow[t]; nr += n_remote[t]; end
      checks += 3;
      if (nb == 0) begin failures++; $display("FAIL no bursts"); end
      if (nn == 0) begin failures++; $display("FAIL no narrow requests"); end
      if (nr == 0) begin failures++; $display("FAIL no remote-tile requests"); end
      $display("bursts=%0d narrow=%0d remote-tile=%0d", nb, nn, nr);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
