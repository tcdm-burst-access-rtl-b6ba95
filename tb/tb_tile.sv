// Testbench of one tile on its own (one tile, one group): four core drivers
// fill the tile's memory with vector stores, probe the load latency, then
// run random vector and scalar loads that are checked word by word.  Counts
// bursts and narrow requests seen at the burst senders and requires both,
// and requires the one-cycle tile-local round trip.
module tb_tile;
  import tcdm_pkg::*;
  localparam int NC = 4, NB = 16, BW = 16;
  localparam int MemWords = NB * BW;
  logic clk = 0, rst_n = 0;
  logic      vq_v [NC][K], vq_r [NC][K], vs_v [NC][K], vs_r [NC][K];
  core_req_t vq   [NC][K];
  data_t     vs_d [NC][K];
  logic      sq_v [NC], sq_r [NC], ss_v [NC], ss_r [NC];
  core_req_t sq   [NC];
  data_t     ss_d [NC];
  logic      ro_v [1], ro_r [1], ri_v [1], ri_r [1], so_v [1], so_r [1], si_v [1], si_r [1];
  tcdm_req_t ro [1], ri [1];
  tcdm_rsp_t so [1], si [1];
  logic [1:0] phase = 0;
  addr_t probe_addr = 0;
  logic done [NC];
  int lat [NC], chk [NC], fl [NC];
  int checks = 0, failures = 0;

  tile #(.NumCoresPerTile(NC), .NumBanksPerTile(NB), .NumTilesPerGroup(1), .NumGroups(1),
         .BankWords(BW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .group_id_i(4'd0), .tile_id_i(4'd0),
    .vlsu_req_valid_i(vq_v), .vlsu_req_ready_o(vq_r), .vlsu_req_i(vq),
    .vlsu_rsp_valid_o(vs_v), .vlsu_rsp_ready_i(vs_r), .vlsu_rsp_data_o(vs_d),
    .scalar_req_valid_i(sq_v), .scalar_req_ready_o(sq_r), .scalar_req_i(sq),
    .scalar_rsp_valid_o(ss_v), .scalar_rsp_ready_i(ss_r), .scalar_rsp_data_o(ss_d),
    .rreq_out_valid_o(ro_v), .rreq_out_ready_i(ro_r), .rreq_out_o(ro),
    .rreq_in_valid_i(ri_v), .rreq_in_ready_o(ri_r), .rreq_in_i(ri),
    .rrsp_out_valid_o(so_v), .rrsp_out_ready_i(so_r), .rrsp_out_o(so),
    .rrsp_in_valid_i(si_v), .rrsp_in_ready_o(si_r), .rrsp_in_i(si));

  assign ro_r[0] = 1'b1;
  assign ri_v[0] = 1'b0;
  assign ri[0]   = '0;
  assign so_r[0] = 1'b1;
  assign si_v[0] = 1'b0;
  assign si[0]   = '0;

  for (genvar c = 0; c < NC; c++) begin : g_drv
    core_driver #(.CoreId(c), .NumCores(NC), .MemWords(MemWords), .NumOps(150)) i_drv (
      .clk_i(clk), .rst_ni(rst_n), .phase_i(c == 0 || phase != 3 ? phase : 2'd0),
      .probe_addr_i(probe_addr), .done_o(done[c]),
      .probe_lat_o(lat[c]), .checks_o(chk[c]), .failures_o(fl[c]),
      .vq_v(vq_v[c]), .vq_r(vq_r[c]), .vq(vq[c]), .vs_v(vs_v[c]), .vs_r(vs_r[c]), .vs_d(vs_d[c]),
      .sq_v(sq_v[c]), .sq_r(sq_r[c]), .sq(sq[c]), .ss_v(ss_v[c]), .ss_r(ss_r[c]), .ss_d(ss_d[c]));
  end

  int n_burst = 0, n_narrow = 0, n_remote = 0;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) for (int l = 0; l < K; l++) begin
      if (dut.rq_valid[c*(K+1)+l] && dut.rq_ready[c*(K+1)+l]) begin
        if (dut.rq[c*(K+1)+l].meta.blen > 1) n_burst++; else n_narrow++;
      end
    end
    if (ro_v[0]) n_remote++;
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
    run_phase(1, NC);
    probe_addr = 32'h40;
    run_phase(3, 1);
    checks++;
    if (lat[0] != 1) begin failures++; $display("FAIL local latency %0d", lat[0]); end
    run_phase(2, NC);
    for (int c = 0; c < NC; c++) begin checks += chk[c]; failures += fl[c]; end
    checks += 3;
    if (n_burst == 0) begin failures++; $display("FAIL no bursts"); end
    if (n_narrow == 0) begin failures++; $display("FAIL no narrow requests"); end
    if (n_remote != 0) begin failures++; $display("FAIL request left a single-tile cluster"); end
    $display("bursts=%0d narrow=%0d local latency=%0d", n_burst, n_narrow, lat[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
