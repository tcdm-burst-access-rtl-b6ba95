// Tile: the lowest level of the cluster hierarchy.
//
// Holds NumCoresPerTile core complexes' memory ports (K vector lanes behind
// a burst sender, plus one scalar port each), NumBanksPerTile SPM banks
// grouped GF at a time behind burst managers, and four crossbars:
//   * local request interconnect: requesters of this tile and the remote
//     request inputs -> bank ports (by bank index);
//   * remote request interconnect: requesters of this tile -> NumGroups
//     remote request outputs;
//   * local response interconnect: widened bank responses -> requesters of
//     this tile or remote response outputs;
//   * remote response interconnect: remote response inputs -> requesters.
// A requester's response from the local and from the remote response
// interconnect are merged by a two-input round-robin multiplexer.  The
// scalar port gets a reorder buffer of its own so that its loads, too,
// return in order although a local bank answers sooner than a remote one.
//
// Address map: the L1 is word-interleaved over all banks of the cluster.
// Byte address bits above the byte offset select, in order, the bank in the
// tile, the tile in the group, the group, and the row in the bank.
// Remote port p (0..NumGroups-1): port 0 reaches the other tiles of this
// tile's group; port p > 0 reaches group (group_id + p) mod NumGroups, for
// requests and responses alike.  Requests flow out of the tile on one 32-bit
// data channel (with a burst length); responses carry GF words.
//
// Timing: the tile adds no register of its own; a tile-local load is
// answered one cycle after it is issued (the bank's read cycle).
module tile
  import tcdm_pkg::*;
#(
  parameter int unsigned NumCoresPerTile  = tcdm_pkg::DefNumCoresPerTile,
  parameter int unsigned NumBanksPerTile  = tcdm_pkg::DefNumBanksPerTile,
  parameter int unsigned NumTilesPerGroup = tcdm_pkg::DefNumTilesPerGroup,
  parameter int unsigned NumGroups        = tcdm_pkg::DefNumGroups,
  parameter int unsigned BankWords        = tcdm_pkg::DefBankWords
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic [3:0] group_id_i,
  input  logic [3:0] tile_id_i,
  // Vector load/store lanes of each core.
  input  logic       vlsu_req_valid_i [NumCoresPerTile][K],
  output logic       vlsu_req_ready_o [NumCoresPerTile][K],
  input  core_req_t  vlsu_req_i       [NumCoresPerTile][K],
  output logic       vlsu_rsp_valid_o [NumCoresPerTile][K],
  input  logic       vlsu_rsp_ready_i [NumCoresPerTile][K],
  output data_t      vlsu_rsp_data_o  [NumCoresPerTile][K],
  // Scalar core port of each core.
  input  logic       scalar_req_valid_i [NumCoresPerTile],
  output logic       scalar_req_ready_o [NumCoresPerTile],
  input  core_req_t  scalar_req_i       [NumCoresPerTile],
  output logic       scalar_rsp_valid_o [NumCoresPerTile],
  input  logic       scalar_rsp_ready_i [NumCoresPerTile],
  output data_t      scalar_rsp_data_o  [NumCoresPerTile],
  // Hierarchical ports.
  output logic       rreq_out_valid_o [NumGroups],
  input  logic       rreq_out_ready_i [NumGroups],
  output tcdm_req_t  rreq_out_o       [NumGroups],
  input  logic       rreq_in_valid_i  [NumGroups],
  output logic       rreq_in_ready_o  [NumGroups],
  input  tcdm_req_t  rreq_in_i        [NumGroups],
  output logic       rrsp_out_valid_o [NumGroups],
  input  logic       rrsp_out_ready_i [NumGroups],
  output tcdm_rsp_t  rrsp_out_o       [NumGroups],
  input  logic       rrsp_in_valid_i  [NumGroups],
  output logic       rrsp_in_ready_o  [NumGroups],
  input  tcdm_rsp_t  rrsp_in_i        [NumGroups]
);
  localparam int unsigned NC    = NumCoresPerTile;
  localparam int unsigned NB    = NumBanksPerTile;
  localparam int unsigned NG    = NumGroups;
  localparam int unsigned NR    = NC * (K + 1);       // requesters
  localparam int unsigned NBM   = NB / GF;            // burst managers
  localparam int unsigned RowW  = $clog2(BankWords);
  localparam int unsigned RowLsb = 2 + $clog2(NB * NumTilesPerGroup * NumGroups);
  localparam int unsigned BankSelW = (NB > 1) ? $clog2(NB) : 1;
  localparam int unsigned GrpSelW  = (NG > 1) ? $clog2(NG) : 1;
  localparam int unsigned ReqSelW  = (NR > 1) ? $clog2(NR) : 1;
  localparam int unsigned LrspSelW = $clog2(NR + NG);

  function automatic int unsigned word_of(addr_t a);
    return int'(a >> 2);
  endfunction
  function automatic logic [3:0] dst_tile(addr_t a);
    return 4'((word_of(a) / NB) % NumTilesPerGroup);
  endfunction
  function automatic logic [3:0] dst_group(addr_t a);
    return 4'((word_of(a) / (NB * NumTilesPerGroup)) % NG);
  endfunction
  // Remote port towards a group: 0 for this group, else the group offset.
  function automatic logic [GrpSelW-1:0] port_of(logic [3:0] g);
    return GrpSelW'((int'(g) + NG - int'(group_id_i)) % NG);
  endfunction

  // ---------------- requesters ----------------
  logic      rq_valid [NR];
  logic      rq_ready [NR];
  tcdm_req_t rq       [NR];
  logic      rs_valid [NR];
  logic      rs_ready [NR];
  tcdm_rsp_t rs       [NR];

  for (genvar c = 0; c < NC; c++) begin : g_core
    logic      bs_req_valid [K];
    logic      bs_req_ready [K];
    tcdm_req_t bs_req       [K];
    logic      bs_rsp_valid [K];
    logic      bs_rsp_ready [K];
    tcdm_rsp_t bs_rsp       [K];

    burst_sender i_burst_sender (
      .clk_i, .rst_ni,
      .group_id_i, .tile_id_i,
      .core_id_i       (4'(c)),
      .vlsu_req_valid_i(vlsu_req_valid_i[c]),
      .vlsu_req_ready_o(vlsu_req_ready_o[c]),
      .vlsu_req_i      (vlsu_req_i[c]),
      .vlsu_rsp_valid_o(vlsu_rsp_valid_o[c]),
      .vlsu_rsp_ready_i(vlsu_rsp_ready_i[c]),
      .vlsu_rsp_data_o (vlsu_rsp_data_o[c]),
      .tcdm_req_valid_o(bs_req_valid),
      .tcdm_req_ready_i(bs_req_ready),
      .tcdm_req_o      (bs_req),
      .tcdm_rsp_valid_i(bs_rsp_valid),
      .tcdm_rsp_ready_o(bs_rsp_ready),
      .tcdm_rsp_i      (bs_rsp)
    );

    for (genvar l = 0; l < K; l++) begin : g_lane
      assign rq_valid[c*(K+1)+l]     = bs_req_valid[l];
      assign bs_req_ready[l]         = rq_ready[c*(K+1)+l];
      assign rq[c*(K+1)+l]           = bs_req[l];
      assign bs_rsp_valid[l]         = rs_valid[c*(K+1)+l];
      assign rs_ready[c*(K+1)+l]     = bs_rsp_ready[l];
      assign bs_rsp[l]               = rs[c*(K+1)+l];
    end

    // Scalar port: always narrow.  A reorder buffer returns its loads in
    // order, as the VLSU lanes' buffers do.
    logic sc_alloc, sc_alloc_ready;
    tag_t sc_tag;
    assign sc_alloc = scalar_req_valid_i[c] && !scalar_req_i[c].we && rq_ready[c*(K+1)+K];

    vlsu_rob #(.Depth(RobDepth)) i_scalar_rob (
      .clk_i, .rst_ni,
      .alloc_valid_i(sc_alloc),
      .alloc_ready_o(sc_alloc_ready),
      .alloc_tag_o  (sc_tag),
      .wr_valid_i   (rs_valid[c*(K+1)+K]),
      .wr_tag_i     (rs[c*(K+1)+K].meta.tags[0]),
      .wr_data_i    (rs[c*(K+1)+K].data[0]),
      .out_valid_o  (scalar_rsp_valid_o[c]),
      .out_ready_i  (scalar_rsp_ready_i[c]),
      .out_data_o   (scalar_rsp_data_o[c])
    );

    always_comb begin
      rq_valid[c*(K+1)+K]            = scalar_req_valid_i[c] &&
                                       (scalar_req_i[c].we || sc_alloc_ready);
      scalar_req_ready_o[c]          = rq_ready[c*(K+1)+K] &&
                                       (scalar_req_i[c].we || sc_alloc_ready);
      rq[c*(K+1)+K].addr             = scalar_req_i[c].addr;
      rq[c*(K+1)+K].we               = scalar_req_i[c].we;
      rq[c*(K+1)+K].wdata            = scalar_req_i[c].wdata;
      rq[c*(K+1)+K].be               = scalar_req_i[c].be;
      rq[c*(K+1)+K].meta             = '0;
      rq[c*(K+1)+K].meta.group       = group_id_i;
      rq[c*(K+1)+K].meta.tile        = tile_id_i;
      rq[c*(K+1)+K].meta.core        = 4'(c);
      rq[c*(K+1)+K].meta.lane        = ScalarLane;
      rq[c*(K+1)+K].meta.blen        = len_t'(1);
      rq[c*(K+1)+K].meta.tags[0]     = sc_tag;
    end
    // The reorder buffer always has room for a response it reserved.
    assign rs_ready[c*(K+1)+K] = 1'b1;
  end

  // ---------------- request demultiplexers ----------------
  logic                lreq_valid [NR+NG];
  logic                lreq_ready [NR+NG];
  tcdm_req_t           lreq       [NR+NG];
  logic [BankSelW-1:0] lreq_sel   [NR+NG];
  logic                rreq_valid [NR];
  logic                rreq_ready [NR];
  logic [GrpSelW-1:0]  rreq_sel   [NR];
  logic                is_local   [NR];

  always_comb begin
    for (int r = 0; r < NR; r++) begin
      is_local[r]   = dst_group(rq[r].addr) == group_id_i && dst_tile(rq[r].addr) == tile_id_i;
      lreq_valid[r] = rq_valid[r] && is_local[r];
      lreq[r]       = rq[r];
      lreq_sel[r]   = BankSelW'(word_of(rq[r].addr) % NB);
      rreq_valid[r] = rq_valid[r] && !is_local[r];
      rreq_sel[r]   = port_of(dst_group(rq[r].addr));
    end
    for (int p = 0; p < NG; p++) begin
      lreq_valid[NR+p] = rreq_in_valid_i[p];
      lreq[NR+p]       = rreq_in_i[p];
      lreq_sel[NR+p]   = BankSelW'(word_of(rreq_in_i[p].addr) % NB);
    end
  end

  always_comb begin
    for (int r = 0; r < NR; r++) rq_ready[r] = is_local[r] ? lreq_ready[r] : rreq_ready[r];
    for (int p = 0; p < NG; p++) rreq_in_ready_o[p] = lreq_ready[NR+p];
  end

  // ---------------- interconnects ----------------
  logic      bank_in_valid [NB];
  logic      bank_in_ready [NB];
  tcdm_req_t bank_in       [NB];

  tcdm_xbar #(.NumIn(NR+NG), .NumOut(NB), .T(tcdm_req_t)) i_local_req_xbar (
    .clk_i, .rst_ni,
    .in_valid_i (lreq_valid),
    .in_ready_o (lreq_ready),
    .in_data_i  (lreq),
    .in_sel_i   (lreq_sel),
    .out_valid_o(bank_in_valid),
    .out_ready_i(bank_in_ready),
    .out_data_o (bank_in)
  );

  tcdm_xbar #(.NumIn(NR), .NumOut(NG), .T(tcdm_req_t)) i_remote_req_xbar (
    .clk_i, .rst_ni,
    .in_valid_i (rreq_valid),
    .in_ready_o (rreq_ready),
    .in_data_i  (rq),
    .in_sel_i   (rreq_sel),
    .out_valid_o(rreq_out_valid_o),
    .out_ready_i(rreq_out_ready_i),
    .out_data_o (rreq_out_o)
  );

  // ---------------- burst managers and banks ----------------
  logic      bm_rsp_valid [NB];
  logic      bm_rsp_ready [NB];
  tcdm_rsp_t bm_rsp       [NB];

  for (genvar m = 0; m < NBM; m++) begin : g_bm
    logic            in_valid [GF];
    logic            in_ready [GF];
    tcdm_req_t       in_req   [GF];
    logic            b_req    [GF];
    logic            b_we     [GF];
    logic [RowW-1:0] b_addr   [GF];
    data_t           b_wdata  [GF];
    strb_t           b_be     [GF];
    data_t           b_rdata  [GF];
    logic            o_valid  [GF];
    logic            o_ready  [GF];
    tcdm_rsp_t       o_rsp    [GF];

    for (genvar j = 0; j < GF; j++) begin : g_bank
      assign in_valid[j]               = bank_in_valid[m*GF+j];
      assign bank_in_ready[m*GF+j]     = in_ready[j];
      assign in_req[j]                 = bank_in[m*GF+j];
      assign bm_rsp_valid[m*GF+j]      = o_valid[j];
      assign o_ready[j]                = bm_rsp_ready[m*GF+j];
      assign bm_rsp[m*GF+j]            = o_rsp[j];

      spm_bank #(.Words(BankWords)) i_bank (
        .clk_i, .rst_ni,
        .req_i  (b_req[j]),
        .we_i   (b_we[j]),
        .addr_i (b_addr[j]),
        .wdata_i(b_wdata[j]),
        .be_i   (b_be[j]),
        .rdata_o(b_rdata[j])
      );
    end

    burst_manager #(.BankWords(BankWords), .RowLsb(RowLsb)) i_burst_manager (
      .clk_i, .rst_ni,
      .req_valid_i (in_valid),
      .req_ready_o (in_ready),
      .req_i       (in_req),
      .bank_req_o  (b_req),
      .bank_we_o   (b_we),
      .bank_addr_o (b_addr),
      .bank_wdata_o(b_wdata),
      .bank_be_o   (b_be),
      .bank_rdata_i(b_rdata),
      .rsp_valid_o (o_valid),
      .rsp_ready_i (o_ready),
      .rsp_o       (o_rsp)
    );
  end

  // ---------------- response interconnects ----------------
  logic [LrspSelW-1:0] bm_rsp_sel [NB];
  logic                lrsp_valid [NR+NG];
  logic                lrsp_ready [NR+NG];
  tcdm_rsp_t           lrsp       [NR+NG];
  logic [ReqSelW-1:0]  rrsp_sel   [NG];
  logic                rrsp_valid [NR];
  logic                rrsp_ready [NR];
  tcdm_rsp_t           rrsp       [NR];

  always_comb begin
    for (int b = 0; b < NB; b++) begin
      if (bm_rsp[b].meta.group == group_id_i && bm_rsp[b].meta.tile == tile_id_i)
        bm_rsp_sel[b] = LrspSelW'(int'(bm_rsp[b].meta.core) * (K + 1) + int'(bm_rsp[b].meta.lane));
      else
        bm_rsp_sel[b] = LrspSelW'(NR + int'(port_of(bm_rsp[b].meta.group)));
    end
    for (int p = 0; p < NG; p++)
      rrsp_sel[p] = ReqSelW'(int'(rrsp_in_i[p].meta.core) * (K + 1) + int'(rrsp_in_i[p].meta.lane));
    for (int p = 0; p < NG; p++) begin
      rrsp_out_valid_o[p] = lrsp_valid[NR+p];
      lrsp_ready[NR+p]    = rrsp_out_ready_i[p];
      rrsp_out_o[p]       = lrsp[NR+p];
    end
  end

  tcdm_xbar #(.NumIn(NB), .NumOut(NR+NG), .T(tcdm_rsp_t)) i_local_rsp_xbar (
    .clk_i, .rst_ni,
    .in_valid_i (bm_rsp_valid),
    .in_ready_o (bm_rsp_ready),
    .in_data_i  (bm_rsp),
    .in_sel_i   (bm_rsp_sel),
    .out_valid_o(lrsp_valid),
    .out_ready_i(lrsp_ready),
    .out_data_o (lrsp)
  );

  tcdm_xbar #(.NumIn(NG), .NumOut(NR), .T(tcdm_rsp_t)) i_remote_rsp_xbar (
    .clk_i, .rst_ni,
    .in_valid_i (rrsp_in_valid_i),
    .in_ready_o (rrsp_in_ready_o),
    .in_data_i  (rrsp_in_i),
    .in_sel_i   (rrsp_sel),
    .out_valid_o(rrsp_valid),
    .out_ready_i(rrsp_ready),
    .out_data_o (rrsp)
  );

  // Per requester: merge local and remote responses.
  for (genvar r = 0; r < NR; r++) begin : g_merge
    logic      m_valid [2];
    logic      m_ready [2];
    tcdm_rsp_t m_data  [2];
    logic      m_sel   [2];
    logic      o_valid [1];
    logic      o_ready [1];
    tcdm_rsp_t o_data  [1];
    assign m_valid[0]    = lrsp_valid[r];
    assign m_valid[1]    = rrsp_valid[r];
    assign m_data[0]     = lrsp[r];
    assign m_data[1]     = rrsp[r];
    assign m_sel[0]      = 1'b0;
    assign m_sel[1]      = 1'b0;
    assign lrsp_ready[r] = m_ready[0];
    assign rrsp_ready[r] = m_ready[1];
    tcdm_xbar #(.NumIn(2), .NumOut(1), .T(tcdm_rsp_t)) i_rsp_mux (
      .clk_i, .rst_ni,
      .in_valid_i (m_valid),
      .in_ready_o (m_ready),
      .in_data_i  (m_data),
      .in_sel_i   (m_sel),
      .out_valid_o(o_valid),
      .out_ready_i(o_ready),
      .out_data_o (o_data)
    );
    assign rs_valid[r] = o_valid[0];
    assign o_ready[0]  = rs_ready[r];
    assign rs[r]       = o_data[0];
  end
endmodule
