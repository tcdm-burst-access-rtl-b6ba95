// Group: NumTilesPerGroup tiles and the links between them and to the other
// groups.
//
// Remote port 0 of every tile joins the group's own routers: a request
// leaves the tile, passes one register stage and a crossbar that picks the
// destination tile from the address; its response passes one register stage
// and a crossbar that picks the requesting tile from the response's origin
// field.  With the bank's read cycle this gives the 3-cycle round trip to
// another tile of the group.
//
// Remote port p > 0 of every tile talks to group (group_id + p) mod
// NumGroups.  Outgoing requests and responses pass one register stage and
// leave the group on greq_out[p][t] / grsp_out[p][t]; incoming ones
// (greq_in[p][s] / grsp_in[p][s], from tile s of that group) pass one more
// register stage and a crossbar to the destination tile.  Two stages each
// way give the 5-cycle round trip to another group.  Index p = 0 of the
// group ports is not used (its outputs are held low).
//
// The number of levels and the latencies follow the paper; the placement of
// the register stages is this design's choice.
module group
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
  input  logic       vlsu_req_valid_i   [NumTilesPerGroup][NumCoresPerTile][K],
  output logic       vlsu_req_ready_o   [NumTilesPerGroup][NumCoresPerTile][K],
  input  core_req_t  vlsu_req_i         [NumTilesPerGroup][NumCoresPerTile][K],
  output logic       vlsu_rsp_valid_o   [NumTilesPerGroup][NumCoresPerTile][K],
  input  logic       vlsu_rsp_ready_i   [NumTilesPerGroup][NumCoresPerTile][K],
  output data_t      vlsu_rsp_data_o    [NumTilesPerGroup][NumCoresPerTile][K],
  input  logic       scalar_req_valid_i [NumTilesPerGroup][NumCoresPerTile],
  output logic       scalar_req_ready_o [NumTilesPerGroup][NumCoresPerTile],
  input  core_req_t  scalar_req_i       [NumTilesPerGroup][NumCoresPerTile],
  output logic       scalar_rsp_valid_o [NumTilesPerGroup][NumCoresPerTile],
  input  logic       scalar_rsp_ready_i [NumTilesPerGroup][NumCoresPerTile],
  output data_t      scalar_rsp_data_o  [NumTilesPerGroup][NumCoresPerTile],
  // Inter-group links, [group offset p][tile].
  output logic       greq_out_valid_o [NumGroups][NumTilesPerGroup],
  input  logic       greq_out_ready_i [NumGroups][NumTilesPerGroup],
  output tcdm_req_t  greq_out_o       [NumGroups][NumTilesPerGroup],
  input  logic       greq_in_valid_i  [NumGroups][NumTilesPerGroup],
  output logic       greq_in_ready_o  [NumGroups][NumTilesPerGroup],
  input  tcdm_req_t  greq_in_i        [NumGroups][NumTilesPerGroup],
  output logic       grsp_out_valid_o [NumGroups][NumTilesPerGroup],
  input  logic       grsp_out_ready_i [NumGroups][NumTilesPerGroup],
  output tcdm_rsp_t  grsp_out_o       [NumGroups][NumTilesPerGroup],
  input  logic       grsp_in_valid_i  [NumGroups][NumTilesPerGroup],
  output logic       grsp_in_ready_o  [NumGroups][NumTilesPerGroup],
  input  tcdm_rsp_t  grsp_in_i        [NumGroups][NumTilesPerGroup]
);
  localparam int unsigned NT   = NumTilesPerGroup;
  localparam int unsigned NG   = NumGroups;
  localparam int unsigned NB   = NumBanksPerTile;
  localparam int unsigned TSelW = (NT > 1) ? $clog2(NT) : 1;

  // Tile-side hierarchical ports, [tile][port].
  logic      t_rreq_out_valid [NT][NG];
  logic      t_rreq_out_ready [NT][NG];
  tcdm_req_t t_rreq_out       [NT][NG];
  logic      t_rreq_in_valid  [NT][NG];
  logic      t_rreq_in_ready  [NT][NG];
  tcdm_req_t t_rreq_in        [NT][NG];
  logic      t_rrsp_out_valid [NT][NG];
  logic      t_rrsp_out_ready [NT][NG];
  tcdm_rsp_t t_rrsp_out       [NT][NG];
  logic      t_rrsp_in_valid  [NT][NG];
  logic      t_rrsp_in_ready  [NT][NG];
  tcdm_rsp_t t_rrsp_in        [NT][NG];

  for (genvar t = 0; t < NT; t++) begin : g_tile
    tile #(
      .NumCoresPerTile (NumCoresPerTile),
      .NumBanksPerTile (NumBanksPerTile),
      .NumTilesPerGroup(NumTilesPerGroup),
      .NumGroups       (NumGroups),
      .BankWords       (BankWords)
    ) i_tile (
      .clk_i, .rst_ni,
      .group_id_i,
      .tile_id_i         (4'(t)),
      .vlsu_req_valid_i  (vlsu_req_valid_i[t]),
      .vlsu_req_ready_o  (vlsu_req_ready_o[t]),
      .vlsu_req_i        (vlsu_req_i[t]),
      .vlsu_rsp_valid_o  (vlsu_rsp_valid_o[t]),
      .vlsu_rsp_ready_i  (vlsu_rsp_ready_i[t]),
      .vlsu_rsp_data_o   (vlsu_rsp_data_o[t]),
      .scalar_req_valid_i(scalar_req_valid_i[t]),
      .scalar_req_ready_o(scalar_req_ready_o[t]),
      .scalar_req_i      (scalar_req_i[t]),
      .scalar_rsp_valid_o(scalar_rsp_valid_o[t]),
      .scalar_rsp_ready_i(scalar_rsp_ready_i[t]),
      .scalar_rsp_data_o (scalar_rsp_data_o[t]),
      .rreq_out_valid_o  (t_rreq_out_valid[t]),
      .rreq_out_ready_i  (t_rreq_out_ready[t]),
      .rreq_out_o        (t_rreq_out[t]),
      .rreq_in_valid_i   (t_rreq_in_valid[t]),
      .rreq_in_ready_o   (t_rreq_in_ready[t]),
      .rreq_in_i         (t_rreq_in[t]),
      .rrsp_out_valid_o  (t_rrsp_out_valid[t]),
      .rrsp_out_ready_i  (t_rrsp_out_ready[t]),
      .rrsp_out_o        (t_rrsp_out[t]),
      .rrsp_in_valid_i   (t_rrsp_in_valid[t]),
      .rrsp_in_ready_o   (t_rrsp_in_ready[t]),
      .rrsp_in_i         (t_rrsp_in[t])
    );
  end

  for (genvar p = 0; p < NG; p++) begin : g_port
    // Streams entering this port's routers, one per source tile.
    logic             q_valid [NT];
    logic             q_ready [NT];
    tcdm_req_t        q       [NT];
    logic [TSelW-1:0] q_sel   [NT];
    logic             s_valid [NT];
    logic             s_ready [NT];
    tcdm_rsp_t        s       [NT];
    logic [TSelW-1:0] s_sel   [NT];
    // Router outputs, one per destination tile.
    logic             qo_valid [NT];
    logic             qo_ready [NT];
    tcdm_req_t        qo       [NT];
    logic             so_valid [NT];
    logic             so_ready [NT];
    tcdm_rsp_t        so       [NT];

    for (genvar t = 0; t < NT; t++) begin : g_link
      if (p == 0) begin : g_intra
        // Own group: one register stage, then route.
        pipe_reg #(.T(tcdm_req_t)) i_req_reg (
          .clk_i, .rst_ni,
          .in_valid_i (t_rreq_out_valid[t][0]),
          .in_ready_o (t_rreq_out_ready[t][0]),
          .in_data_i  (t_rreq_out[t][0]),
          .out_valid_o(q_valid[t]),
          .out_ready_i(q_ready[t]),
          .out_data_o (q[t])
        );
        pipe_reg #(.T(tcdm_rsp_t)) i_rsp_reg (
          .clk_i, .rst_ni,
          .in_valid_i (t_rrsp_out_valid[t][0]),
          .in_ready_o (t_rrsp_out_ready[t][0]),
          .in_data_i  (t_rrsp_out[t][0]),
          .out_valid_o(s_valid[t]),
          .out_ready_i(s_ready[t]),
          .out_data_o (s[t])
        );
        assign greq_out_valid_o[0][t] = 1'b0;
        assign greq_out_o[0][t]       = '0;
        assign greq_in_ready_o[0][t]  = 1'b0;
        assign grsp_out_valid_o[0][t] = 1'b0;
        assign grsp_out_o[0][t]       = '0;
        assign grsp_in_ready_o[0][t]  = 1'b0;
      end else begin : g_inter
        // Outgoing stage towards group (group_id + p).
        pipe_reg #(.T(tcdm_req_t)) i_req_out_reg (
          .clk_i, .rst_ni,
          .in_valid_i (t_rreq_out_valid[t][p]),
          .in_ready_o (t_rreq_out_ready[t][p]),
          .in_data_i  (t_rreq_out[t][p]),
          .out_valid_o(greq_out_valid_o[p][t]),
          .out_ready_i(greq_out_ready_i[p][t]),
          .out_data_o (greq_out_o[p][t])
        );
        pipe_reg #(.T(tcdm_rsp_t)) i_rsp_out_reg (
          .clk_i, .rst_ni,
          .in_valid_i (t_rrsp_out_valid[t][p]),
          .in_ready_o (t_rrsp_out_ready[t][p]),
          .in_data_i  (t_rrsp_out[t][p]),
          .out_valid_o(grsp_out_valid_o[p][t]),
          .out_ready_i(grsp_out_ready_i[p][t]),
          .out_data_o (grsp_out_o[p][t])
        );
        // Incoming stage from tile t of group (group_id + p).
        pipe_reg #(.T(tcdm_req_t)) i_req_in_reg (
          .clk_i, .rst_ni,
          .in_valid_i (greq_in_valid_i[p][t]),
          .in_ready_o (greq_in_ready_o[p][t]),
          .in_data_i  (greq_in_i[p][t]),
          .out_valid_o(q_valid[t]),
          .out_ready_i(q_ready[t]),
          .out_data_o (q[t])
        );
        pipe_reg #(.T(tcdm_rsp_t)) i_rsp_in_reg (
          .clk_i, .rst_ni,
          .in_valid_i (grsp_in_valid_i[p][t]),
          .in_ready_o (grsp_in_ready_o[p][t]),
          .in_data_i  (grsp_in_i[p][t]),
          .out_valid_o(s_valid[t]),
          .out_ready_i(s_ready[t]),
          .out_data_o (s[t])
        );
      end
      assign q_sel[t] = TSelW'((int'(q[t].addr >> 2) / NB) % NT);
      assign s_sel[t] = TSelW'(s[t].meta.tile);

      assign t_rreq_in_valid[t][p] = qo_valid[t];
      assign qo_ready[t]           = t_rreq_in_ready[t][p];
      assign t_rreq_in[t][p]       = qo[t];
      assign t_rrsp_in_valid[t][p] = so_valid[t];
      assign so_ready[t]           = t_rrsp_in_ready[t][p];
      assign t_rrsp_in[t][p]       = so[t];
    end

    tcdm_xbar #(.NumIn(NT), .NumOut(NT), .T(tcdm_req_t)) i_req_router (
      .clk_i, .rst_ni,
      .in_valid_i (q_valid),
      .in_ready_o (q_ready),
      .in_data_i  (q),
      .in_sel_i   (q_sel),
      .out_valid_o(qo_valid),
      .out_ready_i(qo_ready),
      .out_data_o (qo)
    );
    tcdm_xbar #(.NumIn(NT), .NumOut(NT), .T(tcdm_rsp_t)) i_rsp_router (
      .clk_i, .rst_ni,
      .in_valid_i (s_valid),
      .in_ready_o (s_ready),
      .in_data_i  (s),
      .in_sel_i   (s_sel),
      .out_valid_o(so_valid),
      .out_ready_i(so_ready),
      .out_data_o (so)
    );
  end
endmodule
