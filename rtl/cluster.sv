// Cluster top: a shared-L1 vector cluster with TCDM burst access.
//
// NumGroups groups of NumTilesPerGroup tiles of NumCoresPerTile core
// complexes.  Default: 4 x 4 x 4 = 64 cores, each with K = 4 vector
// load/store lanes (256 FPUs in all), 16 banks of 1 KiB per tile (256 KiB
// of word-interleaved L1), and a response channel GF = 4 words wide.  The
// cores themselves are outside this RTL: each core's vector lanes and scalar
// port are top-level ports.  A lane port takes a request (address, write
// enable, data, byte enables) with valid/ready and returns load data in
// order with valid/ready; stores have no response.
//
// The groups are connected all to all: group G's link at offset p goes to
// group D = (G + p) mod NumGroups, where it arrives on that group's link at
// offset NumGroups - p (the offset that points back to G).  Round-trip load
// latency is 1 cycle to a bank of the own tile, 3 cycles to another tile of
// the own group and 5 cycles to another group, when nothing contends.
module cluster
  import tcdm_pkg::*;
#(
  parameter int unsigned NumCoresPerTile  = tcdm_pkg::DefNumCoresPerTile,
  parameter int unsigned NumBanksPerTile  = tcdm_pkg::DefNumBanksPerTile,
  parameter int unsigned NumTilesPerGroup = tcdm_pkg::DefNumTilesPerGroup,
  parameter int unsigned NumGroups        = tcdm_pkg::DefNumGroups,
  parameter int unsigned BankWords        = tcdm_pkg::DefBankWords
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  logic      vlsu_req_valid_i   [NumGroups][NumTilesPerGroup][NumCoresPerTile][K],
  output logic      vlsu_req_ready_o   [NumGroups][NumTilesPerGroup][NumCoresPerTile][K],
  input  core_req_t vlsu_req_i         [NumGroups][NumTilesPerGroup][NumCoresPerTile][K],
  output logic      vlsu_rsp_valid_o   [NumGroups][NumTilesPerGroup][NumCoresPerTile][K],
  input  logic      vlsu_rsp_ready_i   [NumGroups][NumTilesPerGroup][NumCoresPerTile][K],
  output data_t     vlsu_rsp_data_o    [NumGroups][NumTilesPerGroup][NumCoresPerTile][K],
  input  logic      scalar_req_valid_i [NumGroups][NumTilesPerGroup][NumCoresPerTile],
  output logic      scalar_req_ready_o [NumGroups][NumTilesPerGroup][NumCoresPerTile],
  input  core_req_t scalar_req_i       [NumGroups][NumTilesPerGroup][NumCoresPerTile],
  output logic      scalar_rsp_valid_o [NumGroups][NumTilesPerGroup][NumCoresPerTile],
  input  logic      scalar_rsp_ready_i [NumGroups][NumTilesPerGroup][NumCoresPerTile],
  output data_t     scalar_rsp_data_o  [NumGroups][NumTilesPerGroup][NumCoresPerTile]
);
  localparam int unsigned NG = NumGroups;
  localparam int unsigned NT = NumTilesPerGroup;

  // [group][offset][tile]
  logic      req_out_valid [NG][NG][NT];
  logic      req_out_ready [NG][NG][NT];
  tcdm_req_t req_out       [NG][NG][NT];
  logic      req_in_valid  [NG][NG][NT];
  logic      req_in_ready  [NG][NG][NT];
  tcdm_req_t req_in        [NG][NG][NT];
  logic      rsp_out_valid [NG][NG][NT];
  logic      rsp_out_ready [NG][NG][NT];
  tcdm_rsp_t rsp_out       [NG][NG][NT];
  logic      rsp_in_valid  [NG][NG][NT];
  logic      rsp_in_ready  [NG][NG][NT];
  tcdm_rsp_t rsp_in        [NG][NG][NT];

  for (genvar g = 0; g < NG; g++) begin : g_group
    group #(
      .NumCoresPerTile (NumCoresPerTile),
      .NumBanksPerTile (NumBanksPerTile),
      .NumTilesPerGroup(NumTilesPerGroup),
      .NumGroups       (NumGroups),
      .BankWords       (BankWords)
    ) i_group (
      .clk_i, .rst_ni,
      .group_id_i        (4'(g)),
      .vlsu_req_valid_i  (vlsu_req_valid_i[g]),
      .vlsu_req_ready_o  (vlsu_req_ready_o[g]),
      .vlsu_req_i        (vlsu_req_i[g]),
      .vlsu_rsp_valid_o  (vlsu_rsp_valid_o[g]),
      .vlsu_rsp_ready_i  (vlsu_rsp_ready_i[g]),
      .vlsu_rsp_data_o   (vlsu_rsp_data_o[g]),
      .scalar_req_valid_i(scalar_req_valid_i[g]),
      .scalar_req_ready_o(scalar_req_ready_o[g]),
      .scalar_req_i      (scalar_req_i[g]),
      .scalar_rsp_valid_o(scalar_rsp_valid_o[g]),
      .scalar_rsp_ready_i(scalar_rsp_ready_i[g]),
      .scalar_rsp_data_o (scalar_rsp_data_o[g]),
      .greq_out_valid_o  (req_out_valid[g]),
      .greq_out_ready_i  (req_out_ready[g]),
      .greq_out_o        (req_out[g]),
      .greq_in_valid_i   (req_in_valid[g]),
      .greq_in_ready_o   (req_in_ready[g]),
      .greq_in_i         (req_in[g]),
      .grsp_out_valid_o  (rsp_out_valid[g]),
      .grsp_out_ready_i  (rsp_out_ready[g]),
      .grsp_out_o        (rsp_out[g]),
      .grsp_in_valid_i   (rsp_in_valid[g]),
      .grsp_in_ready_o   (rsp_in_ready[g]),
      .grsp_in_i         (rsp_in[g])
    );

    for (genvar p = 0; p < NG; p++) begin : g_off
      for (genvar t = 0; t < NT; t++) begin : g_t
        if (p == 0) begin : g_unused
          assign req_out_ready[g][0][t] = 1'b0;
          assign req_in_valid[g][0][t]  = 1'b0;
          assign req_in[g][0][t]        = '0;
          assign rsp_out_ready[g][0][t] = 1'b0;
          assign rsp_in_valid[g][0][t]  = 1'b0;
          assign rsp_in[g][0][t]        = '0;
        end else begin : g_link
          localparam int unsigned D = (g + p) % NG;
          localparam int unsigned Q = NG - p;
          // Requests g -> D, responses D -> g.
          assign req_in_valid[D][Q][t]  = req_out_valid[g][p][t];
          assign req_in[D][Q][t]        = req_out[g][p][t];
          assign req_out_ready[g][p][t] = req_in_ready[D][Q][t];
          assign rsp_in_valid[g][p][t]  = rsp_out_valid[D][Q][t];
          assign rsp_in[g][p][t]        = rsp_out[D][Q][t];
          assign rsp_out_ready[D][Q][t] = rsp_in_ready[g][p][t];
        end
      end
    end
  end
endmodule
