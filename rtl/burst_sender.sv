// Burst sender of one vector core.
//
// Sits on the K request/response lanes of the vector load/store unit (VLSU).
// When all K lanes present loads to consecutive 32-bit words in the same
// cycle (the pattern of a unit-stride vector load), it sends them as burst
// requests instead of K narrow ones: one request carrying a start address
// and a length.  A burst never crosses a GF-word aligned block, because one
// burst manager serves GF adjacent banks; so K lanes starting on an aligned
// word with K = GF become exactly one burst of K words, and otherwise the
// lanes are cut into one burst per aligned block, each sent on the lane of
// its first word.  Any other traffic (stores, strided or partial accesses)
// passes through lane by lane as narrow requests of length 1.
//
// Each lane owns a reorder buffer (vlsu_rob).  A load reserves a slot when
// it is sent; the request carries the slot tags of every word it covers.
// A response (GF words, on the input of its first lane) is scattered into
// the reorder buffers of lanes lane..lane+blen-1, and each lane returns its
// data in order.  Each burst is handed over on its own: when one burst of a
// group is taken and another is stalled, the stalled lanes are re-examined
// in the next cycle and, no longer forming a full group, go out as narrow
// requests.  If two responses in one cycle want the same lane, the one
// on the lower input goes first and the other is stalled.  Stores get no
// response.  Requests leave combinationally in the cycle they are offered.
//
// The grouping into bursts and the K-lane detection rule follow the paper;
// the alignment cut, the tag transport and the store handling are this
// design's choices.
module burst_sender
  import tcdm_pkg::*;
(
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic [3:0] group_id_i,
  input  logic [3:0] tile_id_i,
  input  logic [3:0] core_id_i,
  // VLSU lanes: requests
  input  logic       vlsu_req_valid_i [K],
  output logic       vlsu_req_ready_o [K],
  input  core_req_t  vlsu_req_i       [K],
  // VLSU lanes: in-order load data
  output logic       vlsu_rsp_valid_o [K],
  input  logic       vlsu_rsp_ready_i [K],
  output data_t      vlsu_rsp_data_o  [K],
  // TCDM side
  output logic       tcdm_req_valid_o [K],
  input  logic       tcdm_req_ready_i [K],
  output tcdm_req_t  tcdm_req_o       [K],
  input  logic       tcdm_rsp_valid_i [K],
  output logic       tcdm_rsp_ready_o [K],
  input  tcdm_rsp_t  tcdm_rsp_i       [K]
);
  localparam int unsigned GfW = $clog2(GF);

  logic       rob_ready [K];
  tag_t       rob_tag   [K];
  logic       rob_alloc [K];
  logic       rob_wr    [K];
  tag_t       rob_wtag  [K];
  data_t      rob_wdata [K];

  // ---------------- request side ----------------
  logic       burst_mode;
  logic [K-1:0] head;
  len_t       len [K];

  always_comb begin
    burst_mode = 1'b1;
    for (int i = 0; i < K; i++) begin
      if (!vlsu_req_valid_i[i] || vlsu_req_i[i].we || !rob_ready[i] ||
          vlsu_req_i[i].addr != vlsu_req_i[0].addr + addr_t'(4 * i) ||
          vlsu_req_i[i].addr[1:0] != 2'b00)
        burst_mode = 1'b0;
    end
    // Chunk heads: lane 0 and every lane whose word starts a GF block.
    for (int i = 0; i < K; i++) begin
      head[i] = (i == 0) || (vlsu_req_i[i].addr[2 +: GfW] == '0);
      len[i]  = '0;
    end
    for (int i = 0; i < K; i++) begin
      if (head[i]) begin
        for (int j = i; j < K; j++) begin
          if (j == i || !head[j]) len[i] = len[i] + 1'b1;
          else break;
        end
      end
    end
  end

  // Lane i belongs to the chunk headed by the nearest head at or below it.
  logic chunk_ready [K];
  always_comb begin
    int h;
    h = 0;
    for (int i = 0; i < K; i++) begin
      if (head[i]) h = i;
      chunk_ready[i] = tcdm_req_ready_i[h];
    end
  end

  always_comb begin
    for (int i = 0; i < K; i++) begin
      tcdm_req_o[i].addr       = vlsu_req_i[i].addr;
      tcdm_req_o[i].we         = vlsu_req_i[i].we;
      tcdm_req_o[i].wdata      = vlsu_req_i[i].wdata;
      tcdm_req_o[i].be         = vlsu_req_i[i].be;
      tcdm_req_o[i].meta.group = group_id_i;
      tcdm_req_o[i].meta.tile  = tile_id_i;
      tcdm_req_o[i].meta.core  = core_id_i;
      tcdm_req_o[i].meta.lane  = 4'(i);
      tcdm_req_o[i].meta.tags  = '0;
      if (burst_mode) begin
        tcdm_req_valid_o[i]     = head[i];
        tcdm_req_o[i].meta.blen = len[i];
        for (int k = 0; k < GF; k++)
          if (i + k < K) tcdm_req_o[i].meta.tags[k] = rob_tag[(i + k) % K];
        vlsu_req_ready_o[i] = chunk_ready[i];
        rob_alloc[i]        = chunk_ready[i];
      end else begin
        tcdm_req_valid_o[i]        = vlsu_req_valid_i[i] && (vlsu_req_i[i].we || rob_ready[i]);
        tcdm_req_o[i].meta.blen    = len_t'(1);
        tcdm_req_o[i].meta.tags[0] = rob_tag[i];
        vlsu_req_ready_o[i]        = tcdm_req_ready_i[i] && (vlsu_req_i[i].we || rob_ready[i]);
        rob_alloc[i]               = vlsu_req_valid_i[i] && !vlsu_req_i[i].we &&
                                     vlsu_req_ready_o[i];
      end
    end
  end

  // ---------------- response side ----------------
  // covers[h][j]: response on input h carries a word for lane j.
  logic [K-1:0] covers [K];
  logic [K-1:0] taken;

  always_comb begin
    for (int h = 0; h < K; h++) begin
      covers[h] = '0;
      for (int k = 0; k < GF; k++)
        if (k < int'(tcdm_rsp_i[h].meta.blen) && h + k < K) covers[h][h + k] = 1'b1;
    end
    taken = '0;
    for (int h = 0; h < K; h++) begin
      tcdm_rsp_ready_o[h] = tcdm_rsp_valid_i[h] && ((covers[h] & taken) == '0);
      if (tcdm_rsp_ready_o[h]) taken |= covers[h];
    end
    for (int j = 0; j < K; j++) begin
      rob_wr[j]    = 1'b0;
      rob_wtag[j]  = '0;
      rob_wdata[j] = '0;
      for (int h = 0; h <= j; h++) begin
        if (tcdm_rsp_ready_o[h] && covers[h][j]) begin
          rob_wr[j]    = 1'b1;
          rob_wtag[j]  = tcdm_rsp_i[h].meta.tags[(j - h) % GF];
          rob_wdata[j] = tcdm_rsp_i[h].data[(j - h) % GF];
        end
      end
    end
  end

  for (genvar i = 0; i < K; i++) begin : g_rob
    vlsu_rob #(.Depth(RobDepth)) i_rob (
      .clk_i, .rst_ni,
      .alloc_valid_i(rob_alloc[i]),
      .alloc_ready_o(rob_ready[i]),
      .alloc_tag_o  (rob_tag[i]),
      .wr_valid_i   (rob_wr[i]),
      .wr_tag_i     (rob_wtag[i]),
      .wr_data_i    (rob_wdata[i]),
      .out_valid_o  (vlsu_rsp_valid_o[i]),
      .out_ready_i  (vlsu_rsp_ready_i[i]),
      .out_data_o   (vlsu_rsp_data_o[i])
    );
  end
endmodule
