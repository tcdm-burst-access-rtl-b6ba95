// Burst manager: burst-format adapter in front of GF adjacent SPM banks.
//
// Request side.  Each of the GF inputs is the local-request-interconnect
// port of one bank.  A narrow request (length 1, or any store) takes the
// bypass path straight to its bank.  A burst request (a load of length
// 2..GF) arrives on the port of the bank holding its first word; the burst
// decoder turns it into parallel reads of banks start..start+len-1, all in
// the same row.  When several bursts arrive together, a round-robin arbiter
// admits one per cycle into a small fall-through FIFO and the others wait
// upstream; the FIFO head is issued as soon as all its banks are free.  A
// waiting burst has priority over narrow requests for the banks it needs.
//
// Response side.  Each bank has a response slot.  One cycle after a read,
// the bank's output register holds the word; the response grouper collects
// the words of a burst from banks start..start+len-1 into one GF-word
// response on the slot of the first bank, and a narrow read is answered on
// its own slot with the word in position 0.  A bank is not read again until
// its slot's response has been taken, so the bank register holds the data
// while the response interconnect is busy.  Stores are posted (no response).
//
// Timing: a request accepted in cycle t is answered in cycle t+1 if the
// response interconnect is free, which keeps the one-cycle tile-local
// round trip.  The split into decoder, FIFO, arbiter, bypass and grouper
// follows the paper; the burst priority, FIFO depth, one-burst-per-cycle
// admission and posted stores are this design's choices.
module burst_manager
  import tcdm_pkg::*;
#(
  parameter int unsigned BankWords = tcdm_pkg::DefBankWords,
  // Lowest byte-address bit of the bank row (2 + log2 of all banks).
  parameter int unsigned RowLsb    = 10,
  parameter int unsigned FifoDepth = tcdm_pkg::BurstFifoDepth,
  localparam int unsigned RowW = $clog2(BankWords)
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  // From the local request interconnect, one port per bank.
  input  logic            req_valid_i  [GF],
  output logic            req_ready_o  [GF],
  input  tcdm_req_t       req_i        [GF],
  // To the banks.
  output logic            bank_req_o   [GF],
  output logic            bank_we_o    [GF],
  output logic [RowW-1:0] bank_addr_o  [GF],
  output data_t           bank_wdata_o [GF],
  output strb_t           bank_be_o    [GF],
  input  data_t           bank_rdata_i [GF],
  // To the local response interconnect, one widened port per bank.
  output logic            rsp_valid_o  [GF],
  input  logic            rsp_ready_i  [GF],
  output tcdm_rsp_t       rsp_o        [GF]
);
  localparam int unsigned GfW = (GF > 1) ? $clog2(GF) : 1;

  typedef struct packed {
    tcdm_req_t      req;
    logic [GfW-1:0] start;
  } burst_t;

  // ---------------- burst decoder: arbiter + FIFO ----------------
  logic [GF-1:0]  is_burst, arb_gnt;
  logic [GfW-1:0] arb_idx;
  logic           arb_valid;
  burst_t         push_data, head;
  logic           push_ready, head_valid, head_go;

  always_comb begin
    for (int j = 0; j < GF; j++)
      is_burst[j] = req_valid_i[j] && !req_i[j].we && (req_i[j].meta.blen > len_t'(1));
  end

  rr_arbiter #(.N(GF)) i_arb (
    .clk_i, .rst_ni,
    .req_i    (is_burst),
    .advance_i(push_ready),
    .gnt_o    (arb_gnt),
    .idx_o    (arb_idx),
    .valid_o  (arb_valid)
  );

  assign push_data.req   = req_i[arb_idx];
  assign push_data.start = arb_idx;

  fifo_ft #(.T(burst_t), .Depth(FifoDepth)) i_fifo (
    .clk_i, .rst_ni,
    .push_valid_i(arb_valid),
    .push_ready_o(push_ready),
    .push_data_i (push_data),
    .pop_valid_o (head_valid),
    .pop_ready_i (head_go),
    .pop_data_o  (head)
  );

  // ---------------- response slots ----------------
  logic [GF-1:0]  busy_q, lead_q;
  logic [GfW-1:0] owner_q [GF];
  meta_t          meta_q  [GF];
  logic [GF-1:0]  drain, slot_free, need;

  always_comb begin
    for (int b = 0; b < GF; b++) drain[b] = lead_q[b] && rsp_ready_i[b];
    for (int b = 0; b < GF; b++) slot_free[b] = !busy_q[b] || drain[owner_q[b]];
    for (int b = 0; b < GF; b++)
      need[b] = head_valid && (b >= int'(head.start)) &&
                (b < int'(head.start) + int'(head.req.meta.blen));
    head_go = head_valid && ((need & ~slot_free) == '0);
  end

  // ---------------- bank requests: burst or bypass ----------------
  logic [GF-1:0] narrow_go;

  always_comb begin
    for (int b = 0; b < GF; b++) begin
      narrow_go[b]    = req_valid_i[b] && !is_burst[b] && !need[b] &&
                        (req_i[b].we || slot_free[b]);
      req_ready_o[b]  = is_burst[b] ? (arb_gnt[b] && push_ready) : narrow_go[b];
      bank_req_o[b]   = 1'b0;
      bank_we_o[b]    = 1'b0;
      bank_addr_o[b]  = req_i[b].addr[RowLsb +: RowW];
      bank_wdata_o[b] = req_i[b].wdata;
      bank_be_o[b]    = req_i[b].be;
      if (head_go && need[b]) begin
        bank_req_o[b]  = 1'b1;
        bank_addr_o[b] = head.req.addr[RowLsb +: RowW];
      end else if (narrow_go[b]) begin
        bank_req_o[b] = 1'b1;
        bank_we_o[b]  = req_i[b].we;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= '0;
      lead_q <= '0;
      for (int b = 0; b < GF; b++) begin
        owner_q[b] <= '0;
        meta_q[b]  <= '0;
      end
    end else begin
      for (int b = 0; b < GF; b++) begin
        if (drain[b]) lead_q[b] <= 1'b0;
        if (busy_q[b] && drain[owner_q[b]]) busy_q[b] <= 1'b0;
        if (head_go && need[b]) begin
          busy_q[b]  <= 1'b1;
          owner_q[b] <= head.start;
          if (b == int'(head.start)) begin
            lead_q[b] <= 1'b1;
            meta_q[b] <= head.req.meta;
          end
        end else if (narrow_go[b] && !req_i[b].we) begin
          busy_q[b]  <= 1'b1;
          lead_q[b]  <= 1'b1;
          owner_q[b] <= GfW'(b);
          meta_q[b]  <= req_i[b].meta;
        end
      end
    end
  end

  // ---------------- response grouper ----------------
  always_comb begin
    for (int b = 0; b < GF; b++) begin
      rsp_valid_o[b] = lead_q[b];
      rsp_o[b].meta  = meta_q[b];
      rsp_o[b].data  = '0;
      for (int k = 0; k < GF; k++)
        if (b + k < GF && k < int'(meta_q[b].blen))
          rsp_o[b].data[k] = bank_rdata_i[(b + k) % GF];
    end
  end

  // A burst never reaches past the last bank of this manager.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   head_valid |-> int'(head.start) + int'(head.req.meta.blen) <= GF);
endmodule
