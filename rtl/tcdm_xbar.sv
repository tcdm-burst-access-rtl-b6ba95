// Fully connected valid/ready crossbar.
//
// NumIn sources, NumOut destinations; each source names its destination in
// in_sel_i.  Every destination has a round-robin arbiter over the sources
// that want it, so distinct destinations are served in parallel and sources
// that meet at one destination are serialised, one per cycle: this is the
// port contention that burst requests relieve.  The crossbar is
// combinational (no added latency); register stages are placed outside it.
// It is instantiated as the tile's local request, local response, remote
// request and remote response interconnects and as the group-level routers,
// with T set to the request or the (widened) response type.
module tcdm_xbar #(
  parameter int unsigned NumIn  = 4,
  parameter int unsigned NumOut = 4,
  parameter type T = logic [31:0],
  localparam int unsigned SelW = (NumOut > 1) ? $clog2(NumOut) : 1
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            in_valid_i [NumIn],
  output logic            in_ready_o [NumIn],
  input  T                in_data_i  [NumIn],
  input  logic [SelW-1:0] in_sel_i   [NumIn],
  output logic            out_valid_o [NumOut],
  input  logic            out_ready_i [NumOut],
  output T                out_data_o  [NumOut]
);
  localparam int unsigned IdxW = (NumIn > 1) ? $clog2(NumIn) : 1;

  logic [NumIn-1:0] req  [NumOut];
  logic [NumIn-1:0] gnt  [NumOut];
  logic [IdxW-1:0]  idx  [NumOut];

  for (genvar o = 0; o < NumOut; o++) begin : g_out
    for (genvar i = 0; i < NumIn; i++) begin : g_req
      assign req[o][i] = in_valid_i[i] && (in_sel_i[i] == SelW'(o));
    end
    rr_arbiter #(.N(NumIn)) i_arb (
      .clk_i, .rst_ni,
      .req_i    (req[o]),
      .advance_i(out_ready_i[o]),
      .gnt_o    (gnt[o]),
      .idx_o    (idx[o]),
      .valid_o  (out_valid_o[o])
    );
    assign out_data_o[o] = in_data_i[idx[o]];
  end

  always_comb begin
    for (int i = 0; i < NumIn; i++) begin
      in_ready_o[i] = 1'b0;
      for (int o = 0; o < NumOut; o++)
        if (gnt[o][i] && out_ready_i[o]) in_ready_o[i] = 1'b1;
    end
  end

  for (genvar i = 0; i < NumIn; i++) begin : g_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni)
                     !in_valid_i[i] || int'(in_sel_i[i]) < NumOut);
  end
endmodule
