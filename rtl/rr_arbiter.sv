// Round-robin arbiter.
//
// Grants one of N requesters per cycle.  The search starts at the requester
// after the one last served, so every requester is served within N grants.
// The priority pointer moves only when the grant is used (advance_i), so a
// grant that is stalled downstream is held.  Grant and index are
// combinational; the pointer is the only state.  Used for the arbiter of the
// burst manager and for every output of the crossbars; the round-robin
// policy is this design's choice.
module rr_arbiter #(
  parameter int unsigned N = 4,
  localparam int unsigned IdxW = (N > 1) ? $clog2(N) : 1
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic [N-1:0]    req_i,
  input  logic            advance_i,
  output logic [N-1:0]    gnt_o,
  output logic [IdxW-1:0] idx_o,
  output logic            valid_o
);
  logic [IdxW-1:0] ptr_q;

  always_comb begin
    gnt_o   = '0;
    idx_o   = '0;
    valid_o = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      logic [IdxW-1:0] i;
      i = IdxW'((int'(ptr_q) + k) % N);
      if (!valid_o && req_i[i]) begin
        valid_o  = 1'b1;
        idx_o    = i;
        gnt_o[i] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) ptr_q <= '0;
    else if (advance_i && valid_o) ptr_q <= IdxW'((int'(idx_o) + 1) % N);
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(gnt_o));
  assert property (@(posedge clk_i) disable iff (!rst_ni) (gnt_o & ~req_i) == '0);
endmodule
