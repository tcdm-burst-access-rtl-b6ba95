// Reorder buffer of one vector load/store lane.
//
// Loads of a lane may return out of order, because a tile-local bank answers
// in one cycle and a bank in another group in five.  Each load reserves the
// next slot at issue (alloc_*), the slot number travels with the request as
// its tag, the response is written into that slot (wr_*), and out_* hands
// the data back to the lane strictly in issue order.  Depth bounds the loads
// in flight per lane; it is twice that of a design without bursts, because a
// burst keeps several lanes' loads in flight at once.  Reservation and
// write-back happen at the clock edge; a filled head slot is visible at the
// output in the same cycle it is written back.
module vlsu_rob #(
  parameter int unsigned Depth = tcdm_pkg::RobDepth,
  localparam int unsigned TagW = $clog2(Depth)
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            alloc_valid_i,
  output logic            alloc_ready_o,
  output logic [TagW-1:0] alloc_tag_o,
  input  logic            wr_valid_i,
  input  logic [TagW-1:0] wr_tag_i,
  input  logic [31:0]     wr_data_i,
  output logic            out_valid_o,
  input  logic            out_ready_i,
  output logic [31:0]     out_data_o
);
  logic [31:0]     data_q [Depth];
  logic [Depth-1:0] full_q, busy_q;
  logic [TagW-1:0] head_q, tail_q;
  logic            head_now, pop, alloc;

  assign alloc_ready_o = !busy_q[tail_q];
  assign alloc_tag_o   = tail_q;
  assign alloc         = alloc_valid_i && alloc_ready_o;
  // The head is ready if it was filled before or is filled right now.
  assign head_now      = wr_valid_i && (wr_tag_i == head_q);
  assign out_valid_o   = busy_q[head_q] && (full_q[head_q] || head_now);
  assign out_data_o    = full_q[head_q] ? data_q[head_q] : wr_data_i;
  assign pop           = out_valid_o && out_ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      full_q <= '0;
      busy_q <= '0;
      head_q <= '0;
      tail_q <= '0;
    end else begin
      if (wr_valid_i) begin
        data_q[wr_tag_i] <= wr_data_i;
        full_q[wr_tag_i] <= 1'b1;
      end
      if (pop) begin
        full_q[head_q] <= 1'b0;
        busy_q[head_q] <= 1'b0;
        head_q         <= TagW'((int'(head_q) + 1) % Depth);
      end
      if (alloc) begin
        busy_q[tail_q] <= 1'b1;
        tail_q         <= TagW'((int'(tail_q) + 1) % Depth);
      end
    end
  end

  // A response may only be written into a reserved, still empty slot.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   wr_valid_i |-> busy_q[wr_tag_i] && !full_q[wr_tag_i]);
endmodule
