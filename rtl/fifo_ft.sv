// Fall-through FIFO.
//
// Holds up to Depth items.  When empty, an item pushed in a cycle is already
// visible at the output in that cycle, so a burst that finds the burst
// manager idle is not delayed; when the output is stalled, later items queue
// up behind it.  push_ready_o is low only when the FIFO is full and its head
// is not leaving.  The paper places a small FIFO in the burst manager; its
// fall-through behaviour and depth are this design's choices.
module fifo_ft #(
  parameter type T = logic [31:0],
  parameter int unsigned Depth = 4
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic push_valid_i,
  output logic push_ready_o,
  input  T     push_data_i,
  output logic pop_valid_o,
  input  logic pop_ready_i,
  output T     pop_data_o
);
  localparam int unsigned PtrW = (Depth > 1) ? $clog2(Depth) : 1;

  T                mem_q [Depth];
  logic [PtrW-1:0] rd_q, wr_q;
  logic [PtrW:0]   cnt_q;
  logic            empty, full, push, pop, store;

  assign empty        = (cnt_q == 0);
  assign full         = (cnt_q == (PtrW+1)'(Depth));
  assign pop_valid_o  = !empty || push_valid_i;
  assign pop_data_o   = empty ? push_data_i : mem_q[rd_q];
  assign push_ready_o = !full || pop_ready_i;
  assign push         = push_valid_i && push_ready_o;
  assign pop          = pop_valid_o && pop_ready_i;
  // An item pushed into an empty FIFO and popped at once is never stored.
  assign store        = push && !(empty && pop);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (store) begin
        mem_q[wr_q] <= push_data_i;
        wr_q        <= (wr_q == PtrW'(Depth-1)) ? '0 : wr_q + 1'b1;
      end
      if (pop && !empty) rd_q <= (rd_q == PtrW'(Depth-1)) ? '0 : rd_q + 1'b1;
      cnt_q <= cnt_q + (PtrW+1)'(store) - (PtrW+1)'(pop && !empty);
    end
  end
endmodule
