// Elastic pipeline register for valid/ready streams.
//
// One register stage on a hierarchical link: data taken at the input appears
// at the output one cycle later.  The stage accepts a new item whenever it is
// empty or its current item leaves in the same cycle, so a full chain of
// stages sustains one item per cycle.  The remote-tile (3-cycle) and
// remote-group (5-cycle) round-trip latencies of the cluster are built from
// one and two such stages in each direction; the stage itself is this
// design's choice, the latencies are the cluster's.
module pipe_reg #(
  parameter type T = logic [31:0]
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic in_valid_i,
  output logic in_ready_o,
  input  T     in_data_i,
  output logic out_valid_o,
  input  logic out_ready_i,
  output T     out_data_o
);
  logic valid_q;
  T     data_q;

  assign in_ready_o  = !valid_q || out_ready_i;
  assign out_valid_o = valid_q;
  assign out_data_o  = data_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= 1'b0;
      data_q  <= '0;
    end else if (in_ready_o) begin
      valid_q <= in_valid_i;
      if (in_valid_i) data_q <= in_data_i;
    end
  end

  // An offered item stays stable until it is taken.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   out_valid_o && !out_ready_i |=> out_valid_o && $stable(out_data_o));
endmodule
