// One scratchpad (SPM) bank of the shared L1 memory.
//
// A single-port 32-bit wide memory of Words words (1 KiB by default, as in
// the cluster's N x 4 banks of 1 KiB).  A request is taken every cycle in
// which req_i is high: a write updates the bytes selected by be_i, a read
// loads rdata_o at the next clock edge, giving the one-cycle access of a
// tile-local bank.  rdata_o keeps its value until the next read, which lets
// the burst manager hold a response while the interconnect is busy.  Written
// as an array; in silicon it is an SRAM macro.
module spm_bank #(
  parameter int unsigned Words = 256,
  localparam int unsigned AddrW = $clog2(Words)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             req_i,
  input  logic             we_i,
  input  logic [AddrW-1:0] addr_i,
  input  logic [31:0]      wdata_i,
  input  logic [3:0]       be_i,
  output logic [31:0]      rdata_o
);
  logic [31:0] mem_q [Words];

  always_ff @(posedge clk_i) begin
    if (req_i && we_i) begin
      for (int b = 0; b < 4; b++)
        if (be_i[b]) mem_q[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)               rdata_o <= '0;
    else if (req_i && !we_i)   rdata_o <= mem_q[addr_i];
  end
endmodule
