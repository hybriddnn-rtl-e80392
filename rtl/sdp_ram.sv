// sdp_ram: simple dual-port RAM, one write port and one read port, one clock.
//
// The building block of every on-chip buffer (one instance per bank, like
// one FPGA block RAM column). Reads are synchronous: the word at rd_addr in
// cycle t appears on rd_data in cycle t+1. A read and a write of the same
// address in one cycle return the old word. Contents are not reset.
// The paper only says buffers sit in on-chip memory; this block RAM model is
// this design's choice.
module sdp_ram #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [WIDTH-1:0]         rd_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wr_addr] <= wr_data;
    if (re) rd_data <= mem[rd_addr];
  end
endmodule
