// in_buffer: ping-pong input feature-map buffer, PT x PT banks.
//
// Each bank word holds one vector of PI feature-map channels (PI x 8 bits).
// The PT x PT bank array matches the partition factors given for the input
// buffer: in Winograd mode the banks are indexed by (row mod PT, column mod
// PT) so that any PT x PT input tile is read in one cycle; in Spatial mode
// they are indexed by (channel-vector mod PT, column mod PT) so that PT
// channel vectors of one pixel are read in one cycle. The writer (LOAD_INP)
// and the reader (COMP load manager) compute the per-bank addresses; this
// module adds the ping-pong half as the top address bit. Every bank has its
// own write enable and address; reads have one cycle of latency.
// The PT x PT bank grid and the ping-pong halves follow the architecture; the
// word layout inside a bank is this design's choice.
module in_buffer #(
  parameter int unsigned PI    = hdnn_pkg::PI_DEF,
  parameter int unsigned PT    = hdnn_pkg::PT_DEF,
  parameter int unsigned DEPTH = 2048,               // words per bank, both halves
  localparam int unsigned NB   = PT * PT,
  localparam int unsigned DW   = PI * hdnn_pkg::FW,
  localparam int unsigned HAW  = $clog2(DEPTH) - 1   // address bits of one half
) (
  input  logic           clk,
  input  logic           wr_half,
  input  logic [NB-1:0]  wr_en,
  input  logic [HAW-1:0] wr_addr [NB],
  input  logic [DW-1:0]  wr_data [NB],
  input  logic           rd_en,
  input  logic           rd_half,
  input  logic [HAW-1:0] rd_addr [NB],
  output logic [DW-1:0]  rd_data [NB]
);
  for (genvar b = 0; b < NB; b++) begin : g_bank
    sdp_ram #(.WIDTH(DW), .DEPTH(DEPTH)) u_ram (
      .clk    (clk),
      .we     (wr_en[b]),
      .wr_addr({wr_half, wr_addr[b]}),
      .wr_data(wr_data[b]),
      .re     (rd_en),
      .rd_addr({rd_half, rd_addr[b]}),
      .rd_data(rd_data[b])
    );
  end
endmodule
