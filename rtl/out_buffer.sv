// out_buffer: ping-pong output feature-map buffer between COMP and SAVE.
//
// One word is one entry of COMP results: in Winograd mode an m x m output
// tile of PO channels, in Spatial mode PT channel vectors (PO x PT channels)
// of one pixel. The word is split into NB = max(m*m, PT) slots of PO x 8
// bits, the m(1) x m(1) x PO(PO x PT) partition of the output buffer.
// COMP writes a whole entry per cycle, SAVE reads one entry per cycle with
// one cycle of latency; the ping-pong half is the top address bit.
// The m x m x PO partition and ping-pong use follow the architecture; the
// entry width and slot count are this design's choice.
module out_buffer #(
  parameter int unsigned PO    = hdnn_pkg::PO_DEF,
  parameter int unsigned PT    = hdnn_pkg::PT_DEF,
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned M    = PT - 2,
  localparam int unsigned NB   = hdnn_pkg::max_u(M * M, PT),
  localparam int unsigned DW   = NB * PO * hdnn_pkg::FW,
  localparam int unsigned HAW  = $clog2(DEPTH) - 1
) (
  input  logic           clk,
  input  logic           wr_en,
  input  logic           wr_half,
  input  logic [HAW-1:0] wr_addr,
  input  logic [DW-1:0]  wr_data,
  input  logic           rd_en,
  input  logic           rd_half,
  input  logic [HAW-1:0] rd_addr,
  output logic [DW-1:0]  rd_data
);
  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[{wr_half, wr_addr}] <= wr_data;
    if (rd_en) rd_data <= mem[{rd_half, rd_addr}];
  end
endmodule
