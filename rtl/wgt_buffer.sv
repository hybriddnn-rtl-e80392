// wgt_buffer: ping-pong weight buffer, PT x PT banks of PO x PI weights.
//
// Bank (i, j) feeds GEMM core (i, j) of the PE; a word is the PO x PI weight
// block that core needs in one cycle. In Winograd mode (i, j) is the element
// of the transformed kernel U = G g G^T; in Spatial mode i selects one of PT
// output-channel groups and j one of PT input-channel groups (the partition
// factors PO(PO x PT), PI(PI x PT), PT(1), PT(1) of the weight buffer).
// LOAD_WGT writes one bank row (PT banks, one external-memory beat of
// PI x PO x PT weights) per cycle; COMP reads all PT x PT banks at one common
// address. Reads have one cycle of latency; the ping-pong half is the top
// address bit.
// The PT x PT bank grid and ping-pong use follow the architecture; the one-
// beat-per-row write order is this design's choice.
module wgt_buffer #(
  parameter int unsigned PI    = hdnn_pkg::PI_DEF,
  parameter int unsigned PO    = hdnn_pkg::PO_DEF,
  parameter int unsigned PT    = hdnn_pkg::PT_DEF,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned NB   = PT * PT,
  localparam int unsigned DW   = PI * PO * hdnn_pkg::WW,
  localparam int unsigned HAW  = $clog2(DEPTH) - 1,
  localparam int unsigned RW   = (PT > 1) ? $clog2(PT) : 1
) (
  input  logic           clk,
  input  logic           wr_en,
  input  logic           wr_half,
  input  logic [RW-1:0]  wr_row,
  input  logic [HAW-1:0] wr_addr,
  input  logic [DW-1:0]  wr_data [PT],
  input  logic           rd_en,
  input  logic           rd_half,
  input  logic [HAW-1:0] rd_addr,
  output logic [DW-1:0]  rd_data [NB]
);
  for (genvar i = 0; i < PT; i++) begin : g_row
    for (genvar j = 0; j < PT; j++) begin : g_col
      sdp_ram #(.WIDTH(DW), .DEPTH(DEPTH)) u_ram (
        .clk    (clk),
        .we     (wr_en && (wr_row == RW'(i))),
        .wr_addr({wr_half, wr_addr}),
        .wr_data(wr_data[j]),
        .re     (rd_en),
        .rd_addr({rd_half, rd_addr}),
        .rd_data(rd_data[i*PT+j])
      );
    end
  end
endmodule
