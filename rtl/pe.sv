// pe: the reusable processing engine, a PT x PT array of GEMM cores.
//
// Core (i, j) receives its own PI-wide feature vector and PO x PI weight
// block and adds its PO products into accumulator R[i][j]. One valid cycle
// is one GEMV per core, PI x PO x PT^2 MACs in total. The clear input starts
// a new sum (first input-channel group of an output), otherwise results are
// added to R. R is registered: the sum including a cycle's inputs is visible
// the cycle after. The same array serves both CONV modes; the load manager
// decides what each core is fed (one Winograd element per core, or one
// output/input channel group pair per core in Spatial mode).
// The PT x PT array of PI x PO cores follows the architecture; the
// accumulator width and register placement are this design's choice.
module pe #(
  parameter int unsigned PI = hdnn_pkg::PI_DEF,
  parameter int unsigned PO = hdnn_pkg::PO_DEF,
  parameter int unsigned PT = hdnn_pkg::PT_DEF,
  localparam int unsigned NB = PT * PT
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              valid,
  input  logic                              clear,
  input  logic signed [hdnn_pkg::PW-1:0]    feat [NB][PI],
  input  logic signed [hdnn_pkg::WW-1:0]    wgt  [NB][PO][PI],
  output logic signed [hdnn_pkg::ACC_W-1:0] acc  [NB][PO]
);
  logic signed [hdnn_pkg::ACC_W-1:0] psum [NB][PO];

  for (genvar b = 0; b < NB; b++) begin : g_core
    gemm_core #(.PI(PI), .PO(PO)) u_core (
      .feat(feat[b]),
      .wgt (wgt[b]),
      .psum(psum[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NB; b++)
        for (int po = 0; po < PO; po++) acc[b][po] <= '0;
    end else if (valid) begin
      for (int b = 0; b < NB; b++)
        for (int po = 0; po < PO; po++)
          acc[b][po] <= (clear ? '0 : acc[b][po]) + psum[b][po];
    end
  end
endmodule
