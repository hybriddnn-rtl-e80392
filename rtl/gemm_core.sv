// gemm_core: one PI x PO broadcast array of multiply-accumulate units.
//
// The PI input-channel values in feat are broadcast to PO rows of MACs; row
// po multiplies them with its PI weights and sums the products, so the core
// computes one matrix-vector product (PO outputs from PI inputs) per cycle.
// Purely combinational; the PE registers and accumulates the result. The
// array shape follows the architecture; the operand widths are the
// published 12-bit features and 8-bit weights.
module gemm_core #(
  parameter int unsigned PI = hdnn_pkg::PI_DEF,
  parameter int unsigned PO = hdnn_pkg::PO_DEF
) (
  input  logic signed [hdnn_pkg::PW-1:0]    feat [PI],
  input  logic signed [hdnn_pkg::WW-1:0]    wgt  [PO][PI],
  output logic signed [hdnn_pkg::ACC_W-1:0] psum [PO]
);
  always_comb begin
    for (int po = 0; po < PO; po++) begin
      psum[po] = '0;
      for (int pi = 0; pi < PI; pi++) begin
        psum[po] += hdnn_pkg::ACC_W'(feat[pi] * wgt[po][pi]);
      end
    end
  end
endmodule
