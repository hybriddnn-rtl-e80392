// save_manager: turns the PE accumulators into output-buffer partial sums.
//
// Winograd mode: for each of the PO output channels the PT x PT accumulator
// array R is transformed on-line, Y = A^T R A, giving one m x m output tile
// (slot i*m + j holds Y[i][j]). Spatial mode: the accumulators of each core
// row are summed over the PT input-channel groups (the columns), giving the
// partial sums of PT output-channel vectors (slot i holds group i). Unused
// slots are zero. Purely combinational. Both functions follow the
// architecture description of the save manager.
module save_manager #(
  parameter int unsigned PO = hdnn_pkg::PO_DEF,
  parameter int unsigned PT = hdnn_pkg::PT_DEF,
  localparam int unsigned NB  = PT * PT,
  localparam int unsigned M   = PT - 2,
  localparam int unsigned NBO = hdnn_pkg::max_u(M * M, PT)
) (
  input  logic                              wino,
  input  logic signed [hdnn_pkg::ACC_W-1:0] acc [NB][PO],
  output logic signed [hdnn_pkg::ACC_W-1:0] y   [NBO][PO]
);
  logic signed [hdnn_pkg::ACC_W-1:0] t [M][PT];

  always_comb begin
    for (int s = 0; s < NBO; s++)
      for (int o = 0; o < PO; o++) y[s][o] = '0;
    for (int i = 0; i < M; i++)
      for (int j = 0; j < PT; j++) t[i][j] = '0;
    for (int o = 0; o < PO; o++) begin
      if (wino) begin
        // t = A^T R  (m x PT)
        for (int i = 0; i < M; i++)
          for (int j = 0; j < PT; j++) begin
            t[i][j] = '0;
            for (int k = 0; k < PT; k++)
              t[i][j] += hdnn_pkg::ACC_W'(hdnn_pkg::at_coef(PT, i, k)) * acc[k*PT+j][o];
          end
        // y = t A  (m x m)
        for (int i = 0; i < M; i++)
          for (int j = 0; j < M; j++)
            for (int k = 0; k < PT; k++)
              y[i*M+j][o] += t[i][k] * hdnn_pkg::ACC_W'(hdnn_pkg::at_coef(PT, j, k));
      end else begin
        for (int i = 0; i < PT; i++)
          for (int j = 0; j < PT; j++)
            y[i][o] += acc[i*PT+j][o];
      end
    end
  end
endmodule
