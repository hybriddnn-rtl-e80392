// load_manager: feeds the PE from the input-buffer banks in either mode.
//
// Winograd mode: the PT x PT bank words form the input tile d, rotated by
// (rot_r, rot_c) because bank (i, j) holds rows/columns congruent to i, j
// mod PT. Columns whose col_mask bit is clear (outside the stored width) are
// zero. The module computes V = B^T d B on-line per PI channel and
// saturates V to the 12-bit PE feature width; GEMM core (i, j) gets V[i][j].
// Spatial mode: bank column rot_c holds PT channel vectors of the pixel being
// processed; vector j goes to every core of column j (broadcast over the PT
// output-channel groups of the rows). Purely combinational.
// The transform and the broadcast follow the architecture; the 12-bit
// saturation is this design's way of fitting the published 12-bit PE width.
module load_manager #(
  parameter int unsigned PI = hdnn_pkg::PI_DEF,
  parameter int unsigned PT = hdnn_pkg::PT_DEF,
  localparam int unsigned NB = PT * PT,
  localparam int unsigned DW = PI * hdnn_pkg::FW,
  localparam int unsigned RW = (PT > 1) ? $clog2(PT) : 1
) (
  input  logic                           wino,
  input  logic [RW-1:0]                  rot_r,
  input  logic [RW-1:0]                  rot_c,
  input  logic [PT-1:0]                  col_mask,
  input  logic [DW-1:0]                  bank_data [NB],
  output logic signed [hdnn_pkg::PW-1:0] feat [NB][PI]
);
  localparam int PMAX = (1 <<< (hdnn_pkg::PW - 1)) - 1;
  localparam int PMIN = -(1 <<< (hdnn_pkg::PW - 1));

  function automatic logic signed [hdnn_pkg::PW-1:0] sat_pw(int v);
    if (v > PMAX) return hdnn_pkg::PW'(PMAX);
    if (v < PMIN) return hdnn_pkg::PW'(PMIN);
    return hdnn_pkg::PW'(v);
  endfunction

  int d   [PT][PT];
  int tmp [PT][PT];
  int v   [PT][PT];

  int br, bc;

  always_comb begin
    br = 0;
    bc = 0;
    for (int b = 0; b < NB; b++)
      for (int p = 0; p < PI; p++) feat[b][p] = '0;
    for (int a = 0; a < PT; a++)
      for (int c = 0; c < PT; c++) begin
        d[a][c] = 0; tmp[a][c] = 0; v[a][c] = 0;
      end
    if (wino) begin
      for (int p = 0; p < PI; p++) begin
        for (int tr = 0; tr < PT; tr++)
          for (int tc = 0; tc < PT; tc++) begin
            br = (tr + int'(rot_r)) % PT;
            bc = (tc + int'(rot_c)) % PT;
            d[tr][tc] = col_mask[tc] ?
              int'($signed(bank_data[br*PT+bc][p*hdnn_pkg::FW +: hdnn_pkg::FW])) : 0;
          end
        // tmp = B^T d
        for (int i = 0; i < PT; i++)
          for (int j = 0; j < PT; j++) begin
            tmp[i][j] = 0;
            for (int k = 0; k < PT; k++)
              tmp[i][j] += hdnn_pkg::bt_coef(PT, i, k) * d[k][j];
          end
        // v = (B^T d) B
        for (int i = 0; i < PT; i++)
          for (int j = 0; j < PT; j++) begin
            v[i][j] = 0;
            for (int k = 0; k < PT; k++)
              v[i][j] += tmp[i][k] * hdnn_pkg::bt_coef(PT, j, k);
            feat[i*PT+j][p] = sat_pw(v[i][j]);
          end
      end
    end else begin
      for (int tr = 0; tr < PT; tr++)
        for (int tc = 0; tc < PT; tc++)
          for (int p = 0; p < PI; p++)
            feat[tr*PT+tc][p] = col_mask[0] ? hdnn_pkg::PW'($signed(
              bank_data[tc*PT + int'(rot_c)][p*hdnn_pkg::FW +: hdnn_pkg::FW])) : '0;
    end
  end
endmodule
