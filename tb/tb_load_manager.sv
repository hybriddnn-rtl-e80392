// tb_load_manager: self-checking test of the load manager (input side of
// the PE) at PT = 6, PI = 4.
// Winograd mode: for random bank data, rotations and column masks the
// output must be V = sat12(B^T d B) with d[r][c] = bank[((r+rot_r) mod PT)
// * PT + (c+rot_c) mod PT] (zero where the column is masked). B^T of
// F(4x4, 3x3) is written out here independently of the design package.
// Also checks that large inputs saturate to the 12-bit range.
// Spatial mode: core (r, c) must receive bank (c, rot_c), gated by
// col_mask[0]. Combinational; sampled 1 ns after the inputs change.
// The test values and stimulus are this testbench's own choice; the expected
// behaviour follows the architecture described in the design notes of the
// module under test.
`timescale 1ns/1ps
module tb_load_manager;
  import hdnn_pkg::*;
  localparam int PI = PI_DEF, PT = 6, NB = PT * PT, DW = PI * FW, RW = 3;
  int checks = 0, failures = 0, n_sat = 0;
  logic wino;
  logic [RW-1:0] rot_r, rot_c;
  logic [PT-1:0] col_mask;
  logic [DW-1:0] bank_data [NB];
  logic signed [PW-1:0] feat [NB][PI];
  load_manager #(.PI(PI), .PT(PT)) dut (.*);

  const int BT [6][6] = '{'{4, 0,-5, 0, 1, 0},
                          '{0,-4,-4, 1, 1, 0},
                          '{0, 4,-4,-1, 1, 0},
                          '{0,-2,-1, 2, 1, 0},
                          '{0, 2,-1,-2, 1, 0},
                          '{0, 4, 0,-5, 0, 1}};

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 600; n++) begin
      int rr, rc, big;
      wino = (n % 3 != 2);
      rr = $urandom % PT; rc = $urandom % PT;
      rot_r = RW'(rr); rot_c = RW'(rc);
      col_mask = (n % 4 == 0) ? PT'($urandom) : '1;
      big = (n % 5 == 0);
      for (int b = 0; b < NB; b++)
        for (int p = 0; p < PI; p++)
          bank_data[b][p*FW +: FW] = big ? 8'($urandom) : 8'($urandom_range(0, 20) - 10);
      #1;
      for (int p = 0; p < PI; p++) begin
        int d [6][6];
        int t [6][6];
        for (int r = 0; r < PT; r++)
          for (int c = 0; c < PT; c++)
            d[r][c] = col_mask[c] ?
              int'($signed(bank_data[((r + rr) % PT) * PT + (c + rc) % PT][p*FW +: FW])) : 0;
        if (wino) begin
          for (int i = 0; i < PT; i++)
            for (int j = 0; j < PT; j++) begin
              t[i][j] = 0;
              for (int k = 0; k < PT; k++) t[i][j] += BT[i][k] * d[k][j];
            end
          for (int i = 0; i < PT; i++)
            for (int j = 0; j < PT; j++) begin
              int v;
              v = 0;
              for (int k = 0; k < PT; k++) v += t[i][k] * BT[j][k];
              if (v > 2047) begin v = 2047; n_sat++; end
              if (v < -2048) begin v = -2048; n_sat++; end
              checks++;
              if (feat[i*PT + j][p] !== PW'(v)) begin
                failures++;
                $display("FAIL wino n=%0d (%0d,%0d) lane %0d got %0d exp %0d", n, i, j, p,
                         feat[i*PT + j][p], v);
              end
            end
        end else begin
          for (int r = 0; r < PT; r++)
            for (int c = 0; c < PT; c++) begin
              int e;
              e = col_mask[0] ? int'($signed(bank_data[c * PT + rc][p*FW +: FW])) : 0;
              checks++;
              if (feat[r*PT + c][p] !== PW'(e)) begin
                failures++;
                $display("FAIL spat n=%0d core (%0d,%0d) lane %0d", n, r, c, p);
              end
            end
        end
      end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
