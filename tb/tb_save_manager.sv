// tb_save_manager: self-checking test of the save manager (output side of
// the PE) at PT = 6, PO = 4.
// Winograd mode is checked through the Winograd identity: for a random
// 6 x 6 input tile d and 3 x 3 kernel g, the PE result U (.) V with
// U = (24 G) g (24 G)^T and V = B^T d B is fed in, and the save manager's
// A^T (U (.) V) A must equal 576 times the direct 4 x 4 correlation of d and
// g. G, B^T (and so the expected values) are written out here, independently
// of the design package. Spatial mode: y[i] = sum over the PT cores of row i.
// Combinational; sampled 1 ns after the inputs change.
// The test values and stimulus are this testbench's own choice; the expected
// behaviour follows the architecture described in the design notes of the
// module under test.
`timescale 1ns/1ps
module tb_save_manager;
  import hdnn_pkg::*;
  localparam int PO = PO_DEF, PT = 6, NB = PT * PT, M = 4;
  localparam int NBO = (M * M > PT) ? M * M : PT;
  int checks = 0, failures = 0;
  logic wino;
  logic signed [ACC_W-1:0] acc [NB][PO];
  logic signed [ACC_W-1:0] y [NBO][PO];
  save_manager #(.PO(PO), .PT(PT)) dut (.*);

  const int BT [6][6] = '{'{4, 0,-5, 0, 1, 0},
                          '{0,-4,-4, 1, 1, 0},
                          '{0, 4,-4,-1, 1, 0},
                          '{0,-2,-1, 2, 1, 0},
                          '{0, 2,-1,-2, 1, 0},
                          '{0, 4, 0,-5, 0, 1}};
  const int G24 [6][3] = '{'{ 6, 0, 0},
                           '{-4,-4,-4},
                           '{-4, 4,-4},
                           '{ 1, 2, 4},
                           '{ 1,-2, 4},
                           '{ 0, 0,24}};

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 300; n++) begin
      int d [PO][6][6];
      int g [PO][3][3];
      wino = (n % 2 == 0);
      if (wino) begin
        for (int o = 0; o < PO; o++) begin
          int t [6][6];
          int v [6][6];
          int gt [6][3];
          int u [6][6];
          for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) d[o][i][j] = $urandom_range(0, 20) - 10;
          for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) g[o][i][j] = $urandom_range(0, 8) - 4;
          for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
            t[i][j] = 0;
            for (int k = 0; k < 6; k++) t[i][j] += BT[i][k] * d[o][k][j];
          end
          for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
            v[i][j] = 0;
            for (int k = 0; k < 6; k++) v[i][j] += t[i][k] * BT[j][k];
          end
          for (int i = 0; i < 6; i++) for (int j = 0; j < 3; j++) begin
            gt[i][j] = 0;
            for (int k = 0; k < 3; k++) gt[i][j] += G24[i][k] * g[o][k][j];
          end
          for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
            u[i][j] = 0;
            for (int k = 0; k < 3; k++) u[i][j] += gt[i][k] * G24[j][k];
            acc[i*6 + j][o] = u[i][j] * v[i][j];
          end
        end
        #1;
        for (int o = 0; o < PO; o++)
          for (int a = 0; a < M; a++)
            for (int b = 0; b < M; b++) begin
              int s;
              s = 0;
              for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) s += d[o][a+i][b+j] * g[o][i][j];
              checks++;
              if (y[a*M + b][o] !== 576 * s) begin
                failures++;
                $display("FAIL wino n=%0d o=%0d (%0d,%0d) got %0d exp %0d", n, o, a, b,
                         y[a*M + b][o], 576 * s);
              end
            end
      end else begin
        for (int b = 0; b < NB; b++) for (int o = 0; o < PO; o++) acc[b][o] = $urandom_range(0, 200000) - 100000;
        #1;
        for (int i = 0; i < PT; i++)
          for (int o = 0; o < PO; o++) begin
            int s;
            s = 0;
            for (int j = 0; j < PT; j++) s += acc[i*PT + j][o];
            checks++;
            if (y[i][o] !== s) begin failures++; $display("FAIL spat n=%0d row %0d o %0d", n, i, o); end
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
