// tb_wgt_buffer: self-checking test of the ping-pong weight buffer. Each
// write fills one bank row (PT banks) of one entry, as one external-memory
// beat does; a read returns all PT x PT banks of one entry one cycle later.
// The model keeps bank (row i, column j) = wr_data[j] of the write with
// wr_row = i.
// The test values and stimulus are this testbench's own choice; the expected
// behaviour follows the architecture described in the design notes of the
// module under test.
`timescale 1ns/1ps
module tb_wgt_buffer;
  import hdnn_pkg::*;
  localparam int PI = PI_DEF, PO = PO_DEF, PT = PT_DEF, D = 32, NB = PT * PT;
  localparam int DW = PI * PO * WW, HAW = $clog2(D) - 1, RW = $clog2(PT);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en, wr_half, rd_en, rd_half;
  logic [RW-1:0] wr_row;
  logic [HAW-1:0] wr_addr, rd_addr;
  logic [DW-1:0] wr_data [PT], rd_data [NB];
  wgt_buffer #(.PI(PI), .PO(PO), .PT(PT), .DEPTH(D)) dut (.*);
  logic [DW-1:0] model [2][D/2][NB];

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [DW-1:0] rnd();
    logic [DW-1:0] v;
    for (int i = 0; i < DW / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    wr_en = 0; rd_en = 0; wr_half = 0; rd_half = 0; wr_row = 0; wr_addr = 0; rd_addr = 0;
    for (int j = 0; j < PT; j++) wr_data[j] = '0;
    for (int h = 0; h < 2; h++)
      for (int a = 0; a < D / 2; a++)
        for (int i = 0; i < PT; i++) begin
          @(negedge clk);
          wr_en = 1; wr_half = h[0]; wr_addr = HAW'(a); wr_row = RW'(i);
          for (int j = 0; j < PT; j++) begin
            wr_data[j] = rnd();
            model[h][a][i*PT + j] = wr_data[j];
          end
        end
    @(negedge clk);
    wr_en = 0;
    for (int n = 0; n < 200; n++) begin
      int hh, aa;
      @(negedge clk);
      hh = $urandom % 2; aa = $urandom % (D / 2);
      rd_en = 1; rd_half = hh[0]; rd_addr = HAW'(aa);
      @(posedge clk); #1;
      rd_en = 0;
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (rd_data[b] !== model[hh][aa][b]) begin
          failures++;
          $display("FAIL bank %0d half %0d entry %0d", b, hh, aa);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
