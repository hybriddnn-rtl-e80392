// tb_in_buffer: self-checking test of the banked ping-pong input buffer
// (PT x PT banks at the default PT = 6, PI = 4). Fills both halves of every
// bank with distinct random words through the parallel write port, then
// reads them back with a different random address per bank and checks each
// word one cycle after the read (latency 1), so that the banks, the half
// select and the per-bank addressing are all covered.
// The test values and stimulus are this testbench's own choice; the expected
// behaviour follows the architecture described in the design notes of the
// module under test.
`timescale 1ns/1ps
module tb_in_buffer;
  import hdnn_pkg::*;
  localparam int PI = PI_DEF, PT = PT_DEF, D = 64, NB = PT * PT, DW = PI * FW;
  localparam int HAW = $clog2(D) - 1;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_half, rd_en, rd_half;
  logic [NB-1:0] wr_en;
  logic [HAW-1:0] wr_addr [NB], rd_addr [NB];
  logic [DW-1:0] wr_data [NB], rd_data [NB];
  in_buffer #(.PI(PI), .PT(PT), .DEPTH(D)) dut (.*);
  logic [DW-1:0] model [2][NB][D/2];

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_en = 0; rd_half = 0; wr_half = 0; wr_en = '0;
    for (int b = 0; b < NB; b++) begin wr_addr[b] = '0; rd_addr[b] = '0; wr_data[b] = '0; end
    for (int h = 0; h < 2; h++)
      for (int a = 0; a < D / 2; a++) begin
        @(negedge clk);
        wr_half = h[0]; wr_en = '1;
        for (int b = 0; b < NB; b++) begin
          wr_addr[b] = HAW'(a);
          wr_data[b] = DW'($urandom);
          model[h][b][a] = wr_data[b];
        end
      end
    @(negedge clk);
    wr_en = '0;
    for (int i = 0; i < 400; i++) begin
      int ra [NB];
      int hh;
      @(negedge clk);
      rd_en = 1; hh = $urandom % 2; rd_half = hh[0];
      for (int b = 0; b < NB; b++) begin ra[b] = $urandom % (D / 2); rd_addr[b] = HAW'(ra[b]); end
      @(posedge clk); #1;
      rd_en = 0;
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (rd_data[b] !== model[hh][b][ra[b]]) begin
          failures++;
          $display("FAIL bank %0d half %0d addr %0d", b, hh, ra[b]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
