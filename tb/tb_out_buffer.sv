// tb_out_buffer: self-checking test of the ping-pong output buffer. Random
// writes and reads of whole entries (max(m*m, PT) vectors of PO bytes) of
// both halves against an array model; read data is checked one cycle after
// the read.
// The test values and stimulus are this testbench's own choice; the expected
// behaviour follows the architecture described in the design notes of the
// module under test.
`timescale 1ns/1ps
module tb_out_buffer;
  import hdnn_pkg::*;
  localparam int PO = PO_DEF, PT = PT_DEF, D = 64, M = PT - 2;
  localparam int NB = (M * M > PT) ? M * M : PT, DW = NB * PO * FW, HAW = $clog2(D) - 1;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en, wr_half, rd_en, rd_half;
  logic [HAW-1:0] wr_addr, rd_addr;
  logic [DW-1:0] wr_data, rd_data;
  out_buffer #(.PO(PO), .PT(PT), .DEPTH(D)) dut (.*);
  logic [DW-1:0] model [D];
  bit valid [D];

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_half = 0; rd_half = 0; wr_addr = 0; rd_addr = 0; wr_data = 0;
    for (int i = 0; i < D; i++) valid[i] = 0;
    for (int n = 0; n < 2000; n++) begin
      int wa, ra;
      bit do_chk;
      logic [DW-1:0] exp;
      @(negedge clk);
      wa = $urandom % D; ra = $urandom % D;
      wr_en = $urandom % 2; rd_en = $urandom % 2;
      {wr_half, wr_addr} = wa[HAW:0]; {rd_half, rd_addr} = ra[HAW:0];
      for (int i = 0; i < DW / 32; i++) wr_data[i*32 +: 32] = $urandom;
      do_chk = rd_en && valid[ra] && !(wr_en && wa == ra);
      exp = model[ra];
      @(posedge clk);
      if (wr_en) begin model[wa] = wr_data; valid[wa] = 1; end
      #1;
      if (do_chk) begin
        checks++;
        if (rd_data !== exp) begin failures++; $display("FAIL entry %0d", ra); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
