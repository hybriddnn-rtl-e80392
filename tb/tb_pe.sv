// tb_pe: self-checking test of the PE (PT x PT GEMM cores with
// accumulators). Random runs of valid beats, the first with clear, against
// a model acc[b][o] = sum over beats of sum_p feat[b][p] * wgt[b][o][p];
// idle cycles (valid low) must hold the accumulators. The accumulator is
// updated one cycle after its beat (latency 1, one beat per cycle).
// The test values and stimulus are this testbench's own choice; the expected
// behaviour follows the architecture described in the design notes of the
// module under test.
`timescale 1ns/1ps
module tb_pe;
  import hdnn_pkg::*;
  localparam int PI = PI_DEF, PO = PO_DEF, PT = PT_DEF, NB = PT * PT;
  logic clk = 0, rst_n = 1'b1;
  // the reset falls at 1 ns, before the first clock edge, so that no flop is
  // clocked with its power-on value
  initial #1 rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic valid, clear;
  logic signed [PW-1:0] feat [NB][PI];
  logic signed [WW-1:0] wgt [NB][PO][PI];
  logic signed [ACC_W-1:0] acc [NB][PO];
  pe #(.PI(PI), .PO(PO), .PT(PT)) dut (.*);
  int model [NB][PO];

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    valid = 0; clear = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 20; run++) begin
      int len;
      len = 1 + $urandom % 8;
      for (int t = 0; t < len; t++) begin
        @(negedge clk);
        valid = ($urandom % 4 != 0) || t == 0;
        clear = (t == 0);
        for (int b = 0; b < NB; b++)
          for (int p = 0; p < PI; p++) begin
            feat[b][p] = PW'($urandom_range(0, 4095) - 2048);
            for (int o = 0; o < PO; o++) wgt[b][o][p] = WW'($urandom_range(0, 255) - 128);
          end
        if (valid)
          for (int b = 0; b < NB; b++)
            for (int o = 0; o < PO; o++) begin
              int s;
              s = 0;
              for (int p = 0; p < PI; p++) s += int'(feat[b][p]) * int'(wgt[b][o][p]);
              model[b][o] = (clear ? 0 : model[b][o]) + s;
            end
      end
      @(negedge clk);
      valid = 0; clear = 0;
      for (int b = 0; b < NB; b++)
        for (int o = 0; o < PO; o++) begin
          checks++;
          if (acc[b][o] !== model[b][o]) begin
            failures++;
            $display("FAIL run %0d core %0d o %0d got %0d exp %0d", run, b, o, acc[b][o], model[b][o]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
