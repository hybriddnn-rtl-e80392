// tb_gemm_core: self-checking test of one GEMM core (PI x PO MACs). Random
// signed 12-bit features and 8-bit weights, including the extreme values,
// against psum[o] = sum_p feat[p] * wgt[o][p]. Combinational; results are
// sampled 1 ns after the inputs change.
// The test values and stimulus are this testbench's own choice; the expected
// behaviour follows the architecture described in the design notes of the
// module under test.
`timescale 1ns/1ps
module tb_gemm_core;
  import hdnn_pkg::*;
  localparam int PI = PI_DEF, PO = PO_DEF;
  int checks = 0, failures = 0;
  logic signed [PW-1:0] feat [PI];
  logic signed [WW-1:0] wgt [PO][PI];
  logic signed [ACC_W-1:0] psum [PO];
  gemm_core #(.PI(PI), .PO(PO)) dut (.*);

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      int f [PI];
      int w [PO][PI];
      for (int p = 0; p < PI; p++) begin
        f[p] = (n < 4) ? ((n % 2) ? 2047 : -2048) : int'($urandom_range(0, 4095)) - 2048;
        feat[p] = PW'(f[p]);
        for (int o = 0; o < PO; o++) begin
          w[o][p] = (n < 4) ? ((n < 2) ? -128 : 127) : int'($urandom_range(0, 255)) - 128;
          wgt[o][p] = WW'(w[o][p]);
        end
      end
      #1;
      for (int o = 0; o < PO; o++) begin
        int s;
        s = 0;
        for (int p = 0; p < PI; p++) s += f[p] * w[o][p];
        checks++;
        if (psum[o] !== s) begin
          failures++;
          $display("FAIL n=%0d o=%0d got %0d exp %0d", n, o, psum[o], s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
