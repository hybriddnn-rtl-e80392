// tb_sdp_ram: self-checking test of the simple dual-port RAM bank.
// Random writes and reads against an array model; read data must appear
// exactly one cycle after the read (synchronous read, latency 1), and a
// read of an address not being written returns the stored word.
// The test values and stimulus are this testbench's own choice; the expected
// behaviour follows the architecture described in the design notes of the
// module under test.
`timescale 1ns/1ps
module tb_sdp_ram;
  localparam int W = 16, D = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we, re;
  logic [$clog2(D)-1:0] wr_addr, rd_addr;
  logic [W-1:0] wr_data, rd_data;
  sdp_ram #(.WIDTH(W), .DEPTH(D)) dut (.*);
  logic [W-1:0] model [D];
  bit           valid [D];

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] exp;
    bit do_chk;
    we = 0; re = 0; wr_addr = 0; rd_addr = 0; wr_data = 0;
    for (int i = 0; i < D; i++) valid[i] = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      we = $urandom % 2; re = $urandom % 2;
      wr_addr = $urandom; rd_addr = $urandom; wr_data = $urandom;
      if (re && valid[rd_addr] && !(we && wr_addr == rd_addr)) begin
        do_chk = 1; exp = model[rd_addr];
      end else do_chk = 0;
      @(posedge clk);
      if (we) begin model[wr_addr] = wr_data; valid[wr_addr] = 1; end
      #1;
      if (do_chk) begin
        checks++;
        if (rd_data !== exp) begin
          failures++;
          $display("FAIL read addr %0d got %h exp %h", rd_addr, rd_data, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
