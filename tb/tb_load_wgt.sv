// tb_load_wgt: self-checking test of LOAD_WGT with the weight buffer and
// the behavioural external memory (random back-pressure). A LOAD_WGT of 5
// entries (5 x PT beats) into half 1 at buffer base 3 must leave bank
// (i, j) of entry e equal to the PI x PO bytes at DRAM offset
// ((e*PT + i)*PT + j)*PO*PI. It waits for a free token given late and must
// not fetch before it; it pushes one ready token.
// The test values and stimulus are this testbench's own choice; the expected
// behaviour follows the architecture described in the design notes of the
// module under test.
`timescale 1ns/1ps
module tb_load_wgt;
  import hdnn_pkg::*;
  import tb_hdnn_pkg::*;
  localparam int PI = 4, PO = 4, PT = 6, NB = PT * PT, WDW = PI * PO * WW, WHAW = 9, RW = 3;
  logic clk = 0, rst_n = 1'b1;
  // the reset falls at 1 ns, before the first clock edge, so that no flop is
  // clocked with its power-on value
  initial #1 rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic inst_valid, inst_ready, busy, free_tok_valid, free_tok_pop, rdy_tok_push;
  logic [127:0] inst;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [31:0] mem_req_addr;
  logic [PT*WDW-1:0] mem_rsp_data;
  logic wb_wr_en, wb_wr_half; logic [RW-1:0] wb_wr_row; logic [WHAW-1:0] wb_wr_addr;
  logic [WDW-1:0] wb_wr_data [PT];
  logic rd_en, rd_half; logic [WHAW-1:0] rd_addr; logic [WDW-1:0] rd_data [NB];
  load_wgt #(.PI(PI), .PO(PO), .PT(PT)) dut (.*);
  wgt_buffer #(.PI(PI), .PO(PO), .PT(PT)) u_wb (.clk, .wr_en(wb_wr_en), .wr_half(wb_wr_half),
    .wr_row(wb_wr_row), .wr_addr(wb_wr_addr), .wr_data(wb_wr_data), .rd_en, .rd_half, .rd_addr,
    .rd_data);
  logic z1, z2, z3, z4, z5, z6, z7;
  logic [127:0] zd; logic [PT*PI*8-1:0] zi; logic [PO*8-1:0] zb;
  ext_mem #(.PI(PI), .PO(PO), .PT(PT), .BYTES(1 << 16)) u_mem (.clk,
    .ins_req_valid(1'b0), .ins_req_ready(z1), .ins_req_addr(32'd0), .ins_rsp_valid(z2), .ins_rsp_data(zd),
    .inp_req_valid(1'b0), .inp_req_ready(z3), .inp_req_addr(32'd0), .inp_rsp_valid(z4), .inp_rsp_data(zi),
    .wgt_req_valid(mem_req_valid), .wgt_req_ready(mem_req_ready), .wgt_req_addr(mem_req_addr),
    .wgt_rsp_valid(mem_rsp_valid), .wgt_rsp_data(mem_rsp_data),
    .bias_req_valid(1'b0), .bias_req_ready(z5), .bias_req_addr(32'd0), .bias_rsp_valid(z6), .bias_rsp_data(zb),
    .out_wr_valid(1'b0), .out_wr_ready(z7), .out_wr_addr(32'd0), .out_wr_data('0), .out_wr_mask('0));

  int n_rdy = 0, early = 0;
  bit tok_given = 0;
  always @(posedge clk) begin
    if (rdy_tok_push) n_rdy++;
    if (mem_req_valid && !tok_given) early++;
  end

  initial begin
    #2_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    localparam int NE = 5, BASE = 32'h2000, BB = 3;
    inst_valid = 0; inst = '0; free_tok_valid = 0; rd_en = 0; rd_half = 0; rd_addr = '0;
    for (int a = 0; a < NE * PT * PT * PO * PI; a++) u_mem.mem[BASE + a] = 8'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    inst = mk_load(OP_LOAD_WGT, 6'b000011, 1, BB, BASE, 30'(NE), 0, 1'b0, 0, 0); inst_valid = 1;
    @(posedge clk); @(negedge clk); inst_valid = 0;
    repeat (20) @(negedge clk);
    tok_given = 1; free_tok_valid = 1;
    @(posedge clk); @(negedge clk); free_tok_valid = 0;
    while (busy) @(negedge clk);
    checks++;
    if (early != 0) begin failures++; $display("FAIL fetch before free token"); end
    checks++;
    if (n_rdy != 1) begin failures++; $display("FAIL ready tokens %0d", n_rdy); end
    for (int e = 0; e < NE; e++) begin
      @(negedge clk);
      rd_en = 1; rd_half = 1; rd_addr = WHAW'(BB + e);
      @(posedge clk); #1;
      rd_en = 0;
      for (int i = 0; i < PT; i++)
        for (int j = 0; j < PT; j++)
          for (int q = 0; q < PI * PO; q++) begin
            checks++;
            if (rd_data[i*PT + j][q*8 +: 8] !== u_mem.mem[BASE + ((e*PT + i)*PT + j)*PO*PI + q]) begin
              failures++;
              $display("FAIL entry %0d bank (%0d,%0d) byte %0d", e, i, j, q);
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
