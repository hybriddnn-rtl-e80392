// tb_hybriddnn_top: full-size test of the top level at its default
// parameters (NI = 6 accelerator instances, PI = PO = 4, PT = 6). Each
// instance gets its own behavioural external memory with random
// back-pressure and runs one CONV layer compiled by the generator:
// even instances a Winograd 3x3 layer (pad 1, IS dataflow, saved
// WINO-to-SPAT), odd instances a Spatial 3x3 layer (pad 1, 2 weight groups,
// WS dataflow, saved SPAT-to-WINO). All instances start together; every
// output byte of every instance is checked against the reference model,
// and each instance must report done with no undefined opcodes.
// The test values and stimulus are this testbench's own choice; the expected
// behaviour follows the architecture described in the design notes of the
// module under test.
`timescale 1ns/1ps
module tb_hybriddnn_top;
  import hdnn_pkg::*;
  import tb_hdnn_pkg::*;
  localparam int NI = 6, PI = PI_DEF, PO = PO_DEF, PT = PT_DEF, AW = 32;
  logic clk = 0, rst_n = 1'b1;
  // the reset falls at 1 ns, before the first clock edge, so that no flop is
  // clocked with its power-on value
  initial #1 rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start [NI]; logic [AW-1:0] inst_base [NI]; logic [15:0] inst_count [NI];
  logic busy [NI], done [NI]; logic [7:0] bad_opcodes [NI];
  logic ins_req_valid [NI], ins_req_ready [NI], ins_rsp_valid [NI];
  logic [AW-1:0] ins_req_addr [NI]; logic [127:0] ins_rsp_data [NI];
  logic inp_req_valid [NI], inp_req_ready [NI], inp_rsp_valid [NI];
  logic [AW-1:0] inp_req_addr [NI]; logic [PT*PI*8-1:0] inp_rsp_data [NI];
  logic wgt_req_valid [NI], wgt_req_ready [NI], wgt_rsp_valid [NI];
  logic [AW-1:0] wgt_req_addr [NI]; logic [PT*PI*PO*8-1:0] wgt_rsp_data [NI];
  logic bias_req_valid [NI], bias_req_ready [NI], bias_rsp_valid [NI];
  logic [AW-1:0] bias_req_addr [NI]; logic [PO*8-1:0] bias_rsp_data [NI];
  logic out_wr_valid [NI], out_wr_ready [NI]; logic [AW-1:0] out_wr_addr [NI];
  logic [PT*PO*8-1:0] out_wr_data [NI]; logic [PT-1:0] out_wr_mask [NI];

  hybriddnn_top dut (.*);

  initial begin
    #20_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int turn = 0, ready_cnt = 0, done_cnt = 0;
  bit go = 0;

  for (genvar g = 0; g < NI; g++) begin : g_inst
    ext_mem #(.PI(PI), .PO(PO), .PT(PT), .BYTES(1 << 19)) u_mem (.clk,
      .ins_req_valid(ins_req_valid[g]), .ins_req_ready(ins_req_ready[g]), .ins_req_addr(ins_req_addr[g]),
      .ins_rsp_valid(ins_rsp_valid[g]), .ins_rsp_data(ins_rsp_data[g]),
      .inp_req_valid(inp_req_valid[g]), .inp_req_ready(inp_req_ready[g]), .inp_req_addr(inp_req_addr[g]),
      .inp_rsp_valid(inp_rsp_valid[g]), .inp_rsp_data(inp_rsp_data[g]),
      .wgt_req_valid(wgt_req_valid[g]), .wgt_req_ready(wgt_req_ready[g]), .wgt_req_addr(wgt_req_addr[g]),
      .wgt_rsp_valid(wgt_rsp_valid[g]), .wgt_rsp_data(wgt_rsp_data[g]),
      .bias_req_valid(bias_req_valid[g]), .bias_req_ready(bias_req_ready[g]), .bias_req_addr(bias_req_addr[g]),
      .bias_rsp_valid(bias_rsp_valid[g]), .bias_rsp_data(bias_rsp_data[g]),
      .out_wr_valid(out_wr_valid[g]), .out_wr_ready(out_wr_ready[g]), .out_wr_addr(out_wr_addr[g]),
      .out_wr_data(out_wr_data[g]), .out_wr_mask(out_wr_mask[g]));

    layer_t L;
    int fi[], fo[];
    int Ho, Wo;

    initial begin
      byte unsigned img[int];
      inst_t prog[$];
      start[g] = 0; inst_base[g] = '0; inst_count[g] = '0;
      wait (turn == g);
      reset_gen();
      if (g % 2 == 0) begin
        L = '{H: 8, W: 8, C: 8, K: 24, R: 3, pad: 1, stride: 1, wino: 1, relu: 1, dst_wino: 0,
              ws: 0, shift: 9, pool: 0, gk: 1, in_base: 32'h10000, out_base: 32'h20000,
              w_base: 32'h40000, b_base: 32'h7F000};
        fi = new[8 * 8 * 8];
      end else begin
        L = '{H: 4, W: 4, C: 24, K: 48, R: 3, pad: 1, stride: 1, wino: 0, relu: 1, dst_wino: 1,
              ws: 1, shift: 7, pool: 0, gk: 2, in_base: 32'h10000, out_base: 32'h20000,
              w_base: 32'h40000, b_base: 32'h7F000};
        fi = new[24 * 4 * 4];
      end
      foreach (fi[i]) fi[i] = $urandom_range(0, 40) - 20;
      gen_layer(L, PI, PO, PT, 1'b1, fi, img, prog, fo, Ho, Wo);
      foreach (img[a]) u_mem.mem[a] = img[a];
      foreach (prog[i]) for (int b = 0; b < 16; b++) u_mem.mem[i*16 + b] = prog[i][b*8 +: 8];
      inst_count[g] = 16'(prog.size());
      ready_cnt++;
      turn++;
      wait (go);
      @(negedge clk); start[g] = 1;
      @(negedge clk); start[g] = 0;
      wait (done[g]);
      repeat (4) @(posedge clk);
      checks++;
      if (bad_opcodes[g] != 0) begin failures++; $display("FAIL inst %0d bad opcodes", g); end
      for (int k = 0; k < L.K; k++)
        for (int h = 0; h < Ho; h++)
          for (int w = 0; w < Wo; w++) begin
            int a;
            a = fm_addr(L.out_base, L.dst_wino, Ho, Wo, L.K / PO, PO, k, h, w);
            checks++;
            if (s8(u_mem.mem[a]) != fo[(k*Ho + h)*Wo + w]) begin
              failures++;
              $display("FAIL inst %0d k=%0d h=%0d w=%0d", g, k, h, w);
            end
          end
      $display("instance %0d (%s) done", g, L.wino ? "Winograd" : "Spatial");
      done_cnt++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (ready_cnt == NI);
    go = 1;
    wait (done_cnt == NI);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
