// tb_ctrl: self-checking test of the controller. A program of 60 random
// 128-bit instructions (opcodes 0..7; 5..7 are not defined) is fetched from
// the behavioural memory with back-pressure. The queues are drained at
// random; each queue must deliver exactly the instructions of its opcodes
// (0 LOAD_INP, 1 LOAD_WGT, 2 COMP and LOAD_BIAS, 3 SAVE) in program order,
// undefined opcodes must be counted, and done must rise once everything has
// been dispatched and drained.
// The test values and stimulus are this testbench's own choice; the expected
// behaviour follows the architecture described in the design notes of the
// module under test.
`timescale 1ns/1ps
module tb_ctrl;
  import hdnn_pkg::*;
  logic clk = 0, rst_n = 1'b1;
  // the reset falls at 1 ns, before the first clock edge, so that no flop is
  // clocked with its power-on value
  initial #1 rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, busy, done;
  logic [31:0] inst_base; logic [15:0] inst_count; logic [7:0] bad_opcodes;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid; logic [31:0] mem_req_addr;
  logic [127:0] mem_rsp_data;
  logic [3:0] q_valid, q_pop, mod_busy; logic [127:0] q_data [4];
  ctrl dut (.*);
  logic z3, z4, z5, z6, z7;
  logic [6*4*8-1:0] zi; logic [6*16*8-1:0] zw; logic [31:0] zb;
  ext_mem #(.BYTES(1 << 16)) u_mem (.clk,
    .ins_req_valid(mem_req_valid), .ins_req_ready(mem_req_ready), .ins_req_addr(mem_req_addr),
    .ins_rsp_valid(mem_rsp_valid), .ins_rsp_data(mem_rsp_data),
    .inp_req_valid(1'b0), .inp_req_ready(z3), .inp_req_addr(32'd0), .inp_rsp_valid(z4), .inp_rsp_data(zi),
    .wgt_req_valid(1'b0), .wgt_req_ready(z5), .wgt_req_addr(32'd0), .wgt_rsp_valid(z6), .wgt_rsp_data(zw),
    .bias_req_valid(1'b0), .bias_req_ready(z7), .bias_req_addr(32'd0), .bias_rsp_valid(), .bias_rsp_data(zb),
    .out_wr_valid(1'b0), .out_wr_ready(), .out_wr_addr(32'd0), .out_wr_data('0), .out_wr_mask('0));

  logic [127:0] exp_q [4][$];
  int nbad = 0;

  initial begin
    #2_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) q_pop = q_valid & 4'($urandom);

  always @(posedge clk) if (rst_n)
    for (int q = 0; q < 4; q++)
      if (q_pop[q]) begin
        checks++;
        if (exp_q[q].size() == 0 || q_data[q] !== exp_q[q][0]) begin
          failures++;
          $display("FAIL queue %0d delivered %h", q, q_data[q]);
        end
        if (exp_q[q].size() > 0) void'(exp_q[q].pop_front());
      end

  initial begin
    localparam int N = 60, BASE = 32'h100;
    start = 0; inst_base = BASE; inst_count = N; mod_busy = '0;
    for (int i = 0; i < N; i++) begin
      logic [127:0] w;
      int op;
      for (int b = 0; b < 4; b++) w[b*32 +: 32] = $urandom;
      op = $urandom % 8;
      w[2:0] = 3'(op);
      for (int b = 0; b < 16; b++) u_mem.mem[BASE + i*16 + b] = w[b*8 +: 8];
      case (op)
        0: exp_q[0].push_back(w);
        1: exp_q[1].push_back(w);
        2, 3: exp_q[2].push_back(w);
        4: exp_q[3].push_back(w);
        default: nbad++;
      endcase
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    wait (done);
    checks++;
    if (bad_opcodes != nbad) begin failures++; $display("FAIL bad_opcodes %0d exp %0d", bad_opcodes, nbad); end
    for (int q = 0; q < 4; q++) begin
      checks++;
      if (exp_q[q].size() != 0) begin failures++; $display("FAIL queue %0d missing %0d", q, exp_q[q].size()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
