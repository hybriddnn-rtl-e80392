// tb_save: self-checking test of SAVE with the output buffer and the
// behavioural external memory (random back-pressure on the write port).
// The output buffer is filled with random entries; then five SAVE
// instructions write them out and every destination byte is compared with
// the value the entry holds for that (row, column, channel vector):
//   WINO-to-WINO (Wo = 7, so the last tile column is masked), WINO-to-SPAT,
//   WINO-to-WINO with 2 x 2 max pooling, SPAT-to-SPAT, SPAT-to-WINO.
// Each SAVE waits for an out-ready token and pushes one out-free token.
// The test values and stimulus are this testbench's own choice; the expected
// behaviour follows the architecture described in the design notes of the
// module under test.
`timescale 1ns/1ps
module tb_save;
  import hdnn_pkg::*;
  import tb_hdnn_pkg::*;
  localparam int PO = 4, PT = 6, M = 4, NBO = 16, VW = PO * 8, ODW = NBO * VW, OHAW = 10;
  logic clk = 0, rst_n = 1'b1;
  // the reset falls at 1 ns, before the first clock edge, so that no flop is
  // clocked with its power-on value
  initial #1 rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic inst_valid, inst_ready, busy, rdy_tok_valid, rdy_tok_pop, free_tok_push, saved;
  logic [127:0] inst;
  logic ob_rd_en, ob_rd_half; logic [OHAW-1:0] ob_rd_addr; logic [ODW-1:0] ob_rd_data;
  logic wr_valid, wr_ready; logic [31:0] wr_addr; logic [PT*VW-1:0] wr_data; logic [PT-1:0] wr_mask;
  save #(.PO(PO), .PT(PT)) dut (.*);
  logic wr_en, wr_half; logic [OHAW-1:0] wa; logic [ODW-1:0] wd;
  out_buffer #(.PO(PO), .PT(PT)) u_ob (.clk, .wr_en, .wr_half, .wr_addr(wa), .wr_data(wd),
    .rd_en(ob_rd_en), .rd_half(ob_rd_half), .rd_addr(ob_rd_addr), .rd_data(ob_rd_data));
  logic z1, z2, z3, z4, z5, z6, z7, z8;
  logic [127:0] zd; logic [PT*4*8-1:0] zi; logic [PT*4*PO*8-1:0] zw; logic [PO*8-1:0] zb;
  ext_mem #(.PI(4), .PO(PO), .PT(PT), .BYTES(1 << 16)) u_mem (.clk,
    .ins_req_valid(1'b0), .ins_req_ready(z1), .ins_req_addr(32'd0), .ins_rsp_valid(z2), .ins_rsp_data(zd),
    .inp_req_valid(1'b0), .inp_req_ready(z3), .inp_req_addr(32'd0), .inp_rsp_valid(z4), .inp_rsp_data(zi),
    .wgt_req_valid(1'b0), .wgt_req_ready(z5), .wgt_req_addr(32'd0), .wgt_rsp_valid(z6), .wgt_rsp_data(zw),
    .bias_req_valid(1'b0), .bias_req_ready(z7), .bias_req_addr(32'd0), .bias_rsp_valid(z8), .bias_rsp_data(zb),
    .out_wr_valid(wr_valid), .out_wr_ready(wr_ready), .out_wr_addr(wr_addr), .out_wr_data(wr_data),
    .out_wr_mask(wr_mask));

  logic [ODW-1:0] ent [16];
  int n_free = 0;
  always @(posedge clk) if (free_tok_push) n_free++;

  initial begin
    #2_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(inst_t ins);
    @(negedge clk);
    inst = ins; inst_valid = 1;
    @(posedge clk); @(negedge clk);
    inst_valid = 0;
    while (busy) @(negedge clk);
  endtask

  function automatic int px(int e, int pos, int o);
    return int'($signed(ent[e][(pos*PO + o)*8 +: 8]));
  endfunction

  task automatic cmp(int a, int exp, string what);
    checks++;
    if (int'($signed(u_mem.mem[a])) != exp) begin
      failures++;
      $display("FAIL %s addr %h got %0d exp %0d", what, a, $signed(u_mem.mem[a]), exp);
    end
  endtask

  initial begin
    int KV, WO;
    inst_valid = 0; inst = '0; rdy_tok_valid = 1; wr_en = 0; wr_half = 0; wa = '0; wd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < 16; e++) begin
      @(negedge clk);
      for (int q = 0; q < ODW / 32; q++) ent[e][q*32 +: 32] = $urandom;
      wr_en = 1; wr_half = 0; wa = OHAW'(e); wd = ent[e];
    end
    @(negedge clk); wr_en = 0;
    // 1. W2W, 2 vectors x 2 tiles, Wo = 7
    KV = 2; WO = 7;
    run(mk_save(6'b000011, 0, 32'h1000, WO, KV, 0, 1'b1, 1'b1, 2, 2));
    for (int k = 0; k < 2; k++) for (int y = 0; y < 2; y++)
      for (int i = 0; i < M; i++) for (int j = 0; j < M; j++) for (int o = 0; o < PO; o++)
        if (y*M + j < WO) cmp(32'h1000 + ((i*KV + k)*WO + y*M + j)*PO + o, px(k*2 + y, i*M + j, o), "W2W");
    // 2. W2S
    run(mk_save(6'b000011, 0, 32'h2000, WO, KV, 0, 1'b1, 1'b0, 2, 2));
    for (int k = 0; k < 2; k++) for (int y = 0; y < 2; y++)
      for (int i = 0; i < M; i++) for (int j = 0; j < M; j++) for (int o = 0; o < PO; o++)
        if (y*M + j < WO) cmp(32'h2000 + ((i*WO + y*M + j)*KV + k)*PO + o, px(k*2 + y, i*M + j, o), "W2S");
    // 3. W2W with 2x2 max pooling, pooled width 4
    WO = 4;
    run(mk_save(6'b000011, 0, 32'h3000, WO, KV, 2, 1'b1, 1'b1, 2, 2));
    for (int k = 0; k < 2; k++) for (int y = 0; y < 2; y++)
      for (int i = 0; i < 2; i++) for (int j = 0; j < 2; j++) for (int o = 0; o < PO; o++) begin
        int mx;
        mx = -999;
        for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++)
          if (px(k*2 + y, (2*i + a)*M + 2*j + b, o) > mx) mx = px(k*2 + y, (2*i + a)*M + 2*j + b, o);
        cmp(32'h3000 + ((i*KV + k)*WO + y*2 + j)*PO + o, mx, "W2W pool");
      end
    // 4. S2S, 1 group of PT vectors x 3 pixels
    KV = 6; WO = 3;
    run(mk_save(6'b000011, 0, 32'h4000, WO, KV, 0, 1'b0, 1'b0, 1, 3));
    for (int y = 0; y < 3; y++) for (int t = 0; t < PT; t++) for (int o = 0; o < PO; o++)
      cmp(32'h4000 + (y*KV + t)*PO + o, px(y, t, o), "S2S");
    // 5. S2W
    run(mk_save(6'b000011, 0, 32'h5000, WO, KV, 0, 1'b0, 1'b1, 1, 3));
    for (int y = 0; y < 3; y++) for (int t = 0; t < PT; t++) for (int o = 0; o < PO; o++)
      cmp(32'h5000 + (t*WO + y)*PO + o, px(y, t, o), "S2W");
    checks++;
    if (n_free != 5) begin failures++; $display("FAIL free tokens %0d", n_free); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
