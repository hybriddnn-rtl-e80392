// tb_comp: self-checking test of the COMP module with its three buffers
// (PT = 6, PI = PO = 4).
// The input and weight buffers are filled with random words through their
// write ports and a LOAD_BIAS instruction fetches bias vectors from a small
// responder. Then two COMP instructions run:
//   1. Spatial, 1 x 1 tap, IC = 2, OC = 2, OW = 3: core row i (output
//      vector k*PT+i) must receive the sum over channel groups c and core
//      columns j of bank (j, w mod PT) word (w div PT)*IC + c times weight
//      bank (i, j) word k*IC + c.
//   2. Winograd, one 6 x 6 tile, IC = 2, OC = 2: the output entry must be
//      A^T [sum_c U (.) sat12(B^T d B)] A.
// Both are quantised as relu(sat8((acc >>> shift) + bias)) and compared
// entry by entry in the output buffer. The test also checks that COMP does
// not read before its dependency tokens arrive, that it pops and pushes the
// tokens named in DEPT_FLAG, and that it needs at most OC*OW*IC + 8 cycles
// from the tokens to the out-ready token (one (k, y, c) step per cycle).
// The test values and stimulus are this testbench's own choice; the expected
// behaviour follows the architecture described in the design notes of the
// module under test.
`timescale 1ns/1ps
module tb_comp;
  import hdnn_pkg::*;
  import tb_hdnn_pkg::*;
  localparam int PI = 4, PO = 4, PT = 6, NB = PT * PT, M = PT - 2;
  localparam int IN_D = 2048, WGT_D = 1024, OUT_D = 2048;
  localparam int IDW = PI * FW, WDW = PI * PO * WW, NBO = M * M, ODW = NBO * PO * FW;
  localparam int IHAW = 10, WHAW = 9, OHAW = 10, RW = 3;
  logic clk = 0, rst_n = 1'b1;
  // the reset falls at 1 ns, before the first clock edge, so that no flop is
  // clocked with its power-on value
  initial #1 rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic inst_valid, inst_ready, busy;
  logic [127:0] inst;
  logic inp_tok_valid, inp_tok_pop, inp_free_push, wgt_tok_valid, wgt_tok_pop, wgt_free_push;
  logic out_free_valid, out_free_pop, out_tok_push;
  logic ib_rd_en, ib_rd_half, wb_rd_en, wb_rd_half, ob_wr_en, ob_wr_half;
  logic [IHAW-1:0] ib_rd_addr [NB];
  logic [IDW-1:0] ib_rd_data [NB];
  logic [WHAW-1:0] wb_rd_addr;
  logic [WDW-1:0] wb_rd_data [NB];
  logic [OHAW-1:0] ob_wr_addr;
  logic [ODW-1:0] ob_wr_data;
  logic bias_req_valid, bias_req_ready, bias_rsp_valid;
  logic [31:0] bias_req_addr;
  logic [PO*8-1:0] bias_rsp_data;

  comp #(.PI(PI), .PO(PO), .PT(PT)) dut (.*);

  // buffers (write side driven by the testbench)
  logic ib_wr_half; logic [NB-1:0] ib_wr_en;
  logic [IHAW-1:0] ib_wr_addr [NB]; logic [IDW-1:0] ib_wr_data [NB];
  in_buffer #(.PI(PI), .PT(PT), .DEPTH(IN_D)) u_ib (.clk, .wr_half(ib_wr_half), .wr_en(ib_wr_en),
    .wr_addr(ib_wr_addr), .wr_data(ib_wr_data), .rd_en(ib_rd_en), .rd_half(ib_rd_half),
    .rd_addr(ib_rd_addr), .rd_data(ib_rd_data));
  logic wb_wr_en, wb_wr_half; logic [RW-1:0] wb_wr_row; logic [WHAW-1:0] wb_wr_addr;
  logic [WDW-1:0] wb_wr_data [PT];
  wgt_buffer #(.PI(PI), .PO(PO), .PT(PT), .DEPTH(WGT_D)) u_wb (.clk, .wr_en(wb_wr_en),
    .wr_half(wb_wr_half), .wr_row(wb_wr_row), .wr_addr(wb_wr_addr), .wr_data(wb_wr_data),
    .rd_en(wb_rd_en), .rd_half(wb_rd_half), .rd_addr(wb_rd_addr), .rd_data(wb_rd_data));
  logic ob_rd_en, ob_rd_half; logic [OHAW-1:0] ob_rd_addr; logic [ODW-1:0] ob_rd_data;
  out_buffer #(.PO(PO), .PT(PT), .DEPTH(OUT_D)) u_ob (.clk, .wr_en(ob_wr_en),
    .wr_half(ob_wr_half), .wr_addr(ob_wr_addr), .wr_data(ob_wr_data), .rd_en(ob_rd_en),
    .rd_half(ob_rd_half), .rd_addr(ob_rd_addr), .rd_data(ob_rd_data));

  // models of the buffer contents (half 0 only, first 16 words)
  logic [IDW-1:0] im [NB][16];
  logic [WDW-1:0] wm [NB][16];
  int bias_v [64];

  // bias responder: vector at address a is {a[7:0]+3*lane}
  int bq[$];
  assign bias_req_ready = 1'b1;
  always @(posedge clk) begin
    bias_rsp_valid <= 1'b0;
    if (bias_req_valid) bq.push_back(int'(bias_req_addr));
    if (bq.size() > 0) begin
      int a;
      a = bq.pop_front();
      for (int o = 0; o < PO; o++) bias_rsp_data[o*8 +: 8] <= 8'((a / PO) % 7 - 3 + o);
      bias_rsp_valid <= 1'b1;
    end
  end

  int n_inp_pop = 0, n_wgt_pop = 0, n_inp_push = 0, n_wgt_push = 0, n_out_push = 0, early = 0;
  longint cyc = 0, t_tok = 0, t_done = 0;
  always @(posedge clk) begin
    cyc++;
    if (inp_tok_pop) n_inp_pop++;
    if (wgt_tok_pop) n_wgt_pop++;
    if (inp_free_push) n_inp_push++;
    if (wgt_free_push) n_wgt_push++;
    if (out_tok_push) begin n_out_push++; t_done = cyc; end
    if (ib_rd_en && !inp_tok_valid && n_inp_pop == 0) early++;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic run(inst_t ins, bit tokens);
    @(negedge clk);
    inst = ins; inst_valid = 1;
    @(posedge clk);
    @(negedge clk);
    inst_valid = 0;
    if (tokens) begin
      repeat (10) @(negedge clk);
      inp_tok_valid = 1; wgt_tok_valid = 1; t_tok = cyc;
      @(negedge clk);
      inp_tok_valid = 0; wgt_tok_valid = 0;
    end
    while (busy) @(negedge clk);
  endtask

  function automatic int qz(int acc, int shift, int b);
    int v;
    v = (acc >>> shift) + b;
    if (v < 0) v = 0;
    return (v > 127) ? 127 : v;
  endfunction

  task automatic read_out(int addr, output logic [ODW-1:0] w);
    @(negedge clk);
    ob_rd_en = 1; ob_rd_half = 0; ob_rd_addr = OHAW'(addr);
    @(posedge clk); #1;
    w = ob_rd_data;
    ob_rd_en = 0;
  endtask

  initial begin
    logic [ODW-1:0] w;
    int IC, OC, OW, shift;
    inst_valid = 0; inst = '0; inp_tok_valid = 0; wgt_tok_valid = 0; out_free_valid = 0;
    ib_wr_en = '0; ib_wr_half = 0; wb_wr_en = 0; wb_wr_half = 0; wb_wr_row = '0; wb_wr_addr = '0;
    ob_rd_en = 0; ob_rd_half = 0; ob_rd_addr = '0;
    for (int b = 0; b < NB; b++) begin ib_wr_addr[b] = '0; ib_wr_data[b] = '0; end
    for (int j = 0; j < PT; j++) wb_wr_data[j] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fill buffers
    for (int a = 0; a < 16; a++) begin
      @(negedge clk);
      ib_wr_en = '1;
      for (int b = 0; b < NB; b++) begin
        for (int p = 0; p < PI; p++) im[b][a][p*8 +: 8] = 8'($urandom_range(0, 30) - 15);
        ib_wr_addr[b] = IHAW'(a); ib_wr_data[b] = im[b][a];
      end
    end
    @(negedge clk); ib_wr_en = '0;
    for (int a = 0; a < 16; a++)
      for (int i = 0; i < PT; i++) begin
        @(negedge clk);
        wb_wr_en = 1; wb_wr_row = RW'(i); wb_wr_addr = WHAW'(a);
        for (int j = 0; j < PT; j++) begin
          for (int q = 0; q < PI * PO; q++) wm[i*PT + j][a][q*8 +: 8] = 8'($urandom_range(0, 6) - 3);
          wb_wr_data[j] = wm[i*PT + j][a];
        end
      end
    @(negedge clk); wb_wr_en = 0;
    // LOAD_BIAS: 12 vectors from address 0 into bias half 0
    run(mk_load(OP_LOAD_BIAS, 6'b0, 0, 0, 0, 30'd12, 0, 1'b0, 0, 0), 1'b0);
    for (int v = 0; v < 12; v++) for (int o = 0; o < PO; o++) bias_v[v*PO + o] = v % 7 - 3 + o;

    // ---- 1. Spatial ----
    IC = 2; OC = 2; OW = 3; shift = 2;
    run(mk_comp(6'b101111, 0, 0, 0, 0, 3, OW, IC, OC, 1, 1'b0, 0, 0, 1'b1, shift, 1'b1, 1'b1), 1'b1);
    chk(early == 0, "COMP read before its input token");
    chk(n_inp_pop == 1 && n_wgt_pop == 1, "token pops");
    chk(n_inp_push == 1 && n_wgt_push == 1 && n_out_push == 1, "token pushes");
    chk(t_done - t_tok <= OC * OW * IC + 8, $sformatf("spatial run took %0d cycles", t_done - t_tok));
    for (int k = 0; k < OC; k++)
      for (int y = 0; y < OW; y++) begin
        read_out(k * OW + y, w);
        for (int i = 0; i < PT; i++)
          for (int o = 0; o < PO; o++) begin
            int s;
            s = 0;
            for (int c = 0; c < IC; c++)
              for (int j = 0; j < PT; j++)
                for (int p = 0; p < PI; p++)
                  s += int'($signed(im[j*PT + y % PT][(y / PT) * IC + c][p*8 +: 8])) *
                       int'($signed(wm[i*PT + j][k*IC + c][(o*PI + p)*8 +: 8]));
            chk(int'($signed(w[(i*PO + o)*8 +: 8])) == qz(s, shift, bias_v[(k*PT + i)*PO + o]),
                $sformatf("spatial k=%0d y=%0d vec %0d lane %0d", k, y, i, o));
          end
      end

    // ---- 2. Winograd ----
    IC = 2; OC = 2; shift = 9;
    run(mk_comp(6'b101111, 0, 0, 0, 0, 6, 1, IC, OC, 1, 1'b1, 0, 0, 1'b1, shift, 1'b1, 1'b1), 1'b1);
    chk(t_done - t_tok <= OC * 1 * IC + 8, $sformatf("winograd run took %0d cycles", t_done - t_tok));
    for (int k = 0; k < OC; k++) begin
      read_out(k, w);
      for (int o = 0; o < PO; o++) begin
        longint R [6][6];
        longint T [4][6];
        for (int i = 0; i < PT; i++) for (int j = 0; j < PT; j++) R[i][j] = 0;
        for (int c = 0; c < IC; c++)
          for (int p = 0; p < PI; p++) begin
            int d [6][6];
            int t1 [6][6];
            for (int i = 0; i < PT; i++) for (int j = 0; j < PT; j++)
              d[i][j] = int'($signed(im[i*PT + j][c][p*8 +: 8]));
            for (int i = 0; i < PT; i++) for (int j = 0; j < PT; j++) begin
              t1[i][j] = 0;
              for (int q = 0; q < PT; q++) t1[i][j] += bt_coef(PT, i, q) * d[q][j];
            end
            for (int i = 0; i < PT; i++) for (int j = 0; j < PT; j++) begin
              int v;
              v = 0;
              for (int q = 0; q < PT; q++) v += t1[i][q] * bt_coef(PT, j, q);
              v = sat(v, -2048, 2047);
              R[i][j] += v * int'($signed(wm[i*PT + j][k*IC + c][(o*PI + p)*8 +: 8]));
            end
          end
        for (int a = 0; a < M; a++) for (int j = 0; j < PT; j++) begin
          T[a][j] = 0;
          for (int q = 0; q < PT; q++) T[a][j] += at_coef(PT, a, q) * R[q][j];
        end
        for (int a = 0; a < M; a++)
          for (int b = 0; b < M; b++) begin
            longint yy;
            yy = 0;
            for (int q = 0; q < PT; q++) yy += T[a][q] * at_coef(PT, b, q);
            chk(int'($signed(w[((a*M + b)*PO + o)*8 +: 8])) == qz(int'(yy), shift, bias_v[k*PO + o]),
                $sformatf("winograd k=%0d (%0d,%0d) lane %0d", k, a, b, o));
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
