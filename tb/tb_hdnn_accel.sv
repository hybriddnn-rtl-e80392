// tb_hdnn_accel: end-to-end test of one accelerator instance.
//
// A five-layer network is compiled into one instruction program by the
// generator of tb_hdnn_pkg and run from a behavioural external memory with
// random back-pressure:
//   L1 Winograd 3x3, pad 1, 2 weight groups, IS dataflow, 2x2 max pooling,
//      saved WINO-to-SPAT;
//   L2 Spatial 3x3, pad 1, 2 weight groups, WS dataflow, saved SPAT-to-WINO;
//   L3 Winograd 5x5 (kernel decomposition into four 3x3 pieces), pad 2,
//      IS dataflow, saved WINO-to-WINO;
//   L4 Winograd 3x3, pad 1, 2 weight groups, WS dataflow, saved WINO-to-SPAT;
//   L5 Spatial 3x3, stride 2, pad 1, IS dataflow, saved SPAT-to-SPAT.
// Each layer reads the previous layer's output from memory, so the hybrid
// mode switch happens through the SAVE layout transforms. Every output byte
// of every layer is compared with the reference model. The testbench also
// counts the mechanisms it means to exercise (each mode, each transform,
// both dataflows, pooling, kernel decomposition, padding, stride, memory
// stalls, token waits in COMP, LOAD_INP and SAVE, the layer fence) and counts a failure for
// any that never happens. Timing: the run must finish inside the watchdog.
// The test values and stimulus are this testbench's own choice; the expected
// behaviour follows the architecture described in the design notes of the
// module under test.
`timescale 1ns/1ps
module tb_hdnn_accel;
  import hdnn_pkg::*;
  import tb_hdnn_pkg::*;

  localparam int PI = 4, PO = 4, PT = 6;
  localparam int AW = 32;

  logic clk = 1'b0, rst_n = 1'b1;

  // the reset falls at 1 ns, before the first clock edge, so that no flop is

  // clocked with its power-on value

  initial #1 rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic start;
  logic [AW-1:0] inst_base;
  logic [15:0] inst_count;
  logic busy, done;
  logic [7:0] bad_opcodes;
  logic ins_req_valid, ins_req_ready, ins_rsp_valid;
  logic [AW-1:0] ins_req_addr;
  logic [127:0] ins_rsp_data;
  logic inp_req_valid, inp_req_ready, inp_rsp_valid;
  logic [AW-1:0] inp_req_addr;
  logic [PT*PI*8-1:0] inp_rsp_data;
  logic wgt_req_valid, wgt_req_ready, wgt_rsp_valid;
  logic [AW-1:0] wgt_req_addr;
  logic [PT*PI*PO*8-1:0] wgt_rsp_data;
  logic bias_req_valid, bias_req_ready, bias_rsp_valid;
  logic [AW-1:0] bias_req_addr;
  logic [PO*8-1:0] bias_rsp_data;
  logic out_wr_valid, out_wr_ready;
  logic [AW-1:0] out_wr_addr;
  logic [PT*PO*8-1:0] out_wr_data;
  logic [PT-1:0] out_wr_mask;

  hdnn_accel #(.PI(PI), .PO(PO), .PT(PT)) dut (.*);

  ext_mem #(.PI(PI), .PO(PO), .PT(PT), .BYTES(1 << 20), .LAT(4), .STALL(1'b1)) u_mem (
    .clk(clk), .ins_req_valid, .ins_req_ready, .ins_req_addr, .ins_rsp_valid, .ins_rsp_data,
    .inp_req_valid, .inp_req_ready, .inp_req_addr, .inp_rsp_valid, .inp_rsp_data,
    .wgt_req_valid, .wgt_req_ready, .wgt_req_addr, .wgt_rsp_valid, .wgt_rsp_data,
    .bias_req_valid, .bias_req_ready, .bias_req_addr, .bias_rsp_valid, .bias_rsp_data,
    .out_wr_valid, .out_wr_ready, .out_wr_addr, .out_wr_data, .out_wr_mask);

  // token-wait monitors
  int tw_comp = 0, tw_li = 0, tw_save = 0, tw_fence = 0;
  longint cycles = 0;
  always @(posedge clk) if (rst_n) begin
    cycles++;
    if (dut.u_comp.state == 3'd1 && !dut.u_comp.tokens_ok) tw_comp++;
    if (dut.u_load_inp.state == 2'd1 && dut.u_load_inp.li.dept_flag[DF_WAIT] &&
        !dut.u_load_inp.free_tok_valid) tw_li++;
    if (dut.u_save.state == 3'd1 && !dut.u_save.rdy_tok_valid) tw_save++;
    if (dut.u_load_inp.state == 2'd1 && !dut.u_load_inp.fence_ok) tw_fence++;
  end

  initial begin
    #20_000_000;
    failures++;
    $display("FAIL watchdog: accelerator did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic need(string what, longint n);
    checks++;
    if (n <= 0) begin
      failures++;
      $display("FAIL mechanism never happened: %s", what);
    end else $display("mechanism %-28s : %0d", what, n);
  endtask

  layer_t L [5];
  int     fm0[], fm1[], fm2[], fm3[], fm4[], fm5[];
  int     Ho [5], Wo [5];
  byte unsigned img[int];
  inst_t  prog[$];

  function automatic layer_t mkl(int H, int W, int C, int K, int R, int pad, int stride,
                                 bit wino, bit dst, bit ws, int shift, int pool, int gk,
                                 int ib, int ob, int wb, int bb);
    layer_t l;
    l.H = H; l.W = W; l.C = C; l.K = K; l.R = R; l.pad = pad; l.stride = stride;
    l.wino = wino; l.relu = 1'b1; l.dst_wino = dst; l.ws = ws; l.shift = shift;
    l.pool = pool; l.gk = gk; l.in_base = ib; l.out_base = ob; l.w_base = wb; l.b_base = bb;
    return l;
  endfunction

  task automatic check_out(layer_t l, int idx, ref int fm[]);
    int KV, bad;
    KV = l.K / PO;
    bad = 0;
    for (int k = 0; k < l.K; k++)
      for (int h = 0; h < Ho[idx]; h++)
        for (int w = 0; w < Wo[idx]; w++) begin
          int a, got, exp;
          a = fm_addr(l.out_base, l.dst_wino, Ho[idx], Wo[idx], KV, PO, k, h, w);
          got = s8(u_mem.mem[a]);
          exp = fm[(k*Ho[idx] + h)*Wo[idx] + w];
          checks++;
          if (got !== exp) begin
            failures++;
            if (bad < 8) $display("FAIL L%0d k=%0d h=%0d w=%0d got=%0d exp=%0d",
                                  idx + 1, k, h, w, got, exp);
            bad++;
          end
        end
    $display("layer %0d: %0d x %0d x %0d outputs, %0d mismatches", idx + 1, l.K, Ho[idx],
             Wo[idx], bad);
  endtask

  task automatic check_spread(int idx, ref int fm[]);
    int nz;
    nz = 0;
    foreach (fm[i]) if (fm[i] != 0 && fm[i] != 127) nz++;
    checks++;
    if (nz * 10 < fm.size()) begin
      failures++;
      $display("FAIL layer %0d reference output is degenerate (%0d of %0d informative)",
               idx + 1, nz, fm.size());
    end
  endtask

  initial begin
    int n, t0;
    reset_gen();
    //       H  W   C   K  R pad s wino dst ws sh pool gk  in       out      wgt      bias
    L[0] = mkl(8, 8,  8, 48, 3, 1, 1, 1, 0, 0, 9, 2, 2, 32'h10000, 32'h20000, 32'h60000, 32'hF0000);
    L[1] = mkl(4, 4, 48, 48, 3, 1, 1, 0, 1, 1, 7, 0, 2, 32'h20000, 32'h30000, 32'hB0000, 32'hF1000);
    L[2] = mkl(4, 4, 48, 24, 5, 2, 1, 1, 1, 0, 12, 0, 1, 32'h30000, 32'h40000, 32'h80000, 32'hF2000);
    L[3] = mkl(4, 4, 24, 24, 3, 1, 1, 1, 0, 1, 9, 0, 2, 32'h40000, 32'h50000, 32'hC0000, 32'hF3000);
    L[4] = mkl(4, 4, 24, 24, 3, 1, 2, 0, 0, 0, 6, 0, 1, 32'h50000, 32'h58000, 32'hD0000, 32'hF4000);
    fm0 = new[8 * 8 * 8];
    foreach (fm0[i]) fm0[i] = $urandom_range(0, 40) - 20;
    gen_layer(L[0], PI, PO, PT, 1'b1, fm0, img, prog, fm1, Ho[0], Wo[0]);
    gen_layer(L[1], PI, PO, PT, 1'b0, fm1, img, prog, fm2, Ho[1], Wo[1]);
    gen_layer(L[2], PI, PO, PT, 1'b0, fm2, img, prog, fm3, Ho[2], Wo[2]);
    gen_layer(L[3], PI, PO, PT, 1'b0, fm3, img, prog, fm4, Ho[3], Wo[3]);
    gen_layer(L[4], PI, PO, PT, 1'b0, fm4, img, prog, fm5, Ho[4], Wo[4]);
    n = prog.size();
    $display("program: %0d instructions", n);
    foreach (img[a]) u_mem.mem[a] = img[a];
    for (int i = 0; i < n; i++)
      for (int b = 0; b < 16; b++) u_mem.mem[i*16 + b] = prog[i][b*8 +: 8];

    start = 1'b0; inst_base = '0; inst_count = 16'(n);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    t0 = int'(cycles);
    wait (done);
    repeat (4) @(posedge clk);
    $display("run took %0d cycles, %0d output beats, %0d stall cycles",
             int'(cycles) - t0, u_mem.writes, u_mem.stalls);
    checks++;
    if (bad_opcodes != 0) begin failures++; $display("FAIL bad opcodes %0d", bad_opcodes); end
    check_out(L[0], 0, fm1);
    check_out(L[1], 1, fm2);
    check_out(L[2], 2, fm3);
    check_out(L[3], 3, fm4);
    check_out(L[4], 4, fm5);
    check_spread(0, fm1); check_spread(1, fm2); check_spread(2, fm3); check_spread(3, fm4); check_spread(4, fm5);
    need("Winograd layers", cnt_wino_layers);
    need("Spatial layers", cnt_spat_layers);
    need("IS dataflow layers", cnt_is);
    need("WS dataflow layers", cnt_ws);
    need("WINO-to-WINO saves", cnt_tr[0]);
    need("WINO-to-SPAT saves", cnt_tr[1]);
    need("SPAT-to-SPAT saves", cnt_tr[2]);
    need("SPAT-to-WINO saves", cnt_tr[3]);
    need("pooled layers", cnt_pool);
    need("kernel decompositions", cnt_kdec);
    need("memory stall cycles", u_mem.stalls);
    need("COMP token-wait cycles", tw_comp);
    need("LOAD_INP token-wait cycles", tw_li);
    need("SAVE token-wait cycles", tw_save);
    need("layer-fence wait cycles", tw_fence);
    need("padded layers", int'(L[0].pad > 0) + int'(L[4].pad > 0));
    need("strided layers", int'(L[4].stride > 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
