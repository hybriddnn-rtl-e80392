// tb_load_inp: self-checking test of LOAD_INP with the input buffer and the
// behavioural external memory (random back-pressure, latency 4).
// Two instructions are run on a random feature map stored in memory:
//   1. WINO-to-WINO, H = 6, W = 7, CV = 2, PADS = 1, 8 padded rows from
//      padded row 0, into half 1;
//   2. SPAT-to-SPAT, H = 3, W = 4, CV = 12, PADS = 1, 3 rows, into half 0.
// Afterwards every buffer word the instruction owns is read back and
// compared with the value of the feature map (zero in the padding) at the
// position that word stands for. The first instruction waits for a free
// token that the testbench gives late; it must not fetch before it, and
// each instruction must push one ready token.
// The test values and stimulus are this testbench's own choice; the expected
// behaviour follows the architecture described in the design notes of the
// module under test.
`timescale 1ns/1ps
module tb_load_inp;
  import hdnn_pkg::*;
  import tb_hdnn_pkg::*;
  localparam int PI = 4, PO = 4, PT = 6, NB = PT * PT, IDW = PI * FW, IHAW = 10;
  logic clk = 0, rst_n = 1'b1;
  // the reset falls at 1 ns, before the first clock edge, so that no flop is
  // clocked with its power-on value
  initial #1 rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic inst_valid, inst_ready, busy, free_tok_valid, free_tok_pop, rdy_tok_push;
  logic [127:0] inst;
  logic [12:0] saves_done;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [31:0] mem_req_addr;
  logic [PT*IDW-1:0] mem_rsp_data;
  logic ib_wr_half; logic [NB-1:0] ib_wr_en;
  logic [IHAW-1:0] ib_wr_addr [NB]; logic [IDW-1:0] ib_wr_data [NB];
  logic rd_en, rd_half; logic [IHAW-1:0] rd_addr [NB]; logic [IDW-1:0] rd_data [NB];

  load_inp #(.PI(PI), .PT(PT)) dut (.*);
  in_buffer #(.PI(PI), .PT(PT)) u_ib (.clk, .wr_half(ib_wr_half), .wr_en(ib_wr_en),
    .wr_addr(ib_wr_addr), .wr_data(ib_wr_data), .rd_en, .rd_half, .rd_addr, .rd_data);

  logic z1, z2, z3, z4, z5, z6, z7;
  logic [127:0] zd; logic [PT*PI*PO*8-1:0] zw; logic [PO*8-1:0] zb;
  ext_mem #(.PI(PI), .PO(PO), .PT(PT), .BYTES(1 << 16)) u_mem (.clk,
    .ins_req_valid(1'b0), .ins_req_ready(z1), .ins_req_addr(32'd0), .ins_rsp_valid(z2), .ins_rsp_data(zd),
    .inp_req_valid(mem_req_valid), .inp_req_ready(mem_req_ready), .inp_req_addr(mem_req_addr),
    .inp_rsp_valid(mem_rsp_valid), .inp_rsp_data(mem_rsp_data),
    .wgt_req_valid(1'b0), .wgt_req_ready(z3), .wgt_req_addr(32'd0), .wgt_rsp_valid(z4), .wgt_rsp_data(zw),
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

  int fm [int];   // value of (c, h, w) keyed by (c*64 + h)*64 + w

  task automatic fill(int base, bit wino, int H, int W, int CV);
    for (int c = 0; c < CV * PI; c++)
      for (int h = 0; h < H; h++)
        for (int w = 0; w < W; w++) begin
          int v;
          v = $urandom_range(0, 255) - 128;
          fm[(c*64 + h)*64 + w] = v;
          u_mem.mem[fm_addr(base, wino, H, W, CV, PI, c, h, w)] = 8'(v);
        end
  endtask

  function automatic int val(int c, int h, int w, int H, int W);
    if (h < 0 || h >= H || w < 0 || w >= W) return 0;
    return fm[(c*64 + h)*64 + w];
  endfunction

  task automatic rd(int half, int b, int a, output logic [IDW-1:0] d);
    @(negedge clk);
    rd_en = 1; rd_half = half[0];
    for (int k = 0; k < NB; k++) rd_addr[k] = IHAW'(a);
    @(posedge clk); #1;
    d = rd_data[b];
    rd_en = 0;
  endtask

  task automatic issue(inst_t ins);
    @(negedge clk);
    inst = ins; inst_valid = 1;
    @(posedge clk);
    @(negedge clk);
    inst_valid = 0;
  endtask

  initial begin
    logic [IDW-1:0] d;
    int H, W, CV, PAD, ROWS, NWC, CVG, WP;
    inst_valid = 0; inst = '0; free_tok_valid = 0; saves_done = '0; rd_en = 0; rd_half = 0;
    for (int k = 0; k < NB; k++) rd_addr[k] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---- 1. Winograd ----
    H = 6; W = 7; CV = 2; PAD = 1; ROWS = 8; WP = W + 2 * PAD; NWC = (WP + PT - 1) / PT;
    fill(32'h1000, 1'b1, H, W, CV);
    issue(mk_load(OP_LOAD_INP, 6'b000011, 1, 0, 32'h1000, {10'(CV), 10'(W), 10'(H)}, PAD, 1'b1, 0, ROWS));
    repeat (20) @(negedge clk);
    tok_given = 1; free_tok_valid = 1;
    @(posedge clk);
    checks++;
    if (!free_tok_pop) begin failures++; $display("FAIL free token not popped"); end
    @(negedge clk); free_tok_valid = 0;
    while (busy) @(negedge clk);
    checks++;
    if (early != 0) begin failures++; $display("FAIL fetch before free token"); end
    for (int r = 0; r < ROWS; r++)
      for (int w = 0; w < WP; w++)
        for (int cv = 0; cv < CV; cv++) begin
          rd(1, (r % PT) * PT + w % PT, ((r / PT) * NWC + w / PT) * CV + cv, d);
          for (int p = 0; p < PI; p++) begin
            checks++;
            if (int'($signed(d[p*8 +: 8])) != val(cv*PI + p, r - PAD, w - PAD, H, W)) begin
              failures++;
              $display("FAIL wino r=%0d w=%0d cv=%0d lane %0d", r, w, cv, p);
            end
          end
        end
    // ---- 2. Spatial ----
    H = 3; W = 4; CV = 12; PAD = 1; ROWS = 3; WP = W + 2 * PAD; NWC = (WP + PT - 1) / PT;
    CVG = (CV + PT - 1) / PT;
    fill(32'h4000, 1'b0, H, W, CV);
    issue(mk_load(OP_LOAD_INP, 6'b000010, 0, 0, 32'h4000, {10'(CV), 10'(W), 10'(H)}, PAD, 1'b0, 0, ROWS));
    while (busy) @(negedge clk);
    for (int r = 0; r < ROWS; r++)
      for (int w = 0; w < WP; w++)
        for (int g = 0; g < CVG; g++)
          for (int t = 0; t < PT; t++) begin
            rd(0, t * PT + w % PT, (r * NWC + w / PT) * CVG + g, d);
            for (int p = 0; p < PI; p++) begin
              checks++;
              if (int'($signed(d[p*8 +: 8])) != val((g*PT + t)*PI + p, r - PAD, w - PAD, H, W)) begin
                failures++;
                $display("FAIL spat r=%0d w=%0d vec=%0d lane %0d", r, w, g*PT + t, p);
              end
            end
          end
    checks++;
    if (n_rdy != 2) begin failures++; $display("FAIL ready tokens %0d", n_rdy); end
    checks++;
    if (u_mem.stalls == 0) begin failures++; $display("FAIL no memory stall exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
