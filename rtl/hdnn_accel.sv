// hdnn_accel: one accelerator instance of the hybrid Spatial/Winograd design.
//
// The instance is a folded, instruction-driven architecture: CTRL fetches
// 128-bit instructions and dispatches them to four functional modules that
// run concurrently: LOAD_INP (input feature maps into the ping-pong input
// buffer), LOAD_WGT (weights into the ping-pong weight buffer), COMP (the
// hybrid PE with its load/save managers, accumulating and bias buffers) and
// SAVE (output buffer back to external memory, with layout transform).
// Three producer/consumer pairs, LOAD_INP/COMP, LOAD_WGT/COMP and COMP/SAVE,
// are synchronised by handshake FIFOs, one per direction: a consumer waits
// for the producer's ready token before reading a buffer half, and a
// producer waits for the consumer's free token before overwriting one. Which
// instruction waits for or emits a token is set by its DEPT_FLAG field.
// Between layers, where the next layer reads what SAVE wrote to external
// memory, a counter of finished SAVE instructions forms a layer fence that
// LOAD_INP waits on (this design's own addition; the paper does not say
// how that dependency is kept).
//
// External memory is reached through five ports whose widths follow the
// architecture figure: instruction (128 b), input (PI x PT values), weight
// (PI x PO x PT), bias (PO) and output (PO x PT, with a per-vector mask).
// Read ports: req_valid/req_ready request, rsp_valid response without
// backpressure, responses in request order. Write port: valid/ready.
// Buffer depths are this design's choice (the paper gives the bank counts,
// not the depths).
module hdnn_accel #(
  parameter int unsigned PI         = hdnn_pkg::PI_DEF,
  parameter int unsigned PO         = hdnn_pkg::PO_DEF,
  parameter int unsigned PT         = hdnn_pkg::PT_DEF,
  parameter int unsigned IN_DEPTH   = 2048,
  parameter int unsigned WGT_DEPTH  = 1024,
  parameter int unsigned OUT_DEPTH  = 2048,
  parameter int unsigned ACC_DEPTH  = 1024,
  parameter int unsigned BIAS_DEPTH = 512,
  parameter int unsigned TOK_DEPTH  = 4,
  localparam int unsigned NB   = PT * PT,
  localparam int unsigned M    = PT - 2,
  localparam int unsigned NBO  = hdnn_pkg::max_u(M * M, PT),
  localparam int unsigned IDW  = PI * hdnn_pkg::FW,
  localparam int unsigned WDW  = PI * PO * hdnn_pkg::WW,
  localparam int unsigned ODW  = NBO * PO * hdnn_pkg::FW,
  localparam int unsigned AW   = hdnn_pkg::DRAM_AW
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [AW-1:0]        inst_base,
  input  logic [15:0]          inst_count,
  output logic                 busy,
  output logic                 done,
  output logic [7:0]           bad_opcodes,
  // instruction port
  output logic                 ins_req_valid,
  input  logic                 ins_req_ready,
  output logic [AW-1:0]        ins_req_addr,
  input  logic                 ins_rsp_valid,
  input  logic [127:0]         ins_rsp_data,
  // input feature map port
  output logic                 inp_req_valid,
  input  logic                 inp_req_ready,
  output logic [AW-1:0]        inp_req_addr,
  input  logic                 inp_rsp_valid,
  input  logic [PT*IDW-1:0]    inp_rsp_data,
  // weight port
  output logic                 wgt_req_valid,
  input  logic                 wgt_req_ready,
  output logic [AW-1:0]        wgt_req_addr,
  input  logic                 wgt_rsp_valid,
  input  logic [PT*WDW-1:0]    wgt_rsp_data,
  // bias port
  output logic                 bias_req_valid,
  input  logic                 bias_req_ready,
  output logic [AW-1:0]        bias_req_addr,
  input  logic                 bias_rsp_valid,
  input  logic [PO*hdnn_pkg::WW-1:0] bias_rsp_data,
  // output port
  output logic                 out_wr_valid,
  input  logic                 out_wr_ready,
  output logic [AW-1:0]        out_wr_addr,
  output logic [PT*PO*hdnn_pkg::FW-1:0] out_wr_data,
  output logic [PT-1:0]        out_wr_mask
);
  localparam int unsigned IHAW = $clog2(IN_DEPTH) - 1;
  localparam int unsigned WHAW = $clog2(WGT_DEPTH) - 1;
  localparam int unsigned OHAW = $clog2(OUT_DEPTH) - 1;
  localparam int unsigned RW   = (PT > 1) ? $clog2(PT) : 1;

  // ---------------- controller ----------------
  logic [3:0]   q_valid, q_pop, mod_busy;
  logic [127:0] q_data [4];
  logic [3:0]   inst_ready;
  logic         ctrl_busy;

  ctrl u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .inst_base(inst_base),
    .inst_count(inst_count), .busy(ctrl_busy), .done(done), .bad_opcodes(bad_opcodes),
    .mem_req_valid(ins_req_valid), .mem_req_ready(ins_req_ready), .mem_req_addr(ins_req_addr),
    .mem_rsp_valid(ins_rsp_valid), .mem_rsp_data(ins_rsp_data),
    .q_valid(q_valid), .q_data(q_data), .q_pop(q_pop), .mod_busy(mod_busy)
  );
  assign q_pop = q_valid & inst_ready;
  assign busy  = ctrl_busy || (|mod_busy);

  // ---------------- handshake FIFOs ----------------
  // 0 inp ready (LOAD_INP->COMP) 1 inp free (COMP->LOAD_INP)
  // 2 wgt ready (LOAD_WGT->COMP) 3 wgt free (COMP->LOAD_WGT)
  // 4 out ready (COMP->SAVE)     5 out free (SAVE->COMP)
  logic [5:0] tok_push, tok_pop, tok_empty;
  for (genvar f = 0; f < 6; f++) begin : g_tok
    sync_fifo #(.WIDTH(1), .DEPTH(TOK_DEPTH)) u_tok (
      .clk(clk), .rst_n(rst_n),
      .push(tok_push[f]), .wr_data(1'b1),
      .pop(tok_pop[f]), .rd_data(),
      .full(), .empty(tok_empty[f]), .count()
    );
  end

  // ---------------- buffers ----------------
  logic           ib_wr_half, ib_rd_en, ib_rd_half;
  logic [NB-1:0]  ib_wr_en;
  logic [IHAW-1:0] ib_wr_addr [NB];
  logic [IDW-1:0]  ib_wr_data [NB];
  logic [IHAW-1:0] ib_rd_addr [NB];
  logic [IDW-1:0]  ib_rd_data [NB];

  in_buffer #(.PI(PI), .PT(PT), .DEPTH(IN_DEPTH)) u_ibuf (
    .clk(clk), .wr_half(ib_wr_half), .wr_en(ib_wr_en), .wr_addr(ib_wr_addr),
    .wr_data(ib_wr_data), .rd_en(ib_rd_en), .rd_half(ib_rd_half),
    .rd_addr(ib_rd_addr), .rd_data(ib_rd_data)
  );

  logic            wb_wr_en, wb_wr_half, wb_rd_en, wb_rd_half;
  logic [RW-1:0]   wb_wr_row;
  logic [WHAW-1:0] wb_wr_addr, wb_rd_addr;
  logic [WDW-1:0]  wb_wr_data [PT];
  logic [WDW-1:0]  wb_rd_data [NB];

  wgt_buffer #(.PI(PI), .PO(PO), .PT(PT), .DEPTH(WGT_DEPTH)) u_wbuf (
    .clk(clk), .wr_en(wb_wr_en), .wr_half(wb_wr_half), .wr_row(wb_wr_row),
    .wr_addr(wb_wr_addr), .wr_data(wb_wr_data), .rd_en(wb_rd_en),
    .rd_half(wb_rd_half), .rd_addr(wb_rd_addr), .rd_data(wb_rd_data)
  );

  logic            ob_wr_en, ob_wr_half, ob_rd_en, ob_rd_half;
  logic [OHAW-1:0] ob_wr_addr, ob_rd_addr;
  logic [ODW-1:0]  ob_wr_data, ob_rd_data;

  out_buffer #(.PO(PO), .PT(PT), .DEPTH(OUT_DEPTH)) u_obuf (
    .clk(clk), .wr_en(ob_wr_en), .wr_half(ob_wr_half), .wr_addr(ob_wr_addr),
    .wr_data(ob_wr_data), .rd_en(ob_rd_en), .rd_half(ob_rd_half),
    .rd_addr(ob_rd_addr), .rd_data(ob_rd_data)
  );

  // ---------------- layer fence ----------------
  // SAVE instructions finished since start; a LOAD_INP waits until this
  // reaches its SAVE_FENCE field, so a layer reads the previous layer's
  // output only after it has been written.
  logic        saved;
  logic [12:0] saves_done;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     saves_done <= '0;
    else if (start) saves_done <= '0;
    else if (saved) saves_done <= saves_done + 13'd1;
  end

  // ---------------- functional modules ----------------
  load_inp #(.PI(PI), .PT(PT), .IN_DEPTH(IN_DEPTH)) u_load_inp (
    .clk(clk), .rst_n(rst_n),
    .inst_valid(q_valid[0]), .inst(q_data[0]), .inst_ready(inst_ready[0]), .busy(mod_busy[0]),
    .free_tok_valid(!tok_empty[1]), .free_tok_pop(tok_pop[1]), .rdy_tok_push(tok_push[0]),
    .saves_done(saves_done),
    .mem_req_valid(inp_req_valid), .mem_req_ready(inp_req_ready), .mem_req_addr(inp_req_addr),
    .mem_rsp_valid(inp_rsp_valid), .mem_rsp_data(inp_rsp_data),
    .ib_wr_half(ib_wr_half), .ib_wr_en(ib_wr_en), .ib_wr_addr(ib_wr_addr), .ib_wr_data(ib_wr_data)
  );

  load_wgt #(.PI(PI), .PO(PO), .PT(PT), .WGT_DEPTH(WGT_DEPTH)) u_load_wgt (
    .clk(clk), .rst_n(rst_n),
    .inst_valid(q_valid[1]), .inst(q_data[1]), .inst_ready(inst_ready[1]), .busy(mod_busy[1]),
    .free_tok_valid(!tok_empty[3]), .free_tok_pop(tok_pop[3]), .rdy_tok_push(tok_push[2]),
    .mem_req_valid(wgt_req_valid), .mem_req_ready(wgt_req_ready), .mem_req_addr(wgt_req_addr),
    .mem_rsp_valid(wgt_rsp_valid), .mem_rsp_data(wgt_rsp_data),
    .wb_wr_en(wb_wr_en), .wb_wr_half(wb_wr_half), .wb_wr_row(wb_wr_row),
    .wb_wr_addr(wb_wr_addr), .wb_wr_data(wb_wr_data)
  );

  comp #(.PI(PI), .PO(PO), .PT(PT), .IN_DEPTH(IN_DEPTH), .WGT_DEPTH(WGT_DEPTH),
         .OUT_DEPTH(OUT_DEPTH), .ACC_DEPTH(ACC_DEPTH), .BIAS_DEPTH(BIAS_DEPTH)) u_comp (
    .clk(clk), .rst_n(rst_n),
    .inst_valid(q_valid[2]), .inst(q_data[2]), .inst_ready(inst_ready[2]), .busy(mod_busy[2]),
    .inp_tok_valid(!tok_empty[0]), .inp_tok_pop(tok_pop[0]), .inp_free_push(tok_push[1]),
    .wgt_tok_valid(!tok_empty[2]), .wgt_tok_pop(tok_pop[2]), .wgt_free_push(tok_push[3]),
    .out_free_valid(!tok_empty[5]), .out_free_pop(tok_pop[5]), .out_tok_push(tok_push[4]),
    .ib_rd_en(ib_rd_en), .ib_rd_half(ib_rd_half), .ib_rd_addr(ib_rd_addr), .ib_rd_data(ib_rd_data),
    .wb_rd_en(wb_rd_en), .wb_rd_half(wb_rd_half), .wb_rd_addr(wb_rd_addr), .wb_rd_data(wb_rd_data),
    .ob_wr_en(ob_wr_en), .ob_wr_half(ob_wr_half), .ob_wr_addr(ob_wr_addr), .ob_wr_data(ob_wr_data),
    .bias_req_valid(bias_req_valid), .bias_req_ready(bias_req_ready), .bias_req_addr(bias_req_addr),
    .bias_rsp_valid(bias_rsp_valid), .bias_rsp_data(bias_rsp_data)
  );

  save #(.PO(PO), .PT(PT), .OUT_DEPTH(OUT_DEPTH)) u_save (
    .clk(clk), .rst_n(rst_n),
    .inst_valid(q_valid[3]), .inst(q_data[3]), .inst_ready(inst_ready[3]), .busy(mod_busy[3]),
    .rdy_tok_valid(!tok_empty[4]), .rdy_tok_pop(tok_pop[4]), .free_tok_push(tok_push[5]),
    .saved(saved),
    .ob_rd_en(ob_rd_en), .ob_rd_half(ob_rd_half), .ob_rd_addr(ob_rd_addr), .ob_rd_data(ob_rd_data),
    .wr_valid(out_wr_valid), .wr_ready(out_wr_ready), .wr_addr(out_wr_addr),
    .wr_data(out_wr_data), .wr_mask(out_wr_mask)
  );
endmodule
