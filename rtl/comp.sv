// comp: the COMP module, which executes COMP and LOAD_BIAS instructions.
//
// A COMP instruction computes the partial sums of one row group of a CONV
// layer for one kernel tap (Spatial) or one r x r kernel piece (Winograd),
// selected by WINO_OFFSET. It loops over output-channel groups k (Fk =
// OC_NUM), output columns / tiles y (Fy = OW_NUM) and input-channel groups c
// (Fc = IC_NUM), c innermost, issuing one PE operation per cycle:
//
//   cycle t   : input-buffer and weight-buffer reads for (k, y, c)
//   cycle t+1 : load manager (Winograd input transform or broadcast) and
//               PE accumulation into R (cleared when c = 0)
//   cycle t+2 : when c = Fc-1, save manager (Winograd output transform or
//               row sums) and read-modify-write of the accumulating buffer
//               entry (k, y); on the instruction marked acc_last the sum gets
//               bias, arithmetic right shift, optional ReLU and saturation to
//               8 bits, and goes to the output buffer instead.
//
// So a COMP instruction takes Fk x Fy x Fc cycles plus a 3-cycle drain,
// matching the compute-latency model (one GEMV per GEMM core per cycle).
// Before starting it waits for the tokens its DEPT_FLAG asks for (inputs
// loaded, weights loaded, output half free); after the drain it emits the
// tokens it is told to (input half free, weight half free, output ready).
// LOAD_BIAS reads PO 8-bit biases per beat from external memory into the
// bias buffer, whose half is the weight half of the COMP that uses it.
//
// Architecture (PE of GEMM cores, load/save managers, accumulating buffer,
// bias port into COMP, tokens) follows the paper. The loop order with c
// innermost, the accumulate flags, the quantisation formula
// y = sat8((acc >>> shift) + bias) and all field encodings are this design's
// own choices.
module comp #(
  parameter int unsigned PI         = hdnn_pkg::PI_DEF,
  parameter int unsigned PO         = hdnn_pkg::PO_DEF,
  parameter int unsigned PT         = hdnn_pkg::PT_DEF,
  parameter int unsigned IN_DEPTH   = 2048,
  parameter int unsigned WGT_DEPTH  = 1024,
  parameter int unsigned OUT_DEPTH  = 2048,
  parameter int unsigned ACC_DEPTH  = 1024,
  parameter int unsigned BIAS_DEPTH = 512,
  localparam int unsigned NB   = PT * PT,
  localparam int unsigned M    = PT - 2,
  localparam int unsigned NBO  = hdnn_pkg::max_u(M * M, PT),
  localparam int unsigned IDW  = PI * hdnn_pkg::FW,
  localparam int unsigned WDW  = PI * PO * hdnn_pkg::WW,
  localparam int unsigned ODW  = NBO * PO * hdnn_pkg::FW,
  localparam int unsigned BDW  = PO * hdnn_pkg::WW,
  localparam int unsigned IHAW = $clog2(IN_DEPTH) - 1,
  localparam int unsigned WHAW = $clog2(WGT_DEPTH) - 1,
  localparam int unsigned OHAW = $clog2(OUT_DEPTH) - 1,
  localparam int unsigned BHAW = $clog2(BIAS_DEPTH) - 1,
  localparam int unsigned RW   = (PT > 1) ? $clog2(PT) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // instruction queue
  input  logic                         inst_valid,
  input  logic [127:0]                 inst,
  output logic                         inst_ready,
  output logic                         busy,
  // handshake FIFOs
  input  logic                         inp_tok_valid,   // LOAD_INP -> COMP
  output logic                         inp_tok_pop,
  output logic                         inp_free_push,   // COMP -> LOAD_INP
  input  logic                         wgt_tok_valid,   // LOAD_WGT -> COMP
  output logic                         wgt_tok_pop,
  output logic                         wgt_free_push,   // COMP -> LOAD_WGT
  input  logic                         out_free_valid,  // SAVE -> COMP
  output logic                         out_free_pop,
  output logic                         out_tok_push,    // COMP -> SAVE
  // input buffer read
  output logic                         ib_rd_en,
  output logic                         ib_rd_half,
  output logic [IHAW-1:0]              ib_rd_addr [NB],
  input  logic [IDW-1:0]               ib_rd_data [NB],
  // weight buffer read
  output logic                         wb_rd_en,
  output logic                         wb_rd_half,
  output logic [WHAW-1:0]              wb_rd_addr,
  input  logic [WDW-1:0]               wb_rd_data [NB],
  // output buffer write
  output logic                         ob_wr_en,
  output logic                         ob_wr_half,
  output logic [OHAW-1:0]              ob_wr_addr,
  output logic [ODW-1:0]               ob_wr_data,
  // bias port to external memory
  output logic                         bias_req_valid,
  input  logic                         bias_req_ready,
  output logic [hdnn_pkg::DRAM_AW-1:0] bias_req_addr,
  input  logic                         bias_rsp_valid,
  input  logic [BDW-1:0]               bias_rsp_data
);
  import hdnn_pkg::*;

  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_RUN, S_DRAIN, S_DONE, S_BIAS} state_e;
  state_e state;

  comp_inst_t ci;
  load_inst_t bi;
  assign bi = load_inst_t'(ci);

  // loop counters
  logic [7:0] k_cnt, c_cnt;
  logic [9:0] y_cnt;
  logic [15:0] b_iss, b_rcv;

  // pipeline tags
  typedef struct packed {
    logic          valid;
    logic          first;
    logic          last;
    logic [7:0]    k;
    logic [9:0]    y;
    logic [RW-1:0] rot_r;
    logic [RW-1:0] rot_c;
    logic [PT-1:0] mask;
  } tag_t;
  tag_t s1, s2, s0;

  // ---------------- instruction / token handling ----------------
  logic need_inp, need_wgt, need_out, tokens_ok;
  assign need_inp  = ci.dept_flag[DF_WAIT_INP];
  assign need_wgt  = ci.dept_flag[DF_WAIT_WGT];
  assign need_out  = ci.dept_flag[DF_WAIT_OUT];
  assign tokens_ok = (!need_inp || inp_tok_valid) && (!need_wgt || wgt_tok_valid) &&
                     (!need_out || out_free_valid);

  assign inst_ready   = (state == S_IDLE);
  assign busy         = (state != S_IDLE);
  assign inp_tok_pop  = (state == S_WAIT) && tokens_ok && need_inp;
  assign wgt_tok_pop  = (state == S_WAIT) && tokens_ok && need_wgt;
  assign out_free_pop = (state == S_WAIT) && tokens_ok && need_out;
  assign inp_free_push = (state == S_DONE) && ci.dept_flag[DF_SIG_INP];
  assign wgt_free_push = (state == S_DONE) && ci.dept_flag[DF_SIG_WGT];
  assign out_tok_push  = (state == S_DONE) && ci.dept_flag[DF_SIG_OUT];

  logic last_iter;
  assign last_iter = (c_cnt == ci.ic_num - 8'd1) && (y_cnt == ci.ow_num - 10'd1) &&
                     (k_cnt == ci.oc_num - 8'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      ci    <= '0;
      k_cnt <= '0; y_cnt <= '0; c_cnt <= '0;
      b_iss <= '0; b_rcv <= '0;
    end else begin
      case (state)
        S_IDLE: if (inst_valid) begin
          ci <= comp_inst_t'(inst);
          b_iss <= '0; b_rcv <= '0;
          if (inst[2:0] == OP_LOAD_BIAS) state <= S_BIAS;
          else                           state <= S_WAIT;
        end
        S_WAIT: if (tokens_ok) begin
          k_cnt <= '0; y_cnt <= '0; c_cnt <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          if (last_iter) state <= S_DRAIN;
          if (c_cnt == ci.ic_num - 8'd1) begin
            c_cnt <= '0;
            if (y_cnt == ci.ow_num - 10'd1) begin
              y_cnt <= '0;
              k_cnt <= k_cnt + 8'd1;
            end else y_cnt <= y_cnt + 10'd1;
          end else c_cnt <= c_cnt + 8'd1;
        end
        S_DRAIN: if (!s1.valid && !s2.valid) state <= S_DONE;
        S_DONE:  state <= S_IDLE;
        S_BIAS: begin
          if (bias_req_valid && bias_req_ready) b_iss <= b_iss + 16'd1;
          if (bias_rsp_valid) b_rcv <= b_rcv + 16'd1;
          if ((b_rcv + (bias_rsp_valid ? 16'd1 : 16'd0)) >= bi.size[15:0]) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- stage 0: buffer addresses ----------------
  int unsigned nwc;        // words per stored row per bank column
  int unsigned r0, c0, wsp;
  int unsigned rq [PT];
  int unsigned wq [PT];

  always_comb begin
    nwc = (int'(ci.iw_num) + PT - 1) / PT;
    r0  = ci.off_r;
    c0  = int'(y_cnt) * M + ci.off_c;
    wsp = int'(y_cnt) * ci.stride + ci.off_c;
    for (int i = 0; i < PT; i++) begin
      rq[i] = (r0 + (i + PT - (r0 % PT)) % PT) / PT;
      wq[i] = (c0 + (i + PT - (c0 % PT)) % PT) / PT;
    end
    s0 = '0;
    s0.valid = (state == S_RUN);
    s0.first = (c_cnt == 8'd0);
    s0.last  = (c_cnt == ci.ic_num - 8'd1);
    s0.k     = k_cnt;
    s0.y     = y_cnt;
    for (int b = 0; b < NB; b++) ib_rd_addr[b] = '0;
    if (ci.wino_flag) begin
      s0.rot_r = RW'(r0 % PT);
      s0.rot_c = RW'(c0 % PT);
      for (int t = 0; t < PT; t++) s0.mask[t] = (c0 + t) < ci.iw_num;
      for (int i = 0; i < PT; i++)
        for (int j = 0; j < PT; j++)
          ib_rd_addr[i*PT+j] = IHAW'(ci.inp_base + (rq[i] * nwc + wq[j]) * ci.ic_num + c_cnt);
    end else begin
      s0.rot_r = '0;
      s0.rot_c = RW'(wsp % PT);
      s0.mask  = '0;
      s0.mask[0] = wsp < ci.iw_num;
      for (int b = 0; b < NB; b++)
        ib_rd_addr[b] = IHAW'(ci.inp_base + (r0 * nwc + wsp / PT) * ci.ic_num + c_cnt);
    end
  end

  assign ib_rd_en   = s0.valid;
  assign ib_rd_half = ci.buff_id[0];
  assign wb_rd_en   = s0.valid;
  assign wb_rd_half = ci.buff_id[1];
  assign wb_rd_addr = WHAW'(ci.wgt_base + int'(k_cnt) * ci.ic_num + c_cnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0;
      s2 <= '0;
    end else begin
      s1 <= s0;
      s2 <= s1;
    end
  end

  // ---------------- stage 1: load manager + PE ----------------
  logic signed [PW-1:0]    feat [NB][PI];
  logic signed [WW-1:0]    wgt  [NB][PO][PI];
  logic signed [ACC_W-1:0] racc [NB][PO];

  load_manager #(.PI(PI), .PT(PT)) u_lm (
    .wino     (ci.wino_flag),
    .rot_r    (s1.rot_r),
    .rot_c    (s1.rot_c),
    .col_mask (s1.mask),
    .bank_data(ib_rd_data),
    .feat     (feat)
  );

  always_comb begin
    for (int b = 0; b < NB; b++)
      for (int o = 0; o < PO; o++)
        for (int p = 0; p < PI; p++)
          wgt[b][o][p] = wb_rd_data[b][(o*PI+p)*WW +: WW];
  end

  pe #(.PI(PI), .PO(PO), .PT(PT)) u_pe (
    .clk  (clk),
    .rst_n(rst_n),
    .valid(s1.valid),
    .clear(s1.first),
    .feat (feat),
    .wgt  (wgt),
    .acc  (racc)
  );

  // ---------------- stage 2: save manager + accumulating buffer ----------------
  logic signed [ACC_W-1:0] ysm [NBO][PO];

  save_manager #(.PO(PO), .PT(PT)) u_sm (
    .wino(ci.wino_flag),
    .acc (racc),
    .y   (ysm)
  );

  localparam int unsigned AAW = $clog2(ACC_DEPTH);
  logic [NBO*PO*ACC_W-1:0] acc_mem [ACC_DEPTH];   // accumulating buffer
  logic [BDW-1:0]          bias_mem [BIAS_DEPTH]; // bias buffer

  logic [AAW-1:0]          acc_addr;
  logic [NBO*PO*ACC_W-1:0] acc_old, acc_new;
  logic                    s2_fire;
  logic [ODW-1:0]          qout;

  assign s2_fire  = s2.valid && s2.last;
  assign acc_addr = AAW'(int'(s2.k) * ci.ow_num + s2.y);
  assign acc_old  = acc_mem[acc_addr];

  always_comb begin
    acc_new = '0;
    qout    = '0;
    for (int s = 0; s < NBO; s++)
      for (int o = 0; o < PO; o++) begin
        logic signed [ACC_W-1:0] sum, sh, bv;
        int unsigned bidx;
        sum = ysm[s][o] + (ci.acc_first ? '0 : $signed(acc_old[(s*PO+o)*ACC_W +: ACC_W]));
        acc_new[(s*PO+o)*ACC_W +: ACC_W] = sum;
        bidx = ci.wino_flag ? int'(s2.k) : int'(s2.k) * PT + s;
        bv   = ACC_W'($signed(bias_mem[{ci.buff_id[1], BHAW'(bidx)}][o*WW +: WW]));
        sh   = (sum >>> ci.shift) + bv;
        if (ci.relu && sh < 0) sh = '0;
        if (sh > 127)       qout[(s*PO+o)*FW +: FW] = 8'sd127;
        else if (sh < -128) qout[(s*PO+o)*FW +: FW] = -8'sd128;
        else                qout[(s*PO+o)*FW +: FW] = FW'(sh);
      end
  end

  always_ff @(posedge clk) begin
    if (s2_fire && !ci.acc_last) acc_mem[acc_addr] <= acc_new;
    if (state == S_BIAS && bias_rsp_valid)
      bias_mem[{bi.buff_id[0], BHAW'(bi.buff_base + b_rcv)}] <= bias_rsp_data;
  end

  assign ob_wr_en   = s2_fire && ci.acc_last;
  assign ob_wr_half = ci.buff_id[2];
  assign ob_wr_addr = OHAW'(ci.out_base + acc_addr);
  assign ob_wr_data = qout;

  // ---------------- LOAD_BIAS requests ----------------
  assign bias_req_valid = (state == S_BIAS) && (b_iss < bi.size[15:0]);
  assign bias_req_addr  = bi.dram_base + DRAM_AW'(b_iss) * DRAM_AW'(PO);

`ifndef SYNTHESIS
  a_acc_range: assert property (@(posedge clk) disable iff (!rst_n)
    s2_fire |-> (int'(s2.k) * ci.ow_num + s2.y) < ACC_DEPTH)
    else $error("comp: accumulating-buffer entry out of range");
`endif
endmodule
