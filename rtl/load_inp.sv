// load_inp: the LOAD_INP module, external memory to input buffer.
//
// One LOAD_INP instruction loads one row group of an input feature map
// (IW_BLK_NUMBER padded rows starting at padded row WINO_OFFSET) into one
// half of the input buffer, inserting PADS zero rows/columns on each side.
// The external-memory port delivers PI x PT values (PT channel vectors of PI
// channels) per beat, and each beat is written to PT banks in one cycle.
// Two layout transforms are supported, as for the load path of the design:
//
//   WINO-to-WINO  DRAM order (row, channel vector, column), column fastest.
//                 A beat is PT consecutive columns; padded column w of local
//                 row r goes to bank (r mod PT, w mod PT), word
//                 ((r div PT) * NWC + w div PT) * CV + cv.
//   SPAT-to-SPAT  DRAM order (row, column, channel vector), channel fastest.
//                 A beat is PT consecutive channel vectors of one pixel;
//                 vector g*PT+t goes to bank (t, w mod PT), word
//                 (r * NWC + w div PT) * ceil(CV/PT) + g.
//
// with NWC = ceil((W + 2*PADS) / PT). Positions in the padding are written
// as zero (the beat is still fetched and its lanes discarded). Up to
// TAGS reads are in flight; responses return in order. The module waits for
// a free token before starting (DEPT_FLAG[0]) and emits a ready token when
// all writes are done (DEPT_FLAG[1]). It also waits until saves_done, the
// number of SAVE instructions finished since start, reaches its SAVE_FENCE
// field, so that a layer does not read its input before the previous layer
// has written it to memory (a layer fence, this design's own addition).
// The ports, beat width, two transforms and tokens follow the paper; the
// field meanings beyond their names and the address formulas are this
// design's own.
module load_inp #(
  parameter int unsigned PI       = hdnn_pkg::PI_DEF,
  parameter int unsigned PT       = hdnn_pkg::PT_DEF,
  parameter int unsigned IN_DEPTH = 2048,
  parameter int unsigned TAGS     = 8,
  localparam int unsigned NB   = PT * PT,
  localparam int unsigned IDW  = PI * hdnn_pkg::FW,
  localparam int unsigned IHAW = $clog2(IN_DEPTH) - 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         inst_valid,
  input  logic [127:0]                 inst,
  output logic                         inst_ready,
  output logic                         busy,
  input  logic                         free_tok_valid,
  output logic                         free_tok_pop,
  output logic                         rdy_tok_push,
  input  logic [12:0]                  saves_done,    // SAVEs finished since start
  // external memory read port
  output logic                         mem_req_valid,
  input  logic                         mem_req_ready,
  output logic [hdnn_pkg::DRAM_AW-1:0] mem_req_addr,
  input  logic                         mem_rsp_valid,
  input  logic [PT*IDW-1:0]            mem_rsp_data,
  // input buffer write
  output logic                         ib_wr_half,
  output logic [NB-1:0]                ib_wr_en,
  output logic [IHAW-1:0]              ib_wr_addr [NB],
  output logic [IDW-1:0]               ib_wr_data [NB]
);
  import hdnn_pkg::*;

  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_RUN, S_DONE} state_e;
  state_e state;
  load_inst_t li;

  int unsigned H, W, CV, PAD, WP, NWC, CVG, ROWS, RS;
  always_comb begin
    H    = li.size[9:0];
    W    = li.size[19:10];
    CV   = li.size[29:20];
    PAD  = li.pads;
    WP   = W + 2 * PAD;
    NWC  = (WP + PT - 1) / PT;
    CVG  = (CV + PT - 1) / PT;
    ROWS = li.iw_blk_num;
    RS   = li.wino_offset;
  end

  // issue counters: r, a (cv or column), b (column chunk or channel group)
  logic [9:0]  ir, ia, ib;
  logic        issue_done, fence_ok;
  logic [31:0] n_iss, n_rcv, n_tot;

  logic [29:0] tag_in, tag_out;
  logic        tag_full, tag_empty;

  assign n_tot = li.wino_flag ? 32'(ROWS * CV * NWC) : 32'(ROWS * WP * CVG);

  sync_fifo #(.WIDTH(30), .DEPTH(TAGS)) u_tags (
    .clk(clk), .rst_n(rst_n),
    .push(mem_req_valid && mem_req_ready), .wr_data(tag_in),
    .pop(mem_rsp_valid), .rd_data(tag_out),
    .full(tag_full), .empty(tag_empty), .count()
  );

  assign inst_ready    = (state == S_IDLE);
  assign busy          = (state != S_IDLE);
  assign fence_ok      = (saves_done >= li.save_fence);
  assign free_tok_pop  = (state == S_WAIT) && free_tok_valid && li.dept_flag[DF_WAIT] && fence_ok;
  assign rdy_tok_push  = (state == S_DONE) && li.dept_flag[DF_SIG];
  assign mem_req_valid = (state == S_RUN) && !issue_done && !tag_full;
  assign tag_in        = {ib, ia, ir};

  // request address
  always_comb begin
    int h;
    longint off;
    h = int'(RS) + int'(ir) - int'(PAD);
    if (li.wino_flag)
      off = ((longint'(h) * CV + ia) * W + longint'(ib) * PT - PAD) * PI;
    else
      off = ((longint'(h) * W + (longint'(ia) - PAD)) * CV + longint'(ib) * PT) * PI;
    mem_req_addr = li.dram_base + DRAM_AW'(off);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      li    <= '0;
      ir <= '0; ia <= '0; ib <= '0;
      issue_done <= 1'b0;
      n_iss <= '0; n_rcv <= '0;
    end else begin
      case (state)
        S_IDLE: if (inst_valid) begin
          li <= load_inst_t'(inst);
          state <= S_WAIT;
        end
        S_WAIT: if ((!li.dept_flag[DF_WAIT] || free_tok_valid) && fence_ok) begin
          ir <= '0; ia <= '0; ib <= '0;
          n_iss <= '0; n_rcv <= '0;
          issue_done <= (n_tot == 0);
          state <= S_RUN;
        end
        S_RUN: begin
          if (mem_req_valid && mem_req_ready) begin
            n_iss <= n_iss + 1;
            if (n_iss + 1 == n_tot) issue_done <= 1'b1;
            // innermost: b (wino: column chunk, spat: channel group)
            if (32'(ib) + 1 == (li.wino_flag ? NWC : CVG)) begin
              ib <= '0;
              if (32'(ia) + 1 == (li.wino_flag ? CV : WP)) begin
                ia <= '0;
                ir <= ir + 10'd1;
              end else ia <= ia + 10'd1;
            end else ib <= ib + 10'd1;
          end
          if (mem_rsp_valid) n_rcv <= n_rcv + 1;
          if (issue_done && (n_rcv + (mem_rsp_valid ? 1 : 0)) == n_tot) state <= S_DONE;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // response -> buffer writes
  always_comb begin
    int unsigned r, a, b;
    int h, wd;
    int unsigned bank, w;
    logic rowok, ok;
    wd = 0; w = 0; bank = 0; ok = 1'b0;
    r = tag_out[9:0];
    a = tag_out[19:10];
    b = tag_out[29:20];
    h = int'(RS) + int'(r) - int'(PAD);
    rowok = (h >= 0) && (h < int'(H));
    ib_wr_half = li.buff_id[0];
    ib_wr_en   = '0;
    for (int k = 0; k < NB; k++) begin
      ib_wr_addr[k] = '0;
      ib_wr_data[k] = '0;
    end
    if (mem_rsp_valid) begin
      for (int t = 0; t < PT; t++) begin
        if (li.wino_flag) begin
          w    = b * PT + t;
          wd   = int'(w) - int'(PAD);
          ok   = rowok && (wd >= 0) && (wd < int'(W));
          bank = (r % PT) * PT + t;
          if (w < WP) begin
            ib_wr_en[bank]   = 1'b1;
            ib_wr_addr[bank] = IHAW'(li.buff_base + ((r / PT) * NWC + b) * CV + a);
            ib_wr_data[bank] = ok ? mem_rsp_data[t*IDW +: IDW] : '0;
          end
        end else begin
          w    = a;
          wd   = int'(w) - int'(PAD);
          ok   = rowok && (wd >= 0) && (wd < int'(W)) && (b * PT + t < CV);
          bank = t * PT + (w % PT);
          ib_wr_en[bank]   = 1'b1;
          ib_wr_addr[bank] = IHAW'(li.buff_base + (r * NWC + w / PT) * CVG + b);
          ib_wr_data[bank] = ok ? mem_rsp_data[t*IDW +: IDW] : '0;
        end
      end
    end
  end

`ifndef SYNTHESIS
  a_rsp_has_tag: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> !tag_empty) else $error("load_inp: response without request");
`endif
endmodule
