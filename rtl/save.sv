// save: the SAVE module, output buffer to external memory, with layout
// transform and optional 2x2 max pooling.
//
// One SAVE instruction writes OC_BLK_NUMBER x OW_BLK_NUMBER output-buffer
// entries (k, y) of one half to external memory. The source layout is that
// of the layer just computed (WINO_FLAG[0]) and the destination layout that
// of the next layer (WINO_FLAG[1]), which gives the four transforms:
//
//   WINO-to-WINO  entry = m x m tile of channel vector k; one beat per tile
//                 row, m consecutive columns.
//   WINO-to-SPAT  same entry; one single-vector beat per pixel.
//   SPAT-to-SPAT  entry = PT channel vectors k*PT.. of pixel y; one beat.
//   SPAT-to-WINO  same entry; one single-vector beat per channel vector.
//
// DRAM addresses (bytes, vectors of PO channels, Wo = output width, KV =
// output channel vectors): WINO layout ((row*KV + kv)*Wo + col)*PO, SPAT
// layout ((row*Wo + col)*KV + kv)*PO, with row relative to the group, whose
// start the instruction's DRAM_BASE already contains. Lanes outside Wo or KV
// are masked. With POOL_SIZE = 2 and a Winograd source, each m x m tile is
// reduced to (m/2) x (m/2) by 2x2 max pooling before it is written.
// Each entry takes one read cycle, one latency cycle and its beats; a beat
// waits while wr_ready is low. The module waits for an out-ready token
// (DEPT_FLAG[0]) and emits an out-free token when done (DEPT_FLAG[1]);
// `saved` pulses once per finished instruction for the layer fence.
// The four transforms and the PO x PT port are the paper's; the beat
// scheme, pooling placement and field meanings are this design's own.
module save #(
  parameter int unsigned PO        = hdnn_pkg::PO_DEF,
  parameter int unsigned PT        = hdnn_pkg::PT_DEF,
  parameter int unsigned OUT_DEPTH = 2048,
  localparam int unsigned M    = PT - 2,
  localparam int unsigned NBO  = hdnn_pkg::max_u(M * M, PT),
  localparam int unsigned VW   = PO * hdnn_pkg::FW,
  localparam int unsigned ODW  = NBO * VW,
  localparam int unsigned OHAW = $clog2(OUT_DEPTH) - 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         inst_valid,
  input  logic [127:0]                 inst,
  output logic                         inst_ready,
  output logic                         busy,
  input  logic                         rdy_tok_valid,
  output logic                         rdy_tok_pop,
  output logic                         free_tok_push,
  output logic                         saved,         // one SAVE instruction finished
  output logic                         ob_rd_en,
  output logic                         ob_rd_half,
  output logic [OHAW-1:0]              ob_rd_addr,
  input  logic [ODW-1:0]               ob_rd_data,
  output logic                         wr_valid,
  input  logic                         wr_ready,
  output logic [hdnn_pkg::DRAM_AW-1:0] wr_addr,
  output logic [PT*VW-1:0]             wr_data,
  output logic [PT-1:0]                wr_mask
);
  import hdnn_pkg::*;

  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_RD, S_LAT, S_EMIT, S_DONE} state_e;
  state_e state;
  save_inst_t si;

  logic [9:0]     k_cnt, y_cnt;
  logic [7:0]     bt;          // beat inside the entry
  logic [ODW-1:0] word;

  int unsigned WO, KV, P, MP, NBEAT;
  always_comb begin
    WO = si.size[9:0];
    KV = si.size[19:10];
    P  = (si.src_wino && si.pool == 4'd2) ? 2 : 1;
    MP = M / P;
    if (si.src_wino) NBEAT = si.dst_wino ? MP : MP * MP;
    else             NBEAT = si.dst_wino ? PT : 1;
  end

  assign inst_ready    = (state == S_IDLE);
  assign busy          = (state != S_IDLE);
  assign rdy_tok_pop   = (state == S_WAIT) && rdy_tok_valid && si.dept_flag[DF_WAIT];
  assign free_tok_push = (state == S_DONE) && si.dept_flag[DF_SIG];
  assign saved         = (state == S_DONE);
  assign ob_rd_en      = (state == S_RD);
  assign ob_rd_half    = si.buff_id[0];
  assign ob_rd_addr    = OHAW'(si.buff_base + int'(k_cnt) * si.ow_blk_num + y_cnt);

  // pooled (or plain) vector of tile pixel (i, j)
  function automatic logic [VW-1:0] tile_px(logic [ODW-1:0] wd, int unsigned i,
                                            int unsigned j, int unsigned p);
    logic [VW-1:0] r;
    for (int o = 0; o < PO; o++) begin
      logic signed [FW-1:0] mx, v;
      mx = $signed(wd[((i*p)*M + j*p)*VW + o*FW +: FW]);
      for (int a = 0; a < 2; a++)
        for (int b = 0; b < 2; b++)
          if (a < p && b < p) begin
            v = $signed(wd[((i*p+a)*M + (j*p+b))*VW + o*FW +: FW]);
            if (v > mx) mx = v;
          end
      r[o*FW +: FW] = mx;
    end
    return r;
  endfunction

  always_comb begin
    longint row, col, kv, off;
    wr_data = '0;
    wr_mask = '0;
    off = 0; row = 0; col = 0; kv = 0;
    if (si.src_wino) begin
      kv = k_cnt;
      if (si.dst_wino) begin
        row = bt;
        col = longint'(y_cnt) * MP;
        off = ((row * KV + kv) * WO + col) * PO;
        for (int j = 0; j < PT; j++)
          if (j < MP) begin
            wr_data[j*VW +: VW] = tile_px(word, bt, j, P);
            wr_mask[j] = (col + j) < WO;
          end
      end else begin
        row = bt / MP;
        col = longint'(y_cnt) * MP + bt % MP;
        off = ((row * WO + col) * KV + kv) * PO;
        wr_data[0 +: VW] = tile_px(word, bt / MP, bt % MP, P);
        wr_mask[0] = col < WO;
      end
    end else begin
      col = y_cnt;
      if (si.dst_wino) begin
        kv  = longint'(k_cnt) * PT + bt;
        off = (kv * WO + col) * PO;
        wr_data[0 +: VW] = word[bt*VW +: VW];
        wr_mask[0] = (kv < KV) && (col < WO);
      end else begin
        kv  = longint'(k_cnt) * PT;
        off = (col * KV + kv) * PO;
        for (int t = 0; t < PT; t++) begin
          wr_data[t*VW +: VW] = word[t*VW +: VW];
          wr_mask[t] = ((kv + t) < KV) && (col < WO);
        end
      end
    end
    wr_addr = si.dram_base + DRAM_AW'(off);
  end

  assign wr_valid = (state == S_EMIT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      si    <= '0;
      k_cnt <= '0; y_cnt <= '0; bt <= '0;
      word  <= '0;
    end else begin
      case (state)
        S_IDLE: if (inst_valid) begin
          si <= save_inst_t'(inst);
          state <= S_WAIT;
        end
        S_WAIT: if (!si.dept_flag[DF_WAIT] || rdy_tok_valid) begin
          k_cnt <= '0; y_cnt <= '0; bt <= '0;
          state <= (si.oc_blk_num == 0 || si.ow_blk_num == 0) ? S_DONE : S_RD;
        end
        S_RD:  state <= S_LAT;
        S_LAT: begin
          word  <= ob_rd_data;
          bt    <= '0;
          state <= S_EMIT;
        end
        S_EMIT: if (wr_ready) begin
          if (32'(bt) + 1 == NBEAT) begin
            bt <= '0;
            if (y_cnt + 10'd1 == si.ow_blk_num) begin
              y_cnt <= '0;
              if (k_cnt + 10'd1 == si.oc_blk_num) state <= S_DONE;
              else begin
                k_cnt <= k_cnt + 10'd1;
                state <= S_RD;
              end
            end else begin
              y_cnt <= y_cnt + 10'd1;
              state <= S_RD;
            end
          end else bt <= bt + 8'd1;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
