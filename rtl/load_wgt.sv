// load_wgt: the LOAD_WGT module, external memory to weight buffer.
//
// One LOAD_WGT instruction copies WGT_SIZE weight-buffer entries (one entry
// is the PT x PT x PO x PI weight block the PE consumes in one cycle) from
// external memory to one half of the weight buffer, starting at BUFF_BASE.
// The port delivers PI x PO x PT weights per beat, one bank row of the
// entry, so an entry takes PT beats; beat i of entry e is read from byte
// address DRAM_BASE + (e*PT + i) * PT*PO*PI and written to bank row i,
// word BUFF_BASE + e. Winograd weights arrive already transformed
// (U = G g G^T is done off-line), so both modes load the same way and the
// off-line tools store the blocks in this order. Up to TAGS reads are in
// flight; responses return in order. Tokens: wait for a free token before
// starting (DEPT_FLAG[0]), emit a ready token when done (DEPT_FLAG[1]).
// Port width and tokens follow the paper; the memory order is this design's.
module load_wgt #(
  parameter int unsigned PI        = hdnn_pkg::PI_DEF,
  parameter int unsigned PO        = hdnn_pkg::PO_DEF,
  parameter int unsigned PT        = hdnn_pkg::PT_DEF,
  parameter int unsigned WGT_DEPTH = 1024,
  parameter int unsigned TAGS      = 8,
  localparam int unsigned WDW  = PI * PO * hdnn_pkg::WW,
  localparam int unsigned WHAW = $clog2(WGT_DEPTH) - 1,
  localparam int unsigned RW   = (PT > 1) ? $clog2(PT) : 1
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
  output logic                         mem_req_valid,
  input  logic                         mem_req_ready,
  output logic [hdnn_pkg::DRAM_AW-1:0] mem_req_addr,
  input  logic                         mem_rsp_valid,
  input  logic [PT*WDW-1:0]            mem_rsp_data,
  output logic                         wb_wr_en,
  output logic                         wb_wr_half,
  output logic [RW-1:0]                wb_wr_row,
  output logic [WHAW-1:0]              wb_wr_addr,
  output logic [WDW-1:0]               wb_wr_data [PT]
);
  import hdnn_pkg::*;

  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_RUN, S_DONE} state_e;
  state_e state;
  load_inst_t li;

  logic [31:0] n_iss, n_rcv, n_tot;
  logic [15:0] re_cnt;            // entry of the next response
  logic [RW-1:0] ri_cnt;          // row of the next response

  assign n_tot = 32'(li.size[15:0]) * PT;

  assign inst_ready    = (state == S_IDLE);
  assign busy          = (state != S_IDLE);
  assign free_tok_pop  = (state == S_WAIT) && free_tok_valid && li.dept_flag[DF_WAIT];
  assign rdy_tok_push  = (state == S_DONE) && li.dept_flag[DF_SIG];
  assign mem_req_valid = (state == S_RUN) && (n_iss < n_tot) && (n_iss - n_rcv < TAGS);
  assign mem_req_addr  = li.dram_base + DRAM_AW'(n_iss * (PT * PO * PI));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      li    <= '0;
      n_iss <= '0; n_rcv <= '0; re_cnt <= '0; ri_cnt <= '0;
    end else begin
      case (state)
        S_IDLE: if (inst_valid) begin
          li <= load_inst_t'(inst);
          state <= S_WAIT;
        end
        S_WAIT: if (!li.dept_flag[DF_WAIT] || free_tok_valid) begin
          n_iss <= '0; n_rcv <= '0; re_cnt <= '0; ri_cnt <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          if (mem_req_valid && mem_req_ready) n_iss <= n_iss + 1;
          if (mem_rsp_valid) begin
            n_rcv <= n_rcv + 1;
            if (ri_cnt == RW'(PT - 1)) begin
              ri_cnt <= '0;
              re_cnt <= re_cnt + 16'd1;
            end else ri_cnt <= ri_cnt + 1'b1;
          end
          if ((n_rcv + (mem_rsp_valid ? 1 : 0)) == n_tot) state <= S_DONE;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign wb_wr_en   = (state == S_RUN) && mem_rsp_valid;
  assign wb_wr_half = li.buff_id[0];
  assign wb_wr_row  = ri_cnt;
  assign wb_wr_addr = WHAW'(li.buff_base + re_cnt);
  always_comb
    for (int j = 0; j < PT; j++) wb_wr_data[j] = mem_rsp_data[j*WDW +: WDW];
endmodule
