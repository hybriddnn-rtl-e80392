// ctrl: the CTRL module, instruction fetch and decode.
//
// After a start pulse the controller fetches inst_count 128-bit
// instructions, in order, from external memory starting at byte address
// inst_base (16 bytes per instruction), decodes the OPCODE field and pushes
// each instruction into the queue of the module that executes it:
// LOAD_INP -> LOAD_INP module, LOAD_WGT -> LOAD_WGT module,
// COMP and LOAD_BIAS -> COMP module (the bias port enters COMP),
// SAVE -> SAVE module. Unknown opcodes are dropped and counted in
// bad_opcodes. One fetch is outstanding at a time; a full queue stalls the
// fetch. When all instructions are dispatched, all queues are empty and no
// module is busy, done goes high and stays high until the next start.
// The modules then run concurrently, ordered only by the tokens of the
// handshake FIFOs. Instruction fetch, decode and the four instruction paths
// are the paper's; queue depth and fetch protocol are this design's own.
module ctrl #(
  parameter int unsigned QDEPTH = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [hdnn_pkg::DRAM_AW-1:0] inst_base,
  input  logic [15:0]                  inst_count,
  output logic                         busy,
  output logic                         done,
  output logic [7:0]                   bad_opcodes,
  // instruction port to external memory
  output logic                         mem_req_valid,
  input  logic                         mem_req_ready,
  output logic [hdnn_pkg::DRAM_AW-1:0] mem_req_addr,
  input  logic                         mem_rsp_valid,
  input  logic [127:0]                 mem_rsp_data,
  // instruction queues: 0 LOAD_INP, 1 LOAD_WGT, 2 COMP, 3 SAVE
  output logic [3:0]                   q_valid,
  output logic [127:0]                 q_data [4],
  input  logic [3:0]                   q_pop,
  input  logic [3:0]                   mod_busy
);
  import hdnn_pkg::*;

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_WAITR, S_PUSH, S_FINISH} state_e;
  state_e state;

  logic [15:0]  cnt;
  logic [127:0] ibuf;
  logic [3:0]   q_full, q_empty, q_push;
  logic [1:0]   tgt;
  logic         tgt_ok;

  always_comb begin
    tgt_ok = 1'b1;
    case (opcode_e'(ibuf[2:0]))
      OP_LOAD_INP:  tgt = 2'd0;
      OP_LOAD_WGT:  tgt = 2'd1;
      OP_LOAD_BIAS: tgt = 2'd2;
      OP_COMP:      tgt = 2'd2;
      OP_SAVE:      tgt = 2'd3;
      default: begin tgt = 2'd0; tgt_ok = 1'b0; end
    endcase
  end

  for (genvar q = 0; q < 4; q++) begin : g_q
    assign q_push[q] = (state == S_PUSH) && tgt_ok && (tgt == 2'(q)) && !q_full[q];
    sync_fifo #(.WIDTH(128), .DEPTH(QDEPTH)) u_q (
      .clk(clk), .rst_n(rst_n),
      .push(q_push[q]), .wr_data(ibuf),
      .pop(q_pop[q]), .rd_data(q_data[q]),
      .full(q_full[q]), .empty(q_empty[q]), .count()
    );
    assign q_valid[q] = !q_empty[q];
  end

  assign mem_req_valid = (state == S_FETCH);
  assign mem_req_addr  = inst_base + DRAM_AW'({cnt, 4'b0000});
  assign busy          = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
      ibuf  <= '0;
      done  <= 1'b0;
      bad_opcodes <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          cnt   <= '0;
          done  <= 1'b0;
          state <= (inst_count == 0) ? S_FINISH : S_FETCH;
        end
        S_FETCH: if (mem_req_ready) state <= S_WAITR;
        S_WAITR: if (mem_rsp_valid) begin
          ibuf  <= mem_rsp_data;
          state <= S_PUSH;
        end
        S_PUSH: if (!tgt_ok || !q_full[tgt]) begin
          if (!tgt_ok) bad_opcodes <= bad_opcodes + 8'd1;
          cnt   <= cnt + 16'd1;
          state <= (cnt + 16'd1 == inst_count) ? S_FINISH : S_FETCH;
        end
        S_FINISH: if (&q_empty && !(|mod_busy)) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
