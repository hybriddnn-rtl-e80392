// ext_mem: behavioural model of the external memory (DRAM) seen by one
// accelerator instance. Not synthesizable; testbench use only.
//
// A byte array of BYTES bytes (addresses wrap modulo BYTES) serves the five
// ports of hdnn_accel: four read ports (instruction 16 B, input PI*PT B,
// weight PI*PO*PT B, bias PO B per beat) and one masked write port (PO*PT B,
// PT vector lanes of PO bytes). Reads return in order LAT cycles after the
// request is accepted. With STALL = 1 every port's ready is low on about
// one cycle in four, which exercises the back-pressure paths. Counters of
// accepted beats and stall cycles are public for the testbenches.
// The paper does not describe the memory side; latency, stall rate and port
// widths here are this model's own choice.
module ext_mem #(
  parameter int unsigned PI    = 4,
  parameter int unsigned PO    = 4,
  parameter int unsigned PT    = 6,
  parameter int unsigned BYTES = 1 << 20,
  parameter int unsigned LAT   = 4,
  parameter bit          STALL = 1'b1
) (
  input  logic                  clk,
  input  logic                  ins_req_valid,
  output logic                  ins_req_ready,
  input  logic [31:0]           ins_req_addr,
  output logic                  ins_rsp_valid,
  output logic [127:0]          ins_rsp_data,
  input  logic                  inp_req_valid,
  output logic                  inp_req_ready,
  input  logic [31:0]           inp_req_addr,
  output logic                  inp_rsp_valid,
  output logic [PT*PI*8-1:0]    inp_rsp_data,
  input  logic                  wgt_req_valid,
  output logic                  wgt_req_ready,
  input  logic [31:0]           wgt_req_addr,
  output logic                  wgt_rsp_valid,
  output logic [PT*PI*PO*8-1:0] wgt_rsp_data,
  input  logic                  bias_req_valid,
  output logic                  bias_req_ready,
  input  logic [31:0]           bias_req_addr,
  output logic                  bias_rsp_valid,
  output logic [PO*8-1:0]       bias_rsp_data,
  input  logic                  out_wr_valid,
  output logic                  out_wr_ready,
  input  logic [31:0]           out_wr_addr,
  input  logic [PT*PO*8-1:0]    out_wr_data,
  input  logic [PT-1:0]         out_wr_mask
);
  logic [7:0] mem [BYTES];

  int unsigned stalls = 0;
  int unsigned writes = 0;
  longint      cyc = 0;

  typedef struct { logic [31:0] addr; longint due; } req_t;
  req_t q_ins[$], q_inp[$], q_wgt[$], q_bias[$];

  function automatic logic [7:0] rd(logic [31:0] a);
    return mem[a % BYTES];
  endfunction

  initial begin
    ins_req_ready = 1'b1; inp_req_ready = 1'b1; wgt_req_ready = 1'b1;
    bias_req_ready = 1'b1; out_wr_ready = 1'b1;
    ins_rsp_valid = 1'b0; inp_rsp_valid = 1'b0; wgt_rsp_valid = 1'b0; bias_rsp_valid = 1'b0;
    ins_rsp_data = '0; inp_rsp_data = '0; wgt_rsp_data = '0; bias_rsp_data = '0;
  end

  always @(posedge clk) begin
    req_t r;
    cyc <= cyc + 1;
    // accept requests
    if (ins_req_valid && ins_req_ready)   q_ins.push_back('{ins_req_addr, cyc + LAT});
    if (inp_req_valid && inp_req_ready)   q_inp.push_back('{inp_req_addr, cyc + LAT});
    if (wgt_req_valid && wgt_req_ready)   q_wgt.push_back('{wgt_req_addr, cyc + LAT});
    if (bias_req_valid && bias_req_ready) q_bias.push_back('{bias_req_addr, cyc + LAT});
    if (out_wr_valid && out_wr_ready) begin
      writes <= writes + 1;
      for (int t = 0; t < PT; t++)
        if (out_wr_mask[t])
          for (int b = 0; b < PO; b++)
            mem[(out_wr_addr + t*PO + b) % BYTES] <= out_wr_data[(t*PO+b)*8 +: 8];
    end
    // responses
    ins_rsp_valid <= 1'b0; inp_rsp_valid <= 1'b0; wgt_rsp_valid <= 1'b0; bias_rsp_valid <= 1'b0;
    if (q_ins.size() > 0 && q_ins[0].due <= cyc) begin
      r = q_ins.pop_front();
      for (int b = 0; b < 16; b++) ins_rsp_data[b*8 +: 8] <= rd(r.addr + b);
      ins_rsp_valid <= 1'b1;
    end
    if (q_inp.size() > 0 && q_inp[0].due <= cyc) begin
      r = q_inp.pop_front();
      for (int b = 0; b < PT*PI; b++) inp_rsp_data[b*8 +: 8] <= rd(r.addr + b);
      inp_rsp_valid <= 1'b1;
    end
    if (q_wgt.size() > 0 && q_wgt[0].due <= cyc) begin
      r = q_wgt.pop_front();
      for (int b = 0; b < PT*PI*PO; b++) wgt_rsp_data[b*8 +: 8] <= rd(r.addr + b);
      wgt_rsp_valid <= 1'b1;
    end
    if (q_bias.size() > 0 && q_bias[0].due <= cyc) begin
      r = q_bias.pop_front();
      for (int b = 0; b < PO; b++) bias_rsp_data[b*8 +: 8] <= rd(r.addr + b);
      bias_rsp_valid <= 1'b1;
    end
    // back-pressure
    if (STALL) begin
      logic [4:0] s;
      s = 5'($urandom);
      ins_req_ready  <= (s[1:0] != 2'b00);
      inp_req_ready  <= ($urandom % 4) != 0;
      wgt_req_ready  <= ($urandom % 4) != 0;
      bias_req_ready <= ($urandom % 4) != 0;
      out_wr_ready   <= ($urandom % 4) != 0;
      if ((inp_req_valid && !inp_req_ready) || (wgt_req_valid && !wgt_req_ready) ||
          (out_wr_valid && !out_wr_ready))
        stalls <= stalls + 1;
    end
  end
endmodule
