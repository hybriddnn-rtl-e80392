// hybriddnn_top: NI independent accelerator instances on one device.
//
// The device-level configuration places several identical accelerator
// instances side by side so that each fits in one region of the FPGA (six
// instances of PI = PO = 4, PT = 6, two per die of a three-die device).
// Each instance has its own instruction stream and its own five external
// memory ports; the instances share only clock and reset. All ports are
// arrays indexed by instance; see hdnn_accel for the protocol of each port.
// How the instances share the memory controllers is not part of this RTL:
// each port set is brought out and is served by the memory system outside.
// Several accelerator instances on one FPGA follow the architecture; bringing
// every memory port out unshared is this design's choice.
module hybriddnn_top #(
  parameter int unsigned NI = 6,
  parameter int unsigned PI = hdnn_pkg::PI_DEF,
  parameter int unsigned PO = hdnn_pkg::PO_DEF,
  parameter int unsigned PT = hdnn_pkg::PT_DEF,
  localparam int unsigned AW = hdnn_pkg::DRAM_AW
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start [NI],
  input  logic [AW-1:0] inst_base [NI],
  input  logic [16-1:0] inst_count [NI],
  output logic busy [NI],
  output logic done [NI],
  output logic [8-1:0] bad_opcodes [NI],
  output logic ins_req_valid [NI],
  input  logic ins_req_ready [NI],
  output logic [AW-1:0] ins_req_addr [NI],
  input  logic ins_rsp_valid [NI],
  input  logic [128-1:0] ins_rsp_data [NI],
  output logic inp_req_valid [NI],
  input  logic inp_req_ready [NI],
  output logic [AW-1:0] inp_req_addr [NI],
  input  logic inp_rsp_valid [NI],
  input  logic [PT*PI*hdnn_pkg::FW-1:0] inp_rsp_data [NI],
  output logic wgt_req_valid [NI],
  input  logic wgt_req_ready [NI],
  output logic [AW-1:0] wgt_req_addr [NI],
  input  logic wgt_rsp_valid [NI],
  input  logic [PT*PI*PO*hdnn_pkg::WW-1:0] wgt_rsp_data [NI],
  output logic bias_req_valid [NI],
  input  logic bias_req_ready [NI],
  output logic [AW-1:0] bias_req_addr [NI],
  input  logic bias_rsp_valid [NI],
  input  logic [PO*hdnn_pkg::WW-1:0] bias_rsp_data [NI],
  output logic out_wr_valid [NI],
  input  logic out_wr_ready [NI],
  output logic [AW-1:0] out_wr_addr [NI],
  output logic [PT*PO*hdnn_pkg::FW-1:0] out_wr_data [NI],
  output logic [PT-1:0] out_wr_mask [NI]
);
  for (genvar g = 0; g < NI; g++) begin : g_inst
    hdnn_accel #(.PI(PI), .PO(PO), .PT(PT)) u_accel (
      .clk(clk),
      .rst_n(rst_n),
      .start(start[g]),
      .inst_base(inst_base[g]),
      .inst_count(inst_count[g]),
      .busy(busy[g]),
      .done(done[g]),
      .bad_opcodes(bad_opcodes[g]),
      .ins_req_valid(ins_req_valid[g]),
      .ins_req_ready(ins_req_ready[g]),
      .ins_req_addr(ins_req_addr[g]),
      .ins_rsp_valid(ins_rsp_valid[g]),
      .ins_rsp_data(ins_rsp_data[g]),
      .inp_req_valid(inp_req_valid[g]),
      .inp_req_ready(inp_req_ready[g]),
      .inp_req_addr(inp_req_addr[g]),
      .inp_rsp_valid(inp_rsp_valid[g]),
      .inp_rsp_data(inp_rsp_data[g]),
      .wgt_req_valid(wgt_req_valid[g]),
      .wgt_req_ready(wgt_req_ready[g]),
      .wgt_req_addr(wgt_req_addr[g]),
      .wgt_rsp_valid(wgt_rsp_valid[g]),
      .wgt_rsp_data(wgt_rsp_data[g]),
      .bias_req_valid(bias_req_valid[g]),
      .bias_req_ready(bias_req_ready[g]),
      .bias_req_addr(bias_req_addr[g]),
      .bias_rsp_valid(bias_rsp_valid[g]),
      .bias_rsp_data(bias_rsp_data[g]),
      .out_wr_valid(out_wr_valid[g]),
      .out_wr_ready(out_wr_ready[g]),
      .out_wr_addr(out_wr_addr[g]),
      .out_wr_data(out_wr_data[g]),
      .out_wr_mask(out_wr_mask[g])
    );
  end
endmodule
