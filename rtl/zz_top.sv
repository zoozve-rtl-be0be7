// zz_top: the Zoozve vector unit, a strip-mining-free RISC-V vector extension.
//
// Zoozve lets a vector instruction name a register group (RG) of any number
// of registers: the instruction gives the first register (a 13-bit v_head
// field) and a scalar register gives the vector length, and the hardware
// covers RG_head .. RG_tail on its own, so software needs no strip-mining
// loop even for very long vectors.  This top level wires the parts of the
// published prototype together:
//   * zz_main_sequencer  - instruction interface, decode, RG hazard detection
//                          (comparators OR'ed into one hazard signal),
//                          dispatch, and row-by-row stepping of the lanes;
//   * zz_lane x NLANES   - a 64-bit slice of each of the NREGS vector
//                          registers plus a SIMD ALU for symmetric operations;
//   * zz_shuffle_engine  - crossbar plus NPE processing elements for the
//                          asymmetric (inter-lane) instructions: gather,
//                          scatter, reduction, extraction;
//   * zz_vlsu            - vector loads and stores over the AXI interface.
// Defaults are the paper's main configuration: 64 lanes and 1024 vector
// registers, each VLEN = 64 x 64 = 4096 bits (the vector length also used in
// the paper's compilation example).  Two PEs are drawn in the paper's figure.
//
// Interface: instruction request (valid/ready, zz_req_t) and response
// (valid, zz_resp_t) towards the scalar core; a simplified AXI4 master
// (zz_pkg::axi_req_t / axi_resp_t) towards memory; status pulses for stalls
// and crossbar conflicts.  Active-low asynchronous reset.  The vector
// register file is not reset.
//
// The lint step reports rst_ni as used both synchronously and asynchronously
// here: the immediate assertion in the clocked block checks rst_ni before
// firing.  The assertion adds no logic, and the flops use rst_ni only as
// their asynchronous reset.
module zz_top
  import zz_pkg::*;
#(
  parameter int unsigned NLANES = 64,
  parameter int unsigned NREGS  = 1024,
  parameter int unsigned NPE    = 2
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  logic      req_valid_i,
  output logic      req_ready_o,
  input  zz_req_t   req_i,
  output logic      resp_valid_o,
  output zz_resp_t  resp_o,
  output axi_req_t  axi_req_o,
  input  axi_resp_t axi_resp_i,
  output logic      hazard_stall_o,
  output logic      busy_stall_o,
  output logic      xbar_conflict_o
);

  valu_row_t         row;
  logic              shu_start, shu_done, lsu_start, lsu_done;
  logic              shu_busy, lsu_busy;
  shu_cmd_t          shu_cmd;
  lsu_cmd_t          lsu_cmd;
  logic [XLEN-1:0]   shu_result;
  vrf_port_t         shu_port [NLANES], lsu_port [NLANES];
  logic [LANE_W-1:0] shu_rdata [NLANES], lsu_rdata [NLANES];

  zz_main_sequencer #(.NLANES(NLANES), .NREGS(NREGS)) u_seq (
    .clk_i, .rst_ni,
    .req_valid_i, .req_ready_o, .req_i,
    .resp_valid_o, .resp_o,
    .row_o          (row),
    .shu_start_o    (shu_start),
    .shu_cmd_o      (shu_cmd),
    .shu_done_i     (shu_done),
    .shu_result_i   (shu_result),
    .lsu_start_o    (lsu_start),
    .lsu_cmd_o      (lsu_cmd),
    .lsu_done_i     (lsu_done),
    .hazard_stall_o,
    .busy_stall_o
  );

  for (genvar l = 0; l < NLANES; l++) begin : g_lane
    zz_lane #(.NREGS(NREGS), .LANE_ID(l)) u_lane (
      .clk_i,
      .row_i       (row),
      .shu_i       (shu_port[l]),
      .shu_rdata_o (shu_rdata[l]),
      .lsu_i       (lsu_port[l]),
      .lsu_rdata_o (lsu_rdata[l])
    );
  end

  zz_shuffle_engine #(.NLANES(NLANES), .NPE(NPE)) u_shu (
    .clk_i, .rst_ni,
    .start_i      (shu_start),
    .cmd_i        (shu_cmd),
    .busy_o       (shu_busy),
    .done_o       (shu_done),
    .result_o     (shu_result),
    .conflict_o   (xbar_conflict_o),
    .lane_o       (shu_port),
    .lane_rdata_i (shu_rdata)
  );

  zz_vlsu #(.NLANES(NLANES)) u_lsu (
    .clk_i, .rst_ni,
    .start_i      (lsu_start),
    .cmd_i        (lsu_cmd),
    .busy_o       (lsu_busy),
    .done_o       (lsu_done),
    .axi_req_o,
    .axi_resp_i,
    .lane_o       (lsu_port),
    .lane_rdata_i (lsu_rdata)
  );

  // The sequencer only starts a unit that it has marked idle.
  always_ff @(posedge clk_i) begin
    if (rst_ni && shu_start) a_shu_idle_on_start: assert (!shu_busy);
    if (rst_ni && lsu_start) a_lsu_idle_on_start: assert (!lsu_busy);
  end

endmodule
