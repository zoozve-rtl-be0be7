// zz_shuffle_engine: executes Zoozve's inter-lane (asymmetric) instructions.
//
// The engine is NPE processing elements (zz_shuffle_pe) behind a crossbar
// (zz_xbar) that reaches every lane's register-file slice, as in the
// published architecture: the lanes execute the symmetric operations and the
// shuffle engine the gather, scatter, reduction and extraction operations,
// whose source and destination groups may have different lengths.
//
// Operation: start_i (one cycle, with cmd_i) starts all PEs.  When every PE
// reports done, a reduction adds the PEs' partial sums and writes the SEW-bit
// result into element 0 of vd (lane 0, byte 0) in one extra cycle; an
// extraction returns PE 0's value on result_o.  done_o pulses for one cycle
// at the end.  conflict_o is high in every cycle in which a PE lost crossbar
// arbitration.
//
// Timing: 1 cycle to start, then per PE about 3 cycles per gather/scatter
// element and 1 per reduction element, plus 1 cycle to finish (2 for a
// reduction).  The number of PEs is the paper's drawing (two PEs); the rest
// is this design's own.
//
// The lint step reports rst_ni as used both synchronously and asynchronously
// here: the immediate assertion in the clocked block checks rst_ni before
// firing.  The assertion adds no logic, and the flops use rst_ni only as
// their asynchronous reset.
module zz_shuffle_engine
  import zz_pkg::*;
#(
  parameter int unsigned NLANES = 64,
  parameter int unsigned NPE    = 2,
  localparam int unsigned LW    = (NLANES > 1) ? $clog2(NLANES) : 1
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              start_i,
  input  shu_cmd_t          cmd_i,
  output logic              busy_o,
  output logic              done_o,
  output logic [XLEN-1:0]   result_o,
  output logic              conflict_o,
  output vrf_port_t         lane_o       [NLANES],
  input  logic [LANE_W-1:0] lane_rdata_i [NLANES]
);

  typedef enum logic [1:0] {E_IDLE, E_RUN, E_FINAL} estate_e;

  estate_e  state_q;
  shu_cmd_t cmd_q;
  logic     started_q;

  logic [NPE-1:0]    rd_req, rd_gnt, wr_req, wr_gnt, pe_done;
  logic [HEAD_W-1:0] rd_reg [NPE], wr_reg [NPE];
  logic [LW-1:0]     rd_lane [NPE], wr_lane [NPE];
  logic [LANE_W-1:0] rd_data [NPE], wr_data [NPE];
  logic [LANE_B-1:0] wr_be [NPE];
  logic [63:0]       acc [NPE];
  vrf_port_t         xbar_lane [NLANES];

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    zz_shuffle_pe #(.NLANES(NLANES), .NPE(NPE), .PE_ID(p)) u_pe (
      .clk_i, .rst_ni,
      .start_i   (start_i),
      .cmd_i     (cmd_i),
      .rd_req_o  (rd_req[p]),
      .rd_reg_o  (rd_reg[p]),
      .rd_lane_o (rd_lane[p]),
      .rd_gnt_i  (rd_gnt[p]),
      .rd_data_i (rd_data[p]),
      .wr_req_o  (wr_req[p]),
      .wr_reg_o  (wr_reg[p]),
      .wr_lane_o (wr_lane[p]),
      .wr_data_o (wr_data[p]),
      .wr_be_o   (wr_be[p]),
      .wr_gnt_i  (wr_gnt[p]),
      .done_o    (pe_done[p]),
      .acc_o     (acc[p])
    );
  end

  zz_xbar #(.NREQ(NPE), .NLANES(NLANES)) u_xbar (
    .rd_req_i (rd_req),  .rd_reg_i (rd_reg),  .rd_lane_i (rd_lane),
    .rd_gnt_o (rd_gnt),  .rd_data_o (rd_data),
    .wr_req_i (wr_req),  .wr_reg_i (wr_reg),  .wr_lane_i (wr_lane),
    .wr_data_i (wr_data), .wr_be_i (wr_be),   .wr_gnt_o (wr_gnt),
    .lane_o   (xbar_lane), .lane_rdata_i (lane_rdata_i)
  );

  logic [63:0] sum;
  always_comb begin
    sum = '0;
    for (int unsigned p = 0; p < NPE; p++) sum += acc[p];
  end

  // Final reduction write goes to element 0 of vd: lane 0, byte 0.
  vrf_port_t lane0;
  always_comb begin
    lane0 = xbar_lane[0];
    if (state_q == E_FINAL) begin
      lane0.we      = 1'b1;
      lane0.wr_addr = cmd_q.vd;
      lane0.wr_data = LANE_W'(sum);
      lane0.wr_be   = LANE_B'((16'd1 << (16'd1 << cmd_q.sew)) - 16'd1);
    end
  end

  assign lane_o[0] = lane0;
  for (genvar l = 1; l < NLANES; l++) begin : g_lane
    assign lane_o[l] = xbar_lane[l];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q   <= E_IDLE;
      cmd_q     <= '0;
      started_q <= 1'b0;
    end else begin
      started_q <= start_i;
      unique case (state_q)
        E_IDLE: if (start_i) begin
          state_q <= E_RUN;
          cmd_q   <= cmd_i;
        end
        E_RUN: if (!started_q && &pe_done)
          state_q <= (cmd_q.op == F_REDSUM) ? E_FINAL : E_IDLE;
        default: state_q <= E_IDLE;
      endcase
    end
  end

  assign busy_o     = (state_q != E_IDLE);
  assign done_o     = ((state_q == E_RUN) && !started_q && &pe_done && cmd_q.op != F_REDSUM) ||
                      (state_q == E_FINAL);
  assign result_o   = acc[0];
  assign conflict_o = |(rd_req & ~rd_gnt) || |(wr_req & ~wr_gnt);

  // A new instruction may only start an idle engine.
  always_ff @(posedge clk_i) begin
    if (rst_ni && start_i) a_no_start_when_busy: assert (state_q == E_IDLE);
  end

endmodule
