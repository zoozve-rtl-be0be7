// zz_xbar: crossbar between the shuffle-engine PEs and the lanes.
//
// Each of the NREQ processing elements (PEs) may, in one cycle, read one
// 64-bit lane word and write one lane word (with byte enables) anywhere in
// the vector register file: it names the register and the lane.  The
// crossbar routes each request to the addressed lane's shuffle port and
// routes that lane's read data back.  When several PEs address the same
// lane in the same cycle, the PE with the lowest index is granted and the
// others see no grant and retry (fixed priority, a design choice).  Reads
// and writes are arbitrated separately.
//
// The paper names a crossbar inside the shuffle engine; its request format
// and arbitration are this design's own.
//
// Timing: combinational; a granted read returns data in the same cycle, a
// granted write is performed by the lane at the next clock edge.
module zz_xbar
  import zz_pkg::*;
#(
  parameter int unsigned NREQ   = 2,
  parameter int unsigned NLANES = 64,
  localparam int unsigned LW    = (NLANES > 1) ? $clog2(NLANES) : 1
) (
  input  logic [NREQ-1:0]   rd_req_i,
  input  logic [HEAD_W-1:0] rd_reg_i   [NREQ],
  input  logic [LW-1:0]     rd_lane_i  [NREQ],
  output logic [NREQ-1:0]   rd_gnt_o,
  output logic [LANE_W-1:0] rd_data_o  [NREQ],
  input  logic [NREQ-1:0]   wr_req_i,
  input  logic [HEAD_W-1:0] wr_reg_i   [NREQ],
  input  logic [LW-1:0]     wr_lane_i  [NREQ],
  input  logic [LANE_W-1:0] wr_data_i  [NREQ],
  input  logic [LANE_B-1:0] wr_be_i    [NREQ],
  output logic [NREQ-1:0]   wr_gnt_o,
  output vrf_port_t         lane_o     [NLANES],
  input  logic [LANE_W-1:0] lane_rdata_i [NLANES]
);

  // Lane side: each lane takes the lowest-index requester that addresses it.
  for (genvar l = 0; l < NLANES; l++) begin : g_lane
    logic [NREQ-1:0] rd_hit, wr_hit;
    vrf_port_t       port;
    for (genvar r = 0; r < NREQ; r++) begin : g_hit
      assign rd_hit[r] = rd_req_i[r] && (rd_lane_i[r] == LW'(l));
      assign wr_hit[r] = wr_req_i[r] && (wr_lane_i[r] == LW'(l));
    end
    always_comb begin
      port = '0;
      for (int r = int'(NREQ) - 1; r >= 0; r--) begin
        if (rd_hit[r]) port.rd_addr = rd_reg_i[r];
        if (wr_hit[r]) begin
          port.we      = 1'b1;
          port.wr_addr = wr_reg_i[r];
          port.wr_data = wr_data_i[r];
          port.wr_be   = wr_be_i[r];
        end
      end
    end
    assign lane_o[l] = port;
  end

  // Requester side: granted unless a lower-index requester wants the same lane.
  for (genvar r = 0; r < NREQ; r++) begin : g_req
    always_comb begin
      rd_gnt_o[r] = rd_req_i[r];
      wr_gnt_o[r] = wr_req_i[r];
      for (int q = 0; q < r; q++) begin
        if (rd_req_i[q] && rd_lane_i[q] == rd_lane_i[r]) rd_gnt_o[r] = 1'b0;
        if (wr_req_i[q] && wr_lane_i[q] == wr_lane_i[r]) wr_gnt_o[r] = 1'b0;
      end
    end
    assign rd_data_o[r] = lane_rdata_i[rd_lane_i[r]];
  end

endmodule
