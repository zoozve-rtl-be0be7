// tb_zz_xbar: self-checking test of the shuffle-engine crossbar.
//
// Random read and write requests from NREQ requesters to NLANES lanes; each
// lane returns a data word that encodes the lane number and the register
// address it was given, so the test can see which request reached which lane.
// A reference computes the grants (lowest requester index wins a lane), the
// returned data of granted reads and the write each lane receives.
module tb_zz_xbar;
  import zz_pkg::*;

  localparam int unsigned NREQ   = 3;
  localparam int unsigned NLANES = 8;
  localparam int unsigned LW     = 3;

  logic [NREQ-1:0]   rd_req, rd_gnt, wr_req, wr_gnt;
  logic [HEAD_W-1:0] rd_reg [NREQ], wr_reg [NREQ];
  logic [LW-1:0]     rd_lane [NREQ], wr_lane [NREQ];
  logic [LANE_W-1:0] rd_data [NREQ], wr_data [NREQ];
  logic [LANE_B-1:0] wr_be [NREQ];
  vrf_port_t         lane [NLANES];
  logic [LANE_W-1:0] lane_rdata [NLANES];
  int                checks = 0, failures = 0, conflicts = 0;

  zz_xbar #(.NREQ(NREQ), .NLANES(NLANES)) dut (
    .rd_req_i(rd_req), .rd_reg_i(rd_reg), .rd_lane_i(rd_lane), .rd_gnt_o(rd_gnt),
    .rd_data_o(rd_data), .wr_req_i(wr_req), .wr_reg_i(wr_reg), .wr_lane_i(wr_lane),
    .wr_data_i(wr_data), .wr_be_i(wr_be), .wr_gnt_o(wr_gnt), .lane_o(lane),
    .lane_rdata_i(lane_rdata)
  );

  always_comb
    for (int l = 0; l < NLANES; l++) lane_rdata[l] = {32'(l), 19'd0, lane[l].rd_addr};

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      for (int r = 0; r < NREQ; r++) begin
        rd_req[r]  = 1'($urandom);
        wr_req[r]  = 1'($urandom);
        rd_reg[r]  = 13'($urandom);
        wr_reg[r]  = 13'($urandom);
        rd_lane[r] = LW'($urandom_range(0, 3));   // narrow range: many conflicts
        wr_lane[r] = LW'($urandom_range(0, 3));
        wr_data[r] = {$urandom, $urandom};
        wr_be[r]   = 8'($urandom);
      end
      #1;
      for (int r = 0; r < NREQ; r++) begin
        bit exp_rg, exp_wg;
        exp_rg = rd_req[r];
        exp_wg = wr_req[r];
        for (int q = 0; q < r; q++) begin
          if (rd_req[q] && rd_lane[q] == rd_lane[r]) exp_rg = 0;
          if (wr_req[q] && wr_lane[q] == wr_lane[r]) exp_wg = 0;
        end
        conflicts += (rd_req[r] && !exp_rg);
        chk(rd_gnt[r] == exp_rg, "read grant");
        chk(wr_gnt[r] == exp_wg, "write grant");
        if (exp_rg)
          chk(rd_data[r] == {32'(rd_lane[r]), 19'd0, rd_reg[r]}, "read data routing");
        if (exp_wg) begin
          chk(lane[wr_lane[r]].we && lane[wr_lane[r]].wr_addr == wr_reg[r] &&
              lane[wr_lane[r]].wr_data == wr_data[r] && lane[wr_lane[r]].wr_be == wr_be[r],
              "write routing");
        end
      end
      for (int l = 0; l < NLANES; l++) begin
        bit any;
        any = 0;
        for (int r = 0; r < NREQ; r++) any |= wr_req[r] && wr_lane[r] == l;
        chk(lane[l].we == any, "lane write enable");
      end
    end
    chk(conflicts > 0, "conflicts exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
