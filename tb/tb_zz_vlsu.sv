// tb_zz_vlsu: self-checking test of the vector load/store unit.
//
// The unit drives real lanes and a behavioural AXI memory with random wait
// states.  The test keeps reference copies of the register file and of
// memory, both byte-addressed, and runs random loads and stores of random
// length and element width to random register groups and 8-byte-aligned
// addresses.  After each operation it compares every register byte (bytes
// past the vector's end must be untouched) and every memory byte (only the
// vector's bytes may change).
module tb_zz_vlsu;
  import zz_pkg::*;

  localparam int unsigned NLANES    = 4;
  localparam int unsigned NREGS     = 16;
  localparam int unsigned VLENB     = NLANES * LANE_B;
  localparam int unsigned MEM_WORDS = 256;

  logic              clk = 0, rst_n = 1;  // falls at 1 ns so the asynchronous reset sees an edge
  logic              start = 0, busy, done;
  lsu_cmd_t          cmd;
  axi_req_t          axi_req;
  axi_resp_t         axi_resp;
  vrf_port_t         shu_port [NLANES], lsu_port [NLANES];
  logic [LANE_W-1:0] shu_rdata [NLANES], lsu_rdata [NLANES];
  logic [7:0]        vrf [NREGS*VLENB];
  logic [7:0]        mem [MEM_WORDS*8];
  int                checks = 0, failures = 0, cycles = 0;

  zz_vlsu #(.NLANES(NLANES)) dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .cmd_i(cmd), .busy_o(busy), .done_o(done),
    .axi_req_o(axi_req), .axi_resp_i(axi_resp), .lane_o(lsu_port), .lane_rdata_i(lsu_rdata)
  );

  tb_axi_mem #(.MEM_WORDS(MEM_WORDS), .STALL(1'b1)) u_mem (
    .clk_i(clk), .rst_ni(rst_n), .req_i(axi_req), .resp_o(axi_resp)
  );

  for (genvar l = 0; l < NLANES; l++) begin : g_lane
    zz_lane #(.NREGS(NREGS), .LANE_ID(l)) u_lane (
      .clk_i(clk), .row_i('0), .shu_i(shu_port[l]), .shu_rdata_o(shu_rdata[l]),
      .lsu_i(lsu_port[l]), .lsu_rdata_o(lsu_rdata[l])
    );
  end

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 300000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic push_state();
    for (int r = 0; r < NREGS; r++) begin
      @(negedge clk);
      for (int l = 0; l < NLANES; l++) begin
        shu_port[l].we = 1; shu_port[l].wr_addr = 13'(r); shu_port[l].wr_be = '1;
        for (int k = 0; k < 8; k++) shu_port[l].wr_data[8*k +: 8] = vrf[r * VLENB + l * 8 + k];
      end
    end
    @(negedge clk);
    for (int l = 0; l < NLANES; l++) shu_port[l] = '0;
    for (int w = 0; w < MEM_WORDS; w++)
      for (int k = 0; k < 8; k++) u_mem.words[w][8*k +: 8] = mem[w * 8 + k];
  endtask

  task automatic compare_state(input string what);
    int bad_r, bad_m;
    bad_r = 0;
    bad_m = 0;
    for (int r = 0; r < NREGS; r++) begin
      for (int l = 0; l < NLANES; l++) shu_port[l].rd_addr = 13'(r);
      #1;
      for (int l = 0; l < NLANES; l++)
        for (int k = 0; k < 8; k++)
          if (shu_rdata[l][8*k +: 8] !== vrf[r * VLENB + l * 8 + k]) bad_r++;
    end
    for (int w = 0; w < MEM_WORDS; w++)
      for (int k = 0; k < 8; k++)
        if (u_mem.words[w][8*k +: 8] !== mem[w * 8 + k]) bad_m++;
    chk(bad_r == 0, {what, ": register file"});
    chk(bad_m == 0, {what, ": memory"});
    if (bad_r + bad_m != 0) $display("  %0d register / %0d memory bytes differ", bad_r, bad_m);
  endtask

  initial begin
    for (int l = 0; l < NLANES; l++) shu_port[l] = '0;
    cmd = '0;
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 80; n++) begin
      int sew, eb, vl, nbytes, nregs, vreg, base;
      bit is_load;
      sew     = $urandom_range(0, 3);
      eb      = 1 << sew;
      nregs   = $urandom_range(1, 5);
      vl      = $urandom_range((nregs - 1) * VLENB / eb + 1, nregs * VLENB / eb);
      if (n % 10 == 9) vl = 0;
      nbytes  = vl * eb;
      vreg    = $urandom_range(0, NREGS - nregs);
      base    = 8 * $urandom_range(0, MEM_WORDS - nregs * VLENB / 8);
      is_load = n % 2 == 0;
      foreach (vrf[i]) vrf[i] = 8'($urandom);
      foreach (mem[i]) mem[i] = 8'($urandom);
      push_state();
      for (int b = 0; b < nbytes; b++) begin
        if (is_load) vrf[vreg * VLENB + b] = mem[base + b];
        else         mem[base + b] = vrf[vreg * VLENB + b];
      end
      @(negedge clk);
      cmd = '{op: is_load ? F_LOAD : F_STORE, sew: sew_t'(sew), vreg: 13'(vreg),
              base: XLEN'(base), vl: VL_W'(vl)};
      start = 1;
      #1;
      if (vl == 0) chk(done, "VL=0 finishes at once");
      @(negedge clk);
      start = 0;
      if (vl != 0) begin
        chk(busy, "busy while transferring");
        while (!done) @(negedge clk);
        @(negedge clk);
      end
      chk(!busy, "idle after done");
      compare_state(is_load ? "load" : "store");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
