// tb_zz_main_sequencer: self-checking test of the main sequencer.
//
// The shuffle engine and the load/store unit are replaced by simple models
// that raise done a programmable number of cycles after start.  Directed
// cases check: the row stream of a symmetric instruction over an arbitrary
// (non power-of-two) register group, including the tail byte count and the
// one-row-per-cycle rate; a read-after-write hazard against an in-flight
// load (stall until the load's done, then issue); an independent instruction
// issuing while the load is in flight; a structural stall on a busy unit;
// write-after-read against an in-flight store; the response of vextract;
// the error response of an illegal instruction and of a group that runs past
// the last register; and VL = 0 as a no-op.
module tb_zz_main_sequencer;
  import zz_pkg::*;

  localparam int unsigned NLANES = 4;
  localparam int unsigned NREGS  = 64;
  localparam int unsigned VLENB  = NLANES * LANE_B;

  logic            clk = 0, rst_n = 1;  // falls at 1 ns so the asynchronous reset sees an edge
  logic            req_valid = 0, req_ready, resp_valid;
  zz_req_t         req;
  zz_resp_t        resp;
  valu_row_t       row;
  logic            shu_start, shu_done = 0, lsu_start, lsu_done = 0;
  shu_cmd_t        shu_cmd;
  lsu_cmd_t        lsu_cmd;
  logic            hz, bz;
  int              checks = 0, failures = 0, cycles = 0;
  int              shu_delay = 5, lsu_delay = 5;
  int              hz_cycles = 0, bz_cycles = 0;

  zz_main_sequencer #(.NLANES(NLANES), .NREGS(NREGS)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req),
    .resp_valid_o(resp_valid), .resp_o(resp), .row_o(row),
    .shu_start_o(shu_start), .shu_cmd_o(shu_cmd), .shu_done_i(shu_done),
    .shu_result_i(64'hDEAD_BEEF_0123_4567),
    .lsu_start_o(lsu_start), .lsu_cmd_o(lsu_cmd), .lsu_done_i(lsu_done),
    .hazard_stall_o(hz), .busy_stall_o(bz)
  );

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    hz_cycles += hz;
    bz_cycles += bz;
  end

  // unit models
  initial forever begin
    @(posedge clk);
    if (shu_start) begin
      repeat (shu_delay) @(posedge clk);
      #1 shu_done = 1;
      @(posedge clk);
      #1 shu_done = 0;
    end
  end
  initial forever begin
    @(posedge clk);
    if (lsu_start) begin
      repeat (lsu_delay) @(posedge clk);
      #1 lsu_done = 1;
      @(posedge clk);
      #1 lsu_done = 0;
    end
  end

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (cycle %0d)", what, cycles);
    end
  endtask

  function automatic logic [63:0] enc(input logic [6:0] opc, input int f6, input int sew,
                                      input bit vx, input int vd, input int vs1, input int vs2);
    logic [63:0] i;
    logic [12:0] d;
    d = 13'(vd);
    i = '0;
    i[63:58] = d[12:7];
    i[57:45] = 13'(vs2);
    i[44:32] = 13'(vs1);
    i[31:26] = 6'(f6);
    i[25:23] = 3'(sew);
    i[21:15] = d[6:0];
    i[14:12] = {vx, 2'b00};
    i[11:7]  = 5'd11;
    i[6:0]   = opc;
    return i;
  endfunction

  // Present an instruction at a negedge and wait until it is accepted;
  // returns the number of cycles it waited.
  task automatic issue(input logic [63:0] insn, input longint avl, input longint rs2,
                       output int waited);
    @(negedge clk);
    req = '{insn: insn, rs2_val: XLEN'(rs2), avl_val: XLEN'(avl)};
    req_valid = 1;
    waited = 0;
    #1;
    while (!req_ready) begin
      @(negedge clk);
      #1;
      waited++;
    end
    @(posedge clk);
    #1 req_valid = 0;
  endtask

  initial begin
    int w;
    req = '0;
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. Symmetric add over a 5-register group with a partial tail:
    //    VL = 75 16-bit elements = 150 bytes = 4 full registers + 22 bytes.
    fork
      issue(enc(OPC_CUSTOM1, F_ADD, 1, 0, 3, 20, 40), 75, 0, w);
      begin
        @(posedge clk iff (req_valid && req_ready));
        for (int r = 0; r < 5; r++) begin
          @(negedge clk);
          chk(row.valid && row.op == F_ADD && row.sew == 2'd1, "row valid/op/sew");
          chk(row.vd == 13'(3 + r) && row.vs1 == 13'(20 + r) && row.vs2 == 13'(40 + r),
              "row register numbers step by one");
          chk(row.nbytes == VL_W'((r < 4) ? VLENB : 150 - 4 * VLENB), "row byte count / tail");
        end
        @(negedge clk);
        chk(!row.valid, "rows end after RG_tail (5 rows, one per cycle)");
      end
    join
    chk(w == 0, "idle unit accepts at once");

    // 2. Load into v10..v11, then an add reading v11: RAW hazard until the load is done.
    lsu_delay = 12;
    issue(enc(OPC_CUSTOM0, F_LOAD, 2, 0, 10, 0, 0), 2 * VLENB / 4, 64'h1000, w);
    // 2b. independent add (v30 = v31 + v32) proceeds while the load is in flight
    issue(enc(OPC_CUSTOM1, F_XOR, 0, 0, 30, 31, 32), 8, 0, w);
    chk(w == 0, "independent instruction overlaps the load");
    begin
      int h0;
      h0 = hz_cycles;
      issue(enc(OPC_CUSTOM1, F_ADD, 2, 1, 50, 11, 0), 8, 7, w);
      chk(w >= 8, "RAW hazard stalls until the load finishes");
      chk(hz_cycles - h0 >= 8, "hazard signal raised while stalled");
    end

    // 3. Structural stall: two loads to disjoint groups.
    lsu_delay = 6;
    issue(enc(OPC_CUSTOM0, F_LOAD, 0, 0, 40, 0, 0), 8, 64'h0, w);
    begin
      int b0;
      b0 = bz_cycles;
      issue(enc(OPC_CUSTOM0, F_LOAD, 0, 0, 45, 0, 0), 8, 64'h100, w);
      chk(w >= 5 && bz_cycles - b0 >= 5, "second load waits for the busy unit");
    end

    // 4. WAR: store reads v20..v20, a following add writes v20.
    lsu_delay = 10;
    issue(enc(OPC_CUSTOM0, F_STORE, 0, 0, 0, 20, 0), 8, 64'h200, w);
    issue(enc(OPC_CUSTOM1, F_MV, 0, 1, 20, 21, 0), 8, 5, w);
    chk(w >= 8, "write-after-read hazard on the stored group");

    // 5. vextract returns the engine's result.
    shu_delay = 4;
    fork
      issue(enc(OPC_CUSTOM2, F_EXTRACT, 1, 0, 0, 5, 0), 0, 3, w);
      begin
        @(posedge clk iff resp_valid);
        chk(!resp.error && resp.data == 64'hDEAD_BEEF_0123_4567, "extract response");
      end
    join
    chk(shu_cmd.scalar == 64'd3, "extract index passed to the engine");

    // 6. Illegal opcode and group past the last register -> error responses.
    fork
      issue(64'h0000_0000_0000_0033, 8, 0, w);
      begin
        @(posedge clk iff resp_valid);
        chk(resp.error, "illegal opcode answered with error");
      end
    join
    fork
      issue(enc(OPC_CUSTOM1, F_ADD, 0, 0, 62, 0, 8), 3 * VLENB, 0, w);
      begin
        @(posedge clk iff resp_valid);
        chk(resp.error, "group past the last register answered with error");
      end
    join

    // 7. VL = 0: accepted, nothing happens.
    issue(enc(OPC_CUSTOM1, F_ADD, 0, 0, 1, 2, 3), 0, 0, w);
    @(negedge clk);
    chk(!row.valid, "VL=0 issues no rows");

    repeat (20) @(negedge clk);
    $display("hazard stall cycles %0d, busy stall cycles %0d", hz_cycles, bz_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
