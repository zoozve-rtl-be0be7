// tb_zz_shuffle_engine: self-checking test of the shuffle engine.
//
// The engine drives real lanes (zz_lane) through its crossbar.  The test
// keeps a byte-addressed copy of the register file: element e of a group
// with head h sits at byte h*VLENB + e*EB.  It loads random data through the
// lanes' load/store ports and runs random gathers (VL = number of indices),
// scatters (unique indices), reductions and extractions at every element
// width, then reads the whole register file back and compares it, and the
// extraction result, with the reference.  It also bounds the cycle count of
// each operation (at least 3*ceil(VL/NPE) cycles for gather/scatter, at most
// 3*VL+6) and requires crossbar conflicts to have happened.
module tb_zz_shuffle_engine;
  import zz_pkg::*;

  localparam int unsigned NLANES = 4;
  localparam int unsigned NREGS  = 16;
  localparam int unsigned NPE    = 2;
  localparam int unsigned VLENB  = NLANES * LANE_B;

  logic              clk = 0, rst_n = 1;  // falls at 1 ns so the asynchronous reset sees an edge
  logic              start = 0, busy, done, conflict;
  shu_cmd_t          cmd;
  logic [XLEN-1:0]   result;
  vrf_port_t         shu_port [NLANES], lsu_port [NLANES];
  logic [LANE_W-1:0] shu_rdata [NLANES], lsu_rdata [NLANES];
  logic [7:0]        mem [NREGS*VLENB];
  int                checks = 0, failures = 0, cycles = 0, conflicts = 0;

  zz_shuffle_engine #(.NLANES(NLANES), .NPE(NPE)) dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .cmd_i(cmd), .busy_o(busy), .done_o(done),
    .result_o(result), .conflict_o(conflict), .lane_o(shu_port), .lane_rdata_i(shu_rdata)
  );

  for (genvar l = 0; l < NLANES; l++) begin : g_lane
    zz_lane #(.NREGS(NREGS), .LANE_ID(l)) u_lane (
      .clk_i(clk), .row_i('0), .shu_i(shu_port[l]), .shu_rdata_o(shu_rdata[l]),
      .lsu_i(lsu_port[l]), .lsu_rdata_o(lsu_rdata[l])
    );
  end

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (conflict) conflicts++;
  end

  initial begin
    wait (cycles == 200000);
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

  function automatic logic [63:0] rd_elem(input int head, input int e, input int eb);
    logic [63:0] v;
    v = '0;
    for (int k = 0; k < eb; k++) v[8*k +: 8] = mem[(head * VLENB + e * eb + k) % (NREGS * VLENB)];
    return v;
  endfunction

  task automatic wr_elem(input int head, input int e, input int eb, input logic [63:0] v);
    for (int k = 0; k < eb; k++) mem[(head * VLENB + e * eb + k) % (NREGS * VLENB)] = v[8*k +: 8];
  endtask

  // Push the whole reference into the lanes through their load/store ports.
  task automatic load_all();
    for (int r = 0; r < NREGS; r++) begin
      @(negedge clk);
      for (int l = 0; l < NLANES; l++) begin
        lsu_port[l].we      = 1;
        lsu_port[l].wr_addr = 13'(r);
        lsu_port[l].wr_be   = '1;
        for (int k = 0; k < 8; k++) lsu_port[l].wr_data[8*k +: 8] = mem[r * VLENB + l * 8 + k];
      end
    end
    @(negedge clk);
    for (int l = 0; l < NLANES; l++) lsu_port[l] = '0;
  endtask

  task automatic compare_all(input string what);
    int bad;
    bad = 0;
    for (int r = 0; r < NREGS; r++) begin
      for (int l = 0; l < NLANES; l++) lsu_port[l].rd_addr = 13'(r);
      #1;
      for (int l = 0; l < NLANES; l++)
        for (int k = 0; k < 8; k++)
          if (lsu_rdata[l][8*k +: 8] !== mem[r * VLENB + l * 8 + k]) bad++;
    end
    chk(bad == 0, what);
    if (bad != 0) $display("  %0d bytes differ", bad);
  endtask

  task automatic run(input shu_op_e op, input int sew, input int vd, input int vs1, input int vs2,
                     input int vl, input logic [63:0] sc, output int ncyc);
    int t0;
    @(negedge clk);
    cmd = '{op: op, sew: sew_t'(sew), vd: 13'(vd), vs1: 13'(vs1), vs2: 13'(vs2), vl: VL_W'(vl),
            scalar: sc};
    start = 1;
    t0 = cycles;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    ncyc = cycles - t0;
    @(negedge clk);
  endtask

  initial begin
    int ncyc;
    for (int l = 0; l < NLANES; l++) lsu_port[l] = '0;
    cmd = '0;
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      int sew, eb, epr, vl, nsrc;
      logic [63:0] exp_v, sc;
      sew  = n % 4;
      eb   = 1 << sew;
      epr  = VLENB / eb;
      nsrc = 4 * epr;              // elements in registers 0..3
      foreach (mem[i]) mem[i] = 8'($urandom);
      load_all();
      unique case ((n / 4) % 4)
        0: begin  // gather: v10.. = v0..[v6..[i]]
          vl = $urandom_range(1, nsrc);
          for (int i = 0; i < vl; i++) wr_elem(6, i, eb, 64'($urandom_range(0, nsrc - 1)));
          load_all();
          for (int i = 0; i < vl; i++)
            wr_elem(10, i, eb, rd_elem(0, int'(rd_elem(6, i, eb)), eb));
          run(F_GATHER, sew, 10, 0, 6, vl, 0, ncyc);
          chk(ncyc >= 3 * ((vl + NPE - 1) / NPE) && ncyc <= 3 * vl + 6, "gather cycle count");
          compare_all("gather");
        end
        1: begin  // scatter: v10..[v6..[i]] = v0..[i], unique indices
          int perm [];
          vl = $urandom_range(1, nsrc);
          perm = new[nsrc];
          foreach (perm[i]) perm[i] = i;
          perm.shuffle();
          for (int i = 0; i < vl; i++) wr_elem(6, i, eb, 64'(perm[i]));
          load_all();
          for (int i = 0; i < vl; i++) wr_elem(10, perm[i], eb, rd_elem(0, i, eb));
          run(F_SCATTER, sew, 10, 0, 6, vl, 0, ncyc);
          chk(ncyc >= 3 * ((vl + NPE - 1) / NPE) && ncyc <= 3 * vl + 6, "scatter cycle count");
          compare_all("scatter");
        end
        2: begin  // reduction: v14[0] = v15[0] + sum(v0..[i])
          vl = $urandom_range(1, nsrc);
          exp_v = rd_elem(15, 0, eb);
          for (int i = 0; i < vl; i++) exp_v += rd_elem(0, i, eb);
          wr_elem(14, 0, eb, exp_v);
          run(F_REDSUM, sew, 14, 15, 0, vl, 0, ncyc);
          chk(ncyc <= vl + 8, "reduction cycle count");
          compare_all("reduction");
        end
        default: begin  // extract
          sc = 64'($urandom_range(0, nsrc - 1));
          exp_v = rd_elem(0, int'(sc), eb);
          run(F_EXTRACT, sew, 0, 0, 0, 0, sc, ncyc);
          chk(result == exp_v, "extract value");
          compare_all("extract leaves registers alone");
        end
      endcase
    end
    chk(conflicts > 0, "crossbar conflicts happened");
    $display("conflict cycles: %0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
