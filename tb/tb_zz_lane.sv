// tb_zz_lane: self-checking test of one lane (register-file slice + SIMD ALU).
//
// Fills the lane's registers through the load/store port, then issues random
// row requests (every operation, every element width, .vv and .vx, random
// tail byte counts) and keeps a reference copy of the slice, computed here
// element by element.  After each row it reads the destination back through
// the shuffle port and compares.  The lane is instantiated as lane 1 so the
// tail mask has to take the lane's byte offset (8..15) into account; writes
// must land in the cycle after the row is presented (latency 1).
module tb_zz_lane;
  import zz_pkg::*;

  localparam int unsigned NREGS   = 16;
  localparam int unsigned LANE_ID = 1;

  logic              clk = 0;
  valu_row_t         row;
  vrf_port_t         shu, lsu;
  logic [LANE_W-1:0] shu_rdata, lsu_rdata;
  logic [63:0]       model [NREGS];
  int                checks = 0, failures = 0, cycles = 0;

  zz_lane #(.NREGS(NREGS), .LANE_ID(LANE_ID)) dut (
    .clk_i(clk), .row_i(row), .shu_i(shu), .shu_rdata_o(shu_rdata),
    .lsu_i(lsu), .lsu_rdata_o(lsu_rdata)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 100000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] ref_op(input valu_op_e op, input logic [63:0] a,
                                         input logic [63:0] b, input int bits);
    logic [63:0] r, m;
    m = (bits == 64) ? '1 : ((64'd1 << bits) - 1);
    case (op)
      F_ADD: r = a + b;
      F_SUB: r = a - b;
      F_MUL: r = a * b;
      F_AND: r = a & b;
      F_OR:  r = a | b;
      F_XOR: r = a ^ b;
      default: r = b;
    endcase
    return r & m;
  endfunction

  initial begin
    row = '0; shu = '0; lsu = '0;
    // Preload through the lsu port, random byte enables on a second pass.
    for (int r = 0; r < NREGS; r++) begin
      model[r] = {$urandom, $urandom};
      @(negedge clk);
      lsu.we = 1; lsu.wr_addr = 13'(r); lsu.wr_data = model[r]; lsu.wr_be = '1;
    end
    @(negedge clk);
    lsu = '0;
    for (int r = 0; r < NREGS; r++) begin
      @(negedge clk);
      shu.rd_addr = 13'(r);
      lsu.rd_addr = 13'(r);
      #1;
      checks++;
      if (shu_rdata !== model[r] || lsu_rdata !== model[r]) begin
        failures++;
        $display("FAIL preload r=%0d got %h exp %h", r, shu_rdata, model[r]);
      end
    end
    // Random ALU rows.
    for (int n = 0; n < 2000; n++) begin
      valu_op_e    op;
      int          sew, eb, bits, vd, vs1, vs2, nb;
      logic        vx;
      logic [63:0] sc, a, b, exp_w;
      op  = valu_op_e'($urandom_range(0, 6));
      sew = $urandom_range(0, 3);
      eb  = 1 << sew;
      bits = 8 * eb;
      vx  = 1'($urandom);
      vd  = $urandom_range(0, NREGS - 1);
      vs1 = $urandom_range(0, NREGS - 1);
      vs2 = $urandom_range(0, NREGS - 1);
      sc  = {$urandom, $urandom};
      // nbytes: below, inside or above this lane's bytes 8..15
      nb  = $urandom_range(0, 24);
      @(negedge clk);
      row.valid = 1; row.op = op; row.sew = sew_t'(sew); row.use_scalar = vx;
      row.vd = 13'(vd); row.vs1 = 13'(vs1); row.vs2 = 13'(vs2); row.scalar = sc;
      row.nbytes = VL_W'(nb);
      exp_w = model[vd];
      for (int e = 0; e < 8 / eb; e++) begin
        logic [63:0] m, r;
        if (vx) begin
          a = (model[vs1] >> (e * bits));
          b = sc;
        end else begin
          a = (model[vs2] >> (e * bits));
          b = (model[vs1] >> (e * bits));
        end
        m = (bits == 64) ? '1 : ((64'd1 << bits) - 1);
        r = ref_op(op, a & m, b & m, bits);
        for (int k = 0; k < eb; k++) begin
          int byte_in_lane;
          byte_in_lane = e * eb + k;
          if (LANE_ID * 8 + byte_in_lane < nb)
            exp_w[8*byte_in_lane +: 8] = r[8*k +: 8];
        end
      end
      @(negedge clk);
      row.valid = 0;
      model[vd] = exp_w;
      shu.rd_addr = 13'(vd);
      #1;
      checks++;
      if (shu_rdata !== exp_w) begin
        failures++;
        $display("FAIL op=%0d sew=%0d vx=%0d nb=%0d vd=%0d got %h exp %h", op, sew, vx, nb, vd,
                 shu_rdata, exp_w);
      end
    end
    // Byte-enabled shuffle-port write.
    @(negedge clk);
    shu.we = 1; shu.wr_addr = 13'd2; shu.wr_data = '1; shu.wr_be = 8'h0F;
    @(negedge clk);
    shu.we = 0; shu.rd_addr = 13'd2;
    #1;
    checks++;
    if (shu_rdata !== {model[2][63:32], 32'hFFFF_FFFF}) begin
      failures++;
      $display("FAIL byte-enable write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
