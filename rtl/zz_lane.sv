// zz_lane: one lane of the Zoozve vector unit.
//
// A lane holds a 64-bit slice of every one of the NREGS vector registers
// (lane l holds bytes 8*l .. 8*l+7 of each register) and a SIMD integer ALU
// that executes the symmetric, element-wise instructions.  All lanes receive
// the same row request from the main sequencer: one row is one vector
// register of each operand register group, so a register group of any
// length is processed one register per cycle with no strip-mining loop.
//
// ALU: vd = vs2 op vs1 (.vv) or vd = vs1 op x[rs2] (.vx), for add, sub, mul
// (low half), and, or, xor and move/broadcast, on 8/16/32/64-bit elements.
// Each lane computes its own byte enables from row.nbytes, so the tail of a
// group that ends inside a register is left untouched.
//
// Two more ports give the shuffle engine (shu) and the load/store unit (lsu)
// their own per-lane read address (combinational read) and write port with
// byte enables.  The main sequencer's hazard detection keeps the three
// writers on different registers, so the write order below never matters.
//
// The paper names the lanes and says they execute symmetric operations; the
// slice layout, the ALU operation set and the port structure are this
// design's own choices.
//
// Timing: the ALU reads its operands and writes vd in the same cycle
// (latency 1, throughput one register row per cycle).
module zz_lane
  import zz_pkg::*;
#(
  parameter int unsigned NREGS   = 1024,
  parameter int unsigned LANE_ID = 0
) (
  input  logic              clk_i,
  input  valu_row_t         row_i,
  input  vrf_port_t         shu_i,
  output logic [LANE_W-1:0] shu_rdata_o,
  input  vrf_port_t         lsu_i,
  output logic [LANE_W-1:0] lsu_rdata_o
);

  localparam int unsigned AW = $clog2(NREGS);

  logic [LANE_W-1:0] vrf [NREGS];

  logic [LANE_W-1:0] opa, opb, res;
  logic [LANE_B-1:0] be;

  function automatic logic [LANE_W-1:0] replicate(input logic [XLEN-1:0] s, input sew_t sew);
    logic [LANE_W-1:0] r;
    for (int unsigned i = 0; i < LANE_B; i++) begin
      unique case (sew)
        2'd0: r[8*i +: 8] = s[8*(i%1) +: 8];
        2'd1: r[8*i +: 8] = s[8*(i%2) +: 8];
        2'd2: r[8*i +: 8] = s[8*(i%4) +: 8];
        default: r[8*i +: 8] = s[8*(i%8) +: 8];
      endcase
    end
    return r;
  endfunction

  function automatic logic [63:0] elem_op(input valu_op_e op, input logic [63:0] a,
                                          input logic [63:0] b);
    unique case (op)
      F_ADD:   return a + b;
      F_SUB:   return a - b;
      F_MUL:   return a * b;
      F_AND:   return a & b;
      F_OR:    return a | b;
      F_XOR:   return a ^ b;
      default: return b;   // F_MV
    endcase
  endfunction

  function automatic logic [LANE_W-1:0] simd(input valu_op_e op, input sew_t sew,
                                             input logic [LANE_W-1:0] a, input logic [LANE_W-1:0] b);
    logic [LANE_W-1:0] r;
    r = '0;
    unique case (sew)
      2'd0: for (int unsigned i = 0; i < 8; i++)
              r[8*i +: 8] = 8'(elem_op(op, 64'(a[8*i +: 8]), 64'(b[8*i +: 8])));
      2'd1: for (int unsigned i = 0; i < 4; i++)
              r[16*i +: 16] = 16'(elem_op(op, 64'(a[16*i +: 16]), 64'(b[16*i +: 16])));
      2'd2: for (int unsigned i = 0; i < 2; i++)
              r[32*i +: 32] = 32'(elem_op(op, 64'(a[32*i +: 32]), 64'(b[32*i +: 32])));
      default: r = elem_op(op, a, b);
    endcase
    return r;
  endfunction

  always_comb begin
    if (row_i.use_scalar) begin
      opa = vrf[AW'(row_i.vs1)];
      opb = replicate(row_i.scalar, row_i.sew);
    end else begin
      opa = vrf[AW'(row_i.vs2)];
      opb = vrf[AW'(row_i.vs1)];
    end
    res = simd(row_i.op, row_i.sew, opa, opb);
    for (int unsigned i = 0; i < LANE_B; i++)
      be[i] = row_i.valid && (VL_W'(LANE_ID * LANE_B + i) < row_i.nbytes);
  end

  always_ff @(posedge clk_i) begin
    for (int unsigned i = 0; i < LANE_B; i++) begin
      if (be[i])                      vrf[AW'(row_i.vd)][8*i +: 8]   <= res[8*i +: 8];
      if (shu_i.we && shu_i.wr_be[i]) vrf[AW'(shu_i.wr_addr)][8*i +: 8] <= shu_i.wr_data[8*i +: 8];
      if (lsu_i.we && lsu_i.wr_be[i]) vrf[AW'(lsu_i.wr_addr)][8*i +: 8] <= lsu_i.wr_data[8*i +: 8];
    end
  end

  assign shu_rdata_o = vrf[AW'(shu_i.rd_addr)];
  assign lsu_rdata_o = vrf[AW'(lsu_i.rd_addr)];

endmodule
