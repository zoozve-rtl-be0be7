// zz_decoder: combinational decoder for 64-bit Zoozve vector instructions.
//
// The instruction layout follows the published Zoozve format:
//   [63:58] vd_head[12:7]  [57:45] vs2_head[12:0] / rs2  [44:32] vs1_head[12:0]
//   [31:26] func6  [25:23] vew  [22] vm  [21:15] vd_head[6:0]
//   [14:12] func3  [11:7] rs_avl  [6:0] opcode (custom-0/1/2)
// vd_head is split in two parts and reassembled here.  The vs2_head field is
// shared with the scalar operand rs2: in the vector-scalar form (.vx) the low
// five bits of that field name rs2, which is this design's reading of the
// shared field in the format drawing.
//
// Design choices (not given by the format): custom-1 holds symmetric
// arithmetic, custom-2 the asymmetric shuffle instructions, custom-0 the
// loads and stores; func3 bit 2 selects .vx; vew = log2(element bytes), and
// vew values above 3 are illegal.  Illegal covers unknown opcodes/func6
// values and register heads that fall outside the NREGS-entry register file.
// vm is decoded and passed on but masking is not implemented.
//
// Interface: insn in, dec out, no clock; zero latency.
module zz_decoder
  import zz_pkg::*;
#(
  parameter int unsigned NREGS = 1024
) (
  input  logic [63:0] insn,
  output dec_t        dec
);

  insn_t f;
  assign f = insn_t'(insn);

  always_comb begin
    dec            = '0;
    dec.vd         = {f.vd_head_hi, f.vd_head_lo};
    dec.vs1        = f.vs1_head;
    dec.vs2        = f.vs2_head;
    dec.rs2        = f.vs2_head[4:0];
    dec.rs_avl     = f.rs_avl;
    dec.op         = f.func6;
    dec.vm         = f.vm;
    dec.sew        = f.vew[1:0];
    dec.use_scalar = f.func3[F3_SCALAR_BIT];
    dec.illegal    = f.vew[2];
    unique case (f.opcode)
      OPC_CUSTOM1: begin
        dec.unit = U_VALU;
        if (f.func6 > 6'(F_MV)) dec.illegal = 1'b1;
        if (dec.use_scalar) dec.vs2 = '0;   // field carries rs2, not a register
      end
      OPC_CUSTOM2: begin
        dec.unit = U_SHU;
        if (f.func6 > 6'(F_EXTRACT)) dec.illegal = 1'b1;
        if (f.func6 == 6'(F_EXTRACT)) begin
          dec.use_scalar = 1'b1;
          dec.vs2        = '0;
        end else begin
          dec.use_scalar = 1'b0;
        end
      end
      OPC_CUSTOM0: begin
        dec.unit       = U_VLSU;
        dec.use_scalar = 1'b1;              // base address comes from x[rs2]
        dec.vs2        = '0;
        if (f.func6 > 6'(F_STORE)) dec.illegal = 1'b1;
      end
      default: begin
        dec.unit    = U_NONE;
        dec.illegal = 1'b1;
      end
    endcase
    if (32'(dec.vd) >= NREGS || 32'(dec.vs1) >= NREGS ||
        (!dec.use_scalar && 32'(dec.vs2) >= NREGS))
      dec.illegal = 1'b1;
  end

endmodule
