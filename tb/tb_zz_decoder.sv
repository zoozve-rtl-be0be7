// tb_zz_decoder: self-checking test of the instruction decoder.
//
// Builds random instructions field by field at the bit positions of the
// Zoozve format (vd_head split over [63:58] and [21:15], vs2_head/rs2
// [57:45], vs1_head [44:32], func6 [31:26], vew [25:23], vm [22], func3
// [14:12], rs_avl [11:7], opcode [6:0]) and compares every decoded field,
// the unit selection and the legality check with a reference written here.
module tb_zz_decoder;
  import zz_pkg::*;

  localparam int unsigned NREGS = 1024;

  logic [63:0] insn;
  dec_t        dec;
  int          checks = 0, failures = 0;

  zz_decoder #(.NREGS(NREGS)) dut (.insn(insn), .dec(dec));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s insn=%h", what, insn);
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
    logic [12:0] vd, vs1, vs2;
    logic [5:0]  f6;
    logic [2:0]  vew, f3;
    logic        vm;
    logic [4:0]  avl;
    logic [6:0]  opc;
    bit          exp_illegal;
    unit_e       exp_unit;
    for (int n = 0; n < 4000; n++) begin
      vd  = 13'($urandom_range(0, (n % 4 == 0) ? 8191 : NREGS - 1));
      vs1 = 13'($urandom_range(0, NREGS - 1));
      vs2 = 13'($urandom_range(0, NREGS - 1));
      f6  = 6'($urandom_range(0, 8));
      vew = 3'($urandom_range(0, 4));
      f3  = 3'($urandom);
      vm  = 1'($urandom);
      avl = 5'($urandom);
      case ($urandom_range(0, 3))
        0: opc = OPC_CUSTOM0;
        1: opc = OPC_CUSTOM1;
        2: opc = OPC_CUSTOM2;
        default: opc = 7'b0110011;
      endcase
      insn = '0;
      insn[63:58] = vd[12:7];
      insn[57:45] = vs2;
      insn[44:32] = vs1;
      insn[31:26] = f6;
      insn[25:23] = vew;
      insn[22]    = vm;
      insn[21:15] = vd[6:0];
      insn[14:12] = f3;
      insn[11:7]  = avl;
      insn[6:0]   = opc;
      #1;
      exp_unit    = (opc == OPC_CUSTOM0) ? U_VLSU : (opc == OPC_CUSTOM1) ? U_VALU :
                    (opc == OPC_CUSTOM2) ? U_SHU : U_NONE;
      exp_illegal = vew > 3 || exp_unit == U_NONE || vd >= NREGS || vs1 >= NREGS ||
                    (exp_unit == U_VALU && f6 > 6) || (exp_unit == U_SHU && f6 > 3) ||
                    (exp_unit == U_VLSU && f6 > 1) ||
                    (exp_unit == U_VALU && !f3[2] && vs2 >= NREGS) ||
                    (exp_unit == U_SHU && f6 != 3 && vs2 >= NREGS);
      check(dec.unit == exp_unit, "unit");
      check(dec.illegal == exp_illegal, "illegal");
      check(dec.vd == vd, "vd_head reassembly");
      check(dec.vs1 == vs1, "vs1_head");
      check(dec.op == f6, "func6");
      check(dec.sew == vew[1:0], "vew");
      check(dec.vm == vm, "vm");
      check(dec.rs_avl == avl, "rs_avl");
      check(dec.rs2 == vs2[4:0], "rs2");
      if (exp_unit == U_VALU) begin
        check(dec.use_scalar == f3[2], "func3 .vx bit");
        if (!f3[2]) check(dec.vs2 == vs2, "vs2_head");
      end
      if (exp_unit == U_SHU && f6 < 3) check(dec.vs2 == vs2 && !dec.use_scalar, "shuffle vs2");
      if (exp_unit == U_VLSU) check(dec.use_scalar, "load/store base from rs2");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
