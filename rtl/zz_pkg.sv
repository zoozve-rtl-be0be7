// zz_pkg: types and constants shared by the Zoozve vector unit.
//
// Holds the 64-bit instruction layout, the operation encodings, the
// register-group (RG) descriptor used by hazard detection, the request
// bundles that the control path broadcasts to the lanes, the lane
// register-file access port used by the shuffle engine and the load/store
// unit, and the simplified AXI4 master bundle.
//
// The bit positions of the instruction fields follow the published Zoozve
// arithmetic/logic format exactly.  The func6/func3 values, the element
// width code in vew, the opcodes chosen for each instruction class and the
// AXI subset are this design's own choices: the format gives the field
// positions but not their values.
package zz_pkg;

  // Scalar register width of the host core (an RV64 core feeds the unit).
  localparam int unsigned XLEN = 64;
  // Width of one lane's slice of a vector register, and of the AXI data bus.
  localparam int unsigned LANE_W  = 64;
  localparam int unsigned LANE_B  = LANE_W / 8;
  // v_head fields are 13 bits wide: up to 2^13 vector registers.
  localparam int unsigned HEAD_W = 13;
  // Element index / vector length width carried inside the unit.
  localparam int unsigned VL_W = 32;

  // Major opcodes (RISC-V custom-0/1/2 regions).
  localparam logic [6:0] OPC_CUSTOM0 = 7'b0001011;  // vector load / store
  localparam logic [6:0] OPC_CUSTOM1 = 7'b0101011;  // symmetric arithmetic / logic
  localparam logic [6:0] OPC_CUSTOM2 = 7'b1011011;  // asymmetric (shuffle) instructions

  // func6 values, symmetric class (custom-1).
  typedef enum logic [5:0] {
    F_ADD = 6'd0,
    F_SUB = 6'd1,
    F_MUL = 6'd2,
    F_AND = 6'd3,
    F_OR  = 6'd4,
    F_XOR = 6'd5,
    F_MV  = 6'd6    // vd = vs1, or vd = x[rs2] broadcast (vbrdcst)
  } valu_op_e;

  // func6 values, asymmetric class (custom-2).
  typedef enum logic [5:0] {
    F_GATHER  = 6'd0,  // vd[i] = vs1[vs2[i]], i < VL (VL = length of the indices)
    F_SCATTER = 6'd1,  // vd[vs2[i]] = vs1[i], i < VL
    F_REDSUM  = 6'd2,  // vd[0] = vs1[0] + sum(vs2[i]), i < VL
    F_EXTRACT = 6'd3   // x = vs1[x[rs2]], returned on the response channel
  } shu_op_e;

  // func6 values, load/store class (custom-0).
  typedef enum logic [5:0] {
    F_LOAD  = 6'd0,    // vd RG <- mem[x[rs2] ...]
    F_STORE = 6'd1     // mem[x[rs2] ...] <- vs1 RG
  } lsu_op_e;

  // func3 bit 2 selects the vector-scalar form (.vx): operand from x[rs2].
  localparam int unsigned F3_SCALAR_BIT = 2;

  typedef enum logic [1:0] {
    U_VALU = 2'd0,
    U_SHU  = 2'd1,
    U_VLSU = 2'd2,
    U_NONE = 2'd3
  } unit_e;

  // vew encodes the element width as log2(bytes): 0=8, 1=16, 2=32, 3=64 bit.
  typedef logic [1:0] sew_t;

  // Raw instruction fields, positions as in the published format.
  typedef struct packed {
    logic [5:0]        vd_head_hi;   // [63:58]  vd_head[12:7]
    logic [HEAD_W-1:0] vs2_head;     // [57:45]  vs2_head[12:0] / rs2
    logic [HEAD_W-1:0] vs1_head;     // [44:32]
    logic [5:0]        func6;        // [31:26]
    logic [2:0]        vew;          // [25:23]
    logic              vm;           // [22]
    logic [6:0]        vd_head_lo;   // [21:15]  vd_head[6:0]
    logic [2:0]        func3;        // [14:12]
    logic [4:0]        rs_avl;       // [11:7]
    logic [6:0]        opcode;       // [6:0]
  } insn_t;

  // Decoded instruction.
  typedef struct packed {
    logic              illegal;
    unit_e             unit;
    logic [5:0]        op;
    sew_t              sew;
    logic              vm;
    logic              use_scalar;
    logic [HEAD_W-1:0] vd;
    logic [HEAD_W-1:0] vs1;
    logic [HEAD_W-1:0] vs2;
    logic [4:0]        rs2;
    logic [4:0]        rs_avl;
  } dec_t;

  // A register group: registers head..tail (inclusive).
  typedef struct packed {
    logic              valid;
    logic [HEAD_W-1:0] head;
    logic [HEAD_W-1:0] tail;
  } rg_t;

  // One row (one vector register of each operand RG) broadcast to every lane.
  typedef struct packed {
    logic              valid;
    valu_op_e          op;
    sew_t              sew;
    logic              use_scalar;
    logic [HEAD_W-1:0] vd;
    logic [HEAD_W-1:0] vs1;
    logic [HEAD_W-1:0] vs2;
    logic [XLEN-1:0]   scalar;
    logic [VL_W-1:0]   nbytes;   // bytes of this row that belong to the vector
  } valu_row_t;

  // Access port into one lane's register-file slice (read is combinational).
  typedef struct packed {
    logic [HEAD_W-1:0] rd_addr;
    logic              we;
    logic [HEAD_W-1:0] wr_addr;
    logic [LANE_W-1:0] wr_data;
    logic [LANE_B-1:0] wr_be;
  } vrf_port_t;

  // Commands from the main sequencer to the shuffle engine and the LSU.
  typedef struct packed {
    shu_op_e           op;
    sew_t              sew;
    logic [HEAD_W-1:0] vd;
    logic [HEAD_W-1:0] vs1;
    logic [HEAD_W-1:0] vs2;
    logic [VL_W-1:0]   vl;
    logic [XLEN-1:0]   scalar;
  } shu_cmd_t;

  typedef struct packed {
    lsu_op_e           op;
    sew_t              sew;
    logic [HEAD_W-1:0] vreg;
    logic [XLEN-1:0]   base;
    logic [VL_W-1:0]   vl;
  } lsu_cmd_t;

  // Simplified AXI4 master bundle: 64-bit data, INCR bursts of 8-byte beats,
  // one transaction ID, no protection/cache/QoS signals.
  typedef struct packed {
    logic              ar_valid;
    logic [XLEN-1:0]   ar_addr;
    logic [7:0]        ar_len;
    logic              r_ready;
    logic              aw_valid;
    logic [XLEN-1:0]   aw_addr;
    logic [7:0]        aw_len;
    logic              w_valid;
    logic [LANE_W-1:0] w_data;
    logic [LANE_B-1:0] w_strb;
    logic              w_last;
    logic              b_ready;
  } axi_req_t;

  typedef struct packed {
    logic              ar_ready;
    logic              r_valid;
    logic [LANE_W-1:0] r_data;
    logic              r_last;
    logic              aw_ready;
    logic              w_ready;
    logic              b_valid;
  } axi_resp_t;

  // Instruction interface: request from the scalar core and response to it.
  typedef struct packed {
    logic [63:0]     insn;
    logic [XLEN-1:0] rs2_val;   // value of x[rs2]
    logic [XLEN-1:0] avl_val;   // value of x[rs_avl], the vector length
  } zz_req_t;

  typedef struct packed {
    logic            error;     // illegal instruction
    logic [XLEN-1:0] data;      // vextract result
  } zz_resp_t;

  // Location of element e of the RG starting at head, for VLENB-byte registers
  // split into LANE_B-byte lane slices; elements are packed in order, lane 0 first.
  function automatic logic [HEAD_W-1:0] elem_reg(input logic [HEAD_W-1:0] head,
                                                input logic [VL_W-1:0] e, input sew_t sew,
                                                input int unsigned vlenb_log2);
    logic [VL_W+3-1:0] byte_off;
    byte_off = {3'b000, e} << sew;
    return head + HEAD_W'(byte_off >> vlenb_log2);
  endfunction

  function automatic logic [VL_W-1:0] elem_byte_in_reg(input logic [VL_W-1:0] e, input sew_t sew,
                                                     input int unsigned vlenb_log2);
    logic [VL_W+3-1:0] byte_off;
    byte_off = {3'b000, e} << sew;
    return VL_W'(byte_off & ((VL_W+3)'(1) << vlenb_log2) - 1);
  endfunction

endpackage
