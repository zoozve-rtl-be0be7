// zz_main_sequencer: control path of the Zoozve vector unit.
//
// Takes Zoozve instructions from the scalar core (valid/ready instruction
// interface carrying the 64-bit instruction and the values of x[rs2] and
// x[rs_avl]), decodes them (zz_decoder), works out every register group (RG)
// they touch and checks those against the RGs of the instructions still in
// flight (zz_hazard_detect).  An instruction is accepted in the cycle in
// which it is legal, has no hazard and finds its unit idle; it then goes to
// the lanes (symmetric), the shuffle engine (asymmetric) or the load/store
// unit.  Different units work concurrently; each unit runs one instruction
// at a time.
//
// Register groups: an RG holding VL elements of EB bytes runs from
// RG_head = v_head to RG_tail = RG_head + ceil(VL*EB/VLENB) - 1, so any
// number of registers can form a group (the published drawing shows a
// five-register group V3..V7).  The paper's formula
// RG_tail = RG_head + RG_type/VLEN counts one past the last register when
// the length fills whole registers; the drawing is followed here.  Groups
// whose extent depends on data (the source of a gather, the destination of a
// scatter) are tracked as the whole register file.
//
// Symmetric instructions are stepped by this block: one register of each
// operand RG is broadcast to all lanes per cycle, with the number of valid
// bytes in that register so the lanes mask the tail.  A group of R registers
// occupies the lanes for R cycles, starting the cycle after acceptance.
//
// Responses: an illegal instruction is accepted and answered with error=1 in
// the next cycle; a vextract is answered with its value when the shuffle
// engine finishes.  Other instructions give no response.  VL = 0 makes an
// instruction a no-op.  These interface details are this design's choices.
//
// The lint step reports rst_ni as used both synchronously and asynchronously
// here: the immediate assertion in the clocked block checks rst_ni before
// firing.  The assertion adds no logic, and the flops use rst_ni only as
// their asynchronous reset.
module zz_main_sequencer
  import zz_pkg::*;
#(
  parameter int unsigned NLANES = 64,
  parameter int unsigned NREGS  = 1024
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  // instruction interface
  input  logic            req_valid_i,
  output logic            req_ready_o,
  input  zz_req_t         req_i,
  output logic            resp_valid_o,
  output zz_resp_t        resp_o,
  // lanes
  output valu_row_t       row_o,
  // shuffle engine
  output logic            shu_start_o,
  output shu_cmd_t        shu_cmd_o,
  input  logic            shu_done_i,
  input  logic [XLEN-1:0] shu_result_i,
  // load/store unit
  output logic            lsu_start_o,
  output lsu_cmd_t        lsu_cmd_o,
  input  logic            lsu_done_i,
  // status
  output logic            hazard_stall_o,
  output logic            busy_stall_o
);

  localparam int unsigned VLENB      = NLANES * LANE_B;
  localparam int unsigned VLENB_LOG2 = $clog2(VLENB);
  localparam int unsigned NSLOT      = 9;

  // ---------------------------------------------------------------- decode
  dec_t dec;
  zz_decoder #(.NREGS(NREGS)) u_dec (.insn(req_i.insn), .dec(dec));

  logic [VL_W-1:0]   vl;
  logic [VL_W+3:0]   nbytes;
  logic [VL_W+3:0]   nrows;
  rg_t               new_dst, new_src0, new_src1;
  logic              rg_overflow;

  function automatic rg_t mk_rg(input logic [HEAD_W-1:0] head, input logic [VL_W+3:0] n);
    rg_t r;
    r.valid = (n != 0);
    r.head  = head;
    r.tail  = head + HEAD_W'(n - 1);
    return r;
  endfunction

  localparam rg_t RG_ALL = '{valid: 1'b1, head: '0, tail: HEAD_W'(NREGS - 1)};

  // Registers spanned by each group of the new instruction (0: no group,
  // ALL: the whole register file).
  localparam logic [VL_W+3:0] ALL = '1;
  logic [VL_W+3:0]   n_dst, n_s0, n_s1;
  logic [HEAD_W-1:0] h_dst, h_s0, h_s1;

  function automatic rg_t mk_grp(input logic [HEAD_W-1:0] head, input logic [VL_W+3:0] n);
    return (n == ALL) ? RG_ALL : mk_rg(head, n);
  endfunction

  function automatic logic past_end(input logic [HEAD_W-1:0] head, input logic [VL_W+3:0] n);
    return (n != 0) && (n != ALL) && (64'(head) + 64'(n) > 64'(NREGS));
  endfunction

  always_comb begin
    vl     = (req_i.avl_val > XLEN'({VL_W{1'b1}})) ? {VL_W{1'b1}} : VL_W'(req_i.avl_val);
    nbytes = (VL_W+4)'(vl) << dec.sew;
    nrows  = (nbytes + (VL_W+4)'(VLENB - 1)) >> VLENB_LOG2;
    n_dst = '0;  n_s0 = '0;  n_s1 = '0;
    h_dst = dec.vd;  h_s0 = dec.vs1;  h_s1 = dec.vs2;
    unique case (dec.unit)
      U_VALU: begin
        n_dst = nrows;
        n_s0  = nrows;
        n_s1  = dec.use_scalar ? '0 : nrows;
      end
      U_SHU: begin
        unique case (dec.op)
          6'(F_GATHER): begin
            n_dst = nrows;
            h_s0 = dec.vs2;  n_s0 = nrows;
            n_s1 = (nrows != 0) ? ALL : '0;
          end
          6'(F_SCATTER): begin
            n_dst = (nrows != 0) ? ALL : '0;
            h_s0 = dec.vs2;  n_s0 = nrows;
            h_s1 = dec.vs1;  n_s1 = nrows;
          end
          6'(F_REDSUM): begin
            n_dst = (nrows != 0) ? 1 : 0;
            h_s0 = dec.vs2;  n_s0 = nrows;
            h_s1 = dec.vs1;  n_s1 = (nrows != 0) ? 1 : 0;
          end
          default: begin  // extract: the one register holding element x[rs2]
            h_s0 = elem_reg(dec.vs1, VL_W'(req_i.rs2_val), dec.sew, VLENB_LOG2);
            n_s0 = 1;
          end
        endcase
      end
      U_VLSU: begin
        if (dec.op == 6'(F_LOAD)) n_dst = nrows;
        else                      n_s0  = nrows;
      end
      default: ;
    endcase
    new_dst     = mk_grp(h_dst, n_dst);
    new_src0    = mk_grp(h_s0, n_s0);
    new_src1    = mk_grp(h_s1, n_s1);
    rg_overflow = past_end(h_dst, n_dst) || past_end(h_s0, n_s0) || past_end(h_s1, n_s1) ||
                  (dec.unit == U_SHU && dec.op == 6'(F_EXTRACT) &&
                   64'(dec.vs1) + (64'(req_i.rs2_val) << dec.sew >> VLENB_LOG2) >= 64'(NREGS));
  end

  logic noop;
  assign noop = (vl == 0) && !(dec.unit == U_SHU && dec.op == 6'(F_EXTRACT));

  // ------------------------------------------------------ in-flight table
  rg_t              slot_rg [NSLOT];
  logic [2:0]       inflight_q;     // per unit: VALU, SHU, VLSU
  rg_t              unit_rg_q [3][3];
  logic [NSLOT-1:0] slot_is_dst;
  logic [NSLOT-1:0] hit;
  logic             hazard;

  always_comb begin
    for (int unsigned u = 0; u < 3; u++)
      for (int unsigned k = 0; k < 3; k++) begin
        slot_rg[3*u+k]     = unit_rg_q[u][k];
        slot_rg[3*u+k].valid = unit_rg_q[u][k].valid && inflight_q[u];
        slot_is_dst[3*u+k] = (k == 0);
      end
  end

  zz_hazard_detect #(.NSLOT(NSLOT)) u_hazard (
    .slot_rg, .slot_is_dst,
    .new_dst, .new_src0, .new_src1,
    .hit, .hazard
  );

  logic illegal, unit_free, accept, dispatch;
  logic shu_extract_q;
  assign illegal   = dec.illegal || rg_overflow;
  assign unit_free = (dec.unit != U_NONE) && !inflight_q[dec.unit];
  // An illegal instruction waits one cycle if its error response would
  // collide with a vextract result.
  assign accept    = req_valid_i && (illegal ? !(shu_done_i && shu_extract_q)
                                             : (noop || (unit_free && !hazard)));
  assign dispatch  = accept && !illegal && !noop;
  assign req_ready_o = accept;

  assign hazard_stall_o = req_valid_i && !illegal && !noop && hazard;
  assign busy_stall_o   = req_valid_i && !illegal && !noop && !hazard && !unit_free;

  // --------------------------------------------------- symmetric stepping
  valu_row_t       valu_q;
  logic [VL_W+3:0] valu_left_q;
  logic [HEAD_W-1:0] valu_row_q;
  logic            valu_last;

  assign valu_last = valu_left_q <= (VL_W+4)'(VLENB);

  always_comb begin
    row_o        = valu_q;
    row_o.valid  = inflight_q[U_VALU];
    row_o.vd     = valu_q.vd + valu_row_q;
    row_o.vs1    = valu_q.vs1 + valu_row_q;
    row_o.vs2    = valu_q.vs2 + valu_row_q;
    row_o.nbytes = valu_last ? VL_W'(valu_left_q) : VL_W'(VLENB);
  end

  // ---------------------------------------------------------- unit issue
  assign shu_start_o   = dispatch && dec.unit == U_SHU;
  assign shu_cmd_o.op  = shu_op_e'(dec.op);
  assign shu_cmd_o.sew = dec.sew;
  assign shu_cmd_o.vd  = dec.vd;
  assign shu_cmd_o.vs1 = dec.vs1;
  assign shu_cmd_o.vs2 = dec.vs2;
  assign shu_cmd_o.vl  = vl;
  assign shu_cmd_o.scalar = req_i.rs2_val;

  assign lsu_start_o    = dispatch && dec.unit == U_VLSU;
  assign lsu_cmd_o.op   = lsu_op_e'(dec.op[0]);
  assign lsu_cmd_o.sew  = dec.sew;
  assign lsu_cmd_o.vreg = (dec.op == 6'(F_LOAD)) ? dec.vd : dec.vs1;
  assign lsu_cmd_o.base = req_i.rs2_val;
  assign lsu_cmd_o.vl   = vl;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      inflight_q    <= '0;
      unit_rg_q     <= '{default: '0};
      valu_q        <= '0;
      valu_left_q   <= '0;
      valu_row_q    <= '0;
      shu_extract_q <= 1'b0;
      resp_valid_o  <= 1'b0;
      resp_o        <= '0;
    end else begin
      resp_valid_o <= 1'b0;
      // retire
      if (inflight_q[U_VALU]) begin
        valu_row_q  <= valu_row_q + 1'b1;
        valu_left_q <= valu_left_q - (VL_W+4)'(VLENB);
        if (valu_last) inflight_q[U_VALU] <= 1'b0;
      end
      if (shu_done_i) begin
        inflight_q[U_SHU] <= 1'b0;
        if (shu_extract_q) begin
          resp_valid_o <= 1'b1;
          resp_o       <= '{error: 1'b0, data: shu_result_i};
        end
      end
      if (lsu_done_i) inflight_q[U_VLSU] <= 1'b0;
      // accept
      if (accept && illegal) begin
        resp_valid_o <= 1'b1;
        resp_o       <= '{error: 1'b1, data: '0};
      end
      if (dispatch) begin
        inflight_q[dec.unit] <= 1'b1;
        unit_rg_q[dec.unit]  <= '{new_dst, new_src0, new_src1};
        if (dec.unit == U_VALU) begin
          valu_q.valid      <= 1'b1;
          valu_q.op         <= valu_op_e'(dec.op);
          valu_q.sew        <= dec.sew;
          valu_q.use_scalar <= dec.use_scalar;
          valu_q.vd         <= dec.vd;
          valu_q.vs1        <= dec.vs1;
          valu_q.vs2        <= dec.vs2;
          valu_q.scalar     <= req_i.rs2_val;
          valu_q.nbytes     <= '0;
          valu_left_q       <= nbytes;
          valu_row_q        <= '0;
        end
        if (dec.unit == U_SHU) shu_extract_q <= (dec.op == 6'(F_EXTRACT));
      end
    end
  end

  // Never two responses in one cycle.
  always_ff @(posedge clk_i) begin
    if (rst_ni) a_one_response: assert (!(shu_done_i && shu_extract_q && accept && illegal));
  end

endmodule
