// zz_shuffle_pe: one processing element (PE) of the Zoozve shuffle engine.
//
// PE p of NPE handles elements p, p+NPE, p+2*NPE, ... of an asymmetric
// instruction and reaches the lanes through the crossbar, one lane word per
// access:
//   gather   vd[i] = vs1[vs2[i]] : read index vs2[i], read vs1[idx], write vd[i]
//   scatter  vd[vs2[i]] = vs1[i] : read index vs2[i], read vs1[i], write vd[idx]
//   redsum   acc += vs2[i]       : PE 0 first loads acc with vs1[0]
//   extract  val = vs1[x[rs2]]   : PE 0 only
// Gather runs over VL = number of indices, so the destination group is as
// long as the index group, not as the source group (Zoozve's asymmetric
// instructions).  An access that loses crossbar arbitration is repeated the
// next cycle.
//
// Element e of a group with head h sits in register h + (e*EB)/VLENB, at byte
// (e*EB) mod VLENB, i.e. in lane byte/8; EB is the element size in bytes.
// Indices are used modulo 2^32 and register numbers wrap at NREGS.  The
// paper says the shuffle engine consists of a crossbar and PEs; what a PE
// does internally is this design's choice.
//
// Timing: start_i is a one-cycle pulse with cmd_i valid; done_o rises when
// the PE has no more elements and stays high until the next start.  An
// uncontended gather/scatter element takes 3 cycles, a reduction element 1.
module zz_shuffle_pe
  import zz_pkg::*;
#(
  parameter int unsigned NLANES = 64,
  parameter int unsigned NPE    = 2,
  parameter int unsigned PE_ID  = 0,
  localparam int unsigned LW    = (NLANES > 1) ? $clog2(NLANES) : 1
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              start_i,
  input  shu_cmd_t          cmd_i,
  output logic              rd_req_o,
  output logic [HEAD_W-1:0] rd_reg_o,
  output logic [LW-1:0]     rd_lane_o,
  input  logic              rd_gnt_i,
  input  logic [LANE_W-1:0] rd_data_i,
  output logic              wr_req_o,
  output logic [HEAD_W-1:0] wr_reg_o,
  output logic [LW-1:0]     wr_lane_o,
  output logic [LANE_W-1:0] wr_data_o,
  output logic [LANE_B-1:0] wr_be_o,
  input  logic              wr_gnt_i,
  output logic              done_o,
  output logic [63:0]       acc_o
);

  localparam int unsigned VLENB_LOG2 = $clog2(NLANES * LANE_B);

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_IDX, S_SRC, S_WR, S_DONE} state_e;

  state_e          state_q, state_d;
  shu_cmd_t        cmd_q;
  logic [VL_W-1:0] i_q, i_d;
  logic [VL_W-1:0] idx_q, idx_d;
  logic [63:0]     val_q, val_d, acc_q, acc_d;

  // Where the next element of this PE starts, given its element index.
  function automatic state_e first_state(input shu_cmd_t c, input logic [VL_W-1:0] i);
    if (c.op == F_EXTRACT) return (PE_ID == 0 && i == 0) ? S_SRC : S_DONE;
    if (i >= c.vl)         return S_DONE;
    if (c.op == F_REDSUM)  return S_SRC;
    return S_IDX;
  endfunction

  function automatic logic [63:0] get_elem(input logic [LANE_W-1:0] w, input logic [2:0] slot,
                                           input sew_t sew);
    logic [63:0] x;
    x = w >> (8 * slot);
    unique case (sew)
      2'd0:    return 64'(x[7:0]);
      2'd1:    return 64'(x[15:0]);
      2'd2:    return 64'(x[31:0]);
      default: return x;
    endcase
  endfunction

  // Register, lane and byte slot of the access the current state makes.
  logic [HEAD_W-1:0] a_head;
  logic [VL_W-1:0]   a_elem, a_byte;
  logic [2:0]        a_slot;

  always_comb begin
    a_head = cmd_q.vs1;
    a_elem = '0;
    unique case (state_q)
      S_INIT: begin a_head = cmd_q.vs1; a_elem = '0; end
      S_IDX:  begin a_head = cmd_q.vs2; a_elem = i_q; end
      S_SRC: begin
        unique case (cmd_q.op)
          F_GATHER:  begin a_head = cmd_q.vs1; a_elem = idx_q; end
          F_SCATTER: begin a_head = cmd_q.vs1; a_elem = i_q; end
          F_REDSUM:  begin a_head = cmd_q.vs2; a_elem = i_q; end
          default:   begin a_head = cmd_q.vs1; a_elem = VL_W'(cmd_q.scalar); end
        endcase
      end
      S_WR: begin
        a_head = cmd_q.vd;
        a_elem = (cmd_q.op == F_SCATTER) ? idx_q : i_q;
      end
      default: ;
    endcase
    a_byte = elem_byte_in_reg(a_elem, cmd_q.sew, VLENB_LOG2);
    a_slot = a_byte[2:0];
  end

  assign rd_req_o  = (state_q == S_INIT) || (state_q == S_IDX) || (state_q == S_SRC);
  assign rd_reg_o  = elem_reg(a_head, a_elem, cmd_q.sew, VLENB_LOG2);
  assign rd_lane_o = LW'(a_byte >> 3);
  assign wr_req_o  = (state_q == S_WR);
  assign wr_reg_o  = rd_reg_o;
  assign wr_lane_o = rd_lane_o;
  assign wr_data_o = LANE_W'(val_q) << (8 * a_slot);
  assign wr_be_o   = LANE_B'(((16'd1 << (16'd1 << cmd_q.sew)) - 16'd1) << a_slot);

  always_comb begin
    state_d = state_q;
    i_d     = i_q;
    idx_d   = idx_q;
    val_d   = val_q;
    acc_d   = acc_q;
    unique case (state_q)
      S_INIT: if (rd_gnt_i) begin
        acc_d   = get_elem(rd_data_i, a_slot, cmd_q.sew);
        state_d = first_state(cmd_q, i_q);
      end
      S_IDX: if (rd_gnt_i) begin
        idx_d   = VL_W'(get_elem(rd_data_i, a_slot, cmd_q.sew));
        state_d = S_SRC;
      end
      S_SRC: if (rd_gnt_i) begin
        val_d = get_elem(rd_data_i, a_slot, cmd_q.sew);
        unique case (cmd_q.op)
          F_REDSUM: begin
            acc_d   = acc_q + val_d;
            i_d     = i_q + VL_W'(NPE);
            state_d = first_state(cmd_q, i_d);
          end
          F_EXTRACT: state_d = S_DONE;
          default:   state_d = S_WR;
        endcase
      end
      S_WR: if (wr_gnt_i) begin
        i_d     = i_q + VL_W'(NPE);
        state_d = first_state(cmd_q, i_d);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      cmd_q   <= '0;
      i_q     <= '0;
      idx_q   <= '0;
      val_q   <= '0;
      acc_q   <= '0;
    end else if (start_i) begin
      cmd_q   <= cmd_i;
      i_q     <= VL_W'(PE_ID);
      idx_q   <= '0;
      val_q   <= '0;
      acc_q   <= '0;
      state_q <= (cmd_i.op == F_REDSUM && PE_ID == 0) ? S_INIT
                                                      : first_state(cmd_i, VL_W'(PE_ID));
    end else begin
      state_q <= state_d;
      i_q     <= i_d;
      idx_q   <= idx_d;
      val_q   <= val_d;
      acc_q   <= acc_d;
    end
  end

  assign done_o = (state_q == S_DONE);
  assign acc_o  = (cmd_q.op == F_EXTRACT) ? val_q : acc_q;

endmodule
