// zz_vlsu: vector load/store unit of the Zoozve vector unit (AXI master).
//
// A load fills the register group starting at cmd.vreg with VL elements
// read from memory at cmd.base; a store writes the group to memory.  Memory
// holds the elements packed in order, so register r of the group maps to
// the VLENB bytes at base + r*VLENB.  Each register is one AXI INCR burst of
// 8-byte beats (at most NLANES beats, so at most 256 with ARLEN/AWLEN); beat
// k carries lane k's slice of that register.  The last register of a group
// may be partial: a load writes only the bytes that belong to the vector and
// a store clears the write strobes of the rest.
//
// The paper lists vector load/store instructions and draws an AXI interface
// next to the lanes; the burst organisation, the one-burst-at-a-time flow,
// the 64-bit bus, and the requirement that base be 8-byte aligned (its low
// three bits are ignored) are this design's choices.
//
// Timing: start_i is a one-cycle pulse; done_o pulses once the last R beat
// (load) or the last B response (store) has been taken.  Without memory
// wait states a register takes beats+1 cycles to load and beats+2 to store.
//
// The lint step reports rst_ni as used both synchronously and asynchronously
// here: the immediate assertion in the clocked block checks rst_ni before
// firing.  The assertion adds no logic, and the flops use rst_ni only as
// their asynchronous reset.
module zz_vlsu
  import zz_pkg::*;
#(
  parameter int unsigned NLANES = 64,
  localparam int unsigned LW    = (NLANES > 1) ? $clog2(NLANES) : 1
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              start_i,
  input  lsu_cmd_t          cmd_i,
  output logic              busy_o,
  output logic              done_o,
  output axi_req_t          axi_req_o,
  input  axi_resp_t         axi_resp_i,
  output vrf_port_t         lane_o       [NLANES],
  input  logic [LANE_W-1:0] lane_rdata_i [NLANES]
);

  localparam int unsigned VLENB = NLANES * LANE_B;

  typedef enum logic [2:0] {L_IDLE, L_AR, L_R, L_AW, L_W, L_B} lstate_e;

  lstate_e         state_q;
  lsu_cmd_t        cmd_q;
  logic [VL_W+3:0] left_q;    // bytes of the group not yet transferred
  logic [HEAD_W-1:0] row_q;   // register offset within the group
  logic [LW:0]     beat_q;    // beat (= lane) within the register

  logic [VL_W+3:0] row_bytes;
  logic [LW:0]     row_beats;
  logic [VL_W+3:0] beat_bytes;
  logic [LANE_B-1:0] beat_be;

  always_comb begin
    row_bytes  = (left_q > (VL_W+4)'(VLENB)) ? (VL_W+4)'(VLENB) : left_q;
    row_beats  = (LW+1)'((row_bytes + (VL_W+4)'(LANE_B - 1)) >> 3);
    beat_bytes = row_bytes - (VL_W+4)'({beat_q, 3'b000});
    for (int unsigned b = 0; b < LANE_B; b++)
      beat_be[b] = (VL_W+4)'(b) < beat_bytes;
  end

  logic [HEAD_W-1:0] cur_reg;
  logic [XLEN-1:0]   cur_addr;
  assign cur_reg  = cmd_q.vreg + row_q;
  assign cur_addr = {cmd_q.base[XLEN-1:3], 3'b000} + XLEN'(row_q) * XLEN'(VLENB);

  always_comb begin
    axi_req_o          = '0;
    axi_req_o.ar_valid = (state_q == L_AR);
    axi_req_o.ar_addr  = cur_addr;
    axi_req_o.ar_len   = 8'(row_beats - 1);
    axi_req_o.r_ready  = (state_q == L_R);
    axi_req_o.aw_valid = (state_q == L_AW);
    axi_req_o.aw_addr  = cur_addr;
    axi_req_o.aw_len   = 8'(row_beats - 1);
    axi_req_o.w_valid  = (state_q == L_W);
    axi_req_o.w_data   = lane_rdata_i[LW'(beat_q)];
    axi_req_o.w_strb   = beat_be;
    axi_req_o.w_last   = (beat_q == row_beats - 1);
    axi_req_o.b_ready  = (state_q == L_B);
  end

  // Every lane sees the same register; only lane beat_q writes an R beat.
  for (genvar l = 0; l < NLANES; l++) begin : g_lane
    assign lane_o[l] = '{rd_addr: cur_reg,
                         we:      (state_q == L_R) && axi_resp_i.r_valid && (32'(beat_q) == l),
                         wr_addr: cur_reg,
                         wr_data: axi_resp_i.r_data,
                         wr_be:   beat_be};
  end

  logic last_row;
  assign last_row = (left_q <= (VL_W+4)'(VLENB));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= L_IDLE;
      cmd_q   <= '0;
      left_q  <= '0;
      row_q   <= '0;
      beat_q  <= '0;
    end else begin
      unique case (state_q)
        L_IDLE: if (start_i) begin
          cmd_q   <= cmd_i;
          left_q  <= (VL_W+4)'(cmd_i.vl) << cmd_i.sew;
          row_q   <= '0;
          beat_q  <= '0;
          if (cmd_i.vl == 0) state_q <= L_IDLE;
          else               state_q <= (cmd_i.op == F_LOAD) ? L_AR : L_AW;
        end
        L_AR: if (axi_resp_i.ar_ready) state_q <= L_R;
        L_R: if (axi_resp_i.r_valid) begin
          beat_q <= beat_q + 1'b1;
          if (axi_resp_i.r_last) begin
            beat_q <= '0;
            row_q  <= row_q + 1'b1;
            left_q <= left_q - row_bytes;
            state_q <= last_row ? L_IDLE : L_AR;
          end
        end
        L_AW: if (axi_resp_i.aw_ready) state_q <= L_W;
        L_W: if (axi_resp_i.w_ready) begin
          beat_q <= beat_q + 1'b1;
          if (beat_q == row_beats - 1) state_q <= L_B;
        end
        L_B: if (axi_resp_i.b_valid) begin
          beat_q  <= '0;
          row_q   <= row_q + 1'b1;
          left_q  <= left_q - row_bytes;
          state_q <= last_row ? L_IDLE : L_AW;
        end
        default: state_q <= L_IDLE;
      endcase
    end
  end

  assign busy_o = (state_q != L_IDLE);
  assign done_o = ((state_q == L_R) && axi_resp_i.r_valid && axi_resp_i.r_last && last_row) ||
                  ((state_q == L_B) && axi_resp_i.b_valid && last_row) ||
                  ((state_q == L_IDLE) && start_i && cmd_i.vl == 0);

  // AXI: the subordinate must end each read burst after ARLEN+1 beats.
  always_ff @(posedge clk_i) begin
    if (rst_ni && state_q == L_R && axi_resp_i.r_valid)
      a_r_last_matches_len: assert (axi_resp_i.r_last == (beat_q == row_beats - 1));
  end

endmodule
