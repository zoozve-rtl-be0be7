// zz_hazard_detect: register-group hazard detection of the Zoozve control path.
//
// Every in-flight register group (RG) k is held as a head/tail pair plus a
// flag that says whether the in-flight instruction writes it.  One comparator
// (CMP) per in-flight RG checks whether the registers of the incoming
// instruction fall inside [RG_head, RG_tail] of that RG; the CMP outputs are
// OR'ed into the single hazard signal, as in the published hazard-detection
// diagram (RG head/tail 0..n -> CMP -> OR -> hazard).
//
// A CMP compares ranges, not single indices: two groups overlap when
// new.head <= old.tail and old.head <= new.tail.  Which pairs are compared
// is this design's choice: a written in-flight RG is compared against every
// RG of the new instruction (read-after-write, write-after-write); a read
// in-flight RG only against the new destination (write-after-read).
//
// Interface: purely combinational; hit[k] is the output of CMP k.
module zz_hazard_detect
  import zz_pkg::*;
#(
  parameter int unsigned NSLOT = 9   // 3 units x (1 destination + 2 source RGs)
) (
  input  rg_t              slot_rg    [NSLOT],
  input  logic [NSLOT-1:0] slot_is_dst,
  input  rg_t              new_dst,
  input  rg_t              new_src0,
  input  rg_t              new_src1,
  output logic [NSLOT-1:0] hit,
  output logic             hazard
);

  function automatic logic overlap(input rg_t a, input rg_t b);
    return a.valid && b.valid && (a.head <= b.tail) && (b.head <= a.tail);
  endfunction

  always_comb begin
    for (int unsigned k = 0; k < NSLOT; k++) begin
      if (slot_is_dst[k])
        hit[k] = overlap(slot_rg[k], new_dst) || overlap(slot_rg[k], new_src0) ||
                 overlap(slot_rg[k], new_src1);
      else
        hit[k] = overlap(slot_rg[k], new_dst);
    end
  end

  assign hazard = |hit;

endmodule
