// tb_zz_hazard_detect: self-checking test of the register-group hazard unit.
//
// Drives random in-flight register groups (head/tail, written or read) and
// random groups of a new instruction, and compares each comparator output
// and the OR'ed hazard with an element-by-element reference: it marks every
// register the new instruction touches and looks for one inside an in-flight
// group under the read/write rules.  A directed part checks the boundaries
// RG_head and RG_tail themselves.
module tb_zz_hazard_detect;
  import zz_pkg::*;

  localparam int unsigned NSLOT = 9;
  localparam int unsigned RANGE = 64;   // keep groups small so overlaps are common

  rg_t              slot_rg [NSLOT];
  logic [NSLOT-1:0] slot_is_dst;
  rg_t              new_dst, new_src0, new_src1;
  logic [NSLOT-1:0] hit;
  logic             hazard;
  int               checks = 0, failures = 0;

  zz_hazard_detect #(.NSLOT(NSLOT)) dut (.*);

  function automatic rg_t rand_rg();
    rg_t r;
    int  h, len;
    h       = $urandom_range(0, RANGE - 1);
    len     = $urandom_range(1, 8);
    r.valid = ($urandom_range(0, 4) != 0);
    r.head  = 13'(h);
    r.tail  = 13'(h + len - 1);
    return r;
  endfunction

  function automatic bit in_rg(input rg_t r, input int x);
    return r.valid && x >= int'(r.head) && x <= int'(r.tail);
  endfunction

  function automatic bit ref_hit(input int k);
    for (int x = 0; x < RANGE + 8; x++) begin
      if (!in_rg(slot_rg[k], x)) continue;
      if (in_rg(new_dst, x)) return 1;
      if (slot_is_dst[k] && (in_rg(new_src0, x) || in_rg(new_src1, x))) return 1;
    end
    return 0;
  endfunction

  task automatic compare();
    bit any;
    #1;
    any = 0;
    for (int k = 0; k < NSLOT; k++) begin
      checks++;
      if (hit[k] !== ref_hit(k)) begin
        failures++;
        $display("FAIL slot %0d hit=%b exp=%b", k, hit[k], ref_hit(k));
      end
      any |= ref_hit(k);
    end
    checks++;
    if (hazard !== any) begin
      failures++;
      $display("FAIL hazard=%b exp=%b", hazard, any);
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
    int hazards = 0;
    // Directed: in-flight write group V3..V7 (five registers, as in an arbitrary group).
    foreach (slot_rg[k]) slot_rg[k] = '0;
    slot_is_dst       = '0;
    slot_rg[0]        = '{valid: 1'b1, head: 13'd3, tail: 13'd7};
    slot_is_dst[0]    = 1'b1;
    new_src1          = '0;
    new_src0          = '0;
    for (int h = 0; h < 12; h++) begin
      new_dst = '{valid: 1'b1, head: 13'(h), tail: 13'(h)};
      compare();
      checks++;
      if (hazard !== (h >= 3 && h <= 7)) begin
        failures++;
        $display("FAIL boundary h=%0d hazard=%b", h, hazard);
      end
    end
    // Random.
    for (int n = 0; n < 3000; n++) begin
      foreach (slot_rg[k]) slot_rg[k] = rand_rg();
      slot_is_dst = NSLOT'($urandom);
      new_dst  = rand_rg();
      new_src0 = rand_rg();
      new_src1 = rand_rg();
      compare();
      hazards += hazard;
    end
    checks++;
    if (hazards == 0 || hazards == 3000) begin
      failures++;
      $display("FAIL random stimulus never/always hazardous (%0d)", hazards);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
