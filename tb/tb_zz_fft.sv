// tb_zz_fft: the FFT kernel on the full-size Zoozve vector unit.
//
// Runs a radix-2 decimation-in-time FFT for N = 32, 64, ..., 2048 points on
// zz_top with all defaults (64 lanes, 1024 registers), every stage acting on
// the whole N-element vector with single instructions, with no strip-mining
// loop.  The data flow is the usual one:
//   a = gather(x, bitrev)                          bit-reversal permutation
//   per stage with block size m = 2h:
//     E = gather(a, LO)  O = gather(a, HI)          butterfly partners
//     a = E + TW * O                                twiddle and combine
// where for output i (j = i mod m, b = i - j):  LO[i] = b + (j mod h),
// HI[i] = LO[i] + h and TW[i] = w_m^j.  The index and twiddle vectors are
// constant tables that the testbench writes into memory, as a compiler
// would emit them, and the program loads them with vector loads.
//
// The unit has integer add/sub/mul but no fixed-point scaling, so the
// transform is computed exactly in the ring of 16-bit integers: w is an
// element of order N modulo 2^16 (a power of 5, which has order 2^14), and
// the butterfly uses w_m^j for both halves of a block, which is the
// decimation identity X[k] = E[k mod h] + w_m^k * O[k mod h] and needs no
// w^(N/2) = -1.  The result is compared with a direct O(N^2) DFT over the
// same ring computed here.  Element type int16, one register group of
// ceil(2N/512) registers (at most 8) per vector.
module tb_zz_fft;
  import zz_pkg::*;

  localparam int unsigned NLANES    = 64;     // zz_top defaults
  localparam int unsigned VLENB     = NLANES * 8;
  localparam int unsigned NMAX      = 2048;
  localparam int unsigned MEM_WORDS = 32768;

  logic      clk = 0, rst_n = 1;  // falls at 1 ns so the asynchronous reset sees an edge
  logic      req_valid = 0, req_ready, resp_valid;
  zz_req_t   req;
  zz_resp_t  resp;
  axi_req_t  axi_req;
  axi_resp_t axi_resp;
  logic      hazard_stall, busy_stall, xbar_conflict;
  int        checks = 0, failures = 0, cycles = 0;
  int        n_hazard = 0, n_conflict = 0, n_error = 0;

  zz_top dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req),
    .resp_valid_o(resp_valid), .resp_o(resp), .axi_req_o(axi_req), .axi_resp_i(axi_resp),
    .hazard_stall_o(hazard_stall), .busy_stall_o(busy_stall), .xbar_conflict_o(xbar_conflict)
  );

  tb_axi_mem #(.MEM_WORDS(MEM_WORDS), .STALL(1'b1)) u_mem (
    .clk_i(clk), .rst_ni(rst_n), .req_i(axi_req), .resp_o(axi_resp)
  );

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    cycles++;
    n_hazard   += hazard_stall;
    n_conflict += xbar_conflict;
    if (resp_valid && resp.error) n_error++;
  end

  initial begin
    wait (cycles == 3000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic logic [63:0] enc(input logic [6:0] opc, input int f6,
                                      input int vd, input int vs1, input int vs2);
    logic [63:0] i;
    logic [12:0] d;
    d = 13'(vd);
    i = '0;
    i[63:58] = d[12:7];
    i[57:45] = 13'(vs2);
    i[44:32] = 13'(vs1);
    i[31:26] = 6'(f6);
    i[25:23] = 3'd1;            // 16-bit elements
    i[21:15] = d[6:0];
    i[11:7]  = 5'd11;
    i[6:0]   = opc;
    return i;
  endfunction

  task automatic issue(input logic [63:0] insn, input longint avl, input longint rs2v);
    @(negedge clk);
    req = '{insn: insn, rs2_val: XLEN'(rs2v), avl_val: XLEN'(avl)};
    req_valid = 1;
    #1;
    while (!req_ready) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    #1 req_valid = 0;
  endtask

  function automatic logic [15:0] mem16(input longint addr);
    logic [63:0] w;
    w = u_mem.words[int'(addr >> 3) % MEM_WORDS];
    return w[8 * (addr % 8) +: 16];
  endfunction

  task automatic put16(input longint addr, input logic [15:0] v);
    u_mem.words[int'(addr >> 3) % MEM_WORDS][8 * (addr % 8) +: 16] = v;
  endtask

  function automatic logic [15:0] pow16(input logic [15:0] b, input int e);
    logic [15:0] r;
    r = 16'd1;
    for (int k = 0; k < e; k++) r = r * b;
    return r;
  endfunction

  // Run one transform of n points; returns through the checks.
  task automatic run_fft(input int n);
    int unsigned r, stages, vbytes;
    int unsigned va, ve, vo, vt, vlo, vhi, vtw, vbr, vx;
    longint      x_b, br_b, out_b, tab_b;
    logic [15:0] w, pw [NMAX], x [NMAX];
    int          t0, bad;

    r      = (2 * n + VLENB - 1) / VLENB;
    stages = $clog2(n);
    vbytes = ((2 * n + 63) / 64) * 64;
    va = 0; ve = r; vo = 2 * r; vt = 3 * r; vlo = 4 * r; vhi = 5 * r; vtw = 6 * r;
    vbr = 7 * r; vx = 8 * r;
    x_b = 0; br_b = vbytes; out_b = 2 * vbytes; tab_b = 3 * vbytes;

    // w has order n modulo 2^16: 5 has order 2^14
    w = pow16(16'd5, (1 << 14) / n);
    for (int k = 0; k < n; k++) pw[k] = pow16(w, k);
    chk(pow16(w, n) == 16'd1 && pow16(w, n / 2) != 16'd1, "root of unity has order n");

    // tables in memory: input, bit-reversal indices, per-stage LO/HI/TW
    for (int i = 0; i < n; i++) begin
      int rv;
      x[i] = 16'($urandom);
      put16(x_b + 2 * i, x[i]);
      rv = 0;
      for (int b = 0; b < stages; b++) if (i[b]) rv |= 1 << (stages - 1 - b);
      put16(br_b + 2 * i, 16'(rv));
      put16(out_b + 2 * i, 16'h0);
    end
    for (int s = 1; s <= stages; s++) begin
      int m, h;
      m = 1 << s;
      h = m / 2;
      for (int i = 0; i < n; i++) begin
        int j, lo;
        j  = i % m;
        lo = (i - j) + (j % h);
        put16(tab_b + (3 * (s - 1) + 0) * vbytes + 2 * i, 16'(lo));
        put16(tab_b + (3 * (s - 1) + 1) * vbytes + 2 * i, 16'(lo + h));
        put16(tab_b + (3 * (s - 1) + 2) * vbytes + 2 * i, pw[(j * (n / m)) % n]);
      end
    end

    t0 = cycles;
    issue(enc(OPC_CUSTOM0, F_LOAD, vx, 0, 0), n, x_b);
    issue(enc(OPC_CUSTOM0, F_LOAD, vbr, 0, 0), n, br_b);
    issue(enc(OPC_CUSTOM2, F_GATHER, va, vx, vbr), n, 0);
    for (int s = 1; s <= stages; s++) begin
      longint tb;
      tb = tab_b + 3 * (s - 1) * vbytes;
      issue(enc(OPC_CUSTOM0, F_LOAD, vlo, 0, 0), n, tb);
      issue(enc(OPC_CUSTOM0, F_LOAD, vhi, 0, 0), n, tb + vbytes);
      issue(enc(OPC_CUSTOM0, F_LOAD, vtw, 0, 0), n, tb + 2 * vbytes);
      issue(enc(OPC_CUSTOM2, F_GATHER, ve, va, vlo), n, 0);
      issue(enc(OPC_CUSTOM2, F_GATHER, vo, va, vhi), n, 0);
      issue(enc(OPC_CUSTOM1, F_MUL, vt, vtw, vo), n, 0);
      issue(enc(OPC_CUSTOM1, F_ADD, va, vt, ve), n, 0);
    end
    issue(enc(OPC_CUSTOM0, F_STORE, 0, va, 0), n, out_b);
    // fence: rewriting the stored group waits until the store has finished
    issue(enc(OPC_CUSTOM0, F_LOAD, va, 0, 0), n, x_b);
    repeat (2) @(negedge clk);
    while (dut.u_lsu.busy_o) @(negedge clk);

    bad = 0;
    for (int k = 0; k < n; k++) begin
      logic [15:0] acc;
      acc = '0;
      for (int i = 0; i < n; i++) acc += x[i] * pw[(i * k) % n];
      if (mem16(out_b + 2 * k) !== acc) bad++;
    end
    chk(bad == 0, $sformatf("fft n=%0d matches the direct DFT", n));
    $display("fft n=%4d: %0d stages, %0d registers per vector, %0d instructions, %0d cycles, %0d wrong",
             n, stages, r, 5 + 7 * stages, cycles - t0, bad);
  endtask

  initial begin
    req = '0;
    #1 rst_n = 0;
    for (int w = 0; w < MEM_WORDS; w++) u_mem.words[w] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 32; n <= NMAX; n *= 2) run_fft(n);
    $display("hazard-stall cycles=%0d crossbar-conflict cycles=%0d", n_hazard, n_conflict);
    chk(n_error == 0, "no error responses");
    chk(n_hazard > 0, "hazard stalls happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
