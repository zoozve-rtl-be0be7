// tb_zz_program.svh: end-to-end program shared by the top-level testbenches.
//
// Included inside a testbench module that declares NLANES, NREGS, N (vector
// length, 16-bit elements), MEM_WORDS, the clock, reset and the zz_top
// instance named dut with the signals below, and a tb_axi_mem named u_mem.
// The program runs, with no strip-mining loop, the kernels that motivate the
// design, each vector held in one register group of ceil(2N/VLENB) registers:
//   dot product  x.y   : load x, load y, t = x*y, acc = 0, acc = acc[0]+sum(t),
//                        extract acc[0]
//   axpy         a*x+y : t = x*a (vector-scalar), y = t + y, store y
//   permutation        : load a bit-reversal index vector (the reordering
//                        step of an FFT), p = gather(x, idx), b = scatter(p, idx),
//                        store p and b
// and then sends one illegal instruction.  Results are checked against values
// computed here.  The program counts how often each mechanism happened:
// hazard stalls, busy-unit stalls, crossbar conflicts, tail rows (a register
// group that ends inside its last register), multi-register groups, extract
// responses, error responses; each must happen at least once.

  localparam int unsigned VLENB = NLANES * 8;
  localparam int unsigned R     = (2 * N + VLENB - 1) / VLENB;   // registers per vector
  localparam int unsigned M     = 1 << $clog2(N + 1) >> 1;      // largest power of two <= N
  // register allocation
  localparam int unsigned V_X = 0, V_Y = R, V_T = 2 * R, V_ACC = 3 * R, V_IDX = 3 * R + 1,
                          V_P = 4 * R + 1, V_B = 5 * R + 1;
  // memory map (byte addresses)
  localparam longint X_B = 0, Y_B = 2 * N + 64, I_B = 4 * N + 128, Y2_B = 6 * N + 192,
                     P_B = 8 * N + 256, B_B = 10 * N + 320;

  int checks = 0, failures = 0, cycles = 0;
  int n_hazard = 0, n_busy = 0, n_conflict = 0, n_extract = 0, n_error = 0;
  int n_tail = 0, n_multirow = 0;
  logic [15:0] xs [N], ys [N], a_sc;
  logic [15:0] extract_val;

  always @(posedge clk) if (rst_n) begin
    cycles++;
    n_hazard   += hazard_stall;
    n_busy     += busy_stall;
    n_conflict += xbar_conflict;
    if (resp_valid && !resp.error) begin n_extract++; extract_val = resp.data[15:0]; end
    if (resp_valid && resp.error) n_error++;
    if (req_valid && req_ready) begin
      if ((2 * req.avl_val) % VLENB != 0 && req.insn[6:0] != 7'b1011011) n_tail++;
      if (2 * req.avl_val > VLENB) n_multirow++;
    end
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic logic [63:0] enc(input logic [6:0] opc, input int f6, input bit vx,
                                      input int vd, input int vs1, input int vs2, input int rs2);
    logic [63:0] i;
    logic [12:0] d;
    d = 13'(vd);
    i = '0;
    i[63:58] = d[12:7];
    i[57:45] = vx ? 13'(rs2) : 13'(vs2);
    i[44:32] = 13'(vs1);
    i[31:26] = 6'(f6);
    i[25:23] = 3'd1;            // 16-bit elements
    i[21:15] = d[6:0];
    i[14:12] = {vx, 2'b00};
    i[11:7]  = 5'd11;           // a1 holds the vector length
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

  function automatic int bitrev(input int i, input int bits);
    int r;
    r = 0;
    for (int b = 0; b < bits; b++) if (i[b]) r |= 1 << (bits - 1 - b);
    return r;
  endfunction

  initial begin
    logic [15:0] dot;
    int t0;
    req = '0;
    #1 rst_n = 0;
    for (int w = 0; w < MEM_WORDS; w++) u_mem.words[w] = '0;
    a_sc = 16'($urandom);
    for (int i = 0; i < N; i++) begin
      xs[i] = 16'($urandom);
      ys[i] = 16'($urandom);
      put16(X_B + 2 * i, xs[i]);
      put16(Y_B + 2 * i, ys[i]);
    end
    for (int i = 0; i < M; i++) put16(I_B + 2 * i, 16'(bitrev(i, $clog2(M))));
    repeat (3) @(negedge clk);
    rst_n = 1;
    t0 = cycles;

    // dot product
    issue(enc(OPC_CUSTOM0, F_LOAD, 0, V_X, 0, 0, 0), N, X_B);
    issue(enc(OPC_CUSTOM0, F_LOAD, 0, V_Y, 0, 0, 0), N, Y_B);
    issue(enc(OPC_CUSTOM1, F_MUL, 0, V_T, V_Y, V_X, 0), N, 0);
    issue(enc(OPC_CUSTOM1, F_MV, 1, V_ACC, 0, 0, 5), 1, 0);
    issue(enc(OPC_CUSTOM2, F_REDSUM, 0, V_ACC, V_ACC, V_T, 0), N, 0);
    issue(enc(OPC_CUSTOM2, F_EXTRACT, 1, 0, V_ACC, 0, 6), 0, 0);
    dot = '0;
    for (int i = 0; i < N; i++) dot += xs[i] * ys[i];
    wait (n_extract == 1);
    chk(extract_val == dot, "dot product");

    // axpy: y = a*x + y
    issue(enc(OPC_CUSTOM1, F_MUL, 1, V_T, V_X, 0, 7), N, a_sc);
    issue(enc(OPC_CUSTOM1, F_ADD, 0, V_Y, V_Y, V_T, 0), N, 0);
    issue(enc(OPC_CUSTOM0, F_STORE, 0, 0, V_Y, 0, 0), N, Y2_B);

    // permutation: p = x[idx], b[idx] = p
    issue(enc(OPC_CUSTOM0, F_LOAD, 0, V_IDX, 0, 0, 0), M, I_B);
    issue(enc(OPC_CUSTOM2, F_GATHER, 0, V_P, V_X, V_IDX, 0), M, 0);
    issue(enc(OPC_CUSTOM2, F_SCATTER, 0, V_B, V_P, V_IDX, 0), M, 0);
    issue(enc(OPC_CUSTOM0, F_STORE, 0, 0, V_P, 0, 0), M, P_B);
    issue(enc(OPC_CUSTOM0, F_STORE, 0, 0, V_B, 0, 0), M, B_B);
    // fence: overwrite the stored groups, which waits for the stores to finish
    issue(enc(OPC_CUSTOM1, F_MV, 1, V_P, 0, 0, 8), 2 * M, 0);
    issue(enc(OPC_CUSTOM1, F_MV, 1, V_Y, 0, 0, 8), N, 0);
    // an illegal instruction
    issue(64'h0000_0000_0000_0033, 1, 0);
    repeat (4) @(negedge clk);
    $display("program took %0d cycles for N=%0d (%0d registers per vector)", cycles - t0, N, R);

    begin
      int bad_y, bad_p, bad_b;
      bad_y = 0; bad_p = 0; bad_b = 0;
      for (int i = 0; i < N; i++)
        if (mem16(Y2_B + 2 * i) !== 16'(a_sc * xs[i] + ys[i])) bad_y++;
      for (int i = 0; i < M; i++) begin
        if (mem16(P_B + 2 * i) !== xs[bitrev(i, $clog2(M))]) bad_p++;
        if (mem16(B_B + 2 * i) !== xs[i]) bad_b++;
      end
      chk(bad_y == 0, "axpy result");
      chk(bad_p == 0, "gather (bit-reversal permutation)");
      chk(bad_b == 0, "scatter undoes the permutation");
      chk(mem16(Y2_B + 2 * N) == 16'h0, "store leaves bytes after the vector alone");
      if (bad_y + bad_p + bad_b != 0) $display("  bad y=%0d p=%0d b=%0d", bad_y, bad_p, bad_b);
    end
    $display("mechanisms: hazard-stall cycles=%0d busy-stall cycles=%0d crossbar-conflict cycles=%0d",
             n_hazard, n_busy, n_conflict);
    $display("            tail groups=%0d multi-register groups=%0d extract responses=%0d errors=%0d",
             n_tail, n_multirow, n_extract, n_error);
    chk(n_hazard > 0,   "a hazard stall happened");
    chk(n_busy > 0,     "a busy-unit stall happened");
    chk(n_conflict > 0, "a crossbar conflict happened");
    chk(n_tail > 0,     "a group ending inside a register happened");
    chk(n_multirow > 0, "a multi-register group happened");
    chk(n_extract == 1, "one extract response");
    chk(n_error == 1,   "one error response");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
