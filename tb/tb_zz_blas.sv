// tb_zz_blas: dot product and axpy sweep on the full-size Zoozve vector unit.
//
// zz_top with all defaults (64 lanes, 1024 registers of 512 bytes) runs the
// two linear kernels for N = 512, 1024, ..., 16384 int16 elements, the range
// over which the two kernels are evaluated.  Whatever N, each kernel is the
// same short instruction sequence over register groups of ceil(2N/512)
// registers (64 at N = 16384), with no strip-mining loop:
//   dot : load x, load y, t = x*y, acc = 0 (broadcast), acc[0] = acc[0] + sum(t),
//         extract acc[0]                                    (6 instructions)
//   axpy: t = x*a (vector-scalar), y = t + y, store y       (3 more)
// The dot product is compared with the value computed here, the stored axpy
// vector word by word, including the word after it (must stay untouched).
// Prints the cycle count of each size.
module tb_zz_blas;
  import zz_pkg::*;

  localparam int unsigned NMAX      = 16384;
  localparam int unsigned MEM_WORDS = 16384;
  localparam longint      X_B = 0, Y_B = 2 * NMAX, O_B = 4 * NMAX;

  logic      clk = 0, rst_n = 1;  // falls at 1 ns so the asynchronous reset sees an edge
  logic      req_valid = 0, req_ready, resp_valid;
  zz_req_t   req;
  zz_resp_t  resp;
  axi_req_t  axi_req;
  axi_resp_t axi_resp;
  logic      hazard_stall, busy_stall, xbar_conflict;
  int        checks = 0, failures = 0, cycles = 0, n_resp = 0, n_error = 0;
  logic [15:0] resp_val;

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
    if (resp_valid) begin
      n_resp++;
      n_error += resp.error;
      resp_val = resp.data[15:0];
    end
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

  task automatic run(input int n);
    int unsigned r, vx_, vy, vt, vacc;
    logic [15:0] xs [NMAX], ys [NMAX], a, dot;
    int          t0, t1, bad, seen;
    r = (2 * n + 511) / 512;
    vx_ = 0; vy = r; vt = 2 * r; vacc = 3 * r;
    a = 16'($urandom);
    dot = '0;
    for (int i = 0; i < n; i++) begin
      xs[i] = 16'($urandom);
      ys[i] = 16'($urandom);
      put16(X_B + 2 * i, xs[i]);
      put16(Y_B + 2 * i, ys[i]);
      dot += xs[i] * ys[i];
    end
    for (int i = 0; i <= n + 4; i++) put16(O_B + 2 * i, 16'h5A5A);

    t0 = cycles;
    seen = n_resp;
    issue(enc(OPC_CUSTOM0, F_LOAD, 0, vx_, 0, 0, 0), n, X_B);
    issue(enc(OPC_CUSTOM0, F_LOAD, 0, vy, 0, 0, 0), n, Y_B);
    issue(enc(OPC_CUSTOM1, F_MUL, 0, vt, vy, vx_, 0), n, 0);
    issue(enc(OPC_CUSTOM1, F_MV, 1, vacc, 0, 0, 5), 1, 0);
    issue(enc(OPC_CUSTOM2, F_REDSUM, 0, vacc, vacc, vt, 0), n, 0);
    issue(enc(OPC_CUSTOM2, F_EXTRACT, 1, 0, vacc, 0, 6), 0, 0);
    wait (n_resp == seen + 1);
    t1 = cycles;
    chk(resp_val == dot, $sformatf("dot product n=%0d", n));

    issue(enc(OPC_CUSTOM1, F_MUL, 1, vt, vx_, 0, 7), n, a);
    issue(enc(OPC_CUSTOM1, F_ADD, 0, vy, vy, vt, 0), n, 0);
    issue(enc(OPC_CUSTOM0, F_STORE, 0, 0, vy, 0, 0), n, O_B);
    issue(enc(OPC_CUSTOM1, F_MV, 1, vy, 0, 0, 0), n, 0);   // waits for the store (WAR)
    repeat (2) @(negedge clk);
    bad = 0;
    for (int i = 0; i < n; i++) if (mem16(O_B + 2 * i) !== 16'(a * xs[i] + ys[i])) bad++;
    chk(bad == 0, $sformatf("axpy n=%0d", n));
    chk(mem16(O_B + 2 * n) == 16'h5A5A, $sformatf("axpy n=%0d leaves the next element alone", n));
    $display("n=%5d: %2d registers per vector, dot %0d cycles, axpy %0d cycles, %0d wrong",
             n, r, t1 - t0, cycles - t1, bad);
  endtask

  initial begin
    req = '0;
    #1 rst_n = 0;
    for (int w = 0; w < MEM_WORDS; w++) u_mem.words[w] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 512; n <= NMAX; n *= 2) run(n);
    chk(n_error == 0, "no error responses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
