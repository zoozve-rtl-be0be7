// tb_zz_top_full: end-to-end test of the Zoozve vector unit at full size.
//
// zz_top with every parameter at its default: 64 lanes (VLEN = 4096 bits,
// 512 bytes per register), 1024 vector registers, two shuffle PEs.  Vectors
// hold N = 16000 16-bit elements (the upper end of the paper's dot product
// and axpy sweep), so each vector is one 63-register group whose last
// register is half used, handled by single instructions with no
// strip-mining loop.  Runs the program of tb_zz_program.svh against a
// behavioural AXI memory with random wait states.
module tb_zz_top_full;
  import zz_pkg::*;

  localparam int unsigned NLANES    = 64;
  localparam int unsigned NREGS     = 1024;
  localparam int unsigned N         = 16000;
  localparam int unsigned MEM_WORDS = 24576;

  logic      clk = 0, rst_n = 1;  // falls at 1 ns so the asynchronous reset sees an edge
  logic      req_valid = 0, req_ready, resp_valid;
  zz_req_t   req;
  zz_resp_t  resp;
  axi_req_t  axi_req;
  axi_resp_t axi_resp;
  logic      hazard_stall, busy_stall, xbar_conflict;

  zz_top dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req),
    .resp_valid_o(resp_valid), .resp_o(resp), .axi_req_o(axi_req), .axi_resp_i(axi_resp),
    .hazard_stall_o(hazard_stall), .busy_stall_o(busy_stall), .xbar_conflict_o(xbar_conflict)
  );

  tb_axi_mem #(.MEM_WORDS(MEM_WORDS), .STALL(1'b1)) u_mem (
    .clk_i(clk), .rst_ni(rst_n), .req_i(axi_req), .resp_o(axi_resp)
  );

  always #5 clk = ~clk;

  initial begin
    wait (cycles == 2000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  `include "tb_zz_program.svh"

endmodule
