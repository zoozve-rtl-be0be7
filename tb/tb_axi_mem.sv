// tb_axi_mem: behavioural AXI4 memory for the testbenches (not part of the
// design).  Serves the simplified AXI subset of zz_pkg: one read burst and
// one write burst at a time, INCR bursts of 8-byte beats, byte strobes.
// Memory is MEM_WORDS 64-bit words starting at address 0; the word array is
// public so a testbench can fill and inspect it.  With STALL=1 the memory
// inserts random wait states on every channel.
module tb_axi_mem
  import zz_pkg::*;
#(
  parameter int unsigned MEM_WORDS = 4096,
  parameter bit          STALL     = 1'b1
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  axi_req_t  req_i,
  output axi_resp_t resp_o
);

  logic [63:0] words [MEM_WORDS];

  // read channel state
  logic        r_busy;
  logic [63:0] r_addr;
  logic [8:0]  r_left;
  // write channel state
  logic        w_busy, b_pend;
  logic [63:0] w_addr;
  logic        rnd_ar, rnd_r, rnd_aw, rnd_w, rnd_b;

  always_ff @(posedge clk_i) begin
    rnd_ar <= !STALL || ($urandom_range(0, 3) != 0);
    rnd_r  <= !STALL || ($urandom_range(0, 3) != 0);
    rnd_aw <= !STALL || ($urandom_range(0, 3) != 0);
    rnd_w  <= !STALL || ($urandom_range(0, 3) != 0);
    rnd_b  <= !STALL || ($urandom_range(0, 3) != 0);
  end

  always_comb begin
    resp_o          = '0;
    resp_o.ar_ready = !r_busy && rnd_ar;
    resp_o.r_valid  = r_busy && rnd_r;
    resp_o.r_data   = words[(r_addr >> 3) % MEM_WORDS];
    resp_o.r_last   = (r_left == 1);
    resp_o.aw_ready = !w_busy && !b_pend && rnd_aw;
    resp_o.w_ready  = w_busy && rnd_w;
    resp_o.b_valid  = b_pend && rnd_b;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      r_busy <= 0; r_addr <= 0; r_left <= 0;
      w_busy <= 0; b_pend <= 0; w_addr <= 0;
    end else begin
      if (req_i.ar_valid && resp_o.ar_ready) begin
        r_busy <= 1; r_addr <= req_i.ar_addr; r_left <= 9'(req_i.ar_len) + 9'd1;
      end
      if (resp_o.r_valid && req_i.r_ready) begin
        r_addr <= r_addr + 8;
        r_left <= r_left - 1;
        if (r_left == 1) r_busy <= 0;
      end
      if (req_i.aw_valid && resp_o.aw_ready) begin
        w_busy <= 1; w_addr <= req_i.aw_addr;
      end
      if (req_i.w_valid && resp_o.w_ready) begin
        for (int b = 0; b < 8; b++)
          if (req_i.w_strb[b]) words[(w_addr >> 3) % MEM_WORDS][8*b +: 8] <= req_i.w_data[8*b +: 8];
        w_addr <= w_addr + 8;
        if (req_i.w_last) begin
          w_busy <= 0;
          b_pend <= 1;
        end
      end
      if (resp_o.b_valid && req_i.b_ready) b_pend <= 0;
    end
  end

endmodule
