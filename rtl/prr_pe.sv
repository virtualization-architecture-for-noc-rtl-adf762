// prr_pe: a partial reconfigurable region (PRR) holding one processing element.
//
// The region is either unconfigured (FN_NONE) or configured as the GCD or the
// RSA accelerator. A configuration request (cfg_valid, cfg_func) starts a
// reconfiguration that lasts RECONF_CYCLES cycles; during it cfg_busy is high,
// func reads FN_NONE and no job is accepted; afterwards func holds the new
// function. On an FPGA this is a partial bitstream load; here both
// accelerators are instantiated and the configured one is selected, with a
// counter standing for the reconfiguration time (this modelling and the
// time are this design's choice).
// Jobs: start (while ready) with up to three operands; done pulses with the
// result. A job on an unconfigured region finishes the next cycle with 0.
module prr_pe
  import vnoc_pkg::*;
#(
  parameter int RECONF_CYCLES = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cfg_valid,
  input  func_e               cfg_func,
  output logic                cfg_busy,
  output func_e               func,
  output logic                ready,
  input  logic                start,
  input  flit_t [MAX_OPS-1:0] ops,
  input  logic [1:0]          nops,
  output logic                done,
  output flit_t               result
);
  localparam int CW = $clog2(RECONF_CYCLES + 1);

  func_e       cur, nxt_func;
  logic [CW-1:0] cnt;
  logic        g_busy, g_done, r_busy, r_done, n_done;
  flit_t       g_res, r_res;

  assign cfg_busy = (cnt != '0);
  assign func     = cfg_busy ? FN_NONE : cur;
  assign ready    = !cfg_busy && !g_busy && !r_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur      <= FN_NONE;
      nxt_func <= FN_NONE;
      cnt      <= '0;
      n_done   <= 1'b0;
    end else begin
      n_done <= start && ready && (cur == FN_NONE);
      if (cfg_valid && !cfg_busy) begin
        nxt_func <= cfg_func;
        cnt      <= CW'(RECONF_CYCLES);
      end else if (cfg_busy) begin
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) cur <= nxt_func;
      end
    end
  end

  gcd_pe #(.W(FLIT_W)) u_gcd (
    .clk, .rst_n, .start(start && ready && cur == FN_GCD),
    .a(ops[0]), .b(ops[1]), .busy(g_busy), .done(g_done), .result(g_res)
  );

  rsa_pe #(.W(FLIT_W)) u_rsa (
    .clk, .rst_n, .start(start && ready && cur == FN_RSA),
    .m(ops[0]), .e(ops[1]), .n(ops[2]), .busy(r_busy), .done(r_done), .result(r_res)
  );

  assign done   = g_done || r_done || n_done;
  assign result = g_done ? g_res : (r_done ? r_res : '0);

  // nops is part of the job; the two functions always read fixed operands.
  logic unused_nops;
  assign unused_nops = ^nops;

endmodule
