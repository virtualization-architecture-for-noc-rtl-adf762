// tb_prr_pe: an unconfigured region answers 0; configuring GCD takes exactly
// RECONF_CYCLES cycles with cfg_busy high and no job accepted; GCD jobs give
// correct results; reconfiguring to RSA then gives m^e mod n.
module tb_prr_pe;
  import vnoc_pkg::*;
  localparam int RC = 20;
  logic clk = 0, rst_n = 0;
  logic cfg_valid, cfg_busy, ready, start, done;
  func_e cfg_func, func;
  flit_t [MAX_OPS-1:0] ops;
  logic [1:0] nops;
  flit_t result;
  int checks = 0, failures = 0;

  prr_pe #(.RECONF_CYCLES(RC)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic job(input int a, input int b, input int c, input int expv);
    @(negedge clk);
    while (!ready) @(negedge clk);
    ops[0] = flit_t'(a); ops[1] = flit_t'(b); ops[2] = flit_t'(c); nops = 3; start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (int'(result) != expv) begin failures++; $display("job got %0d exp %0d", result, expv); end
  endtask

  task automatic configure(input func_e f);
    int cyc = 0;
    @(negedge clk); cfg_valid = 1; cfg_func = f;
    @(negedge clk); cfg_valid = 0;
    while (cfg_busy) begin
      checks++;
      if (ready || func != FN_NONE) begin failures++; $display("ready/func during reconfiguration"); end
      cyc++; @(negedge clk);
    end
    checks += 2;
    if (cyc != RC) begin failures++; $display("reconfiguration took %0d", cyc); end
    if (func != f) begin failures++; $display("func not set"); end
  endtask

  initial begin
    cfg_valid = 0; cfg_func = FN_NONE; start = 0; ops = '0; nops = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    checks++; if (func != FN_NONE) failures++;
    job(12, 18, 0, 0);
    configure(FN_GCD);
    job(12, 18, 0, 6); job(1071, 462, 0, 21); job(0, 5, 9, 5);
    configure(FN_RSA);
    job(65, 17, 3233, 2790); job(2790, 2753, 3233, 65); job(4, 13, 497, 445);
    configure(FN_GCD);
    job(100, 75, 0, 25);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
