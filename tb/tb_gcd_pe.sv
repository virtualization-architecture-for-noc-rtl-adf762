// tb_gcd_pe: random and corner operand pairs against a reference gcd
// computed with the remainder form of Euclid's algorithm.
module tb_gcd_pe;
  localparam int W = 16;
  logic clk = 0, rst_n = 0, start, busy, done;
  logic [W-1:0] a, b, result;
  int checks = 0, failures = 0;

  gcd_pe #(.W(W)) dut (.*);
  always #5 clk = ~clk;

  function automatic int ref_gcd(input int x, input int y);
    while (y != 0) begin int t = x % y; x = y; y = t; end
    return x;
  endfunction

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int x, input int y);
    @(negedge clk); a = W'(x); b = W'(y); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (int'(result) != ref_gcd(x, y)) begin
      failures++;
      $display("gcd(%0d,%0d) got %0d exp %0d", x, y, result, ref_gcd(x, y));
    end
  endtask

  initial begin
    start = 0; a = 0; b = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(48, 18); run(0, 7); run(9, 0); run(17, 17); run(1, 65535); run(65535, 4369);
    for (int i = 0; i < 60; i++) run($urandom_range(1, 2000) * 3, $urandom_range(1, 2000) * 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
