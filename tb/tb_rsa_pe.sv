// tb_rsa_pe: m^e mod n for random and textbook operands against a
// square-and-multiply reference in 64-bit arithmetic; also checks that
// one exponentiation takes no more than the expected number of cycles.
module tb_rsa_pe;
  localparam int W = 16;
  logic clk = 0, rst_n = 0, start, busy, done;
  logic [W-1:0] m, e, n, result;
  int checks = 0, failures = 0;

  rsa_pe #(.W(W)) dut (.*);
  always #5 clk = ~clk;

  function automatic longint ref_modexp(input longint b, input longint x, input longint md);
    longint r = 1;
    if (md <= 1) return 0;
    b = b % md;
    while (x > 0) begin
      if (x[0]) r = (r * b) % md;
      b = (b * b) % md;
      x = x >> 1;
    end
    return r;
  endfunction

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int mm, input int ee, input int nn);
    int cyc = 0;
    @(negedge clk); m = W'(mm); e = W'(ee); n = W'(nn); start = 1;
    @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (longint'(result) != ref_modexp(mm, ee, nn)) begin
      failures++;
      $display("%0d^%0d mod %0d got %0d exp %0d", mm, ee, nn, result, ref_modexp(mm, ee, nn));
    end
    // bound: reduction + 2 products per exponent bit, W cycles each, plus control
    checks++;
    if (cyc > W * (1 + 2 * 16) + 3 * 16 + 4) begin
      failures++;
      $display("too slow: %0d cycles", cyc);
    end
  endtask

  initial begin
    start = 0; m = 0; e = 0; n = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(65, 17, 3233);       // textbook RSA: 65^17 mod 3233 = 2790
    run(2790, 2753, 3233);   // decrypts back to 65
    run(5, 0, 13); run(7, 1, 1); run(65535, 65535, 65521); run(12345, 3, 0);
    for (int i = 0; i < 40; i++)
      run($urandom_range(0, 65535), $urandom_range(0, 65535), $urandom_range(2, 65535));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
