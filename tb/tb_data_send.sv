// tb_data_send: random replies with a randomly stalling link; checks the
// four flits of each reply packet (header, size 2, source, result) and that
// a new reply is refused while one is being sent.
module tb_data_send;
  import vnoc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic rsp_valid, rsp_ready, flit_valid, flit_ready;
  rsp_t rsp;
  flit_t flit_data;
  int checks = 0, failures = 0;
  flit_t exp_q[$];

  data_send dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receiver with random stalls
  always @(negedge clk) flit_ready <= ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n && flit_valid && flit_ready) begin
    checks++;
    if (exp_q.size() == 0 || flit_data != exp_q[0]) begin
      failures++; $display("flit error got %h", flit_data);
    end
    if (exp_q.size() > 0) void'(exp_q.pop_front());
  end

  initial begin
    rsp_valid = 0; rsp = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int p = 0; p < 100; p++) begin
      @(negedge clk);
      rsp = '{dst: flit_t'($urandom), src: flit_t'($urandom), result: flit_t'($urandom)};
      rsp_valid = 1;
      while (!rsp_ready) @(negedge clk);
      @(posedge clk);
      exp_q.push_back(rsp.dst); exp_q.push_back(16'd2);
      exp_q.push_back(rsp.src); exp_q.push_back(rsp.result);
      #1 rsp_valid = 0;
      @(negedge clk);
      checks++;
      if (rsp_ready) begin failures++; $display("accepts while busy"); end
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    while (exp_q.size() != 0) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
