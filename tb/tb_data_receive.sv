// tb_data_receive: sends packets of various sizes with random gaps, checks
// that AvReceive rises only after the last flit, that the rebuilt source and
// operands match what was sent, that no flit is taken while a packet waits,
// and that the component accepts the next packet after take.
module tb_data_receive;
  import vnoc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic flit_valid, flit_ready, av_receive, take;
  flit_t flit_data;
  pkt_t data_in;
  int checks = 0, failures = 0;

  data_receive dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input flit_t f);
    @(negedge clk); flit_valid = 1; flit_data = f;
    while (!flit_ready) @(negedge clk);
    @(posedge clk); #1 flit_valid = 0;
  endtask

  initial begin
    flit_valid = 0; flit_data = '0; take = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int p = 0; p < 50; p++) begin
      automatic int nops = $urandom_range(0, 4);   // 4 = one operand beyond storage
      automatic flit_t src = flit_t'($urandom);
      flit_t ops[4];
      foreach (ops[i]) ops[i] = flit_t'($urandom);
      send(flit_t'(16'h0011));
      send(flit_t'(nops + 1));
      send(src);
      for (int i = 0; i < nops; i++) begin
        checks++;
        if (av_receive) begin failures++; $display("early AvReceive"); end
        send(ops[i]);
      end
      @(negedge clk);
      checks++;
      if (!av_receive) begin failures++; $display("no AvReceive p=%0d", p); end
      checks++;
      if (data_in.src != src || int'(data_in.nops) != ((nops > 3) ? 3 : nops)) begin
        failures++; $display("src/nops error p=%0d", p);
      end
      for (int i = 0; i < 3 && i < nops; i++) begin
        checks++;
        if (data_in.ops[i] != ops[i]) begin failures++; $display("op %0d error p=%0d", i, p); end
      end
      // a waiting packet blocks the link
      flit_valid = 1; flit_data = 16'hdead;
      repeat ($urandom_range(1, 4)) begin
        checks++;
        if (flit_ready) begin failures++; $display("ready while full"); end
        @(negedge clk);
      end
      flit_valid = 0;
      take = 1; @(negedge clk); take = 0;
      checks++;
      if (av_receive || !flit_ready) begin failures++; $display("not released"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
