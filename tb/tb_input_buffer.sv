// tb_input_buffer: random pushes and pops against a queue model; checks
// order, full/empty flags and simultaneous push/pop when full.
module tb_input_buffer;
  localparam int W = 16, D = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];

  input_buffer #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(0, 3) != 0);
      out_ready = (t < 40) ? 1'b0 : ($urandom_range(0, 2) == 0);
      if (t > 1500) out_ready = ($urandom_range(0, 1) == 0);
      in_data   = W'($urandom);
      // flags against the model
      checks++;
      if (in_ready != (q.size() < D) || out_valid != (q.size() > 0)) begin
        failures++;
        $display("flag error t=%0d size=%0d in_ready=%b out_valid=%b", t, q.size(), in_ready, out_valid);
      end
      if (out_valid && q.size() > 0) begin
        checks++;
        if (out_data != q[0]) begin
          failures++;
          $display("data error t=%0d got %h exp %h", t, out_data, q[0]);
        end
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
