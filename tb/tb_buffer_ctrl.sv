// tb_buffer_ctrl: drives AvReceive patterns and a PE model (result =
// op0 + op1 after a random delay) and checks first-come-first-served order,
// the MUX select, release of the served DataReceive and the reply contents.
module tb_buffer_ctrl;
  import vnoc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [1:0] av, take;
  logic sel, q_av, pe_start, pe_done, rsp_valid, rsp_ready, serving, serving_slot;
  pkt_t pkt, d [2];
  flit_t [MAX_OPS-1:0] pe_ops;
  logic [1:0] pe_nops;
  flit_t pe_result;
  rsp_t rsp;
  int checks = 0, failures = 0;
  int served[$], expect_order[$];

  logic hold, pe_idle;
  buffer_ctrl #(.MY_X(4'd2), .MY_Y(4'd1)) dut (.*, .pe_ready(pe_idle && !hold));
  always #5 clk = ~clk;

  assign pkt  = sel ? d[1] : d[0];
  assign q_av = av[sel];

  // DR models: av held until take
  always_ff @(posedge clk) begin
    for (int k = 0; k < 2; k++) if (take[k]) av[k] <= 1'b0;
  end

  // PE model
  int pe_cnt;
  flit_t pe_acc;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin pe_cnt <= 0; pe_done <= 0; pe_idle <= 1; pe_acc <= '0; end
    else begin
      pe_done <= 0;
      if (pe_start) begin
        pe_idle <= 0; pe_cnt <= $urandom_range(1, 6);
        pe_acc <= pe_ops[0] + pe_ops[1];
      end else if (!pe_idle) begin
        if (pe_cnt == 1) begin pe_done <= 1; pe_idle <= 1; end
        pe_cnt <= pe_cnt - 1;
      end
    end
  end
  assign pe_result = pe_acc;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && pe_start) begin
    served.push_back(int'(sel));
    checks++;
    if (take != (sel ? 2'b10 : 2'b01)) begin failures++; $display("take mismatch"); end
  end

  // reply checker
  always @(posedge clk) if (rst_n && rsp_valid && rsp_ready) begin
    int s;
    s = expect_order.pop_front();
    checks++;
    if (rsp.dst != flit_t'(16'h1000 + s) || rsp.src != make_hdr(1'(s), 4'd2, 4'd1) ||
        rsp.result != flit_t'(100 * (s + 1) + 7)) begin
      failures++; $display("reply error slot %0d: %h %h %h", s, rsp.dst, rsp.src, rsp.result);
    end
  end
  always @(negedge clk) rsp_ready <= ($urandom_range(0, 1) == 0);

  task automatic arrive(input int k);
    d[k].src = flit_t'(16'h1000 + k);
    d[k].nops = 2;
    d[k].ops[0] = flit_t'(100 * (k + 1));
    d[k].ops[1] = 7;
    d[k].ops[2] = 0;
    av[k] = 1'b1;
  endtask

  initial begin
    av = 0; d[0] = '0; d[1] = '0; hold = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      int first, gap;
      first = $urandom_range(0, 1);
      gap   = (r % 4 == 3) ? 0 : $urandom_range(1, 5);
      @(negedge clk);
      hold = (r % 2 == 0);   // PE busy elsewhere: both wait, order must be kept
      if (gap == 0) begin arrive(0); arrive(1); first = 0; end
      else begin
        arrive(first);
        repeat (gap) @(negedge clk);
        arrive(1 - first);
      end
      expect_order.push_back(first); expect_order.push_back(1 - first);
      repeat (2) @(negedge clk);
      hold = 0;
      // wait both served and replied
      while (av != 0 || serving || expect_order.size() != 0) @(negedge clk);
    end
    checks++;
    if (served.size() != 80) begin failures++; $display("served %0d", served.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
