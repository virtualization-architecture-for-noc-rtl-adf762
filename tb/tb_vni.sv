// tb_vni: the network interface with a PE model (result = op0 * op1 after a
// random delay). Task-status flags are set over the configuration port and
// checked; request packets are sent on both router local outputs at once,
// and every reply leaving through DataSend must carry the requester's
// header, size 2, this node's address with the serving slot, and the result.
// Also checks that the two slots really are served interleaved.
module tb_vni;
  import vnoc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [1:0] lo_valid, lo_ready, task_status, av_receive;
  flit_t [1:0] lo_data;
  logic li_valid, li_ready, cfg_task_valid, cfg_task_slot, cfg_task_on;
  flit_t li_data;
  logic pe_ready, pe_start, pe_done, serving, serving_slot;
  flit_t [MAX_OPS-1:0] pe_ops;
  logic [1:0] pe_nops;
  flit_t pe_result;
  int checks = 0, failures = 0, switches = 0, last_slot = -1;
  flit_t exp_q [2][$];
  flit_t rx[$];

  vni #(.MY_X(4'd1), .MY_Y(4'd2)) dut (.*);
  always #5 clk = ~clk;

  // PE model
  int cnt; flit_t acc;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin pe_ready <= 1; pe_done <= 0; cnt <= 0; acc <= '0; end
    else begin
      pe_done <= 0;
      if (pe_start) begin
        pe_ready <= 0; cnt <= $urandom_range(1, 8); acc <= pe_ops[0] * pe_ops[1];
      end else if (!pe_ready) begin
        if (cnt == 1) begin pe_done <= 1; pe_ready <= 1; end
        cnt <= cnt - 1;
      end
    end
  end
  assign pe_result = acc;
  always @(posedge clk) if (pe_done) begin
    if (last_slot != -1 && last_slot != int'(serving_slot)) switches++;
    last_slot <= int'(serving_slot);
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reply collector: 4 flits per reply
  always @(negedge clk) li_ready <= ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && li_valid && li_ready) begin
    rx.push_back(li_data);
    if (rx.size() == 4) begin
      int s;
      s = int'(rx[2][15]);
      checks++;
      if (exp_q[s].size() == 0) begin failures++; $display("unexpected reply"); end
      else begin
        flit_t r;
        r = exp_q[s].pop_front();
        if (rx[0] != make_hdr(1'(s), 4'd0, 4'(s)) || rx[1] != 16'd2 ||
            rx[2] != make_hdr(1'(s), 4'd1, 4'd2) || rx[3] != r) begin
          failures++; $display("reply error %h %h %h %h exp result %h", rx[0], rx[1], rx[2], rx[3], r);
        end
      end
      rx.delete();
    end
  end

  // one sender per local port
  task automatic sender(input int k, input int npk);
    for (int p = 0; p < npk; p++) begin
      flit_t a, b, f[5];
      a = flit_t'($urandom_range(1, 200)); b = flit_t'($urandom_range(1, 200));
      f = '{make_hdr(1'(k), 4'd1, 4'd2), 16'd3, make_hdr(1'(k), 4'd0, 4'(k)), a, b};
      exp_q[k].push_back(a * b);
      for (int i = 0; i < 5; i++) begin
        @(negedge clk); lo_valid[k] = 1; lo_data[k] = f[i];
        while (!lo_ready[k]) @(negedge clk);
        @(posedge clk); #1 lo_valid[k] = 0;
      end
    end
  endtask

  task automatic cfg(input logic slot, input logic on);
    @(negedge clk); cfg_task_valid = 1; cfg_task_slot = slot; cfg_task_on = on;
    @(negedge clk); cfg_task_valid = 0;
  endtask

  initial begin
    lo_valid = 0; lo_data = '0; cfg_task_valid = 0; cfg_task_slot = 0; cfg_task_on = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    checks++; if (task_status != 2'b00) begin failures++; $display("status not reset"); end
    cfg(0, 1);
    checks++; if (task_status != 2'b01) begin failures++; $display("status 01"); end
    sender(0, 5);
    cfg(1, 1);
    checks++; if (task_status != 2'b11) begin failures++; $display("status 11"); end
    fork sender(0, 30); sender(1, 30); join
    repeat (200) @(negedge clk);
    checks++; if (exp_q[0].size() != 0 || exp_q[1].size() != 0) begin failures++; $display("replies missing"); end
    checks++; if (switches < 10) begin failures++; $display("slots not interleaved: %0d", switches); end
    cfg(0, 0);
    checks++; if (task_status != 2'b10) begin failures++; $display("status 10"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
