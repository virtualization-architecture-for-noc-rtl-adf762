// tb_virt_ctrl: all task-status / slot combinations against a table worked
// out by hand: enabled ports, virtualized flag and the chosen local port.
module tb_virt_ctrl;
  logic [1:0] task_status, lport_en;
  logic pkt_slot, lport_sel, virtualized;
  int checks = 0, failures = 0;
  // expected lport_sel for {task_status, slot}
  //   status 00: -> 0,0   status 01: -> 0,0   status 10: -> 1,1   status 11: -> 0,1
  logic exp_sel [8] = '{1'b0, 1'b0, 1'b0, 1'b0, 1'b1, 1'b1, 1'b0, 1'b1};

  virt_ctrl dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++) begin
      task_status = 2'(i >> 1);
      pkt_slot    = 1'(i);
      #1;
      checks += 3;
      if (lport_sel != exp_sel[i]) begin failures++; $display("sel error case %0d", i); end
      if (lport_en != task_status) begin failures++; $display("en error case %0d", i); end
      if (virtualized != (task_status == 2'b11)) begin failures++; $display("virt error case %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
