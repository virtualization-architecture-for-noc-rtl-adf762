// tb_adapt_mgr: five regions modelled in the testbench (reconfiguration
// takes 5 cycles). A scripted sequence of requests walks every branch of the
// adaptation flow: configure an unconfigured region (PRRaaS), reuse a
// configured idle PE, enable virtualization of a busy PE (PEaaS), wait when
// nothing is free, reconfigure an idle region of another function after
// tasks finish, and signal the application once its last task is placed.
// The expected (PE, slot) of each task was worked out by hand from the flow.
module tb_adapt_mgr;
  import vnoc_pkg::*;
  localparam int NPE = 5, PW = 3;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, req_last, asg_valid, asg_slot, app_go;
  func_e req_func, cfg_fn;
  logic [PW-1:0] asg_pe, rel_pe, cfg_task_pe, cfg_fn_pe;
  logic rel_valid, rel_ready, rel_slot;
  logic cfg_task_valid, cfg_task_slot, cfg_task_on, cfg_fn_valid;
  func_e [NPE-1:0] pe_func;
  logic [NPE-1:0] pe_cfg_busy;
  logic waiting, virt_enable;
  logic [1:0] pe_task [NPE];
  int checks = 0, failures = 0, n_reconf = 0, n_virt = 0, n_go = 0;
  logic [1:0] ts [NPE];    // task-status flags as the NIs would hold them

  adapt_mgr #(.NPE(NPE)) dut (.*);
  always #5 clk = ~clk;

  // region models
  int rc [NPE];
  func_e nf [NPE];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NPE; p++) begin
        rc[p] <= 0; pe_func[p] <= FN_NONE; pe_cfg_busy[p] <= 0; ts[p] <= 2'b00; nf[p] <= FN_NONE;
      end
    end else begin
      for (int p = 0; p < NPE; p++) begin
        if (cfg_fn_valid && int'(cfg_fn_pe) == p) begin
          rc[p] <= 5; pe_cfg_busy[p] <= 1; pe_func[p] <= FN_NONE; nf[p] <= cfg_fn;
        end else if (rc[p] > 0) begin
          rc[p] <= rc[p] - 1;
          if (rc[p] == 1) begin pe_cfg_busy[p] <= 0; pe_func[p] <= nf[p]; end
        end
      end
      if (cfg_task_valid) ts[cfg_task_pe][cfg_task_slot] <= cfg_task_on;
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (cfg_fn_valid) n_reconf++;
    if (virt_enable) n_virt++;
    if (app_go) n_go++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic request(input func_e f, input logic last, input int exp_pe, input int exp_slot,
                         input int exp_func_after);
    int guard = 0;
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_func = f; req_last = last;
    @(negedge clk); req_valid = 0;
    while (!asg_valid && guard < 200) begin @(negedge clk); guard++; end
    checks++;
    if (!asg_valid || int'(asg_pe) != exp_pe || int'(asg_slot) != exp_slot) begin
      failures++; $display("task func %0d: got pe %0d slot %0d, expected %0d/%0d", f, asg_pe, asg_slot, exp_pe, exp_slot);
    end
    checks++;
    if (app_go != last) begin failures++; $display("app_go %b for last %b", app_go, last); end
    @(negedge clk);
    checks++;
    if (ts[exp_pe][exp_slot] != 1'b1 || int'(pe_func[exp_pe]) != exp_func_after) begin
      failures++; $display("NI flag / function not set for pe %0d", exp_pe);
    end
  endtask

  task automatic finish_task(input int p, input int s);
    @(negedge clk);
    while (!rel_ready) @(negedge clk);
    rel_valid = 1; rel_pe = PW'(p); rel_slot = 1'(s);
    @(negedge clk); rel_valid = 0;
    @(negedge clk);
    checks++;
    if (ts[p][s] != 1'b0 || pe_task[p][s] != 1'b0) begin failures++; $display("release failed"); end
  endtask

  initial begin
    int r0;
    req_valid = 0; req_func = FN_NONE; req_last = 0; rel_valid = 0; rel_pe = 0; rel_slot = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    request(FN_GCD, 0, 0, 0, FN_GCD);   // PRRaaS: unconfigured region 0
    request(FN_GCD, 0, 0, 1, FN_GCD);   // PEaaS: virtualize PE 0
    request(FN_RSA, 1, 1, 0, FN_RSA);   // PRRaaS: region 1; application complete
    request(FN_GCD, 0, 2, 0, FN_GCD);   // PE 0 full -> region 2
    request(FN_RSA, 0, 1, 1, FN_RSA);   // virtualize PE 1
    request(FN_RSA, 0, 3, 0, FN_RSA);   // region 3
    request(FN_GCD, 0, 2, 1, FN_GCD);   // virtualize PE 2
    request(FN_GCD, 0, 4, 0, FN_GCD);   // region 4
    request(FN_GCD, 0, 4, 1, FN_GCD);   // virtualize PE 4
    request(FN_RSA, 1, 3, 1, FN_RSA);   // virtualize PE 3
    // all ten virtual PEs busy: an RSA task must wait
    r0 = n_reconf;
    @(negedge clk); req_valid = 1; req_func = FN_RSA; req_last = 1;
    @(negedge clk); req_valid = 0;
    repeat (20) begin
      @(negedge clk);
      checks++;
      if (asg_valid || !waiting) begin failures++; $display("did not wait"); end
    end
    // GCD tasks on PE 0 end: region 0 is idle but holds GCD -> reconfigured to RSA
    finish_task(0, 0);
    finish_task(0, 1);
    begin
      int guard = 0;
      while (!asg_valid && guard < 200) begin @(negedge clk); guard++; end
    end
    checks++;
    if (!asg_valid || asg_pe != 0 || asg_slot != 0 || pe_func[0] != FN_RSA || n_reconf != r0 + 1) begin
      failures++; $display("idle region not reconfigured: pe %0d slot %0d", asg_pe, asg_slot);
    end
    @(negedge clk);
    // slot 0 of PE 2 frees: a GCD task takes it without reconfiguration
    finish_task(2, 0);
    request(FN_GCD, 1, 2, 0, FN_GCD);
    checks += 3;
    if (n_reconf != 6) begin failures++; $display("reconfigurations %0d", n_reconf); end
    if (n_virt != 6) begin failures++; $display("virtualizations %0d", n_virt); end
    if (n_go != 4) begin failures++; $display("app_go %0d", n_go); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
