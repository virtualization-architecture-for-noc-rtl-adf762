// tb_workloads: the task-count sweeps of the performance study, run on a
// system with two reconfigurable regions (nodes 4 and 5, PRR_MASK 9'h030),
// as in the study's two-PE setup. An application task here is: ask the
// manager for a PE, run JOBS jobs on it one after another (send a request,
// wait for the reply, then THINK cycles of processor-side work during which
// the PE is free for the other slot), then report the task finished.
// The dispatcher places tasks as the manager accepts them; a task beyond the
// free virtual PEs waits in the manager. Sweeps: GCD only with 5/10/15/20
// tasks, RSA only with 5/10/15/20 tasks, GCD and RSA alternating with
// 10/20/30/40 tasks. Each reply is checked against a reference model, and
// every task must finish; the finish time of each sweep point is printed in
// cycles. Job length and think time are this testbench's own choice.
module tb_workloads;
  import vnoc_pkg::*;
  localparam int NN = 9, JOBS = 3, THINK = 200;
  logic clk = 0, rst_n = 0;
  logic  [NN-1:0]      gpp_in_valid, gpp_in_ready;
  flit_t [NN-1:0]      gpp_in_data;
  logic  [NN-1:0][1:0] gpp_out_valid, gpp_out_ready, gpp_task_status;
  flit_t [NN-1:0][1:0] gpp_out_data;
  logic req_valid, req_ready, req_last, asg_valid, asg_slot, app_go;
  func_e req_func;
  logic [3:0] asg_node, rel_node;
  logic rel_valid, rel_ready, rel_slot, mgr_waiting;
  logic [NN-1:0] virtualized;
  func_e [NN-1:0] node_func;
  int checks = 0, failures = 0, n_wait = 0, n_virt_cycles = 0;
  longint cycle = 0;

  vnoc_top #(.PRR_MASK(9'h030)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycle++;
    if (rst_n && mgr_waiting) n_wait++;
    if (rst_n && (virtualized[4] || virtualized[5])) n_virt_cycles++;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_gcd(input int x, input int y);
    while (y != 0) begin int t = x % y; x = y; y = t; end
    return x;
  endfunction
  function automatic longint ref_rsa(input longint b, input longint x, input longint md);
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
  function automatic flit_t node_hdr(input int n, input int s);
    return make_hdr(1'(s), 4'(n % 3), 4'(n / 3));
  endfunction

  // return addresses: processor node k/2, slot k%2
  logic [7:0] ret_busy;
  int         exp_res [8];
  flit_t      exp_from [8];
  int         got [8];
  flit_t      rx [8][$];
  logic [3:0] inj_lock;
  logic       mgr_lock;   // serializes task-end reports

  always @(negedge clk) gpp_out_ready <= '1;
  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < 8; k++)
      if (gpp_out_valid[k / 2][k % 2]) begin
        rx[k].push_back(gpp_out_data[k / 2][k % 2]);
        if (rx[k].size() == 4) begin
          checks++;
          if (rx[k][0] != node_hdr(k / 2, k % 2) || rx[k][2] != exp_from[k] || int'(rx[k][3]) != exp_res[k]) begin
            failures++;
            $display("reply error at return address %0d: %h %h %h %h", k, rx[k][0], rx[k][1], rx[k][2], rx[k][3]);
          end
          got[k]++;
          rx[k].delete();
        end
      end
  end

  int done_tasks;

  task automatic run_task(input int k, input int node, input int slot, input func_e f);
    int g = k / 2;
    for (int j = 0; j < JOBS; j++) begin
      int a, b, c, n_before;
      flit_t fl [6];
      if (f == FN_GCD) begin
        a = $urandom_range(1, 600); b = $urandom_range(1, 600); c = 0; exp_res[k] = ref_gcd(a, b);
      end else begin
        a = $urandom_range(0, 65535); b = $urandom_range(0, 65535); c = $urandom_range(2, 65535);
        exp_res[k] = int'(ref_rsa(a, b, c));
      end
      exp_from[k] = node_hdr(node, slot);
      n_before = got[k];
      fl = '{node_hdr(node, slot), 16'd4, node_hdr(g, k % 2), flit_t'(a), flit_t'(b), flit_t'(c)};
      while (inj_lock[g]) @(negedge clk);
      inj_lock[g] = 1'b1;
      for (int i = 0; i < 6; i++) begin
        @(negedge clk); gpp_in_valid[g] = 1; gpp_in_data[g] = fl[i];
        while (!gpp_in_ready[g]) @(negedge clk);
        @(posedge clk); #1 gpp_in_valid[g] = 0;
      end
      inj_lock[g] = 1'b0;
      while (got[k] == n_before) @(negedge clk);
      repeat (THINK) @(negedge clk);
    end
    while (mgr_lock) @(negedge clk);
    mgr_lock = 1'b1;
    @(negedge clk);
    while (!rel_ready) @(negedge clk);
    rel_valid = 1; rel_node = 4'(node); rel_slot = 1'(slot);
    @(negedge clk); rel_valid = 0;
    mgr_lock = 1'b0;
    ret_busy[k] = 1'b0;
    done_tasks++;
  endtask

  task automatic sweep(input string name, input int ntasks, input int mix);
    longint t0;
    int k, node, slot;
    func_e f;
    t0 = cycle;
    done_tasks = 0;
    for (int t = 0; t < ntasks; t++) begin
      f = (mix == 0) ? FN_GCD : (mix == 1) ? FN_RSA : ((t % 2 == 0) ? FN_GCD : FN_RSA);
      // free return address
      k = -1;
      while (k < 0) begin
        for (int i = 0; i < 8; i++) if (k < 0 && !ret_busy[i]) k = i;
        if (k < 0) @(negedge clk);
      end
      ret_busy[k] = 1'b1;
      @(negedge clk);
      while (!req_ready) @(negedge clk);
      req_valid = 1; req_func = f; req_last = (t == ntasks - 1);
      @(negedge clk); req_valid = 0;
      while (!asg_valid) @(negedge clk);
      node = int'(asg_node); slot = int'(asg_slot);
      checks++;
      if (node != 4 && node != 5) begin failures++; $display("task placed on node %0d", node); end
      fork
        automatic int kk = k, nn = node, ss = slot;
        automatic func_e ff = f;
        run_task(kk, nn, ss, ff);
      join_none
    end
    while (done_tasks != ntasks) @(negedge clk);
    checks++;
    $display("workload %s tasks=%0d finish=%0d cycles", name, ntasks, cycle - t0);
  endtask

  initial begin
    gpp_in_valid = '0; gpp_in_data = '0; gpp_task_status = '1;
    req_valid = 0; req_func = FN_NONE; req_last = 0; rel_valid = 0; rel_node = 0; rel_slot = 0;
    ret_busy = '0; inj_lock = '0; mgr_lock = 0;
    foreach (got[k]) begin got[k] = 0; exp_res[k] = 0; exp_from[k] = '0; end
    repeat (4) @(posedge clk); rst_n = 1;
    for (int n = 5; n <= 20; n += 5) sweep("GCD", n, 0);
    for (int n = 5; n <= 20; n += 5) sweep("RSA", n, 1);
    for (int n = 10; n <= 40; n += 10) sweep("GCD+RSA", n, 2);
    checks++;
    if (n_wait == 0) begin failures++; $display("tasks never had to wait"); end
    checks++;
    if (n_virt_cycles == 0) begin failures++; $display("no PE was ever virtualized"); end
    $display("manager wait cycles=%0d, cycles with a virtualized PE=%0d", n_wait, n_virt_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
