// tb_vnoc_top: end-to-end run of the 3x3 virtualized NoC at its default
// parameters. The testbench plays the software on the four processor nodes:
//  phase 1: an application of two GCD and two RSA tasks is requested; the
//    adaptation manager configures two regions (PRRaaS) and virtualizes each
//    (PEaaS). Two processor nodes then stream jobs to both slots of both PEs
//    at once; every reply must come back to the right node and slot, from
//    the assigned PE and slot, with the result of a reference model
//    (Euclid / square-and-multiply). Then the tasks are reported finished.
//  phase 2: ten more tasks fill all ten virtual PEs, an eleventh must wait;
//    when the RSA tasks of one region finish, that idle region is
//    reconfigured to GCD and the waiting task runs jobs on it.
// Each mechanism is counted and must happen at least once: reconfiguration,
// virtualization enable, manager waiting, both DataReceive components of a
// node full together, first-come-first-served interleaving of two slots on
// one PE, wormhole contention in a router, reconfiguration of an idle region
// to another function, and the application-go signal.
module tb_vnoc_top;
  import vnoc_pkg::*;
  localparam int NN = 9;
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

  int checks = 0, failures = 0;
  int n_reconf = 0, n_virt = 0, n_wait = 0, n_both_av = 0, n_interleave = 0;
  int n_contention = 0, n_refunc = 0, n_go = 0, n_replies = 0;

  vnoc_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: reconf=%0d virt=%0d wait=%0d replies=%0d", n_reconf, n_virt, n_wait, n_replies);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference models ----------------
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

  // ---------------- mechanism counters ----------------
  int last4 = -1;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_mgr.cfg_fn_valid) begin
      n_reconf++;
      // regions are nodes 4..8 with the default mask
      if (node_func[int'(dut.u_mgr.cfg_fn_pe) + 4] != FN_NONE) n_refunc++;
    end
    if (dut.u_mgr.virt_enable) n_virt++;
    if (mgr_waiting) n_wait++;
    if (app_go) n_go++;
    if (dut.g_node[4].g_prr.u_ni.av_receive == 2'b11 || dut.g_node[5].g_prr.u_ni.av_receive == 2'b11) n_both_av++;
    if (dut.g_node[4].g_prr.pe_start) begin
      if (last4 != -1 && last4 != int'(dut.g_node[4].g_prr.u_ni.u_bc.q0)) n_interleave++;
      last4 = int'(dut.g_node[4].g_prr.u_ni.u_bc.q0);
    end
  end
  // contention: a header waits at the head of a router input while its output is busy
  for (genvar n = 0; n < NN; n++) begin : g_cont
    always @(posedge clk) if (rst_n)
      for (int i = 0; i < NIN; i++)
        if (dut.g_node[n].u_router.b_valid[i] && !dut.g_node[n].u_router.route_valid[i] &&
            dut.g_node[n].u_router.own_valid[dut.g_node[n].u_router.want[i]]) n_contention++;
  end

  // ---------------- reply receivers on the processor nodes ----------------
  typedef struct { int result; flit_t from; } exp_t;
  exp_t exp_q [8][$];         // index = gpp node * 2 + slot
  flit_t rx [8][$];
  always @(negedge clk) begin
    for (int g = 0; g < NN; g++) gpp_out_ready[g] <= {($urandom_range(0, 3) != 0), ($urandom_range(0, 3) != 0)};
  end
  always @(posedge clk) if (rst_n) begin
    for (int g = 0; g < 4; g++) for (int s = 0; s < 2; s++)
      if (gpp_out_valid[g][s] && gpp_out_ready[g][s]) begin
        automatic int k = g * 2 + s;
        rx[k].push_back(gpp_out_data[g][s]);
        if (rx[k].size() == 4) begin
          checks++;
          n_replies++;
          if (exp_q[k].size() == 0) begin failures++; $display("unexpected reply at gpp %0d slot %0d", g, s); end
          else begin
            automatic exp_t e = exp_q[k].pop_front();
            if (rx[k][0] != node_hdr(g, s) || rx[k][1] != 16'd2 || rx[k][2] != e.from ||
                int'(rx[k][3]) != e.result) begin
              failures++;
              $display("reply error gpp %0d slot %0d: %h %h %h %h expected from %h result %0d",
                       g, s, rx[k][0], rx[k][1], rx[k][2], rx[k][3], e.from, e.result);
            end
          end
          rx[k].delete();
        end
      end
  end

  // ---------------- adaptation manager requests ----------------
  task automatic request(input func_e f, input logic last, output int node, output int slot);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_func = f; req_last = last;
    @(negedge clk); req_valid = 0;
    while (!asg_valid) @(negedge clk);
    node = int'(asg_node); slot = int'(asg_slot);
    checks++;
    if (app_go != last) begin failures++; $display("app_go wrong"); end
  endtask

  task automatic task_end(input int node, input int slot);
    @(negedge clk);
    while (!rel_ready) @(negedge clk);
    rel_valid = 1; rel_node = 4'(node); rel_slot = 1'(slot);
    @(negedge clk); rel_valid = 0;
  endtask

  // ---------------- job streams from one processor node ----------------
  // tasks: target (node, slot, function) per return slot of processor g
  task automatic stream(input int g, input int tn [2], input int tsl [2], input func_e tf [2],
                        input int njobs);
    for (int j = 0; j < njobs; j++) begin
      for (int s = 0; s < 2; s++) begin
        if (tn[s] >= 0) begin
          flit_t f [6];
          int a, b, c, r;
          if (tf[s] == FN_GCD) begin
            a = $urandom_range(1, 600); b = $urandom_range(1, 600); c = 0; r = ref_gcd(a, b);
          end else begin
            a = $urandom_range(0, 65535); b = $urandom_range(0, 65535); c = $urandom_range(2, 65535);
            r = int'(ref_rsa(a, b, c));
          end
          exp_q[g * 2 + s].push_back('{result: r, from: node_hdr(tn[s], tsl[s])});
          f = '{node_hdr(tn[s], tsl[s]), 16'd4, node_hdr(g, s), flit_t'(a), flit_t'(b), flit_t'(c)};
          for (int i = 0; i < 6; i++) begin
            @(negedge clk); gpp_in_valid[g] = 1; gpp_in_data[g] = f[i];
            while (!gpp_in_ready[g]) @(negedge clk);
            @(posedge clk); #1 gpp_in_valid[g] = 0;
          end
        end
      end
    end
  endtask

  function automatic int pending();
    int p = 0;
    for (int k = 0; k < 8; k++) p += exp_q[k].size();
    return p;
  endfunction

  task automatic expect_asg(input int node, input int slot, input int en, input int es, input string what);
    checks++;
    if (node != en || slot != es) begin
      failures++; $display("%s: assigned node %0d slot %0d, expected %0d/%0d", what, node, slot, en, es);
    end
  endtask

  int tn [8], ts [8];
  initial begin
    int wn, ws;
    gpp_in_valid = '0; gpp_in_data = '0; gpp_task_status = '1;
    req_valid = 0; req_func = FN_NONE; req_last = 0; rel_valid = 0; rel_node = 0; rel_slot = 0;
    repeat (4) @(posedge clk); rst_n = 1;

    // ---- phase 1 ----
    request(FN_GCD, 0, tn[0], ts[0]); expect_asg(tn[0], ts[0], 4, 0, "GCD 1");
    request(FN_GCD, 0, tn[1], ts[1]); expect_asg(tn[1], ts[1], 4, 1, "GCD 2");
    request(FN_RSA, 0, tn[2], ts[2]); expect_asg(tn[2], ts[2], 5, 0, "RSA 1");
    request(FN_RSA, 1, tn[3], ts[3]); expect_asg(tn[3], ts[3], 5, 1, "RSA 2");
    repeat (2) @(negedge clk);
    checks++;
    if (!virtualized[4] || !virtualized[5] || node_func[4] != FN_GCD || node_func[5] != FN_RSA) begin
      failures++; $display("nodes 4/5 not set up");
    end
    // processor 0 runs GCD task 1 and RSA task 1, processor 1 runs the other two
    fork
      stream(0, '{tn[0], tn[2]}, '{ts[0], ts[2]}, '{FN_GCD, FN_RSA}, 8);
      stream(1, '{tn[1], tn[3]}, '{ts[1], ts[3]}, '{FN_GCD, FN_RSA}, 8);
    join
    while (pending() != 0) @(negedge clk);
    for (int t = 0; t < 4; t++) task_end(tn[t], ts[t]);
    repeat (3) @(negedge clk);
    checks++;
    if (virtualized[4] || virtualized[5]) begin failures++; $display("slots not released"); end

    // ---- phase 2: fill all ten virtual PEs ----
    for (int t = 0; t < 6; t++) request(FN_RSA, 0, tn[t], ts[t]);
    expect_asg(tn[0], ts[0], 5, 0, "RSA a"); expect_asg(tn[1], ts[1], 5, 1, "RSA b");
    expect_asg(tn[2], ts[2], 6, 0, "RSA c"); expect_asg(tn[5], ts[5], 7, 1, "RSA f");
    for (int t = 6; t < 8; t++) request(FN_GCD, 0, tn[t], ts[t]);
    expect_asg(tn[6], ts[6], 4, 0, "GCD a"); expect_asg(tn[7], ts[7], 4, 1, "GCD b");
    request(FN_GCD, 0, wn, ws); expect_asg(wn, ws, 8, 0, "GCD c");
    request(FN_GCD, 1, wn, ws); expect_asg(wn, ws, 8, 1, "GCD d");
    // eleventh task waits until node 5's RSA tasks end
    fork
      request(FN_GCD, 1, wn, ws);
      begin
        repeat (50) @(negedge clk);
        checks++;
        if (n_wait < 40) begin failures++; $display("manager did not wait"); end
        task_end(tn[0], ts[0]);
        task_end(tn[1], ts[1]);
      end
    join
    expect_asg(wn, ws, 5, 0, "GCD after reconfiguration");
    checks++;
    if (node_func[5] != FN_GCD) begin failures++; $display("node 5 not reconfigured to GCD"); end
    // run jobs on the reconfigured region, and RSA jobs on node 6
    fork
      stream(2, '{wn, tn[2]}, '{ws, ts[2]}, '{FN_GCD, FN_RSA}, 4);
    join
    while (pending() != 0) @(negedge clk);
    repeat (10) @(negedge clk);

    checks++; if (n_replies != 40) begin failures++; $display("replies %0d", n_replies); end
    checks++; if (n_reconf == 0)     begin failures++; $display("no reconfiguration"); end
    checks++; if (n_virt == 0)       begin failures++; $display("no virtualization"); end
    checks++; if (n_wait == 0)       begin failures++; $display("no waiting"); end
    checks++; if (n_both_av == 0)    begin failures++; $display("DR0 and DR1 never full together"); end
    checks++; if (n_interleave == 0) begin failures++; $display("no interleaving"); end
    checks++; if (n_contention == 0) begin failures++; $display("no router contention"); end
    checks++; if (n_refunc == 0)     begin failures++; $display("no function change"); end
    checks++; if (n_go == 0)         begin failures++; $display("no app_go"); end
    $display("mechanisms: reconf=%0d virt=%0d wait_cycles=%0d both_av=%0d interleave=%0d contention=%0d refunc=%0d app_go=%0d replies=%0d",
             n_reconf, n_virt, n_wait, n_both_av, n_interleave, n_contention, n_refunc, n_go, n_replies);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
