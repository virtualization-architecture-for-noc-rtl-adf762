// tb_vrouter: router at (1,1) of a 3x3 mesh. Every input sends packets of
// random length to random destinations; every output has a randomly stalling
// sink. The testbench computes the XY output (and the local port from the
// task-status flags) itself and checks that every packet leaves whole, in
// one piece (wormhole), on that output, in order per input. It also checks
// the two-cycle header latency through an idle router, that both local
// ports deliver at the same time once the PE is virtualized, and that
// output contention was exercised.
module tb_vrouter;
  import vnoc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [NIN-1:0] in_valid, in_ready;
  flit_t [NIN-1:0] in_data;
  logic [NOUT-1:0] out_valid, out_ready;
  flit_t [NOUT-1:0] out_data;
  logic [1:0] task_status, lport_en;
  logic virtualized;
  int checks = 0, failures = 0, sent = 0, rcvd = 0, both_local = 0, contention = 0;
  logic stall_en;
  int last_seq [NIN][NOUT];

  vrouter #(.BUF_DEPTH(4), .X_ADDR(4'd1), .Y_ADDR(4'd1)) dut (.*);
  always #5 clk = ~clk;

  function automatic int exp_port(input flit_t h, input logic [1:0] ts);
    if (h[7:4] > 1) return P_EAST;
    if (h[7:4] < 1) return P_WEST;
    if (h[3:0] > 1) return P_NORTH;
    if (h[3:0] < 1) return P_SOUTH;
    if (ts[h[15]]) return h[15] ? P_LOC1 : P_LOC0;
    if (ts[!h[15]]) return h[15] ? P_LOC0 : P_LOC1;
    return P_LOC0;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sinks: rebuild packets per output
  int st [NOUT];       // 0 header, 1 size, 2 body
  int left [NOUT], idx [NOUT], cur_in [NOUT], cur_seq [NOUT];
  always @(negedge clk) for (int o = 0; o < NOUT; o++) out_ready[o] <= !stall_en || ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n) begin
    if (out_valid[P_LOC0] && out_valid[P_LOC1]) both_local++;
    for (int o = 0; o < NOUT; o++) if (out_valid[o] && out_ready[o]) begin
      automatic flit_t f = out_data[o];
      case (st[o])
        0: begin
          checks++;
          if (exp_port(f, task_status) != o) begin failures++; $display("header %h on port %0d", f, o); end
          st[o] = 1;
        end
        1: begin left[o] = int'(f); idx[o] = 0; st[o] = (f == 0) ? 0 : 2; if (f == 0) rcvd++; end
        default: begin
          if (idx[o] == 0) begin
            cur_in[o] = int'(f[15:13]); cur_seq[o] = int'(f[12:5]);
            checks++;
            if (cur_seq[o] <= last_seq[cur_in[o]][o]) begin failures++; $display("order error"); end
            last_seq[cur_in[o]][o] = cur_seq[o];
          end
          checks++;
          if (int'(f[15:13]) != cur_in[o] || int'(f[12:5]) != cur_seq[o] || int'(f[4:0]) != idx[o]) begin
            failures++; $display("body error port %0d flit %h cur_in %0d seq %0d idx %0d t=%0t", o, f, cur_in[o], cur_seq[o], idx[o], $time);
          end
          idx[o]++; left[o]--;
          if (left[o] == 0) begin st[o] = 0; rcvd++; end
        end
      endcase
    end
  end

  // a header waiting at a head while its output is owned by another input
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NIN; i++)
      if (dut.b_valid[i] && !dut.route_valid[i] && dut.own_valid[dut.want[i]]) contention++;
  end

  int seq [NIN];
  task automatic send_pkt(input int i, input flit_t hdr, input int n);
    flit_t f;
    seq[i]++;
    for (int k = 0; k < n + 2; k++) begin
      f = (k == 0) ? hdr : (k == 1) ? flit_t'(n) : {3'(i), 8'(seq[i]), 5'(k - 2)};
      @(negedge clk); in_valid[i] = 1; in_data[i] = f;
      while (!in_ready[i]) @(negedge clk);
      @(posedge clk); #1 in_valid[i] = 0;
      if (stall_en && $urandom_range(0, 3) == 0) @(negedge clk);
    end
    sent++;
  endtask

  function automatic flit_t rand_hdr();
    int d = $urandom_range(0, 5);
    case (d)
      0: return make_hdr(1'b0, 4'd2, 4'($urandom_range(0, 2)));
      1: return make_hdr(1'b0, 4'd0, 4'($urandom_range(0, 2)));
      2: return make_hdr(1'b0, 4'd1, 4'd2);
      3: return make_hdr(1'b0, 4'd1, 4'd0);
      default: return make_hdr(1'($urandom), 4'd1, 4'd1);
    endcase
  endfunction

  task automatic traffic(input int i, input int npk);
    for (int p = 0; p < npk; p++) send_pkt(i, rand_hdr(), $urandom_range(0, 6));
  endtask

  initial begin
    int t0, t1;
    in_valid = 0; in_data = '0; task_status = 2'b01; stall_en = 0;
    foreach (st[o]) begin st[o] = 0; left[o] = 0; idx[o] = 0; cur_in[o] = 0; cur_seq[o] = 0; end
    foreach (seq[i]) seq[i] = 0;
    foreach (last_seq[i, o]) last_seq[i][o] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // latency through an idle router: header accepted at t0, offered at t0 + 2
    @(negedge clk); in_valid[P_WEST] = 1; in_data[P_WEST] = make_hdr(1'b0, 4'd2, 4'd1);
    @(posedge clk); t0 = $time; #1 in_valid[P_WEST] = 0;
    while (!out_valid[P_EAST]) @(posedge clk);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 != 2) begin failures++; $display("latency %0d", (t1 - t0) / 10); end
    @(negedge clk); in_valid[P_WEST] = 1; in_data[P_WEST] = 16'd0; @(posedge clk); #1 in_valid[P_WEST] = 0;
    sent++;
    // conventional mode, then virtualized, then only slot 1
    stall_en = 1;
    for (int ph = 0; ph < 3; ph++) begin
      task_status = (ph == 0) ? 2'b01 : (ph == 1) ? 2'b11 : 2'b10;
      fork
        traffic(0, 25); traffic(1, 25); traffic(2, 25); traffic(3, 25); traffic(4, 25);
      join
      while (rcvd != sent) @(negedge clk);
      repeat (5) @(negedge clk);
    end
    checks++;
    if (rcvd != sent) begin failures++; $display("sent %0d received %0d", sent, rcvd); end
    checks++;
    if (both_local == 0) begin failures++; $display("local ports never active together"); end
    checks++;
    if (contention == 0) begin failures++; $display("no contention seen"); end
    $display("sent=%0d both_local=%0d contention=%0d", sent, both_local, contention);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
