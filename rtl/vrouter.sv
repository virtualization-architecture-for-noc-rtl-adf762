// vrouter: 2D-mesh router with two local output ports for PE virtualization.
//
// Five inputs (East, West, North, South, Local) and six outputs (East, West,
// North, South, Local_0, Local_1). Local_0 feeds DataReceive component 0 and
// Local_1 feeds DataReceive component 1 of the network interface, so two
// packets of two application tasks can enter the same PE at the same time.
// The virtualization controller (virt_ctrl) enables the local outputs from
// task_0_status / task_1_status and chooses which one a packet for this node
// takes.
//
// The switching follows the Hermes scheme the design is built on: each input
// has a FIFO (input_buffer); a header flit at a FIFO head is routed XY
// (first along X, then along Y, then to a local port); the chosen output is
// allocated by a round-robin arbiter of that output (one arbiter per output,
// which is this design's simplification of Hermes' central arbiter) and kept
// for the whole packet (wormhole). The second flit gives the number of flits
// that follow; after the last one the output is released.
//
// Timing: a header waiting at a FIFO head is granted in the next cycle if its
// output is free; from then on one flit per cycle moves while the
// downstream ready is high. Links use valid/ready: a flit moves when both
// are high, and a valid flit stays unchanged until it moves.
module vrouter
  import vnoc_pkg::*;
#(
  parameter int          BUF_DEPTH = 4,
  parameter logic [3:0]  X_ADDR    = 4'd0,
  parameter logic [3:0]  Y_ADDR    = 4'd0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic  [NIN-1:0]  in_valid,
  input  flit_t [NIN-1:0]  in_data,
  output logic  [NIN-1:0]  in_ready,
  output logic  [NOUT-1:0] out_valid,
  output flit_t [NOUT-1:0] out_data,
  input  logic  [NOUT-1:0] out_ready,
  input  logic  [1:0]      task_status,   // {task_1_status, task_0_status}
  output logic  [1:0]      lport_en,
  output logic             virtualized
);
  typedef logic [2:0] pidx_t;

  flit_t [NIN-1:0]  b_data;
  logic  [NIN-1:0]  b_valid, b_pop;

  // input side state
  logic  [NIN-1:0]  route_valid;
  pidx_t [NIN-1:0]  route_port;
  logic  [1:0]      phase [NIN];   // 0 header, 1 size, 2 body
  flit_t            left  [NIN];

  // output side state
  logic  [NOUT-1:0] own_valid;
  pidx_t [NOUT-1:0] own;
  pidx_t [NOUT-1:0] rr;

  pidx_t [NIN-1:0]  want;
  logic  [NIN-1:0]  lsel;
  logic  [NIN-1:0]  last_pop;
  logic  [NOUT-1:0] gnt_valid;
  pidx_t [NOUT-1:0] gnt;

  for (genvar i = 0; i < NIN; i++) begin : g_in
    input_buffer #(.WIDTH(FLIT_W), .DEPTH(BUF_DEPTH)) u_buf (
      .clk, .rst_n,
      .in_valid (in_valid[i]), .in_ready (in_ready[i]), .in_data (in_data[i]),
      .out_valid(b_valid[i]),  .out_ready(b_pop[i]),    .out_data(b_data[i])
    );

    // Local port choice for the header at this input's head.
    virt_ctrl u_vc (
      .task_status(task_status), .pkt_slot(hdr_slot(b_data[i])),
      .lport_en(), .lport_sel(lsel[i]), .virtualized()
    );

    // XY routing of the header flit at the head.
    always_comb begin
      if (hdr_x(b_data[i]) > X_ADDR)      want[i] = pidx_t'(P_EAST);
      else if (hdr_x(b_data[i]) < X_ADDR) want[i] = pidx_t'(P_WEST);
      else if (hdr_y(b_data[i]) > Y_ADDR) want[i] = pidx_t'(P_NORTH);
      else if (hdr_y(b_data[i]) < Y_ADDR) want[i] = pidx_t'(P_SOUTH);
      else                                want[i] = lsel[i] ? pidx_t'(P_LOC1) : pidx_t'(P_LOC0);
    end

    assign b_pop[i] = route_valid[i] && b_valid[i] && out_ready[route_port[i]];

    always_comb begin
      last_pop[i] = 1'b0;
      if (b_pop[i]) begin
        if (phase[i] == 2'd1)      last_pop[i] = (b_data[i] == '0);
        else if (phase[i] == 2'd2) last_pop[i] = (left[i] == flit_t'(1));
      end
    end
  end

  // One virtualization controller instance reports the port state.
  virt_ctrl u_vc_stat (
    .task_status(task_status), .pkt_slot(1'b0),
    .lport_en(lport_en), .lport_sel(), .virtualized(virtualized)
  );

  // Round-robin arbitration per output among inputs whose head header wants
  // it: the search starts after the input granted last.
  function automatic logic [NIN:0] rr_pick(input logic [NIN-1:0] req, input pidx_t last);
    logic [NIN:0] r;
    pidx_t        c;
    r = '0;
    c = last;
    for (int k = 0; k < NIN; k++) begin
      c = (c == pidx_t'(NIN - 1)) ? '0 : c + 1'b1;
      if (!r[NIN] && req[c]) r = {1'b1, NIN'(0)} | (NIN+1)'(c);
    end
    return r;
  endfunction

  logic [NOUT-1:0][NIN-1:0] req;
  logic [NOUT-1:0][NIN:0]   pick;

  always_comb begin
    for (int o = 0; o < NOUT; o++) begin
      for (int i = 0; i < NIN; i++)
        req[o][i] = b_valid[i] && !route_valid[i] && (want[i] == pidx_t'(o));
      pick[o]      = rr_pick(req[o], rr[o]);
      gnt_valid[o] = !own_valid[o] && pick[o][NIN];
      gnt[o]       = pidx_t'(pick[o][NIN-1:0]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      route_valid <= '0;
      route_port  <= '0;
      own_valid   <= '0;
      own         <= '0;
      rr          <= '0;
      for (int i = 0; i < NIN; i++) begin
        phase[i] <= 2'd0;
        left[i]  <= '0;
      end
    end else begin
      for (int i = 0; i < NIN; i++) begin
        if (b_pop[i]) begin
          case (phase[i])
            2'd0: phase[i] <= 2'd1;
            2'd1: begin
              left[i]  <= b_data[i];
              phase[i] <= (b_data[i] == '0) ? 2'd0 : 2'd2;
            end
            default: begin
              left[i] <= left[i] - 1'b1;
              if (left[i] == flit_t'(1)) phase[i] <= 2'd0;
            end
          endcase
        end
        if (last_pop[i]) begin
          route_valid[i]            <= 1'b0;
          own_valid[route_port[i]]  <= 1'b0;
        end
      end
      for (int o = 0; o < NOUT; o++) begin
        if (gnt_valid[o]) begin
          own_valid[o]        <= 1'b1;
          own[o]              <= gnt[o];
          rr[o]               <= gnt[o];
          route_valid[gnt[o]] <= 1'b1;
          route_port[gnt[o]]  <= pidx_t'(o);
        end
      end
    end
  end

  for (genvar o = 0; o < NOUT; o++) begin : g_out
    assign out_valid[o] = own_valid[o] && b_valid[own[o]] && route_valid[own[o]];
    assign out_data[o]  = b_data[own[o]];

    // Link rule: an offered flit is held until it is taken.
    a_hold: assert property (@(posedge clk) disable iff (!rst_n)
      out_valid[o] && !out_ready[o] |=> out_valid[o] && $stable(out_data[o]));
  end

endmodule
