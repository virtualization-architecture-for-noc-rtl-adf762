// vnoc_top: 3x3 virtualized NoC with reconfigurable processing elements.
//
// Nine routers (vrouter) form a 2D mesh; node n sits at x = n % MESH_X,
// y = n / MESH_X, with x growing east and y growing north. Nodes whose bit is
// set in PRR_MASK are reconfigurable tiles: router + network interface (vni)
// + partial reconfigurable region (prr_pe). The default mask follows the
// physical layer of the paper's system: the top row and the two right nodes
// of the middle row are reconfigurable regions, the other four nodes are
// general-purpose processors. Processors are not part of this RTL: at those
// nodes the router's local input and its Local_0/Local_1 outputs, and the
// node's task-status pair, are ports of this module (ignored / driven 0 at
// reconfigurable nodes).
// The adaptation manager (adapt_mgr) takes application requests, assigns
// each task a (node, slot) pair, reconfigures regions (PRRaaS) and enables
// the second local port of a busy PE (PEaaS). A task then sends request
// packets to the node and slot it was given, and its results come back to
// the sender's address and slot; when a task ends the software reports it on
// rel_*.
module vnoc_top
  import vnoc_pkg::*;
#(
  parameter int          MESH_X        = 3,
  parameter int          MESH_Y        = 3,
  parameter logic [8:0]  PRR_MASK      = 9'h1F0,
  parameter int          BUF_DEPTH     = 4,
  parameter int          RECONF_CYCLES = 64,
  localparam int         NN            = MESH_X * MESH_Y
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // local ports of the processor nodes
  input  logic  [NN-1:0]        gpp_in_valid,
  input  flit_t [NN-1:0]        gpp_in_data,
  output logic  [NN-1:0]        gpp_in_ready,
  output logic  [NN-1:0][1:0]   gpp_out_valid,
  output flit_t [NN-1:0][1:0]   gpp_out_data,
  input  logic  [NN-1:0][1:0]   gpp_out_ready,
  input  logic  [NN-1:0][1:0]   gpp_task_status,
  // application requests to the adaptation manager
  input  logic                  req_valid,
  output logic                  req_ready,
  input  func_e                 req_func,
  input  logic                  req_last,
  output logic                  asg_valid,
  output logic  [3:0]           asg_node,
  output logic                  asg_slot,
  output logic                  app_go,
  input  logic                  rel_valid,
  output logic                  rel_ready,
  input  logic  [3:0]           rel_node,
  input  logic                  rel_slot,
  // observation
  output logic  [NN-1:0]        virtualized,
  output func_e [NN-1:0]        node_func,
  output logic                  mgr_waiting
);
  function automatic int count_below(input int n);
    int c = 0;
    for (int i = 0; i < n; i++) if (PRR_MASK[i]) c++;
    return c;
  endfunction

  function automatic int node_of(input int pe);
    int c = 0;
    for (int i = 0; i < NN; i++) begin
      if (PRR_MASK[i]) begin
        if (c == pe) return i;
        c++;
      end
    end
    return 0;
  endfunction

  localparam int NPE = count_below(NN);
  localparam int PW  = (NPE > 1) ? $clog2(NPE) : 1;

  // router links: [node][port]
  logic  [NN-1:0][NIN-1:0]  r_in_valid, r_in_ready;
  flit_t [NN-1:0][NIN-1:0]  r_in_data;
  logic  [NN-1:0][NOUT-1:0] r_out_valid, r_out_ready;
  flit_t [NN-1:0][NOUT-1:0] r_out_data;
  logic  [NN-1:0][1:0]      task_status;

  // manager
  func_e [NPE-1:0]   pe_func;
  logic  [NPE-1:0]   pe_cfg_busy;
  logic              cfg_task_valid, cfg_task_slot, cfg_task_on, cfg_fn_valid;
  logic  [PW-1:0]    cfg_task_pe, cfg_fn_pe, asg_pe, rel_pe;
  func_e             cfg_fn;
  logic  [1:0]       mgr_pe_task [NPE];

  for (genvar n = 0; n < NN; n++) begin : g_node
    localparam int X = n % MESH_X;
    localparam int Y = n / MESH_X;

    vrouter #(.BUF_DEPTH(BUF_DEPTH), .X_ADDR(4'(X)), .Y_ADDR(4'(Y))) u_router (
      .clk, .rst_n,
      .in_valid(r_in_valid[n]), .in_data(r_in_data[n]), .in_ready(r_in_ready[n]),
      .out_valid(r_out_valid[n]), .out_data(r_out_data[n]), .out_ready(r_out_ready[n]),
      .task_status(task_status[n]), .lport_en(), .virtualized(virtualized[n])
    );

    // mesh links: East/West along x, North/South along y
    if (X < MESH_X - 1) begin : g_e
      assign r_in_valid[n][P_EAST]  = r_out_valid[n+1][P_WEST];
      assign r_in_data[n][P_EAST]   = r_out_data[n+1][P_WEST];
      assign r_out_ready[n+1][P_WEST] = r_in_ready[n][P_EAST];
    end else begin : g_e_edge
      assign r_in_valid[n][P_EAST]  = 1'b0;
      assign r_in_data[n][P_EAST]   = '0;
    end
    if (X == 0) begin : g_w_edge
      assign r_in_valid[n][P_WEST]  = 1'b0;
      assign r_in_data[n][P_WEST]   = '0;
      assign r_out_ready[n][P_WEST] = 1'b1;
    end else begin : g_w
      assign r_in_valid[n][P_WEST]  = r_out_valid[n-1][P_EAST];
      assign r_in_data[n][P_WEST]   = r_out_data[n-1][P_EAST];
    end
    if (X == MESH_X - 1) begin : g_e_rdy
      assign r_out_ready[n][P_EAST] = 1'b1;
    end else begin : g_e_rdy_link
      assign r_out_ready[n][P_EAST] = r_in_ready[n+1][P_WEST];
    end
    if (Y < MESH_Y - 1) begin : g_n
      assign r_in_valid[n][P_NORTH]      = r_out_valid[n+MESH_X][P_SOUTH];
      assign r_in_data[n][P_NORTH]       = r_out_data[n+MESH_X][P_SOUTH];
      assign r_out_ready[n][P_NORTH]     = r_in_ready[n+MESH_X][P_SOUTH];
    end else begin : g_n_edge
      assign r_in_valid[n][P_NORTH]      = 1'b0;
      assign r_in_data[n][P_NORTH]       = '0;
      assign r_out_ready[n][P_NORTH]     = 1'b1;
    end
    if (Y > 0) begin : g_s
      assign r_in_valid[n][P_SOUTH]      = r_out_valid[n-MESH_X][P_NORTH];
      assign r_in_data[n][P_SOUTH]       = r_out_data[n-MESH_X][P_NORTH];
      assign r_out_ready[n][P_SOUTH]     = r_in_ready[n-MESH_X][P_NORTH];
    end else begin : g_s_edge
      assign r_in_valid[n][P_SOUTH]      = 1'b0;
      assign r_in_data[n][P_SOUTH]       = '0;
      assign r_out_ready[n][P_SOUTH]     = 1'b1;
    end

    if (PRR_MASK[n]) begin : g_prr
      localparam int PE = count_below(n);
      logic                pe_ready, pe_start, pe_done;
      flit_t [MAX_OPS-1:0] pe_ops;
      logic [1:0]          pe_nops;
      flit_t               pe_result;
      func_e               fn;

      vni #(.MY_X(4'(X)), .MY_Y(4'(Y))) u_ni (
        .clk, .rst_n,
        .lo_valid(r_out_valid[n][P_LOC1:P_LOC0]), .lo_data(r_out_data[n][P_LOC1:P_LOC0]),
        .lo_ready(r_out_ready[n][P_LOC1:P_LOC0]),
        .li_valid(r_in_valid[n][P_LOC0]), .li_data(r_in_data[n][P_LOC0]),
        .li_ready(r_in_ready[n][P_LOC0]),
        .task_status(task_status[n]),
        .cfg_task_valid(cfg_task_valid && cfg_task_pe == PW'(PE)),
        .cfg_task_slot, .cfg_task_on,
        .pe_ready, .pe_start, .pe_ops, .pe_nops, .pe_done, .pe_result,
        .av_receive(), .serving(), .serving_slot()
      );

      prr_pe #(.RECONF_CYCLES(RECONF_CYCLES)) u_prr (
        .clk, .rst_n,
        .cfg_valid(cfg_fn_valid && cfg_fn_pe == PW'(PE)), .cfg_func(cfg_fn),
        .cfg_busy(pe_cfg_busy[PE]), .func(fn), .ready(pe_ready),
        .start(pe_start), .ops(pe_ops), .nops(pe_nops), .done(pe_done), .result(pe_result)
      );

      assign pe_func[PE]       = fn;
      assign node_func[n]      = fn;
      assign gpp_in_ready[n]   = 1'b0;
      assign gpp_out_valid[n]  = '0;
      assign gpp_out_data[n]   = '0;
    end else begin : g_gpp
      assign task_status[n]                 = gpp_task_status[n];
      assign r_in_valid[n][P_LOC0]          = gpp_in_valid[n];
      assign r_in_data[n][P_LOC0]           = gpp_in_data[n];
      assign gpp_in_ready[n]                = r_in_ready[n][P_LOC0];
      assign gpp_out_valid[n]               = r_out_valid[n][P_LOC1:P_LOC0];
      assign gpp_out_data[n]                = r_out_data[n][P_LOC1:P_LOC0];
      assign r_out_ready[n][P_LOC1:P_LOC0]  = gpp_out_ready[n];
      assign node_func[n]                   = FN_NONE;
    end
  end

  adapt_mgr #(.NPE(NPE)) u_mgr (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_func, .req_last,
    .asg_valid, .asg_pe, .asg_slot, .app_go,
    .rel_valid, .rel_ready, .rel_pe, .rel_slot,
    .cfg_task_valid, .cfg_task_pe, .cfg_task_slot, .cfg_task_on,
    .cfg_fn_valid, .cfg_fn_pe, .cfg_fn,
    .pe_func, .pe_cfg_busy,
    .waiting(mgr_waiting), .virt_enable(), .pe_task(mgr_pe_task)
  );

  // node <-> PE index maps
  always_comb begin
    asg_node = 4'(node_of(int'(asg_pe)));
    rel_pe   = PW'(count_below(int'(rel_node)));
  end

endmodule
