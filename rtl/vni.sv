// vni: network interface of a virtualized processing element.
//
// Built from the parts of the virtualization NI: two DataReceive components
// (DR0 on the router's Local_0 output, DR1 on Local_1), the MUX, the buffer
// controller (BC) that feeds the PE first come, first served, and DataSend,
// which returns each result through the router's local input buffer.
// It also holds the two task-status flags, task_0_status and
// task_1_status, that the router's virtualization controller reads: slot k
// is bound to an application task while its flag is high. The adaptation
// manager sets and clears a flag through the cfg_task_* port (a sideband
// port of this design's choice): one flag set = conventional operation, both
// set = the PE is virtualized as two PEs.
module vni
  import vnoc_pkg::*;
#(
  parameter logic [3:0] MY_X = 4'd0,
  parameter logic [3:0] MY_Y = 4'd0
) (
  input  logic                clk,
  input  logic                rst_n,
  // router Local_0 / Local_1 outputs
  input  logic  [1:0]         lo_valid,
  input  flit_t [1:0]         lo_data,
  output logic  [1:0]         lo_ready,
  // router local input
  output logic                li_valid,
  output flit_t               li_data,
  input  logic                li_ready,
  // virtualization control
  output logic  [1:0]         task_status,
  input  logic                cfg_task_valid,
  input  logic                cfg_task_slot,
  input  logic                cfg_task_on,
  // processing element
  input  logic                pe_ready,
  output logic                pe_start,
  output flit_t [MAX_OPS-1:0] pe_ops,
  output logic [1:0]          pe_nops,
  input  logic                pe_done,
  input  flit_t               pe_result,
  // observation
  output logic  [1:0]         av_receive,
  output logic                serving,
  output logic                serving_slot
);
  pkt_t [1:0] data_in;
  logic [1:0] take;
  logic       sel, q_av;
  pkt_t       q;
  logic       rsp_valid, rsp_ready;
  rsp_t       rsp;

  for (genvar k = 0; k < 2; k++) begin : g_dr
    data_receive u_dr (
      .clk, .rst_n,
      .flit_valid(lo_valid[k]), .flit_data(lo_data[k]), .flit_ready(lo_ready[k]),
      .av_receive(av_receive[k]), .data_in(data_in[k]), .take(take[k])
    );
  end

  pkt_mux u_mux (
    .sel(sel), .av(av_receive), .d0(data_in[0]), .d1(data_in[1]), .q_av(q_av), .q(q)
  );

  buffer_ctrl #(.MY_X(MY_X), .MY_Y(MY_Y)) u_bc (
    .clk, .rst_n,
    .av(av_receive), .sel(sel), .q_av(q_av), .pkt(q), .take(take),
    .pe_ready, .pe_start, .pe_ops, .pe_nops, .pe_done, .pe_result,
    .rsp_valid, .rsp_ready, .rsp, .serving, .serving_slot
  );

  data_send u_ds (
    .clk, .rst_n,
    .rsp_valid, .rsp_ready, .rsp,
    .flit_valid(li_valid), .flit_data(li_data), .flit_ready(li_ready)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              task_status <= 2'b00;
    else if (cfg_task_valid) task_status[cfg_task_slot] <= cfg_task_on;
  end

endmodule
