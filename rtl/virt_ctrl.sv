// virt_ctrl: virtualization controller of a router.
//
// The network interface reports which of its two task slots are bound to an
// application task (task_0_status, task_1_status). Local output k of the
// router (Local_0 -> DR0, Local_1 -> DR1) is enabled only while
// task_k_status is high, so with one task the router behaves as a
// conventional router with a single local port, and with two tasks the PE is
// virtualized and both ports deliver packets at the same time.
// For a packet addressed to this node, lport_sel picks the local output:
// the port named by the header's slot bit if it is enabled, otherwise the
// other enabled port, otherwise Local_0 (this fallback is this design's choice).
// Purely combinational.
module virt_ctrl (
  input  logic [1:0] task_status,  // {task_1_status, task_0_status}
  input  logic       pkt_slot,
  output logic [1:0] lport_en,
  output logic       lport_sel,
  output logic       virtualized
);
  assign lport_en    = task_status;
  assign virtualized = &task_status;

  always_comb begin
    if (lport_en[pkt_slot])       lport_sel = pkt_slot;
    else if (lport_en[!pkt_slot]) lport_sel = !pkt_slot;
    else                          lport_sel = 1'b0;
  end
endmodule
