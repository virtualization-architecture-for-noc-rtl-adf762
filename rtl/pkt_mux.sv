// pkt_mux: the multiplexer (MUX) between DR0/DR1 and the buffer controller.
//
// Passes Data_in_0 (sel = 0) or Data_in_1 (sel = 1) to the buffer controller,
// together with the matching AvReceive flag, so the controller sees one
// packet stream whatever slot it serves. Combinational.
module pkt_mux
  import vnoc_pkg::*;
(
  input  logic       sel,
  input  logic [1:0] av,      // {AvReceive_1, AvReceive_0}
  input  pkt_t       d0,      // Data_in_0
  input  pkt_t       d1,      // Data_in_1
  output logic       q_av,
  output pkt_t       q
);
  always_comb begin
    q    = sel ? d1 : d0;
    q_av = av[sel];
  end
endmodule
