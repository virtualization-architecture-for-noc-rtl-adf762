// data_send: DataSend component of the network interface.
//
// Turns a reply from the buffer controller into a packet and streams it,
// one flit per cycle, into the router's local input buffer: header (the
// requester's address and slot), size = 2, this node's address with the slot
// that served the task, and the result. The reply is accepted
// (rsp_ready) only when the component is idle; the flits then follow on the
// valid/ready link, flit 0 in the cycle after acceptance. The reply format is
// this design's choice.
module data_send
  import vnoc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  rsp_valid,
  output logic  rsp_ready,
  input  rsp_t  rsp,
  output logic  flit_valid,
  output flit_t flit_data,
  input  logic  flit_ready
);
  logic       busy;
  logic [1:0] idx;
  rsp_t       r;

  assign rsp_ready  = !busy;
  assign flit_valid = busy;

  always_comb begin
    case (idx)
      2'd0:    flit_data = r.dst;
      2'd1:    flit_data = flit_t'(2);
      2'd2:    flit_data = r.src;
      default: flit_data = r.result;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      idx  <= '0;
      r    <= '0;
    end else if (!busy) begin
      if (rsp_valid) begin
        busy <= 1'b1;
        idx  <= '0;
        r    <= rsp;
      end
    end else if (flit_ready) begin
      idx <= idx + 1'b1;
      if (idx == 2'd3) busy <= 1'b0;
    end
  end

endmodule
