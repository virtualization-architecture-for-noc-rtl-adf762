// data_receive: DataReceive component (DR0 / DR1) of the network interface.
//
// Takes the flits of one packet from a router local output (Local_0 or
// Local_1), rebuilds the packet (source address and up to MAX_OPS operands)
// and then raises av_receive (AvReceive_k) while the complete packet is
// presented on data_in (Data_in_k). While a packet waits, flit_ready is low,
// so the router holds the next packet in its buffers. The buffer controller
// pulses take to consume the packet; in the next cycle the component
// accepts flits again. Operands beyond MAX_OPS are read and dropped.
// The one-packet storage and the drop rule are this design's choice; the
// paper gives the component's function and its two signal names.
module data_receive
  import vnoc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  flit_valid,
  input  flit_t flit_data,
  output logic  flit_ready,
  output logic  av_receive,
  output pkt_t  data_in,
  input  logic  take
);
  typedef enum logic [1:0] {RX_HDR, RX_SIZE, RX_BODY, RX_FULL} rx_e;

  rx_e   state;
  flit_t left;     // flits still to come
  logic  got_src;
  pkt_t  pkt;

  assign flit_ready = (state != RX_FULL);
  assign av_receive = (state == RX_FULL);
  assign data_in    = pkt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= RX_HDR;
      left    <= '0;
      got_src <= 1'b0;
      pkt     <= '0;
    end else begin
      case (state)
        RX_HDR: if (flit_valid) begin
          state   <= RX_SIZE;
          got_src <= 1'b0;
          pkt     <= '0;
        end
        RX_SIZE: if (flit_valid) begin
          left  <= flit_data;
          state <= (flit_data == '0) ? RX_FULL : RX_BODY;
        end
        RX_BODY: if (flit_valid) begin
          left <= left - 1'b1;
          if (!got_src) begin
            pkt.src <= flit_data;
            got_src <= 1'b1;
          end else if (int'(pkt.nops) < MAX_OPS) begin
            pkt.ops[pkt.nops] <= flit_data;
            pkt.nops          <= pkt.nops + 1'b1;
          end
          if (left == flit_t'(1)) state <= RX_FULL;
        end
        default: if (take) state <= RX_HDR;
      endcase
    end
  end

endmodule
